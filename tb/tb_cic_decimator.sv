// tb_cic_decimator: compares the CIC output with a direct FIR model, the
// triple convolution of a length-R boxcar, scaled by 2^-(3*log2R-8).
// The model's alignment (a fixed latency) is found from the first output and
// must then hold for all outputs. Checks: exact values for random input at
// R = 64 and R = 128, unit DC gain (input << 8) at R = 4096, and exactly R
// clocks between output strobes.
module tb_cic_decimator;
  logic clk = 0, rst_n = 0;
  logic [3:0] log2r;
  logic signed [23:0] x;
  logic signed [31:0] y;
  logic valid;
  int checks = 0, failures = 0;

  cic_decimator dut (.clk, .rst_n, .log2r_i(log2r), .in_i(x), .out_o(y), .valid_o(valid));
  always #4 clk = ~clk;

  localparam int HMAX = 3 * 4096;
  longint xs [$];          // input history, index = cycle number
  int     cyc = 0;
  longint h [];

  function automatic void make_h(int r);
    longint b [];
    longint t [];
    b = new[r];
    foreach (b[i]) b[i] = 1;
    h = b;
    for (int s = 1; s < 3; s++) begin
      t = new[h.size() + r - 1];
      foreach (t[i]) t[i] = 0;
      foreach (h[i]) foreach (b[j]) t[i+j] += h[i] * b[j];
      h = t;
    end
  endfunction

  function automatic longint model(int n, int shift);
    longint acc = 0;
    foreach (h[k]) if (n - k >= 0 && n - k < xs.size()) acc += h[k] * xs[n - k];
    return acc >>> shift;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin xs.push_back(longint'(x)); cyc++; end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_random(input int l2r, input int nout);
    int r = 1 << l2r;
    int lat = -1;
    int last_v = -1;
    int got = 0;
    make_h(r);
    while (got < nout) begin
      @(negedge clk);
      x = 24'($urandom_range(0, 2000000)) - 24'sd1000000;
      if (valid) begin
        int n0 = cyc - 1;
        if (last_v >= 0) begin
          checks++;
          if (cyc - last_v != r) begin failures++; $display("strobe spacing %0d", cyc - last_v); end
        end
        last_v = cyc;
        if (got >= 3) begin   // skip the outputs that saw the rate change
          if (lat < 0) begin
            for (int L = 0; L < 16; L++)
              if (model(n0 - L, 3 * l2r - 8) == longint'(y)) begin lat = L; break; end
            checks++;
            if (lat < 0) begin failures++; $display("no alignment found, y=%0d", y); lat = 0; end
          end else begin
            checks++;
            if (model(n0 - lat, 3 * l2r - 8) != longint'(y)) begin
              failures++;
              if (failures < 5) $display("R=%0d got %0d exp %0d", r, y, model(n0 - lat, 3 * l2r - 8));
            end
          end
        end
        got++;
      end
    end
  endtask

  initial begin
    x = 0; log2r = 6;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_random(6, 60);
    log2r = 7;
    run_random(7, 40);
    // DC at R = 4096: output = x * 2^8 once settled
    log2r = 12;
    x = 24'sd12345;
    begin
      int got = 0;
      while (got < 6) begin
        @(negedge clk);
        if (valid) begin
          got++;
          if (got >= 5) begin
            checks++;
            if (y != 32'sd12345 * 256) begin failures++; $display("DC gain: %0d", y); end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
