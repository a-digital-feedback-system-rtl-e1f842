// tb_fir_filter: loads 309 random coefficients, feeds random samples every
// 64 clocks (the fastest rate the acquisition chain produces) and compares
// each output with a direct-form model, sum(c[k]*x[n-k]) >> 16 saturated to
// 32 bits. Also checks the 64-clock latency from input strobe to output
// strobe, the reset pass-through (unit impulse), saturation, and the overrun
// flag when samples arrive too fast.
module tb_fir_filter;
  localparam int TAPS = 309;
  logic clk = 0, rst_n = 0;
  logic signed [31:0] x, y;
  logic in_v, out_v, overrun;
  logic we;
  logic [8:0] addr;
  logic signed [17:0] cdata;
  int checks = 0, failures = 0;

  fir_filter dut (.clk, .rst_n, .in_i(x), .in_valid_i(in_v), .coef_we_i(we), .coef_addr_i(addr),
                  .coef_data_i(cdata), .out_o(y), .out_valid_o(out_v), .overrun_o(overrun));
  always #4 clk = ~clk;

  longint c [TAPS];
  longint hist [$];

  function automatic longint model();
    longint acc = 0;
    for (int k = 0; k < TAPS; k++) if (k < hist.size()) acc += c[k] * hist[hist.size() - 1 - k];
    acc = acc >>> 16;
    if (acc > 64'sd2147483647) acc = 64'sd2147483647;
    if (acc < -64'sd2147483648) acc = -64'sd2147483648;
    return acc;
  endfunction

  task automatic push(input longint v, output longint exp_v, output int lat);
    @(negedge clk);
    x = 32'(v); in_v = 1;
    hist.push_back(v);
    exp_v = model();
    @(negedge clk);
    in_v = 0;
    lat = 1;
    while (!out_v) begin @(negedge clk); lat++; end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint e; int lat;
  initial begin
    x = 0; in_v = 0; we = 0; addr = 0; cdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset state: pass-through
    push(123456, e, lat);
    checks++; if (y != 32'sd123456) begin failures++; $display("pass-through %0d", y); end
    checks++; if (lat != 64) begin failures++; $display("latency %0d", lat); end
    hist.delete();
    // random coefficients (|c| < 0.5 keeps sums in range)
    for (int k = 0; k < TAPS; k++) begin
      @(negedge clk);
      c[k] = longint'($urandom_range(0, 65535)) - 32768;
      we = 1; addr = 9'(k); cdata = 18'(c[k]);
    end
    @(negedge clk); we = 0;
    // flush the delay line with zeros through the model as well
    for (int n = 0; n < TAPS; n++) begin
      push(0, e, lat);
    end
    for (int n = 0; n < 400; n++) begin
      push(longint'($urandom_range(0, 2000000)) - 1000000, e, lat);
      repeat (60) @(negedge clk);
      checks++;
      if (longint'(y) != e) begin failures++; if (failures < 5) $display("n=%0d got %0d exp %0d", n, y, e); end
      checks++;
      if (lat != 64) begin failures++; $display("latency %0d", lat); end
    end
    // saturation: all coefficients +1.99, large input
    for (int k = 0; k < TAPS; k++) begin
      @(negedge clk); c[k] = 131071; we = 1; addr = 9'(k); cdata = 18'sd131071;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3; n++) push(64'sd2000000000, e, lat);
    checks++;
    if (y != 32'sh7FFF_FFFF || e != 64'sd2147483647) begin failures++; $display("saturation %0d", y); end
    checks++;
    if (overrun) begin failures++; $display("overrun set too early"); end
    // two strobes back to back -> overrun
    @(negedge clk); in_v = 1; @(negedge clk); @(negedge clk); in_v = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (!overrun) begin failures++; $display("overrun not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
