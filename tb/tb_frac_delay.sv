// tb_frac_delay: random input through the fractional delay line for several
// (floor(D), delta) settings including the 740 kHz example (42, 0.23);
// checks i = x[n-1] and q = ((1-delta) x[n-1-D] + delta x[n-2-D]), n = newest input, rounded
// down, computed from the input history. Also checks the -90 degree shift on
// a 740 kHz sine by correlation.
module tb_frac_delay;
  logic clk = 0, rst_n = 0;
  logic signed [13:0] x, i_o, q_o;
  logic [7:0] dint;
  logic [15:0] dfrac;
  int checks = 0, failures = 0;
  longint hist [$];

  frac_delay dut (.clk, .rst_n, .x_i(x), .d_int_i(dint), .d_frac_i(dfrac), .i_o, .q_o);
  always #4 clk = ~clk;

  function automatic longint hx(int back);  // x[n-back], n = newest sample
    return (back < hist.size()) ? hist[hist.size() - 1 - back] : 0;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input int di, input int df, input int n, input bit sine);
    real si = 0, sq_s = 0, sq_c = 0, ang;
    dint = 8'(di); dfrac = 16'(df);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      if (sine) x = 14'($rtoi(6000.0 * $cos(2.0 * 3.14159265358979 * 740.0e3 * 8.0e-9 * real'(hist.size()))));
      else      x = 14'($urandom);
      hist.push_back(longint'(x));
      @(posedge clk); #1;
      // two register stages: the sample set before the previous edge is out now
      if (k > 300) begin
        longint ei = hx(1);
        longint eq = ((65536 - df) * hx(1 + di) + df * hx(2 + di)) >>> 16;
        checks++;
        if (longint'(i_o) != ei || longint'(q_o) != eq) begin
          failures++; if (failures < 5) $display("D=%0d+%0d: i %0d/%0d q %0d/%0d", di, df, i_o, ei, q_o, eq);
        end
        if (sine) begin
          ang = 2.0 * 3.14159265358979 * 740.0e3 * 8.0e-9 * real'(hist.size() - 2);
          sq_c += real'(q_o) * $cos(ang);
          sq_s += real'(q_o) * $sin(ang);
        end
      end
    end
    if (sine) begin
      // q ~ cos(w t - 90 deg) = sin(w t): phase of q relative to x
      ang = $atan2(sq_s, sq_c) * 180.0 / 3.14159265358979;
      checks++;
      if (ang < 89.5 || ang > 90.5) begin failures++; $display("quadrature phase %f deg", ang); end
    end
  endtask

  initial begin
    x = 0; dint = 0; dfrac = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(42, 15073, 2000, 0);     // delta = 0.23
    run(0, 0, 1000, 0);
    run(10, 32768, 1000, 0);
    run(254, 65535, 1000, 0);
    run(42, 15073, 3000, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
