// tb_iq_mixer: random ADC and oscillator samples; I and Q must equal the
// full products shifted right by 4 (24 of 28 bits), one clock later.
module tb_iq_mixer;
  logic clk = 0, rst_n = 0;
  logic signed [13:0] adc, ls, lc;
  logic signed [23:0] i_o, q_o;
  int checks = 0, failures = 0;
  longint exp_i, exp_q;

  iq_mixer dut (.clk, .rst_n, .adc_i(adc), .lo_sin_i(ls), .lo_cos_i(lc), .i_o, .q_o);
  always #4 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    adc = 0; ls = 0; lc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (n < 4) begin
        adc = (n[0]) ? -14'sd8192 : 14'sd8191; ls = (n[1]) ? -14'sd8192 : 14'sd8191; lc = -ls;
      end else begin
        adc = 14'($urandom); ls = 14'($urandom); lc = 14'($urandom);
      end
      exp_i = (longint'(adc) * longint'(lc)) >>> 4;
      exp_q = (longint'(adc) * longint'(ls)) >>> 4;
      @(negedge clk);
      checks++;
      if (longint'(i_o) != exp_i || longint'(q_o) != exp_q) begin
        failures++;
        if (failures < 5) $display("adc %0d lo %0d/%0d: got %0d %0d exp %0d %0d", adc, ls, lc, i_o, q_o, exp_i, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
