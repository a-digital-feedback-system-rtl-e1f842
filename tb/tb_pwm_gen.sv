// tb_pwm_gen: for several duty values the output must be high for exactly
// 'duty' of every 1024 clocks, and the period must be 1024 clocks.
module tb_pwm_gen;
  logic clk = 0, rst_n = 0;
  logic [9:0] duty;
  logic pwm;
  int checks = 0, failures = 0;

  pwm_gen dut (.clk, .rst_n, .duty_i(duty), .pwm_o(pwm));
  always #4 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int highs, rises, first_rise, last_rise;
  initial begin
    duty = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (duties[d]) begin
      duty = duties[d];
      repeat (2100) @(posedge clk);       // settle: new duty applies from the next period
      highs = 0; rises = 0; first_rise = -1; last_rise = -1;
      for (int k = 0; k < 4096; k++) begin
        logic prev;
        prev = pwm;
        @(posedge clk); #1;
        highs += pwm;
        if (pwm && !prev) begin rises++; if (first_rise < 0) first_rise = k; last_rise = k; end
      end
      checks++;
      if (highs != 4 * int'(duties[d])) begin failures++; $display("duty %0d: %0d high of 4096", duties[d], highs); end
      if (duties[d] != 0 && duties[d] != 1023) begin
        checks++;
        if (rises < 3 || (last_rise - first_rise) % 1024 != 0) begin failures++; $display("period wrong, rises %0d", rises); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [9:0] duties [6] = '{10'd0, 10'd1, 10'd100, 10'd512, 10'd1000, 10'd1023};
endmodule
