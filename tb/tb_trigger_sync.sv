// tb_trigger_sync: the trigger is toggled at random, not clock-aligned times
// (high and low phases of 1..20 clocks). Every input edge must give exactly
// one rise/fall strobe, 3 clock edges after the first clock edge that sees the
// new level, and level_o must follow the input with the same delay.
module tb_trigger_sync;
  logic clk = 0, rst_n = 0;
  logic trig = 0, level, rise, fall;
  int checks = 0, failures = 0;
  int n_rise = 0, n_fall = 0, in_rise = 0, in_fall = 0;
  logic hist [$];

  trigger_sync dut (.clk, .rst_n, .trig_async_i(trig), .level_o(level), .rise_o(rise), .fall_o(fall));
  always #4 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // sample the input at each clock edge as the synchroniser does
  always @(posedge clk) if (rst_n) begin
    hist.push_back(trig);
    if (hist.size() > 4) begin
      logic now3, prev4;
      now3  = hist[hist.size() - 3];
      prev4 = hist[hist.size() - 4];
      #1;
      checks++;
      if (rise != (now3 && !prev4) || fall != (!now3 && prev4) || level != now3) begin
        failures++; if (failures < 5) $display("t=%0t rise %b fall %b level %b", $time, rise, fall, level);
      end
      n_rise += rise; n_fall += fall;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      #($urandom_range(1, 7));
      repeat ($urandom_range(1, 20)) @(posedge clk);
      #($urandom_range(1, 7));
      trig = ~trig;
      if (trig) in_rise++; else in_fall++;
    end
    repeat (10) @(posedge clk);
    checks++;
    if (n_rise != in_rise || n_fall != in_fall) begin failures++; $display("edges %0d/%0d %0d/%0d", n_rise, in_rise, n_fall, in_fall); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
