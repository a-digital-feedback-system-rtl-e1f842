// tb_dac_if: random signed samples on both channels; outputs must be the
// offset-binary codes (value + 8192) one clock later, mid scale after reset.
module tb_dac_if;
  logic clk = 0, rst_n = 0;
  logic signed [13:0] a, b;
  logic [13:0] da, db;
  int checks = 0, failures = 0;

  dac_if dut (.clk, .rst_n, .a_i(a), .b_i(b), .dac_a_o(da), .dac_b_o(db));
  always #4 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    a = 0; b = 0;
    @(posedge clk); #1;
    checks++; if (da != 14'd8192 || db != 14'd8192) begin failures++; $display("reset value %0d", da); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      a = (n == 0) ? -14'sd8192 : (n == 1) ? 14'sd8191 : 14'($urandom);
      b = 14'($urandom);
      @(negedge clk);
      checks++;
      if (int'(da) != int'(a) + 8192 || int'(db) != int'(b) + 8192) begin
        failures++; if (failures < 5) $display("%0d -> %0d", a, da);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
