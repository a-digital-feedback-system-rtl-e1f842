// tb_dds: self-checking test of the DDS oscillator.
// A reference model keeps its own phase accumulator and computes sine and
// cosine with $sin/$cos; DUT outputs must match within 1 LSB for several
// tuning words, and the number of sine zero crossings over 100000 clocks must
// match the programmed 740 kHz frequency.
module tb_dds;
  localparam int W = 14;
  logic clk = 0, rst_n = 0;
  logic [31:0] ftw = '0;
  logic signed [W-1:0] s, c;
  int checks = 0, failures = 0;

  dds dut (.clk, .rst_n, .ftw, .sin_o(s), .cos_o(c));

  always #4 clk = ~clk;

  logic [31:0] ph_m;
  int exp_s, exp_c;
  function automatic int ref_val(input logic [31:0] ph, input bit cosine);
    real a = 2.0 * 3.14159265358979 * real'(ph[31:22]) / 1024.0;
    return $rtoi((cosine ? $cos(a) : $sin(a)) * 8191.0 + ((cosine ? $cos(a) : $sin(a)) >= 0 ? 0.5 : -0.5));
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin ph_m <= 0; exp_s <= 0; exp_c <= 0; end
    else begin
      exp_s <= ref_val(ph_m, 0);
      exp_c <= ref_val(ph_m, 1);
      ph_m  <= ph_m + ftw;
    end
  end

  bit compare = 0;
  always @(negedge clk) if (compare) begin
    checks++;
    if ((int'(s) - exp_s > 1) || (exp_s - int'(s) > 1) || (int'(c) - exp_c > 1) || (exp_c - int'(c) > 1)) begin
      failures++;
      if (failures < 5) $display("mismatch sin %0d/%0d cos %0d/%0d", s, exp_s, c, exp_c);
    end
  end

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int zc;
  logic signed [W-1:0] prev;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ftw_list[i]) begin
      @(negedge clk) ftw = ftw_list[i];
      compare = 0;
      repeat (2) @(negedge clk);
      compare = 1;
      repeat (2000) @(negedge clk);
    end
    // frequency: 740 kHz -> ftw = 740e3/125e6*2^32
    compare = 0;
    ftw = 32'd25426883;
    zc = 0; prev = s;
    repeat (100000) begin
      @(negedge clk);
      if (prev < 0 && s >= 0) zc++;
      prev = s;
    end
    checks++;
    // 100000 clocks * 8 ns = 0.8 ms -> 592 periods
    if (zc < 591 || zc > 593) begin failures++; $display("zero crossings %0d", zc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [31:0] ftw_list [4] = '{32'h0040_0000, 32'h0123_4567, 32'h1000_0000, 32'h7F00_0001};
endmodule
