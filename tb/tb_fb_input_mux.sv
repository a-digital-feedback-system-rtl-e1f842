// tb_fb_input_mux: random samples on the three inputs and random selects; the
// registered output must equal the selected input (zero for the fourth code)
// one clock later.
module tb_fb_input_mux;
  import fbs_pkg::*;
  logic clk = 0, rst_n = 0;
  src_sel_e sel;
  logic signed [13:0] a, d1, d2, y, e;
  int checks = 0, failures = 0;
  int seen [4] = '{0, 0, 0, 0};

  fb_input_mux dut (.clk, .rst_n, .sel_i(sel), .adc_i(a), .dds1_i(d1), .dds2_i(d2), .y_o(y));
  always #4 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    sel = SRC_ADC; a = 0; d1 = 0; d2 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      sel = src_sel_e'($urandom_range(0, 3));
      a = 14'($urandom); d1 = 14'($urandom); d2 = 14'($urandom);
      case (sel)
        SRC_ADC:  e = a;
        SRC_DDS1: e = d1;
        SRC_DDS2: e = d2;
        default:  e = 0;
      endcase
      seen[int'(sel)]++;
      @(negedge clk);
      checks++;
      if (y != e) begin failures++; if (failures < 5) $display("sel %0d: %0d vs %0d", sel, y, e); end
    end
    foreach (seen[i]) begin checks++; if (seen[i] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
