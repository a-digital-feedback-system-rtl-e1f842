// fb_input_mux: input source selector in front of a feedback path.
//
// Chooses, under control of the parameter sequencer, the ADC signal or one of
// the two DDS signal generators (used for sinusoidal excitation pulses) as the
// input of the phase shifter, as in the design description. The fourth code,
// a silent zero input, is this design's addition (fbs_pkg::src_sel_e). The
// output is registered: one clock latency.
module fb_input_mux
  import fbs_pkg::*;
#(
  parameter int unsigned DATA_W = 14
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  src_sel_e                 sel_i,
  input  logic signed [DATA_W-1:0] adc_i,
  input  logic signed [DATA_W-1:0] dds1_i,
  input  logic signed [DATA_W-1:0] dds2_i,
  output logic signed [DATA_W-1:0] y_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y_o <= '0;
    else begin
      unique case (sel_i)
        SRC_ADC:  y_o <= adc_i;
        SRC_DDS1: y_o <= dds1_i;
        SRC_DDS2: y_o <= dds2_i;
        default:  y_o <= '0;
      endcase
    end
  end

endmodule
