// iq_mixer: digital IQ down-mixer of the acquisition chain.
//
// Two hardware multipliers multiply the ADC sample with the cosine and the sine
// of the local oscillator, moving the ion signal at the oscillator frequency to
// zero IF as a complex (I, Q) pair. The 14 x 14 bit product has 28 bits; the
// output keeps the top OUT_W = 24 bits (an arithmetic right shift by 4), the
// word width printed after the mixers in the block diagram. Assigning the
// cosine product to I and the sine product to Q is this design's choice.
//
// Timing: one register stage; outputs are valid one clock after the inputs.
module iq_mixer #(
  parameter int unsigned IN_W  = 14,
  parameter int unsigned LO_W  = 14,
  parameter int unsigned OUT_W = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [IN_W-1:0]  adc_i,
  input  logic signed [LO_W-1:0]  lo_sin_i,
  input  logic signed [LO_W-1:0]  lo_cos_i,
  output logic signed [OUT_W-1:0] i_o,
  output logic signed [OUT_W-1:0] q_o
);

  localparam int unsigned PROD_W = IN_W + LO_W;
  localparam int unsigned SHIFT  = PROD_W - OUT_W;

  logic signed [PROD_W-1:0] prod_i, prod_q;

  assign prod_i = adc_i * lo_cos_i;
  assign prod_q = adc_i * lo_sin_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_o <= '0;
      q_o <= '0;
    end else begin
      i_o <= OUT_W'(prod_i >>> SHIFT);
      q_o <= OUT_W'(prod_q >>> SHIFT);
    end
  end

endmodule
