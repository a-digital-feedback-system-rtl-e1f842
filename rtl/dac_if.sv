// dac_if: output register stage for the two DAC channels.
//
// The two feedback paths produce signed (two's complement) 14-bit samples;
// the dual DAC on the board takes straight offset binary on a parallel bus,
// so the sign bit is inverted. Both channels are registered in the same clock
// so they leave the FPGA aligned (one clock latency). The coding follows the
// converter's data sheet; the design description only says that the
// converters are connected through a parallel interface.
module dac_if #(
  parameter int unsigned DATA_W = 14
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] a_i,
  input  logic signed [DATA_W-1:0] b_i,
  output logic [DATA_W-1:0]        dac_a_o,
  output logic [DATA_W-1:0]        dac_b_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_a_o <= {1'b1, {(DATA_W-1){1'b0}}};   // mid scale = 0 V
      dac_b_o <= {1'b1, {(DATA_W-1){1'b0}}};
    end else begin
      dac_a_o <= {~a_i[DATA_W-1], a_i[DATA_W-2:0]};
      dac_b_o <= {~b_i[DATA_W-1], b_i[DATA_W-2:0]};
    end
  end

endmodule
