// trigger_sync: brings the external trigger into the 125 MHz clock domain.
//
// The trigger from the experiment's pulse generator is asynchronous to the
// FPGA clock, so it passes a STAGES-flop synchroniser before use (this gives
// the one-clock, 8 ns, jitter noted in the design description unless the
// trigger is itself generated in step with the reference clock). One more
// register gives edge detection: rise_o / fall_o pulse for one clock,
// STAGES + 1 clocks after the input changes. level_o is the synchronised level.
// Reset value of the chain is low (this design's choice).
module trigger_sync #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic trig_async_i,
  output logic level_o,
  output logic rise_o,
  output logic fall_o
);

  logic [STAGES-1:0] sync;
  logic              prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync   <= '0;
      prev   <= 1'b0;
      rise_o <= 1'b0;
      fall_o <= 1'b0;
    end else begin
      sync   <= {sync[STAGES-2:0], trig_async_i};
      prev   <= sync[STAGES-1];
      rise_o <= sync[STAGES-1] && !prev;
      fall_o <= !sync[STAGES-1] && prev;
    end
  end

  assign level_o = prev;

endmodule
