// pwm_gen: pulse-width modulator for an analog gain-control voltage.
//
// After an external RC filter the PWM output sets the control voltage of a
// variable-gain amplifier, as in the design description. A WIDTH-bit counter
// runs through 2^WIDTH clocks per period (122 kHz at WIDTH = 10, 125 MHz);
// pwm_o is high while the counter is below duty_i, so the mean level is
// duty_i / 2^WIDTH. A new duty value is taken at the start of a period so that
// no period is cut short. Resolution and update rule are this design's choice.
module pwm_gen #(
  parameter int unsigned WIDTH = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] duty_i,
  output logic             pwm_o
);

  logic [WIDTH-1:0] cnt;
  logic [WIDTH-1:0] duty_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      duty_q <= '0;
      pwm_o  <= 1'b0;
    end else begin
      cnt <= cnt + 1'b1;
      if (cnt == '1) duty_q <= duty_i;
      pwm_o <= (cnt == '1) ? (duty_i != '0) : ((cnt + 1'b1) < duty_q);
    end
  end

endmodule
