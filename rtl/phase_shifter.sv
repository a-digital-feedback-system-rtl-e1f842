// phase_shifter: IQ phase shifter of one feedback path.
//
// The input is split into an inphase component I = x[n] and a quadrature
// component Q from the fractional delay line (a -90 degree copy at the axial
// frequency). Two hardware multipliers weight them with A*cos(phi) and
// A*sin(phi) and the products are summed, giving the impulse response
//   h[n] = A * [cos(phi), 0, ..., (1-delta) sin(phi) at n = floor(D),
//               delta sin(phi) at n = floor(D)+1],
// which is exactly a gain A and a phase shift phi at the frequency the delay
// is tuned to. This structure follows the design description. Software writes
// the two weights directly, as signed Q2.14 numbers (1.0 = 16384); the sum is
// shifted back by 14 bits (rounding toward minus infinity) and saturated to
// the 14-bit DAC range. Weight format and saturation are this design's choice.
//
// Timing: 4 clocks from x_i to y_o (delay-line input register, tap
// interpolation, multipliers, sum); new weights act from the next clock on.
module phase_shifter #(
  parameter int unsigned DATA_W = 14,
  parameter int unsigned W_W    = 16,
  parameter int unsigned W_FRAC = 14,
  parameter int unsigned DEPTH  = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] x_i,
  input  logic signed [W_W-1:0]    w_cos_i,
  input  logic signed [W_W-1:0]    w_sin_i,
  input  logic [7:0]               d_int_i,
  input  logic [15:0]              d_frac_i,
  output logic signed [DATA_W-1:0] y_o
);

  localparam int unsigned P_W = DATA_W + W_W;

  logic signed [DATA_W-1:0] i_s, q_s;
  logic signed [P_W-1:0]    p_cos, p_sin;
  logic signed [P_W:0]      sum, shifted;

  frac_delay #(.DATA_W(DATA_W), .DEPTH(DEPTH), .FRAC_W(16)) u_delay (
    .clk, .rst_n, .x_i, .d_int_i, .d_frac_i, .i_o(i_s), .q_o(q_s)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_cos <= '0;
      p_sin <= '0;
    end else begin
      p_cos <= i_s * w_cos_i;
      p_sin <= q_s * w_sin_i;
    end
  end

  localparam logic signed [P_W:0] MAXV = (P_W+1)'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [P_W:0] MINV = -MAXV - 1;

  assign sum     = (P_W+1)'(p_cos) + (P_W+1)'(p_sin);
  assign shifted = sum >>> W_FRAC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                y_o <= '0;
    else if (shifted > MAXV)   y_o <= DATA_W'(MAXV);
    else if (shifted < MINV)   y_o <= DATA_W'(MINV);
    else                       y_o <= DATA_W'(shifted);
  end

endmodule
