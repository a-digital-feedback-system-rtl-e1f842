// frac_delay: fractional delay line that approximates a -90 degree Hilbert
// transform around the ion's axial frequency.
//
// A time delay of a quarter period, D = f_clk / (4 * nu_z) clock cycles, shifts
// a narrow-band signal at nu_z by -90 degrees. D is in general not an integer,
// so the delay line (a shift register of DEPTH cells, x[n-k] in cell k) has two
// taps, at floor(D) = d_int_i and floor(D)+1, which are mixed linearly:
//   q = (1 - delta) * x[n - floor(D)] + delta * x[n - floor(D) - 1],
// with delta = d_frac_i / 2^FRAC_W. Both taps, the linear interpolation and the
// software-set D follow the design description (example: nu_z = 740 kHz gives
// floor(D) = 42, delta = 0.23). DEPTH = 256 (D up to 254, nu_z down to about
// 123 kHz) and the 16-bit delta are this design's choice; so is taking the
// second tap at floor(D)+1 also when delta = 0, where its weight is zero.
//
// Outputs: i_o is x[n] and q_o the interpolated sample, registered together so
// that both are aligned; i_o follows x_i by 2 clocks. The interpolation
// rounds toward minus infinity.
module frac_delay #(
  parameter int unsigned DATA_W = 14,
  parameter int unsigned DEPTH  = 256,
  parameter int unsigned FRAC_W = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] x_i,
  input  logic [7:0]               d_int_i,
  input  logic [FRAC_W-1:0]        d_frac_i,
  output logic signed [DATA_W-1:0] i_o,
  output logic signed [DATA_W-1:0] q_o
);

  logic signed [DATA_W-1:0] line [DEPTH];
  logic [7:0]               k0, k1;
  logic signed [DATA_W-1:0] tap0, tap1;
  logic signed [DATA_W+FRAC_W+1:0] mix;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(DEPTH); k++) line[k] <= '0;
    end else begin
      line[0] <= x_i;
      for (int k = 1; k < int'(DEPTH); k++) line[k] <= line[k-1];
    end
  end

  // clamp so that both taps stay inside the line
  assign k0   = (int'(d_int_i) > int'(DEPTH) - 2) ? 8'(DEPTH - 2) : d_int_i;
  assign k1   = k0 + 8'd1;
  assign tap0 = line[k0];
  assign tap1 = line[k1];
  assign mix  = $signed({2'b00, (FRAC_W+1)'(1 << FRAC_W) - (FRAC_W+1)'(d_frac_i)}) * tap0
              + $signed({2'b00, d_frac_i}) * tap1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_o <= '0;
      q_o <= '0;
    end else begin
      i_o <= line[0];
      q_o <= DATA_W'(mix >>> FRAC_W);
    end
  end

endmodule
