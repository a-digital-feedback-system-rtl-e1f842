// fir_filter: TAPS-tap FIR filter that compensates the CIC passband droop.
//
// y[n] = sum_k c[k] * x[n-k], k = 0..TAPS-1, with coefficients c[k] in signed
// Q(COEF_W-COEF_FRAC).COEF_FRAC format written by software through the
// coefficient port. The 309-tap length and the 32-bit data width follow the
// design description; the coefficient values are not part of the hardware and
// after reset the table is a unit impulse (c[0] = 1.0, the filter passes its
// input through) until software loads a droop-compensation design.
//
// The filter runs at the decimated rate, at least 64 clocks per sample, so it
// is time-multiplexed: LANES multiply-accumulate units each handle one slice of
// STEPS = ceil(TAPS/LANES) taps, one tap per clock, and an output is ready
// STEPS + 2 clocks after the input strobe (62 + 2 = 64 at the defaults). The
// lane count is this design's choice. The sum is shifted right by COEF_FRAC
// (rounding toward minus infinity) and saturated to DATA_W bits. A sample that
// arrives while the previous one is still being processed is dropped and sets
// the sticky overrun_o flag.
module fir_filter #(
  parameter int unsigned TAPS      = 309,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned COEF_W    = 18,
  parameter int unsigned COEF_FRAC = 16,
  parameter int unsigned LANES     = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] in_i,
  input  logic                     in_valid_i,
  input  logic                     coef_we_i,
  input  logic [8:0]               coef_addr_i,
  input  logic signed [COEF_W-1:0] coef_data_i,
  output logic signed [DATA_W-1:0] out_o,
  output logic                     out_valid_o,
  output logic                     overrun_o
);

  localparam int unsigned STEPS  = (TAPS + LANES - 1) / LANES;
  localparam int unsigned SLOTS  = STEPS * LANES;           // taps rounded up
  localparam int unsigned PROD_W = DATA_W + COEF_W;
  localparam int unsigned ACC_W  = PROD_W + $clog2(TAPS) + 1;
  localparam int unsigned STEP_W = $clog2(STEPS + 1);

  logic signed [DATA_W-1:0] x    [SLOTS];   // x[k] = x[n-k]
  logic signed [COEF_W-1:0] coef [SLOTS];
  logic                     busy;
  logic [STEP_W-1:0]        step;
  logic signed [ACC_W-1:0]  acc;
  logic                     fin;

  // delay line; slots beyond TAPS hold data but carry coefficient 0
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(SLOTS); k++) x[k] <= '0;
    end else if (in_valid_i && !busy) begin
      x[0] <= in_i;
      for (int k = 1; k < int'(SLOTS); k++) x[k] <= x[k-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(SLOTS); k++) coef[k] <= '0;
      coef[0] <= COEF_W'(1 << COEF_FRAC);
    end else if (coef_we_i && (int'(coef_addr_i) < int'(TAPS))) begin
      coef[coef_addr_i] <= coef_data_i;
    end
  end

  // one tap per lane per clock: lane l handles taps l*STEPS .. l*STEPS+STEPS-1
  logic signed [ACC_W-1:0] lane_sum;
  always_comb begin
    lane_sum = '0;
    for (int l = 0; l < int'(LANES); l++) begin
      lane_sum = lane_sum + ACC_W'(x[l * int'(STEPS) + int'(step)] * coef[l * int'(STEPS) + int'(step)]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      step      <= '0;
      acc       <= '0;
      fin       <= 1'b0;
      overrun_o <= 1'b0;
    end else begin
      fin <= 1'b0;
      if (in_valid_i && busy) overrun_o <= 1'b1;
      if (!busy) begin
        if (in_valid_i) begin
          busy <= 1'b1;
          step <= '0;
          acc  <= '0;
        end
      end else begin
        acc <= acc + lane_sum;
        if (int'(step) == int'(STEPS) - 1) begin
          busy <= 1'b0;
          fin  <= 1'b1;
        end else begin
          step <= step + 1'b1;
        end
      end
    end
  end

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((64'sd1 <<< (DATA_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -MAXV - 1;

  logic signed [ACC_W-1:0] shifted;
  assign shifted = acc >>> COEF_FRAC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_o       <= '0;
      out_valid_o <= 1'b0;
    end else begin
      out_valid_o <= fin;
      if (fin) begin
        if (shifted > MAXV)      out_o <= DATA_W'(MAXV);
        else if (shifted < MINV) out_o <= DATA_W'(MINV);
        else                     out_o <= DATA_W'(shifted);
      end
    end
  end

endmodule
