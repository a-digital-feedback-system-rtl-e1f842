// dds: direct digital synthesis oscillator with sine and cosine outputs.
//
// A PHASE_W-bit phase accumulator advances by the frequency tuning word every
// clock, so f_out = ftw * f_clk / 2^PHASE_W (125 MHz clock: 0.029 Hz steps at
// 32 bits). The top LUT_AW bits of the phase address a full-wave sine table of
// 2^LUT_AW entries, computed at elaboration from sin(); the cosine reads the
// same table a quarter period ahead. The feedback system uses one instance as
// the local oscillator of the IQ down-mixer and two as signal generators for
// ion excitation. That it is a DDS with software-set frequency follows the
// design description; accumulator and table sizes are this design's choice.
//
// Timing: phase register, then table read register. A change of ftw shows in
// the outputs two clocks later. Reset clears the phase to 0, so the first
// samples after reset are sin = 0, cos = full scale.
module dds #(
  parameter int unsigned PHASE_W = 32,
  parameter int unsigned LUT_AW  = 10,
  parameter int unsigned OUT_W   = 14
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [PHASE_W-1:0]       ftw,
  output logic signed [OUT_W-1:0]  sin_o,
  output logic signed [OUT_W-1:0]  cos_o
);

  localparam int unsigned LUT_N = 1 << LUT_AW;
  localparam real         AMP   = real'((1 << (OUT_W - 1)) - 1);

  typedef logic signed [OUT_W-1:0] lut_t [LUT_N];

  function automatic lut_t make_lut();
    lut_t t;
    for (int i = 0; i < int'(LUT_N); i++) begin
      t[i] = OUT_W'($rtoi(AMP * $sin(2.0 * 3.14159265358979323846 * real'(i) / real'(LUT_N))
                         + ((i < int'(LUT_N) / 2) ? 0.5 : -0.5)));
    end
    return t;
  endfunction

  localparam lut_t LUT = make_lut();

  logic [PHASE_W-1:0] phase;
  logic [LUT_AW-1:0]  addr_s, addr_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase <= '0;
    else        phase <= phase + ftw;
  end

  assign addr_s = phase[PHASE_W-1 -: LUT_AW];
  assign addr_c = addr_s + LUT_AW'(LUT_N / 4);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sin_o <= '0;
      cos_o <= '0;
    end else begin
      sin_o <= LUT[addr_s];
      cos_o <= LUT[addr_c];
    end
  end

endmodule
