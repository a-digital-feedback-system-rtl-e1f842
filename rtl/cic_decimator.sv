// cic_decimator: cascaded integrator-comb decimation filter.
//
// N_STAGES integrators run at the 125 MHz input rate, a decimator keeps one
// sample in R = 2^log2r_i, and N_STAGES combs (differential delay 1) run at the
// output rate. The rate is variable from 64 to 4096 as in the design
// description; only powers of two are supported here so that the CIC gain
// R^N_STAGES can be removed by a shift. The output is the comb result shifted
// right by N_STAGES*log2R - 8: unit DC gain with 8 extra fractional bits, in
// the OUT_W = 32 bit word the description gives for the paths after the CIC.
// Stage count and scaling are this design's choice.
//
// Integrators wrap modulo 2^ACC_W (ACC_W = IN_W + N_STAGES*MAX_LOG2R), which is
// exact for CIC filters. valid_o pulses once per output sample; a new rate
// takes effect at the next decimation boundary. Latency from the last input
// sample of a block to valid_o is N_STAGES + 2 clocks.
module cic_decimator #(
  parameter int unsigned IN_W      = 24,
  parameter int unsigned OUT_W     = 32,
  parameter int unsigned N_STAGES  = 3,
  parameter int unsigned MIN_LOG2R = 6,
  parameter int unsigned MAX_LOG2R = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [3:0]              log2r_i,
  input  logic signed [IN_W-1:0]  in_i,
  output logic signed [OUT_W-1:0] out_o,
  output logic                    valid_o
);

  localparam int unsigned ACC_W = IN_W + N_STAGES * MAX_LOG2R;

  logic signed [ACC_W-1:0] integ [N_STAGES];
  logic signed [ACC_W-1:0] comb_dly [N_STAGES];
  logic signed [ACC_W-1:0] comb [N_STAGES];
  logic [MAX_LOG2R-1:0]    cnt;
  logic [3:0]              log2r_q;
  logic [3:0]              log2r_eff;
  logic [MAX_LOG2R-1:0]    last_cnt;
  logic [N_STAGES:0]       stb;     // strobe travelling through the combs

  // clamp the programmed rate to the supported range
  always_comb begin
    if (log2r_i < 4'(MIN_LOG2R))      log2r_eff = 4'(MIN_LOG2R);
    else if (log2r_i > 4'(MAX_LOG2R)) log2r_eff = 4'(MAX_LOG2R);
    else                              log2r_eff = log2r_i;
  end

  assign last_cnt = MAX_LOG2R'((1 << log2r_q) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(N_STAGES); s++) integ[s] <= '0;
      cnt     <= '0;
      log2r_q <= 4'(MIN_LOG2R);
    end else begin
      integ[0] <= integ[0] + ACC_W'(in_i);
      for (int s = 1; s < int'(N_STAGES); s++) integ[s] <= integ[s] + integ[s-1];
      if (cnt >= last_cnt) begin
        cnt     <= '0;
        log2r_q <= log2r_eff;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  // comb section, one stage per clock after each decimation strobe
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(N_STAGES); s++) begin
        comb[s]     <= '0;
        comb_dly[s] <= '0;
      end
      stb <= '0;
    end else begin
      stb <= {stb[N_STAGES-1:0], (cnt >= last_cnt)};
      if (stb[0]) begin
        comb_dly[0] <= integ[N_STAGES-1];
        comb[0]     <= integ[N_STAGES-1] - comb_dly[0];
      end
      for (int s = 1; s < int'(N_STAGES); s++) begin
        if (stb[s]) begin
          comb_dly[s] <= comb[s-1];
          comb[s]     <= comb[s-1] - comb_dly[s];
        end
      end
    end
  end

  // rate used for the sample now leaving the combs
  logic [3:0] log2r_out;
  logic [3:0] log2r_pipe [N_STAGES+1];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s <= int'(N_STAGES); s++) log2r_pipe[s] <= 4'(MIN_LOG2R);
    end else begin
      log2r_pipe[0] <= log2r_q;
      for (int s = 1; s <= int'(N_STAGES); s++) log2r_pipe[s] <= log2r_pipe[s-1];
    end
  end
  assign log2r_out = log2r_pipe[N_STAGES-1];

  logic signed [ACC_W-1:0] scaled;
  always_comb begin
    scaled = comb[N_STAGES-1] >>> (int'(N_STAGES) * int'(log2r_out) - 8);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_o   <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= stb[N_STAGES];
      if (stb[N_STAGES]) out_o <= OUT_W'(scaled);
    end
  end

endmodule
