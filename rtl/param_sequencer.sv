// param_sequencer: applies a list of parameter sets to the feedback paths with
// clock-exact timing.
//
// The sequencer stores N_SETS = 8 software-written parameter sets (fbs_pkg::
// param_set_t): gain/phase weights and input source for each of the two
// feedback paths, a step condition, a delay and an acquisition flag. After
// start_i, set 0 is applied; each set stays active until its step condition
// holds - COND_DELAY: for exactly 'delay' clocks (at least 1); COND_RISE /
// COND_FALL: until a rising / falling edge of the synchronised external
// trigger; COND_HOLD: until stop - and then the next set is applied in the
// following clock. After set len_i-1 the sequencer wraps to set 0 if loop_i is
// set, otherwise it stops and keeps the last set applied. Loading a set whose
// acq_trig flag is set pulses acq_start_o in the same clock the set becomes
// active, so acquisitions start in step with the feedback settings.
// The eight sets, the delay and edge conditions and the control of the input
// multiplexers follow the design description; the set format, start/stop,
// length, looping, the hold condition and the acquisition flag are this
// design's choice. Before the first start the active set is all zero (silent
// outputs). stop_i keeps the current set applied. Table writes while running
// take effect when that set is next loaded.
module param_sequencer
  import fbs_pkg::*;
#(
  parameter int unsigned N_SETS_P = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        set_we_i,
  input  logic [$clog2(N_SETS_P)-1:0] set_addr_i,
  input  param_set_t                  set_data_i,
  input  logic                        start_i,
  input  logic                        stop_i,
  input  logic [3:0]                  len_i,
  input  logic                        loop_i,
  input  logic                        trig_rise_i,
  input  logic                        trig_fall_i,
  output param_set_t                  active_o,
  output logic [$clog2(N_SETS_P)-1:0] index_o,
  output logic                        running_o,
  output logic                        acq_start_o
);

  localparam int unsigned IW = $clog2(N_SETS_P);

  param_set_t  table_q [N_SETS_P];
  logic [31:0] remaining;
  logic        step;
  logic [IW-1:0] last_idx, next_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(N_SETS_P); k++) table_q[k] <= '0;
    end else if (set_we_i) begin
      table_q[set_addr_i] <= set_data_i;
    end
  end

  // index of the last used set, len_i clamped to 1..N_SETS_P
  always_comb begin
    if (len_i == 4'd0)                    last_idx = '0;
    else if (int'(len_i) > int'(N_SETS_P)) last_idx = IW'(N_SETS_P - 1);
    else                                  last_idx = IW'(len_i - 4'd1);
    next_idx = (index_o == last_idx) ? '0 : index_o + 1'b1;
  end

  always_comb begin
    unique case (active_o.cond)
      COND_DELAY: step = (remaining <= 32'd1);
      COND_RISE:  step = trig_rise_i;
      COND_FALL:  step = trig_fall_i;
      default:    step = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_o    <= '0;
      index_o     <= '0;
      running_o   <= 1'b0;
      remaining   <= '0;
      acq_start_o <= 1'b0;
    end else begin
      acq_start_o <= 1'b0;
      if (start_i) begin
        active_o    <= table_q[0];
        index_o     <= '0;
        remaining   <= table_q[0].delay;
        running_o   <= 1'b1;
        acq_start_o <= table_q[0].acq_trig;
      end else if (stop_i) begin
        running_o <= 1'b0;
      end else if (running_o) begin
        if (step) begin
          if (index_o == last_idx && !loop_i) begin
            running_o <= 1'b0;
          end else begin
            active_o    <= table_q[next_idx];
            index_o     <= next_idx;
            remaining   <= table_q[next_idx].delay;
            acq_start_o <= table_q[next_idx].acq_trig;
          end
        end else if (remaining != 0) begin
          remaining <= remaining - 1;
        end
      end
    end
  end

endmodule
