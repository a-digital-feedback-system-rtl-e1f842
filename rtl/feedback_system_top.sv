// feedback_system_top: FPGA logic of the digital feedback system for ion
// manipulation in a Penning trap.
//
// One 14-bit ADC stream at 125 MHz feeds two blocks:
//  * Two feedback paths. Each has an input multiplexer (ADC, DDS signal
//    generator 1 or 2, or silence), an IQ phase shifter (fractional delay line
//    as -90 degree Hilbert approximation, weights A*cos(phi) and A*sin(phi))
//    and a DAC channel. The parameter sequencer switches weights and input
//    sources of both paths between eight stored sets, after programmed delays
//    or on edges of the external trigger.
//  * The acquisition system: a local-oscillator DDS and an IQ mixer bring the
//    ion signal to zero IF, CIC filters decimate by 64..4096, 309-tap FIR
//    filters flatten the CIC passband, I and Q are packed into 64-bit words,
//    buffered in a 2048-entry FIFO and written to CPU memory by a DMA engine.
//    An acquisition starts by a register write or from a sequencer set.
// The CPU sets everything through the AXI4-Lite register bank; three PWM
// outputs drive the analog VGA gain controls and four register bits the
// relays. This structure follows the design's block diagram; the register map,
// control details and the widths not given there are this design's choice
// (see the module headers).
//
// Latency of a feedback path, ADC pins to DAC pins: 1 (ADC register) +
// 1 (input multiplexer) + 4 (phase shifter) + 1 (DAC register) = 7 clocks,
// 56 ns, plus the delay D of the quadrature branch.
module feedback_system_top
  import fbs_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // converters and trigger
  input  logic [13:0]         adc_i,       // two's complement ADC sample
  output logic [13:0]         dac_a_o,     // offset binary
  output logic [13:0]         dac_b_o,
  input  logic                trig_i,      // external trigger, asynchronous
  output logic [2:0]          pwm_o,       // VGA gain controls: input, out A, out B
  output logic [3:0]          relay_o,
  // CPU register access, AXI4-Lite
  input  logic [11:0]         s_axi_awaddr,
  input  logic                s_axi_awvalid,
  output logic                s_axi_awready,
  input  logic [31:0]         s_axi_wdata,
  input  logic [3:0]          s_axi_wstrb,
  input  logic                s_axi_wvalid,
  output logic                s_axi_wready,
  output logic [1:0]          s_axi_bresp,
  output logic                s_axi_bvalid,
  input  logic                s_axi_bready,
  input  logic [11:0]         s_axi_araddr,
  input  logic                s_axi_arvalid,
  output logic                s_axi_arready,
  output logic [31:0]         s_axi_rdata,
  output logic [1:0]          s_axi_rresp,
  output logic                s_axi_rvalid,
  input  logic                s_axi_rready,
  // DMA to main memory, AXI4 write
  output logic [31:0]         m_axi_awaddr,
  output logic [7:0]          m_axi_awlen,
  output logic [2:0]          m_axi_awsize,
  output logic [1:0]          m_axi_awburst,
  output logic                m_axi_awvalid,
  input  logic                m_axi_awready,
  output logic [63:0]         m_axi_wdata,
  output logic [7:0]          m_axi_wstrb,
  output logic                m_axi_wlast,
  output logic                m_axi_wvalid,
  input  logic                m_axi_wready,
  input  logic [1:0]          m_axi_bresp,
  input  logic                m_axi_bvalid,
  output logic                m_axi_bready
);

  // ---------------------------------------------------------------- control
  cfg_t        cfg;
  status_t     status;
  logic        reg_seq_start, reg_seq_stop, reg_acq_start;
  logic        fir_we;
  logic [8:0]  fir_addr;
  logic [17:0] fir_data;
  logic        set_we;
  logic [SET_AW-1:0] set_addr;
  param_set_t  set_data, active;
  logic [SET_AW-1:0] seq_index;
  logic        seq_running, seq_acq_start;
  logic        trig_level, trig_rise, trig_fall;

  axi_lite_regs u_regs (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb,
    .s_axi_wvalid, .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready, .s_axi_rdata, .s_axi_rresp,
    .s_axi_rvalid, .s_axi_rready,
    .cfg_o(cfg), .seq_start_o(reg_seq_start), .seq_stop_o(reg_seq_stop),
    .acq_start_o(reg_acq_start), .fir_we_o(fir_we), .fir_addr_o(fir_addr),
    .fir_data_o(fir_data), .set_we_o(set_we), .set_addr_o(set_addr),
    .set_data_o(set_data), .status_i(status)
  );

  trigger_sync u_trig (
    .clk, .rst_n, .trig_async_i(trig_i),
    .level_o(trig_level), .rise_o(trig_rise), .fall_o(trig_fall)
  );

  param_sequencer #(.N_SETS_P(N_SETS)) u_seq (
    .clk, .rst_n,
    .set_we_i(set_we), .set_addr_i(set_addr), .set_data_i(set_data),
    .start_i(reg_seq_start), .stop_i(reg_seq_stop),
    .len_i(cfg.seq_len), .loop_i(cfg.seq_loop),
    .trig_rise_i(trig_rise), .trig_fall_i(trig_fall),
    .active_o(active), .index_o(seq_index), .running_o(seq_running),
    .acq_start_o(seq_acq_start)
  );

  // ---------------------------------------------------------------- ADC input
  logic signed [13:0] adc_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) adc_q <= '0;
    else        adc_q <= adc_i;
  end

  // ---------------------------------------------------------------- oscillators
  logic signed [13:0] lo_sin, lo_cos, gen1_sin, gen2_sin;
  logic signed [13:0] gen1_cos, gen2_cos;   // unused: the generators feed one phase only

  dds u_lo   (.clk, .rst_n, .ftw(cfg.lo_ftw),   .sin_o(lo_sin),   .cos_o(lo_cos));
  dds u_gen1 (.clk, .rst_n, .ftw(cfg.dds1_ftw), .sin_o(gen1_sin), .cos_o(gen1_cos));
  dds u_gen2 (.clk, .rst_n, .ftw(cfg.dds2_ftw), .sin_o(gen2_sin), .cos_o(gen2_cos));

  // ---------------------------------------------------------------- feedback paths
  logic signed [13:0] fb_in_a, fb_in_b, fb_out_a, fb_out_b;

  fb_input_mux u_mux_a (.clk, .rst_n, .sel_i(active.path_a.src), .adc_i(adc_q),
                        .dds1_i(gen1_sin), .dds2_i(gen2_sin), .y_o(fb_in_a));
  fb_input_mux u_mux_b (.clk, .rst_n, .sel_i(active.path_b.src), .adc_i(adc_q),
                        .dds1_i(gen1_sin), .dds2_i(gen2_sin), .y_o(fb_in_b));

  phase_shifter u_ps_a (.clk, .rst_n, .x_i(fb_in_a),
                        .w_cos_i(active.path_a.w_cos), .w_sin_i(active.path_a.w_sin),
                        .d_int_i(cfg.d_int_a), .d_frac_i(cfg.d_frac_a), .y_o(fb_out_a));
  phase_shifter u_ps_b (.clk, .rst_n, .x_i(fb_in_b),
                        .w_cos_i(active.path_b.w_cos), .w_sin_i(active.path_b.w_sin),
                        .d_int_i(cfg.d_int_b), .d_frac_i(cfg.d_frac_b), .y_o(fb_out_b));

  dac_if u_dac (.clk, .rst_n, .a_i(fb_out_a), .b_i(fb_out_b),
                .dac_a_o, .dac_b_o);

  // ---------------------------------------------------------------- acquisition
  logic signed [23:0] mix_i, mix_q;
  logic signed [31:0] cic_i, cic_q, fir_i, fir_q;
  logic               cic_i_valid, cic_q_valid, fir_i_valid, fir_q_valid;
  logic               fir_i_overrun, fir_q_overrun;
  logic               capture, fifo_wr, fifo_rd, fifo_empty, fifo_full, fifo_overflow;
  logic [63:0]        fifo_rdata;
  logic [11:0]        fifo_count;
  logic               acq_busy, acq_done, dma_err;

  iq_mixer u_mixer (.clk, .rst_n, .adc_i(adc_q), .lo_sin_i(lo_sin), .lo_cos_i(lo_cos),
                    .i_o(mix_i), .q_o(mix_q));

  cic_decimator u_cic_i (.clk, .rst_n, .log2r_i(cfg.cic_log2r), .in_i(mix_i),
                         .out_o(cic_i), .valid_o(cic_i_valid));
  cic_decimator u_cic_q (.clk, .rst_n, .log2r_i(cfg.cic_log2r), .in_i(mix_q),
                         .out_o(cic_q), .valid_o(cic_q_valid));

  fir_filter u_fir_i (.clk, .rst_n, .in_i(cic_i), .in_valid_i(cic_i_valid),
                      .coef_we_i(fir_we), .coef_addr_i(fir_addr), .coef_data_i(fir_data),
                      .out_o(fir_i), .out_valid_o(fir_i_valid), .overrun_o(fir_i_overrun));
  fir_filter u_fir_q (.clk, .rst_n, .in_i(cic_q), .in_valid_i(cic_q_valid),
                      .coef_we_i(fir_we), .coef_addr_i(fir_addr), .coef_data_i(fir_data),
                      .out_o(fir_q), .out_valid_o(fir_q_valid), .overrun_o(fir_q_overrun));

  // I and Q run in lock step; a word is {Q, I}
  assign fifo_wr = capture && fir_i_valid;

  sync_fifo #(.DEPTH(2048), .WIDTH(64)) u_fifo (
    .clk, .rst_n, .wr_en_i(fifo_wr), .wr_data_i({fir_q, fir_i}),
    .rd_en_i(fifo_rd), .rd_data_o(fifo_rdata), .empty_o(fifo_empty),
    .full_o(fifo_full), .count_o(fifo_count), .overflow_o(fifo_overflow)
  );

  dma_engine u_dma (
    .clk, .rst_n,
    .start_i(reg_acq_start || seq_acq_start), .base_addr_i(cfg.dma_base),
    .num_samples_i(cfg.acq_count), .sample_valid_i(fir_i_valid), .capture_o(capture),
    .fifo_data_i(fifo_rdata), .fifo_empty_i(fifo_empty), .fifo_rd_o(fifo_rd),
    .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst, .m_axi_awvalid,
    .m_axi_awready, .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast, .m_axi_wvalid,
    .m_axi_wready, .m_axi_bresp, .m_axi_bvalid, .m_axi_bready,
    .busy_o(acq_busy), .done_o(acq_done), .err_o(dma_err), .written_o(status.dma_written)
  );

  assign status.seq_running   = seq_running;
  assign status.seq_index     = seq_index;
  assign status.acq_busy      = acq_busy;
  assign status.acq_done      = acq_done;
  assign status.fifo_overflow = fifo_overflow;
  assign status.fir_overrun   = fir_i_overrun || fir_q_overrun;
  assign status.dma_err       = dma_err;
  assign status.trig_level    = trig_level;

  // ---------------------------------------------------------------- board controls
  pwm_gen u_pwm0 (.clk, .rst_n, .duty_i(cfg.pwm0), .pwm_o(pwm_o[0]));
  pwm_gen u_pwm1 (.clk, .rst_n, .duty_i(cfg.pwm1), .pwm_o(pwm_o[1]));
  pwm_gen u_pwm2 (.clk, .rst_n, .duty_i(cfg.pwm2), .pwm_o(pwm_o[2]));
  assign relay_o = cfg.relay;

endmodule
