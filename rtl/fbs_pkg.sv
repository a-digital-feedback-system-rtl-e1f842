// fbs_pkg: types and constants shared by the digital feedback system.
//
// The feedback system samples the ion-detection signal with a 14-bit ADC at
// 125 MHz, phase-shifts and scales it in two independent feedback paths and
// drives two 14-bit DACs; in parallel an acquisition chain mixes the signal to
// zero IF, decimates, filters and stores it in CPU memory. This package holds
// the widths that follow the converters (14 bit), the parameter-set record the
// sequencer applies to both feedback paths, and the register map of the
// AXI4-Lite control interface. The register map and the field encodings are
// this design's own choice.
package fbs_pkg;

  localparam int unsigned SAMPLE_W = 14;   // ADC / DAC resolution
  localparam int unsigned WEIGHT_W = 16;   // A*cos(phi), A*sin(phi): signed Q2.14
  localparam int unsigned WEIGHT_FRAC = 14;
  localparam int unsigned N_SETS   = 8;    // parameter sets in the sequencer
  localparam int unsigned SET_AW   = 3;

  // Input source of a feedback path.
  typedef enum logic [1:0] {
    SRC_ADC  = 2'd0,
    SRC_DDS1 = 2'd1,
    SRC_DDS2 = 2'd2,
    SRC_ZERO = 2'd3
  } src_sel_e;

  // Condition that ends a parameter set and steps to the next one.
  typedef enum logic [1:0] {
    COND_DELAY = 2'd0,   // after 'delay' clock cycles
    COND_RISE  = 2'd1,   // on a rising edge of the external trigger
    COND_FALL  = 2'd2,   // on a falling edge of the external trigger
    COND_HOLD  = 2'd3    // never: stays until the sequencer is stopped
  } step_cond_e;

  // Settings of one feedback path.
  typedef struct packed {
    logic signed [WEIGHT_W-1:0] w_cos;   // A*cos(phi)
    logic signed [WEIGHT_W-1:0] w_sin;   // A*sin(phi)
    src_sel_e                   src;
  } path_cfg_t;

  // One entry of the parameter sequencer.
  typedef struct packed {
    path_cfg_t   path_a;
    path_cfg_t   path_b;
    step_cond_e  cond;
    logic        acq_trig;   // start an acquisition when this set is loaded
    logic [31:0] delay;      // clock cycles, used with COND_DELAY
  } param_set_t;

  // Register map (byte addresses, 32-bit registers).
  localparam logic [11:0] REG_CTRL      = 12'h000; // W: b0 seq start, b1 seq stop, b2 acq start (self-clearing)
  localparam logic [11:0] REG_SEQ_CFG   = 12'h004; // b3:0 number of sets 1..8, b8 loop
  localparam logic [11:0] REG_STATUS    = 12'h008; // R: b0 running, b3:1 set index, b4 acq busy, b5 acq done,
                                                   //    b6 FIFO overflow, b7 FIR overrun, b8 DMA error, b9 trigger level
  localparam logic [11:0] REG_LO_FTW    = 12'h00C;
  localparam logic [11:0] REG_DDS1_FTW  = 12'h010;
  localparam logic [11:0] REG_DDS2_FTW  = 12'h014;
  localparam logic [11:0] REG_CIC_LOG2R = 12'h018; // 6..12
  localparam logic [11:0] REG_ACQ_COUNT = 12'h01C; // samples per acquisition
  localparam logic [11:0] REG_DMA_BASE  = 12'h020; // byte address
  localparam logic [11:0] REG_DELAY_A   = 12'h024; // b23:16 floor(D), b15:0 delta
  localparam logic [11:0] REG_DELAY_B   = 12'h028;
  localparam logic [11:0] REG_PWM0      = 12'h02C;
  localparam logic [11:0] REG_PWM1      = 12'h030;
  localparam logic [11:0] REG_PWM2      = 12'h034;
  localparam logic [11:0] REG_RELAY     = 12'h038;
  localparam logic [11:0] REG_FIR_ADDR  = 12'h040;
  localparam logic [11:0] REG_FIR_DATA  = 12'h044; // write stores coefficient at FIR_ADDR, then FIR_ADDR++
  localparam logic [11:0] REG_DMA_COUNT = 12'h048; // R: samples written
  localparam logic [11:0] REG_SET_BASE  = 12'h100; // set k at 0x100 + 0x10*k
  // offsets inside a set: +0 path A {w_sin, w_cos}, +4 path B {w_sin, w_cos},
  // +8 b1:0 src A, b3:2 src B, b5:4 cond, b6 acq_trig, +C delay

  typedef struct packed {
    logic [31:0] lo_ftw;
    logic [31:0] dds1_ftw;
    logic [31:0] dds2_ftw;
    logic [3:0]  cic_log2r;
    logic [31:0] acq_count;
    logic [31:0] dma_base;
    logic [7:0]  d_int_a;
    logic [15:0] d_frac_a;
    logic [7:0]  d_int_b;
    logic [15:0] d_frac_b;
    logic [9:0]  pwm0;
    logic [9:0]  pwm1;
    logic [9:0]  pwm2;
    logic [3:0]  relay;
    logic [3:0]  seq_len;
    logic        seq_loop;
  } cfg_t;

  typedef struct packed {
    logic        seq_running;
    logic [2:0]  seq_index;
    logic        acq_busy;
    logic        acq_done;
    logic        fifo_overflow;
    logic        fir_overrun;
    logic        dma_err;
    logic        trig_level;
    logic [31:0] dma_written;
  } status_t;

endpackage
