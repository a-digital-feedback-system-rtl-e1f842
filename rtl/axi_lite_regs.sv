// axi_lite_regs: AXI4-Lite register bank through which the CPU controls the
// feedback system.
//
// All software-set parameters live here: oscillator frequencies, fractional
// delays of both phase shifters, CIC rate, acquisition length and buffer
// address, PWM duties, relay bits, the FIR coefficient table and the eight
// parameter sets of the sequencer (register map in fbs_pkg). That the CPU
// reaches all module parameters over an AXI bus follows the design
// description; the register map is this design's own.
//
// Protocol: a write is accepted in the clock in which AWVALID and WVALID are
// both high and no response is pending (AWREADY = WREADY = 1 for that clock);
// BVALID follows one clock later with OKAY. A read is accepted when ARVALID is
// high and no read data is pending; RVALID follows one clock later. Byte
// strobes are ignored (full-word writes). Unmapped addresses read as zero and
// writes to them are ignored. Writing REG_CTRL gives one-clock strobes;
// writing REG_FIR_DATA emits a coefficient write at REG_FIR_ADDR and then
// increments REG_FIR_ADDR; writing any word of a parameter set emits the whole
// updated set to the sequencer in the following clock.
module axi_lite_regs
  import fbs_pkg::*;
#(
  parameter int unsigned ADDR_W = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // configuration and strobes
  output cfg_t              cfg_o,
  output logic              seq_start_o,
  output logic              seq_stop_o,
  output logic              acq_start_o,
  output logic              fir_we_o,
  output logic [8:0]        fir_addr_o,
  output logic [17:0]       fir_data_o,
  output logic              set_we_o,
  output logic [SET_AW-1:0] set_addr_o,
  output param_set_t        set_data_o,
  input  status_t           status_i
);

  logic [31:0]      set_words [N_SETS][4];
  logic             wr_fire, rd_fire;
  logic [11:0]      waddr, raddr;
  logic [31:0]      rdata_c;

  assign waddr = 12'(s_axi_awaddr) & 12'hFFC;
  assign raddr = 12'(s_axi_araddr) & 12'hFFC;
  assign wr_fire = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign rd_fire = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_awready = wr_fire;
  assign s_axi_wready  = wr_fire;
  assign s_axi_arready = rd_fire;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;

  function automatic param_set_t pack_set(input logic [31:0] w [4]);
    param_set_t s;
    s.path_a.w_cos = w[0][15:0];
    s.path_a.w_sin = w[0][31:16];
    s.path_b.w_cos = w[1][15:0];
    s.path_b.w_sin = w[1][31:16];
    s.path_a.src   = src_sel_e'(w[2][1:0]);
    s.path_b.src   = src_sel_e'(w[2][3:2]);
    s.cond         = step_cond_e'(w[2][5:4]);
    s.acq_trig     = w[2][6];
    s.delay        = w[3];
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_o           <= '0;
      cfg_o.cic_log2r <= 4'd6;
      cfg_o.seq_len   <= 4'd8;
      for (int k = 0; k < int'(N_SETS); k++)
        for (int j = 0; j < 4; j++) set_words[k][j] <= '0;
      s_axi_bvalid <= 1'b0;
      seq_start_o  <= 1'b0;
      seq_stop_o   <= 1'b0;
      acq_start_o  <= 1'b0;
      fir_we_o     <= 1'b0;
      fir_addr_o   <= '0;
      fir_data_o   <= '0;
      set_we_o     <= 1'b0;
      set_addr_o   <= '0;
    end else begin
      seq_start_o <= 1'b0;
      seq_stop_o  <= 1'b0;
      acq_start_o <= 1'b0;
      set_we_o    <= 1'b0;
      if (fir_we_o) fir_addr_o <= fir_addr_o + 9'd1;
      fir_we_o    <= 1'b0;
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (wr_fire) begin
        s_axi_bvalid <= 1'b1;
        if (waddr >= REG_SET_BASE && waddr < REG_SET_BASE + 12'(N_SETS * 16)) begin
          set_words[waddr[6:4]][waddr[3:2]] <= s_axi_wdata;
          set_we_o   <= 1'b1;
          set_addr_o <= SET_AW'(waddr[6:4]);
        end else begin
          unique case (waddr)
            REG_CTRL: begin
              seq_start_o <= s_axi_wdata[0];
              seq_stop_o  <= s_axi_wdata[1];
              acq_start_o <= s_axi_wdata[2];
            end
            REG_SEQ_CFG: begin
              cfg_o.seq_len  <= s_axi_wdata[3:0];
              cfg_o.seq_loop <= s_axi_wdata[8];
            end
            REG_LO_FTW:    cfg_o.lo_ftw    <= s_axi_wdata;
            REG_DDS1_FTW:  cfg_o.dds1_ftw  <= s_axi_wdata;
            REG_DDS2_FTW:  cfg_o.dds2_ftw  <= s_axi_wdata;
            REG_CIC_LOG2R: cfg_o.cic_log2r <= s_axi_wdata[3:0];
            REG_ACQ_COUNT: cfg_o.acq_count <= s_axi_wdata;
            REG_DMA_BASE:  cfg_o.dma_base  <= s_axi_wdata;
            REG_DELAY_A: begin
              cfg_o.d_int_a  <= s_axi_wdata[23:16];
              cfg_o.d_frac_a <= s_axi_wdata[15:0];
            end
            REG_DELAY_B: begin
              cfg_o.d_int_b  <= s_axi_wdata[23:16];
              cfg_o.d_frac_b <= s_axi_wdata[15:0];
            end
            REG_PWM0:     cfg_o.pwm0  <= s_axi_wdata[9:0];
            REG_PWM1:     cfg_o.pwm1  <= s_axi_wdata[9:0];
            REG_PWM2:     cfg_o.pwm2  <= s_axi_wdata[9:0];
            REG_RELAY:    cfg_o.relay <= s_axi_wdata[3:0];
            REG_FIR_ADDR: fir_addr_o  <= s_axi_wdata[8:0];
            REG_FIR_DATA: begin
              fir_data_o <= s_axi_wdata[17:0];
              fir_we_o   <= 1'b1;
            end
            default: ;
          endcase
        end
      end
    end
  end

  assign set_data_o = pack_set(set_words[set_addr_o]);

  always_comb begin
    rdata_c = '0;
    if (raddr >= REG_SET_BASE && raddr < REG_SET_BASE + 12'(N_SETS * 16)) begin
      rdata_c = set_words[raddr[6:4]][raddr[3:2]];
    end else begin
      unique case (raddr)
        REG_SEQ_CFG:   rdata_c = {23'd0, cfg_o.seq_loop, 4'd0, cfg_o.seq_len};
        REG_STATUS:    rdata_c = {22'd0, status_i.trig_level, status_i.dma_err, status_i.fir_overrun, status_i.fifo_overflow,
                                  status_i.acq_done, status_i.acq_busy,
                                  status_i.seq_index, status_i.seq_running};
        REG_LO_FTW:    rdata_c = cfg_o.lo_ftw;
        REG_DDS1_FTW:  rdata_c = cfg_o.dds1_ftw;
        REG_DDS2_FTW:  rdata_c = cfg_o.dds2_ftw;
        REG_CIC_LOG2R: rdata_c = {28'd0, cfg_o.cic_log2r};
        REG_ACQ_COUNT: rdata_c = cfg_o.acq_count;
        REG_DMA_BASE:  rdata_c = cfg_o.dma_base;
        REG_DELAY_A:   rdata_c = {8'd0, cfg_o.d_int_a, cfg_o.d_frac_a};
        REG_DELAY_B:   rdata_c = {8'd0, cfg_o.d_int_b, cfg_o.d_frac_b};
        REG_PWM0:      rdata_c = {22'd0, cfg_o.pwm0};
        REG_PWM1:      rdata_c = {22'd0, cfg_o.pwm1};
        REG_PWM2:      rdata_c = {22'd0, cfg_o.pwm2};
        REG_RELAY:     rdata_c = {28'd0, cfg_o.relay};
        REG_FIR_ADDR:  rdata_c = {23'd0, fir_addr_o};
        REG_DMA_COUNT: rdata_c = status_i.dma_written;
        default:       rdata_c = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (rd_fire) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= rdata_c;
      end
    end
  end

endmodule
