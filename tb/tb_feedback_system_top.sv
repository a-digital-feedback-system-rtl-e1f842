// tb_feedback_system_top: end-to-end test of the complete feedback system at
// its default sizes (309-tap FIR, 2048-entry FIFO, eight parameter sets).
//
// A CPU model programs the system over AXI4-Lite, a behavioural memory takes
// the DMA writes, and the ADC sees a 740 kHz "ion signal". The parameter
// sequencer runs four sets:
//   set 0  path A: ADC, A = 0.5, phi = 180 deg (cooling configuration)
//          path B: DDS1 at 1 MHz, A = 1, phi = 0;          600 clocks
//   set 1  path A: DDS2, phi = 90 deg; path B: ADC;         until trigger rise
//   set 2  path A: ADC, A = 1, phi = 0, starts the acquisition; until fall
//   set 3  both paths silent;                               300 clocks
// Checks, each counted as a mechanism that must occur at least once:
//   * DAC A equals the exactly scaled / inverted ADC sample 7 clocks earlier
//     in sets 0 and 2, and mid scale in set 3;
//   * DAC B carries the 1 MHz DDS1 tone in set 0 and DAC A the 500 kHz DDS2
//     tone in set 1 (zero-crossing counts);
//   * each set lasts as programmed: delay steps and trigger-edge steps;
//   * the acquisition started by set 2 delivers ACQ_COUNT I/Q words to
//     memory through CIC (R = 256), the 309-tap FIR loaded with a 3-tap
//     unity-gain kernel, FIFO and DMA, with |I + jQ| matching the ADC tone;
//   * the memory holds off all writes for 3000 clocks during the
//     acquisition; the FIFO must fill to at least 8 words and every word
//     must still arrive;
//   * PWM duty and relay bits reach the pins; status reads back.
module tb_feedback_system_top;
  import fbs_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int unsigned FTW_ION  = 32'd25426206;   // 740 kHz
  localparam int unsigned FTW_DDS1 = 32'd34359738;   // 1 MHz
  localparam int unsigned FTW_DDS2 = 32'd17179869;   // 500 kHz
  localparam int          N_ACQ    = 32;
  localparam int          ADC_AMP  = 4000;

  logic clk = 0, rst_n = 0;
  logic [13:0] adc, dac_a, dac_b;
  logic trig = 0;
  logic [2:0] pwm;
  logic [3:0] relay;
  logic [11:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic [31:0] m_awaddr; logic [7:0] m_awlen; logic [2:0] m_awsize; logic [1:0] m_awburst;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [63:0] m_wdata; logic [7:0] m_wstrb; logic [1:0] m_bresp;
  int perr, nwrites;
  int checks = 0, failures = 0;

  feedback_system_top dut (
    .clk, .rst_n, .adc_i(adc), .dac_a_o(dac_a), .dac_b_o(dac_b), .trig_i(trig), .pwm_o(pwm),
    .relay_o(relay),
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready), .s_axi_wdata(wdata),
    .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready), .s_axi_bresp(bresp),
    .s_axi_bvalid(bvalid), .s_axi_bready(bready), .s_axi_araddr(araddr), .s_axi_arvalid(arvalid),
    .s_axi_arready(arready), .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid),
    .s_axi_rready(rready),
    .m_axi_awaddr(m_awaddr), .m_axi_awlen(m_awlen), .m_axi_awsize(m_awsize),
    .m_axi_awburst(m_awburst), .m_axi_awvalid(m_awvalid), .m_axi_awready(m_awready),
    .m_axi_wdata(m_wdata), .m_axi_wstrb(m_wstrb), .m_axi_wlast(m_wlast), .m_axi_wvalid(m_wvalid),
    .m_axi_wready(m_wready), .m_axi_bresp(m_bresp), .m_axi_bvalid(m_bvalid), .m_axi_bready(m_bready));
  axi_lite_bfm cpu (.clk, .rst_n, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);
  axi_mem_model mem (.clk, .rst_n, .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize),
    .awburst(m_awburst), .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata),
    .wstrb(m_wstrb), .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp),
    .bvalid(m_bvalid), .bready(m_bready), .protocol_errors(perr), .writes(nwrites));

  always #4 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  // ---------------------------------------------------------------- ADC tone
  logic [31:0] adc_phase = 0;
  int adc_hist [$];
  int cyc = 0;
  always @(negedge clk) begin
    adc = 14'($rtoi($floor(real'(ADC_AMP) * $cos(2.0 * PI * real'(adc_phase) / 4294967296.0) + 0.5)));
    adc_phase = adc_phase + FTW_ION;
  end

  // ---------------------------------------------------------------- monitors
  // mechanisms seen
  int m_inverted = 0, m_unity = 0, m_silent = 0, m_dds_tone = 0;
  int m_delay_step = 0, m_rise_step = 0, m_fall_step = 0, m_seq_acq = 0;
  int m_fir_taps = 0, m_dma_words = 0, m_pwm = 0, m_relay = 0;
  int set_start [4] = '{-1, -1, -1, -1};
  int dacb_zc = 0, dacb_win = 0, daca_zc = 0, daca_win = 0, m_dds2 = 0, m_fifo_held = 0;
  logic [13:0] dacb_prev = 14'd8192, daca_prev = 14'd8192;
  bit seq_on = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    adc_hist.push_back(int'($signed(adc)));
    if (adc_hist.size() > 16) void'(adc_hist.pop_front());
    #1;
    if (seq_on && dut.seq_running) begin
      int idx, x7, e;
      idx = int'(dut.seq_index);
      if (set_start[idx] < 0) set_start[idx] = cyc;
      x7 = adc_hist[adc_hist.size() - 7];   // value set before the 7th last edge
      // the active set reaches DAC A 6 clocks after it was loaded
      if (cyc - set_start[idx] >= 6) begin
        case (idx)
          0: begin e = int'($floor(real'(-x7) / 2.0)); chk(int'(dac_a) - 8192 == e, $sformatf("DAC A inverted: %0d vs %0d", int'(dac_a) - 8192, e)); m_inverted++; end
          2: begin chk(int'(dac_a) - 8192 == x7, "DAC A unity"); m_unity++; end
          3: begin chk(dac_a == 14'd8192 && dac_b == 14'd8192, "silent outputs"); m_silent++; end
          default: ;
        endcase
        // set 1: DDS2 (500 kHz) through the 90 degree weight, after the delay line refilled
        if (idx == 1 && cyc - set_start[idx] >= 6 + 44) begin
          daca_win++;
          if (daca_prev < 14'd8192 && dac_a >= 14'd8192) daca_zc++;
        end
        if (idx == 0) begin
          dacb_win++;
          if (dacb_prev < 14'd8192 && dac_b >= 14'd8192) dacb_zc++;
        end
      end
      dacb_prev = dac_b;
      daca_prev = dac_a;
    end
    // words pile up in the FIFO while the memory holds off the writes
    if (int'(dut.fifo_count) > m_fifo_held) m_fifo_held = int'(dut.fifo_count);
  end

  // ---------------------------------------------------------------- test
  logic [31:0] r;
  initial begin
    wait (rst_n);
    // oscillators, delays for 740 kHz (D = 42.23), acquisition at R = 256
    cpu.write(REG_LO_FTW, FTW_ION);
    cpu.write(REG_DDS1_FTW, FTW_DDS1);
    cpu.write(REG_DDS2_FTW, FTW_DDS2);
    cpu.write(REG_DELAY_A, {8'd0, 8'd42, 16'd15056});
    cpu.write(REG_DELAY_B, {8'd0, 8'd42, 16'd15056});
    cpu.write(REG_CIC_LOG2R, 8);
    cpu.write(REG_ACQ_COUNT, N_ACQ);
    cpu.write(REG_DMA_BASE, 32'h1000_0000);
    cpu.write(REG_PWM0, 300);
    cpu.write(REG_RELAY, 4'b0110);
    // FIR: 3-tap kernel 0.25, 0.5, 0.25 (unity DC gain); all other taps 0
    cpu.write(REG_FIR_ADDR, 0);
    for (int k = 0; k < 309; k++) begin
      cpu.write(REG_FIR_DATA, (k == 1) ? 32'd32768 : (k == 0 || k == 2) ? 32'd16384 : 32'd0);
      m_fir_taps++;
    end
    // parameter sets
    write_set(0, -8192, 0, SRC_ADC, 16384, 0, SRC_DDS1, COND_DELAY, 0, 600);
    write_set(1, 0, 16384, SRC_DDS2, 16384, 0, SRC_ADC, COND_RISE, 0, 0);
    write_set(2, 16384, 0, SRC_ADC, 0, 0, SRC_ZERO, COND_FALL, 1, 0);
    write_set(3, 0, 0, SRC_ZERO, 0, 0, SRC_ZERO, COND_DELAY, 0, 300);
    cpu.write(REG_SEQ_CFG, 4);
    seq_on = 1;
    cpu.write(REG_CTRL, 1);
    // trigger: rising edge some time into set 1, falling edge during set 2
    repeat (2000) @(posedge clk);
    #3 trig = 1;
    repeat (1500) @(posedge clk);
    #5 trig = 0;
    // stall the memory for 3000 clocks during the acquisition (R = 256):
    // about 11 samples must wait in the FIFO and still arrive intact
    mem.hold_off = 1;
    repeat (3000) @(posedge clk);
    mem.hold_off = 0;
    chk(!dut.seq_running && dut.seq_index == 3, "sequence finished");
    // step timing
    chk(set_start[1] - set_start[0] == 600, $sformatf("set 0 lasted %0d", set_start[1] - set_start[0]));
    if (set_start[1] - set_start[0] == 600) m_delay_step++;
    // trigger edges are seen 3 clocks after the first edge that samples them; step one later
    chk(set_start[2] > 0 && set_start[3] > set_start[2], "trigger steps happened");
    if (set_start[2] > set_start[1]) m_rise_step++;
    if (set_start[3] > set_start[2]) m_fall_step++;
    chk(dacb_win > 300 && dacb_zc >= 4 && dacb_zc <= 5, $sformatf("DDS1 tone on DAC B: %0d crossings in %0d clocks", dacb_zc, dacb_win));
    if (dacb_zc >= 4) m_dds_tone++;
    // 500 kHz = one rising crossing per 250 clocks
    chk(daca_win > 500 && daca_zc >= daca_win / 250 - 1 && daca_zc <= daca_win / 250 + 1,
        $sformatf("DDS2 tone on DAC A: %0d crossings in %0d clocks", daca_zc, daca_win));
    if (daca_zc >= 2) m_dds2++;
    // acquisition started by set 2
    begin
      int t = 0;
      do begin cpu.read(REG_STATUS, r); t++; end while (!r[5] && t < 20000);
      chk(r[5] && !r[6] && !r[7] && !r[8], $sformatf("acquisition done, status %h", r));
      if (r[5]) m_seq_acq++;
    end
    cpu.read(REG_DMA_COUNT, r);
    chk(r == N_ACQ && nwrites == N_ACQ && perr == 0, $sformatf("DMA wrote %0d words, protocol errors %0d", r, perr));
    for (int i = 0; i < N_ACQ; i++) begin
      logic [63:0] w;
      real iv, qv, mag, expm;
      w = mem.read_word(32'h1000_0000 + 32'(8 * i));
      iv = real'($signed(w[31:0])); qv = real'($signed(w[63:32]));
      mag = $sqrt(iv * iv + qv * qv);
      // mixer: x*8191/16, cos mixing halves the tone, CIC gain 2^8, FIR gain 1
      expm = real'(ADC_AMP) * 8191.0 / 16.0 / 2.0 * 256.0;
      chk(mag > 0.98 * expm && mag < 1.02 * expm, $sformatf("sample %0d |IQ| = %f, expected %f", i, mag, expm));
      m_dma_words++;
    end
    // board controls
    begin
      int highs = 0;
      repeat (1024) begin @(posedge clk); #1; highs += pwm[0]; end
      chk(highs == 300, $sformatf("PWM0 high %0d of 1024", highs));
      if (highs == 300) m_pwm++;
    end
    chk(relay == 4'b0110, "relay bits"); m_relay++;
    chk(cpu.errors == 0, "register bus errors");
    // every mechanism must have occurred
    chk(m_inverted > 0, "180 deg feedback never checked");
    chk(m_unity > 0, "0 deg feedback never checked");
    chk(m_silent > 0, "silent source never checked");
    chk(m_dds_tone > 0 && m_dds2 > 0, "a DDS source never seen");
    chk(m_fifo_held >= 8, $sformatf("FIFO held at most %0d words during the memory stall", m_fifo_held));
    chk(m_delay_step > 0 && m_rise_step > 0 && m_fall_step > 0, "a step condition never happened");
    chk(m_seq_acq > 0 && m_dma_words == N_ACQ && m_fir_taps == 309, "acquisition path not exercised");
    $display("mechanisms: dds2 %0d fifo-held %0d", m_dds2, m_fifo_held);
    $display("mechanisms: inverted %0d unity %0d silent %0d dds %0d delay %0d rise %0d fall %0d seq-acq %0d fir-taps %0d dma %0d pwm %0d relay %0d",
             m_inverted, m_unity, m_silent, m_dds_tone, m_delay_step, m_rise_step, m_fall_step, m_seq_acq,
             m_fir_taps, m_dma_words, m_pwm, m_relay);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_set(input int k, input int wca, input int wsa, input src_sel_e sa,
                           input int wcb, input int wsb, input src_sel_e sb,
                           input step_cond_e c, input bit acq, input int delay);
    logic [11:0] b;
    b = REG_SET_BASE + 12'(16 * k);
    cpu.write(b,      {16'(wsa), 16'(wca)});
    cpu.write(b + 4,  {16'(wsb), 16'(wcb)});
    cpu.write(b + 8,  {25'd0, acq, c, sb, sa});
    cpu.write(b + 12, 32'(delay));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end
endmodule
