// tb_workload_seo: the self-excited-oscillator (SEO) operating point on the
// complete system at its default sizes.
//
// In an SEO the ion's damping is cancelled by feedback whose gain a software
// control loop keeps adjusting. Each loop iteration acquires a block of the
// ion signal, measures the ion amplitude from it, and writes a new gain. The
// reported operating point is a decimation of 4096 with 2048 samples per
// block, about 67 ms of signal per iteration. This testbench plays the CPU
// for two such iterations:
//   * path A feeds the ion signal back at phi = 0 (gain g); path B drives a
//     second electrode with the same signal at phi = 180 deg and 0.75 g, the
//     cancellation channel; one COND_HOLD set that starts the acquisition;
//   * the acquired 2048 I/Q words must all be in memory, with |I + jQ| equal
//     to the ion tone amplitude (LO on the ion frequency, pass-through FIR);
//     the block must take 2048 * 4096 clocks plus the pipeline latency;
//   * from the measured amplitude a proportional controller computes the
//     next gain, which is written to the set and applied by restarting the
//     sequencer; both DAC outputs must follow the programmed gains exactly.
// The ion is modelled as a fixed 740 kHz tone: the physics of the loop
// (amplitude growth under the applied gain) is outside the FPGA. The
// controller is a simple P loop, not the FFT/peak-detect/PID software of
// the real system.
module tb_workload_seo;
  import fbs_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int unsigned FTW_ION = 32'd25426206;   // 740 kHz
  localparam int          LOG2R   = 12;             // decimation 4096
  localparam int          N_ACQ   = 2048;
  localparam int          ADC_AMP = 3000;
  localparam int          N_ITER  = 2;

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
    repeat (N_ITER * (N_ACQ + 8) * 4096 + 100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  // ion signal
  logic [31:0] adc_phase = 0;
  int adc_hist [$];
  always @(negedge clk) begin
    adc = 14'($rtoi($floor(real'(ADC_AMP) * $cos(2.0 * PI * real'(adc_phase) / 4294967296.0) + 0.5)));
    adc_phase = adc_phase + FTW_ION;
  end

  // DAC monitor: phi = 0 / 180 deg with no sine weight is the delayed input
  // times w_cos, so both outputs are known exactly from the ADC sample 7
  // clocks earlier.
  int   wc_a = 0, wc_b = 0;
  bit   mon_on = 0;
  int   m_dac = 0;
  always @(posedge clk) if (rst_n) begin
    adc_hist.push_back(int'($signed(adc)));
    if (adc_hist.size() > 16) void'(adc_hist.pop_front());
    #1;
    if (mon_on) begin
      int x7, ea, eb;
      x7 = adc_hist[adc_hist.size() - 7];
      ea = (x7 * wc_a) >>> 14;
      eb = (x7 * wc_b) >>> 14;
      chk(int'(dac_a) - 8192 == ea && int'(dac_b) - 8192 == eb,
          $sformatf("DAC A %0d / B %0d, expected %0d / %0d", int'(dac_a) - 8192, int'(dac_b) - 8192, ea, eb));
      m_dac++;
    end
  end

  task automatic write_hold_set(input int wca, input int wcb);
    cpu.write(REG_SET_BASE,      {16'd0, 16'(wca)});
    cpu.write(REG_SET_BASE + 4,  {16'd0, 16'(wcb)});
    cpu.write(REG_SET_BASE + 8,  {25'd0, 1'b1, COND_HOLD, SRC_ADC, SRC_ADC});
    cpu.write(REG_SET_BASE + 12, 32'd0);
  endtask

  logic [31:0] r;
  int   gain, t_start, t_done, m_blocks = 0, m_updates = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    real setpoint, meas;
    wait (rst_n);
    cpu.write(REG_LO_FTW, FTW_ION);
    cpu.write(REG_DELAY_A, {8'd0, 8'd42, 16'd15056});
    cpu.write(REG_DELAY_B, {8'd0, 8'd42, 16'd15056});
    cpu.write(REG_CIC_LOG2R, LOG2R);
    cpu.write(REG_ACQ_COUNT, N_ACQ);
    cpu.write(REG_SEQ_CFG, 1);
    gain = 2000;                                  // A = 0.122
    setpoint = 1.25 * real'(ADC_AMP) * 8191.0 / 32.0 * 256.0;
    for (int it = 0; it < N_ITER; it++) begin
      cpu.write(REG_DMA_BASE, 32'h2000_0000 + 32'(it) * 32'h0010_0000);
      write_hold_set(gain, -(gain * 3) / 4);
      mon_on = 0;
      cpu.write(REG_CTRL, 1);                     // (re)load set 0: new gain, start acquisition
      t_start = int'(cyc);
      repeat (8) @(posedge clk);
      wc_a = gain; wc_b = -(gain * 3) / 4;
      mon_on = 1;
      do begin
        repeat (4096) @(posedge clk);
        cpu.read(REG_STATUS, r);
      end while (!r[5]);
      t_done = int'(cyc);
      mon_on = 0;
      chk(!r[6] && !r[7] && !r[8], $sformatf("no overflow/overrun/bus error, status %h", r));
      // 2048 outputs at one per 4096 clocks; the first comes within two
      // decimation periods of the start, the poll adds up to 4096 + a read
      chk(t_done - t_start >= (N_ACQ - 1) * 4096 && t_done - t_start <= (N_ACQ + 2) * 4096 + 200,
          $sformatf("block took %0d clocks", t_done - t_start));
      cpu.read(REG_DMA_COUNT, r);
      chk(r == N_ACQ && nwrites == (it + 1) * N_ACQ && perr == 0,
          $sformatf("DMA count %0d, writes %0d, protocol errors %0d", r, nwrites, perr));
      // software side: amplitude from the block (skip the CIC settling)
      meas = 0.0;
      for (int i = 4; i < N_ACQ; i++) begin
        logic [63:0] w;
        real iv, qv, mag, expm;
        w = mem.read_word(32'h2000_0000 + 32'(it) * 32'h0010_0000 + 32'(8 * i));
        iv = real'($signed(w[31:0])); qv = real'($signed(w[63:32]));
        mag = $sqrt(iv * iv + qv * qv);
        expm = real'(ADC_AMP) * 8191.0 / 32.0 * 256.0;
        chk(mag > 0.98 * expm && mag < 1.02 * expm, $sformatf("block %0d sample %0d |IQ| = %f", it, i, mag));
        meas += mag;
      end
      meas = meas / real'(N_ACQ - 4);
      m_blocks++;
      // P controller: raise the gain while the amplitude is below the setpoint
      begin
        int ng;
        ng = gain + $rtoi(8000.0 * (setpoint - meas) / setpoint);
        chk(ng > gain, $sformatf("controller: gain %0d -> %0d", gain, ng));
        if (ng != gain) m_updates++;
        gain = ng;
      end
    end
    chk(cpu.errors == 0, "register bus errors");
    chk(m_blocks == N_ITER && m_updates == N_ITER && m_dac > 1000, "SEO loop mechanisms");
    $display("mechanisms: blocks %0d gain updates %0d dac samples checked %0d final gain %0d",
             m_blocks, m_updates, m_dac, gain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end
endmodule
