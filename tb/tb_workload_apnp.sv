// tb_workload_apnp: the phase-sensitive axial measurement cycle ("axial
// pulse and phase", AxPnP) on the complete system at its default sizes.
//
// In the cycle, an external pulse generator, the experiment's sequencer,
// drives the trigger input. Feedback is switched on its edges:
//   set 0  feedback off, detector in resonance; wait for the trigger rise
//   set 1  resonator detuned: path A feeds the ion signal back at
//          phi = 90 deg, A = 0.5; path B sends a DDS1 excitation pulse of
//          P clocks that imprints the starting phase
//   set 2  still detuned, pulse off: free evolution until the trigger falls
//   set 3  feedback off, acquisition started: the phase is read out; hold
// This testbench runs two cycles with different evolution times and checks
// the following:
//   * Every step is clock-exact. The pulse lasts P clocks. The evolution
//     ends a fixed 4 clocks after the trigger fall, so the evolution time
//     follows the pulse generator to one clock (8 ns).
//   * DAC A carries the 90-degree-shifted ion signal during sets 1 and 2.
//     The model interpolates the input between the delay taps.
//   * DAC B carries the pulse only inside set 1.
//   * Both outputs are at mid scale in sets 0 and 3.
//   * The read-out block has the ion amplitude and a constant phase, so the
//     phase can be read. It also has the same phase in both cycles, because
//     the LO and the model ion are coherent.
// The evolution times are scaled down from the reported 82 ms .. 2.4 s
// (1.0e7 .. 3.0e8 clocks) to tens of microseconds. The set delays are
// 32 bits wide, so only the clock count changes.
module tb_workload_apnp;
  import fbs_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int unsigned FTW_ION  = 32'd25426206;  // 740 kHz
  localparam int unsigned FTW_EXC  = 32'd25426206;  // dipole excitation at the ion frequency
  localparam int          ADC_AMP  = 3000;
  localparam int          P        = 250;           // excitation pulse, clocks
  localparam int          N_ACQ    = 16;
  localparam real         DELTA    = 15056.0 / 65536.0;
  localparam int          W90      = 8192;          // A = 0.5, phi = 90 deg

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
    repeat (400000) @(posedge clk);
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
  int gen_hist [$];
  always @(negedge clk) begin
    adc = 14'($rtoi($floor(real'(ADC_AMP) * $cos(2.0 * PI * real'(adc_phase) / 4294967296.0) + 0.5)));
    adc_phase = adc_phase + FTW_ION;
  end

  // monitors
  int  cyc = 0;
  int  set_start [4];
  int  pulse_len = 0;
  int  m_detuned = 0, m_off = 0, m_pulse = 0;
  bit  mon_on = 0;
  logic [2:0] idx_prev = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    adc_hist.push_back(int'($signed(adc)));
    if (adc_hist.size() > 64) void'(adc_hist.pop_front());
    gen_hist.push_back(int'($signed(dut.gen1_sin)));
    if (gen_hist.size() > 8) void'(gen_hist.pop_front());
    #1;
    if (mon_on && adc_hist.size() == 64) begin
      int idx, age, n;
      idx = int'(dut.seq_index);
      if (idx != int'(idx_prev) || set_start[idx] < 0) set_start[idx] = cyc;
      idx_prev = dut.seq_index;
      age = cyc - set_start[idx];
      n = adc_hist.size();
      if (age >= 6 + 44) begin   // the delay line holds samples of the previous source for D clocks
        case (idx)
          1, 2: begin
            real q, e;
            q = (1.0 - DELTA) * real'(adc_hist[n - 7 - 42]) + DELTA * real'(adc_hist[n - 7 - 43]);
            e = q * real'(W90) / 16384.0;
            chk(real'(int'(dac_a) - 8192) > e - 2.0 && real'(int'(dac_a) - 8192) < e + 2.0,
                $sformatf("set %0d: DAC A %0d, expected %f", idx, int'(dac_a) - 8192, e));
            m_detuned++;
          end
          default: begin
            chk(dac_a == 14'd8192 && dac_b == 14'd8192, $sformatf("set %0d: outputs not silent", idx));
            m_off++;
          end
        endcase
      end
      // DAC B: the DDS1 pulse, at unity gain, while set 1 is active (the
      // generator output enters the multiplexer one stage after the ADC
      // register, so it appears 5 clocks later); silent in the other sets
      if (idx == 1 && age >= 6 && age < P) begin
        chk(int'(dac_b) - 8192 == gen_hist[gen_hist.size() - 6],
            $sformatf("pulse: DAC B %0d, DDS1 %0d", int'(dac_b) - 8192, gen_hist[gen_hist.size() - 6]));
        pulse_len++;
      end else if (idx != 1 && age >= 6) begin
        chk(dac_b == 14'd8192, $sformatf("set %0d: DAC B not silent", idx));
      end
    end
  end

  task automatic write_set(input int k, input int wca, input int wsa, input src_sel_e sa,
                           input int wcb, input src_sel_e sb, input step_cond_e c,
                           input bit acq, input int delay);
    logic [11:0] b;
    b = REG_SET_BASE + 12'(16 * k);
    cpu.write(b,      {16'(wsa), 16'(wca)});
    cpu.write(b + 4,  {16'd0, 16'(wcb)});
    cpu.write(b + 8,  {25'd0, acq, c, sb, sa});
    cpu.write(b + 12, 32'(delay));
  endtask

  logic [31:0] r;
  real ph_cycle [2];
  int  t_evol [2] = '{20000, 45000};
  int  t_rise, t_fall;

  initial begin
    wait (rst_n);
    cpu.write(REG_LO_FTW, FTW_ION);
    cpu.write(REG_DDS1_FTW, FTW_EXC);
    cpu.write(REG_DELAY_A, {8'd0, 8'd42, 16'd15056});
    cpu.write(REG_DELAY_B, {8'd0, 8'd42, 16'd15056});
    cpu.write(REG_CIC_LOG2R, 8);                  // R = 256: CIC nulls suppress the 2f mixing term
    cpu.write(REG_ACQ_COUNT, N_ACQ);
    write_set(0, 0, 0, SRC_ZERO, 0, SRC_ZERO, COND_RISE, 0, 0);
    write_set(1, 0, W90, SRC_ADC, 16384, SRC_DDS1, COND_DELAY, 0, P);
    write_set(2, 0, W90, SRC_ADC, 0, SRC_ZERO, COND_FALL, 0, 0);
    write_set(3, 0, 0, SRC_ZERO, 0, SRC_ZERO, COND_HOLD, 1, 0);
    cpu.write(REG_SEQ_CFG, 4);
    for (int c = 0; c < 2; c++) begin
      foreach (set_start[k]) set_start[k] = -1;
      pulse_len = 0;
      cpu.write(REG_DMA_BASE, 32'h3000_0000 + 32'(c) * 32'h1000);
      cpu.write(REG_CTRL, 1);
      repeat (10) @(posedge clk);
      mon_on = 1;
      chk(dut.seq_index == 0 && dut.seq_running, "waiting for the pulse generator");
      repeat (100) @(posedge clk);
      // pulse generator: rising edge starts the cycle, falling edge ends the evolution
      #2 trig = 1;
      t_rise = cyc;
      repeat (t_evol[c]) @(posedge clk);
      #2 trig = 0;
      t_fall = cyc;
      repeat (20) @(posedge clk);
      chk(dut.seq_index == 3, "read-out set reached");
      // trigger seen at the next edge, strobe 3 edges later, set 1 loaded in the following clock
      chk(set_start[1] - t_rise == 4, $sformatf("detune started %0d clocks after the rise", set_start[1] - t_rise));
      chk(set_start[2] - set_start[1] == P, $sformatf("pulse set lasted %0d", set_start[2] - set_start[1]));
      chk(set_start[3] - t_fall == 4, $sformatf("evolution ended %0d clocks after the fall", set_start[3] - t_fall));
      chk(set_start[3] - set_start[1] == t_evol[c], $sformatf("cycle %0d: feedback on for %0d clocks, trigger high %0d",
          c, set_start[3] - set_start[1], t_evol[c]));
      chk(pulse_len == P - 6, $sformatf("excitation pulse checked for %0d clocks", pulse_len));
      if (pulse_len == P - 6) m_pulse++;
      // phase read-out
      begin
        int t = 0;
        do begin cpu.read(REG_STATUS, r); t++; end while (!r[5] && t < 20000);
        chk(r[5], "read-out acquisition done");
      end
      mon_on = 0;
      begin
        real sc = 0.0, ss = 0.0;
        for (int i = 4; i < N_ACQ; i++) begin
          logic [63:0] w;
          real iv, qv, mag, expm, ph;
          w = mem.read_word(32'h3000_0000 + 32'(c) * 32'h1000 + 32'(8 * i));
          iv = real'($signed(w[31:0])); qv = real'($signed(w[63:32]));
          mag = $sqrt(iv * iv + qv * qv);
          expm = real'(ADC_AMP) * 8191.0 / 32.0 * 256.0;
          chk(mag > 0.98 * expm && mag < 1.02 * expm, $sformatf("cycle %0d sample %0d |IQ| = %f", c, i, mag));
          sc += iv; ss += qv;
          ph = $atan2(qv, iv) * 180.0 / PI;
          if (i == 4) ph_cycle[c] = ph;
          else chk(ph - ph_cycle[c] < 1.0 && ph_cycle[c] - ph < 1.0, $sformatf("read-out phase wanders: %f", ph));
        end
      end
      cpu.write(REG_CTRL, 2);                     // stop
    end
    begin
      real d;
      d = ph_cycle[1] - ph_cycle[0];
      if (d > 180.0) d -= 360.0;
      if (d < -180.0) d += 360.0;
      chk(d < 1.0 && d > -1.0, $sformatf("coherent read-out phase differs by %f deg", d));
    end
    chk(perr == 0 && cpu.errors == 0, "bus errors");
    chk(m_detuned > 1000 && m_off > 100 && m_pulse == 2, "AxPnP mechanisms");
    $display("mechanisms: detuned %0d off %0d pulses %0d phases %f %f", m_detuned, m_off, m_pulse,
             ph_cycle[0], ph_cycle[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end
endmodule
