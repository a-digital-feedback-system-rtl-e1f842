// tb_acq_droop: passband of the acquisition chain. The 309-tap FIR removes
// the droop of the CIC decimator.
//
// The complete system runs at its default sizes with the fastest decimation,
// R = 64, so the output rate is 1.953 MHz. Test tones at the local
// oscillator frequency plus k output-rate bins (k = 0 .. 131, up to 500 kHz
// offset) are acquired in two passes:
//   1. With the FIR at its reset state, a unit impulse. The measured
//      amplitude must follow the three-stage CIC response
//      C(v) = |sin(pi v) / (R sin(pi v / R))|^3, with v the offset in units
//      of the output rate, within 0.2 %. C falls to about 0.71 (-3 dB) at
//      500 kHz.
//   2. With a droop-compensating kernel loaded through the register port.
//      The amplitude must be flat, 1.0 within 0.2 %.
// The kernel is designed here. Its target response is 1/C(v) up to
// v = 0.28, rolling off to zero at v = 0.36 with a raised cosine. The kernel
// is the frequency-sampled inverse transform of that target, with a
// Blackman window over the 309 taps. It is quantised to the filter's Q2.16
// format.
// Each measurement is a 512-sample DFT bin of the stored I/Q words. The
// first 320 samples after the tone change are skipped while the filters
// settle. A tone of k bins is coherent over 512 samples, so the bin sees no
// leakage.
module tb_acq_droop;
  import fbs_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int unsigned FTW_LO  = 32'd25426206;   // 740 kHz
  localparam int          LOG2R   = 6;
  localparam int          R       = 64;
  localparam int          TAPS    = 309;
  localparam int          NDFT    = 512;
  localparam int          SKIP    = 320;
  localparam int          ADC_AMP = 4000;
  localparam int unsigned BIN_FTW = 32'd131072;     // 2^32 / (R * NDFT)

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
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  // test tone
  logic [31:0] adc_phase = 0;
  logic [31:0] tone_ftw = FTW_LO;
  always @(negedge clk) begin
    adc = 14'($rtoi($floor(real'(ADC_AMP) * $cos(2.0 * PI * real'(adc_phase) / 4294967296.0) + 0.5)));
    adc_phase = adc_phase + tone_ftw;
  end

  function automatic real cic_resp(input real v);
    real s;
    if (v == 0.0) return 1.0;
    s = $sin(PI * v) / (real'(R) * $sin(PI * v / real'(R)));
    return s * s * s;
  endfunction

  function automatic real target(input real v);
    real a;
    a = (v < 0.0) ? -v : v;
    if (a <= 0.28) return 1.0 / cic_resp(a);
    if (a >= 0.36) return 0.0;
    return 0.5 * (1.0 + $cos(PI * (a - 0.28) / 0.08)) / cic_resp(a);
  endfunction

  int coef [TAPS];
  task automatic design_kernel();
    localparam int NG = 2048;
    real h [TAPS];
    real sum = 0.0;
    for (int n = 0; n < TAPS; n++) begin
      real acc = 0.0, w, m;
      m = real'(n - (TAPS - 1) / 2);
      for (int k = -NG / 2; k < NG / 2; k++) begin
        real v;
        v = real'(k) / real'(NG);
        acc += target(v) * $cos(2.0 * PI * v * m);
      end
      w = 0.42 - 0.5 * $cos(2.0 * PI * real'(n) / real'(TAPS - 1)) + 0.08 * $cos(4.0 * PI * real'(n) / real'(TAPS - 1));
      h[n] = acc / real'(NG) * w;
      sum += h[n];
    end
    for (int n = 0; n < TAPS; n++) coef[n] = $rtoi($floor(h[n] / sum * 65536.0 + 0.5));
  endtask

  // one acquisition at tone offset k bins; returns the measured gain
  int acq_no = 0;
  task automatic measure(input int k, output real gain);
    logic [31:0] r;
    logic [31:0] base;
    real sr = 0.0, si = 0.0, best = 0.0;
    tone_ftw = FTW_LO + 32'(k) * BIN_FTW;
    base = 32'h4000_0000 + 32'(acq_no) * 32'h0001_0000;
    acq_no++;
    cpu.write(REG_DMA_BASE, base);
    cpu.write(REG_CTRL, 4);
    begin
      int t = 0;
      do begin repeat (512) @(posedge clk); cpu.read(REG_STATUS, r); t++; end while (!r[5] && t < 2000);
      chk(r[5] && !r[6] && !r[7] && !r[8], $sformatf("acquisition done, status %h", r));
    end
    // the tone appears at -k or +k bins depending on the mixing sign
    for (int sgn = -1; sgn <= 1; sgn += 2) begin
      sr = 0.0; si = 0.0;
      for (int n = 0; n < NDFT; n++) begin
        logic [63:0] w;
        real iv, qv, a;
        w = mem.read_word(base + 32'(8 * (SKIP + n)));
        iv = real'($signed(w[31:0])); qv = real'($signed(w[63:32]));
        a = -2.0 * PI * real'(sgn * k) * real'(n) / real'(NDFT);
        sr += iv * $cos(a) - qv * $sin(a);
        si += iv * $sin(a) + qv * $cos(a);
      end
      if ($sqrt(sr * sr + si * si) > best) best = $sqrt(sr * sr + si * si);
    end
    gain = best / real'(NDFT) / (real'(ADC_AMP) * 8191.0 / 32.0 * 256.0);
  endtask

  int ks [6] = '{0, 26, 52, 79, 105, 131};
  int m_droop = 0, m_flat = 0;
  initial begin
    real g;
    wait (rst_n);
    cpu.write(REG_LO_FTW, FTW_LO);
    cpu.write(REG_CIC_LOG2R, LOG2R);
    cpu.write(REG_ACQ_COUNT, SKIP + NDFT);
    // pass 1: reset FIR (unit impulse) shows the bare CIC droop
    foreach (ks[i]) begin
      real e;
      measure(ks[i], g);
      e = cic_resp(real'(ks[i]) / real'(NDFT));
      $display("offset %0d bins (%0d Hz): gain %f, CIC model %f", ks[i], ks[i] * 3815, g, e);
      chk(g > 0.998 * e && g < 1.002 * e, $sformatf("uncompensated gain %f, expected %f", g, e));
      m_droop++;
    end
    chk(cic_resp(real'(ks[5]) / real'(NDFT)) < 0.75, "the test reaches a clear droop");
    // pass 2: droop-compensating kernel
    design_kernel();
    cpu.write(REG_FIR_ADDR, 0);
    for (int n = 0; n < TAPS; n++) cpu.write(REG_FIR_DATA, 32'(coef[n]));
    foreach (ks[i]) begin
      measure(ks[i], g);
      $display("offset %0d bins: compensated gain %f", ks[i], g);
      chk(g > 0.998 && g < 1.002, $sformatf("compensated gain %f at %0d bins", g, ks[i]));
      m_flat++;
    end
    chk(perr == 0 && cpu.errors == 0, "bus errors");
    chk(m_droop == 6 && m_flat == 6, "both passes ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end
endmodule
