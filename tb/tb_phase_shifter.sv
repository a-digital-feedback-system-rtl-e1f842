// tb_phase_shifter: checks the IQ phase shifter three ways.
//  1. Impulse response: an impulse of height 8000 must produce
//     A cos(phi) at n = 0, (1-delta) A sin(phi) at n = floor(D),
//     delta A sin(phi) at n = floor(D)+1 and zero elsewhere, with the first
//     term 4 clocks after the input (D = 42, delta = 0.23 as in the 740 kHz
//     example).
//  2. Random input against a bit-exact model, including saturation.
//  3. A 740 kHz sine: gain A and phase shift phi measured by correlation for
//     several phi, within 0.5 degree and 1 %.
module tb_phase_shifter;
  logic clk = 0, rst_n = 0;
  logic signed [13:0] x, y;
  logic signed [15:0] wc, ws;
  logic [7:0] dint;
  logic [15:0] dfrac;
  int checks = 0, failures = 0;
  longint hist [$];
  localparam real PI = 3.14159265358979;

  phase_shifter dut (.clk, .rst_n, .x_i(x), .w_cos_i(wc), .w_sin_i(ws), .d_int_i(dint),
                     .d_frac_i(dfrac), .y_o(y));
  always #4 clk = ~clk;

  function automatic longint hx(int back);
    return (back < hist.size()) ? hist[hist.size() - 1 - back] : 0;
  endfunction

  function automatic longint model();
    longint i = hx(3);
    longint q = ((65536 - longint'(dfrac)) * hx(3 + dint) + longint'(dfrac) * hx(4 + dint)) >>> 16;
    longint s = (i * longint'(wc) + q * longint'(ws)) >>> 14;
    if (s > 8191) s = 8191;
    if (s < -8192) s = -8192;
    return s;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic set_w(input real a, input real phi_deg);
    wc = 16'($rtoi(16384.0 * a * $cos(phi_deg * PI / 180.0)));
    ws = 16'($rtoi(16384.0 * a * $sin(phi_deg * PI / 180.0)));
  endtask

  task automatic tick(input logic signed [13:0] v);
    @(negedge clk); x = v; hist.push_back(longint'(v)); @(posedge clk); #1;
  endtask

  initial begin
    longint resp [64];
    real sc, ss, amp, ph, a, ang;
    longint e, q0, q1;
    x = 0; wc = 0; ws = 0; dint = 42; dfrac = 16'd15073;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. impulse response
    set_w(0.9, 30.0);
    for (int k = 0; k < 60; k++) tick(0);
    tick(14'sd8000);
    resp[0] = longint'(y);
    for (int k = 1; k < 64; k++) begin tick(0); resp[k] = longint'(y); end
    // the impulse was applied at index 0; first output term 3 ticks later (4 register stages)
    for (int k = 0; k < 64; k++) begin
      e  = 0;
      q0 = ((65536 - 15073) * 8000) >>> 16;
      q1 = (15073 * 8000) >>> 16;
      if (k == 3)      e = (8000 * longint'(wc)) >>> 14;
      if (k == 3 + 42) e = (q0 * longint'(ws)) >>> 14;
      if (k == 3 + 43) e = (q1 * longint'(ws)) >>> 14;
      checks++;
      if (resp[k] != e) begin failures++; $display("h[%0d] = %0d, expected %0d", k - 3, resp[k], e); end
    end
    // 2. random data, random weights, several delays
    for (int r = 0; r < 6; r++) begin
      wc = 16'($urandom_range(0, 65535)); ws = 16'($urandom_range(0, 65535));
      dint = 8'($urandom_range(0, 200)); dfrac = 16'($urandom);
      for (int k = 0; k < 600; k++) begin
        tick(14'($urandom));
        if (k > 300) begin
          checks++;
          if (longint'(y) != model()) begin failures++; if (failures < 8) $display("rand: %0d vs %0d", y, model()); end
        end
      end
    end
    // 3. sine at 740 kHz, D = 42.23
    dint = 42; dfrac = 16'd15073;
    foreach (phis[p]) begin
      a = 0.5;
      set_w(a, phis[p]);
      sc = 0; ss = 0;
      for (int k = 0; k < 3000; k++) begin
        tick(14'($rtoi(6000.0 * $cos(2.0 * PI * 740.0e3 * 8.0e-9 * real'(hist.size())))));
        if (k > 400) begin
          ang = 2.0 * PI * 740.0e3 * 8.0e-9 * real'(hist.size() - 4);
          sc += real'(y) * $cos(ang);
          ss += real'(y) * $sin(ang);
        end
      end
      amp = 2.0 * $sqrt(sc * sc + ss * ss) / 2599.0 / 6000.0;
      ph  = $atan2(ss, sc) * 180.0 / PI;   // y = cos(wt - phi): correlation angle = +phi
      checks++;
      if ((ph - phis[p] > 0.5 || phis[p] - ph > 0.5) || amp < a * 0.99 || amp > a * 1.01) begin
        failures++; $display("phi %f: measured %f deg gain %f", phis[p], ph, amp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  real phis [5] = '{-90.0, -45.0, 0.0, 60.0, 90.0};
endmodule
