// tb_param_sequencer: programs the eight sets and checks
//  * delay steps: a set with delay N is applied for exactly N clocks;
//  * trigger steps: the set changes one clock after a rise / fall strobe and
//    not on the opposite edge;
//  * the applied contents equal what was written; acq_start pulses when a set
//    with the flag is loaded; running stops after the last set without loop,
//    and wraps to set 0 with loop; stop freezes the current set.
module tb_param_sequencer;
  import fbs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic we, start, stop, loop_en, rise, fall, running, acq;
  logic [2:0] addr, idx;
  logic [3:0] len;
  param_set_t wdata, active;
  param_set_t sets [8];
  int checks = 0, failures = 0;

  param_sequencer dut (.clk, .rst_n, .set_we_i(we), .set_addr_i(addr), .set_data_i(wdata),
                       .start_i(start), .stop_i(stop), .len_i(len), .loop_i(loop_en),
                       .trig_rise_i(rise), .trig_fall_i(fall), .active_o(active), .index_o(idx),
                       .running_o(running), .acq_start_o(acq));
  always #4 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t idx=%0d)", msg, $time, idx); end
  endtask

  // cycle counter and log of (cycle, index) changes and acq pulses
  int cyc = 0;
  int change_cyc [$];
  int change_idx [$];
  int acq_cyc [$];
  logic [2:0] last_idx = 0;
  logic last_run = 0;
  always @(posedge clk) begin
    cyc++;
    #1;
    if (running && (!last_run || idx != last_idx)) begin change_cyc.push_back(cyc); change_idx.push_back(int'(idx)); end
    if (acq) acq_cyc.push_back(cyc);
    if (running) begin
      chk(active == sets[idx], "active set differs from the written set");
    end
    last_idx = idx; last_run = running;
  end

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  initial begin
    we = 0; start = 0; stop = 0; loop_en = 0; rise = 0; fall = 0; len = 8; addr = 0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk(active == '0 && !running, "reset state");
    // sets: 0..3 delay 5,1,17,3 ; 4 rising edge ; 5 falling edge ; 6 delay 2 ; 7 delay 4
    for (int k = 0; k < 8; k++) begin
      sets[k].path_a.w_cos = 16'($urandom); sets[k].path_a.w_sin = 16'($urandom);
      sets[k].path_b.w_cos = 16'($urandom); sets[k].path_b.w_sin = 16'($urandom);
      sets[k].path_a.src = src_sel_e'(k % 4); sets[k].path_b.src = src_sel_e'((k + 1) % 4);
      sets[k].cond = (k == 4) ? COND_RISE : (k == 5) ? COND_FALL : COND_DELAY;
      sets[k].acq_trig = (k == 2);
      sets[k].delay = (k == 0) ? 5 : (k == 1) ? 1 : (k == 2) ? 17 : (k == 3) ? 3 : (k == 6) ? 2 : 4;
      @(negedge clk); we = 1; addr = 3'(k); wdata = sets[k];
    end
    @(negedge clk); we = 0;
    // run once without loop
    pulse(start);
    repeat (40) @(negedge clk);
    chk(idx == 4 && running, "waits in set 4 for a rising edge");
    pulse(fall);                  // wrong edge: no step
    repeat (3) @(negedge clk);
    chk(idx == 4, "falling edge ignored in a rising-edge set");
    pulse(rise);
    chk(idx == 5, "rising edge steps to set 5");
    repeat (5) @(negedge clk);
    pulse(fall);
    chk(idx == 6, "falling edge steps to set 6");
    repeat (20) @(negedge clk);
    chk(!running && idx == 7 && active == sets[7], "stops after the last set and keeps it");
    // durations of the delay sets from the log
    for (int i = 0; i + 1 < change_cyc.size(); i++) begin
      int d;
      d = change_cyc[i + 1] - change_cyc[i];
      if (change_idx[i] inside {0, 1, 2, 3, 6})
        chk(d == int'(sets[change_idx[i]].delay), $sformatf("set %0d lasted %0d clocks", change_idx[i], d));
    end
    chk(change_idx.size() == 8, "all eight sets visited");
    chk(acq_cyc.size() == 1 && change_cyc.size() > 2 && acq_cyc[0] == change_cyc[2], "acq_start with set 2");
    // loop with three sets, then stop
    len = 3; loop_en = 1;
    for (int k = 0; k < 3; k++) sets[k].cond = COND_DELAY;
    change_cyc.delete(); change_idx.delete();
    pulse(start);
    repeat (80) @(negedge clk);
    chk(running, "still running in loop mode");
    begin
      int wraps = 0;
      foreach (change_idx[i]) if (i > 0 && change_idx[i] == 0 && change_idx[i-1] == 2) wraps++;
      chk(wraps >= 2, "wraps from set 2 to set 0");
      foreach (change_idx[i]) chk(change_idx[i] < 3, "only sets 0..2 used");
    end
    pulse(stop);
    chk(!running, "stop");
    begin
      param_set_t held;
      held = active;
      repeat (30) @(negedge clk);
      chk(active == held && !running, "set frozen after stop");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
