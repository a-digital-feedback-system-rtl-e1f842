// tb_axi_lite_regs: writes every configuration register through the AXI4-Lite
// port and checks the decoded configuration fields and read-back; checks the
// control strobes (one clock each), the FIR coefficient write with address
// auto-increment, parameter-set writes (the emitted set must hold all four
// words) and the status read.
module tb_axi_lite_regs;
  import fbs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [11:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  cfg_t cfg;
  status_t status;
  logic seq_start, seq_stop, acq_start, fir_we, set_we;
  logic [8:0] fir_addr;
  logic [17:0] fir_data;
  logic [2:0] set_addr;
  param_set_t set_data;
  int checks = 0, failures = 0;

  axi_lite_regs dut (.clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready), .s_axi_wdata(wdata),
    .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready), .s_axi_bresp(bresp),
    .s_axi_bvalid(bvalid), .s_axi_bready(bready), .s_axi_araddr(araddr), .s_axi_arvalid(arvalid),
    .s_axi_arready(arready), .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid),
    .s_axi_rready(rready), .cfg_o(cfg), .seq_start_o(seq_start), .seq_stop_o(seq_stop),
    .acq_start_o(acq_start), .fir_we_o(fir_we), .fir_addr_o(fir_addr), .fir_data_o(fir_data),
    .set_we_o(set_we), .set_addr_o(set_addr), .set_data_o(set_data), .status_i(status));
  axi_lite_bfm cpu (.clk, .rst_n, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp,
    .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);
  always #4 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // strobe and write monitors
  int n_start = 0, n_stop = 0, n_acq = 0;
  logic [17:0] fir_mem [512];
  param_set_t got_sets [8];
  always @(posedge clk) if (rst_n) begin
    if (seq_start) n_start++;
    if (seq_stop) n_stop++;
    if (acq_start) n_acq++;
    if (fir_we) fir_mem[fir_addr] <= fir_data;
    if (set_we) got_sets[set_addr] <= set_data;
  end

  logic [31:0] r;
  initial begin
    status = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(cfg.cic_log2r == 6 && cfg.seq_len == 8, "reset defaults");
    cpu.write(REG_LO_FTW, 32'h0184_2B3A);
    cpu.write(REG_DDS1_FTW, 32'h1111_2222);
    cpu.write(REG_DDS2_FTW, 32'h3333_4444);
    cpu.write(REG_CIC_LOG2R, 12);
    cpu.write(REG_ACQ_COUNT, 2048);
    cpu.write(REG_DMA_BASE, 32'h1E00_0000);
    cpu.write(REG_DELAY_A, {8'd0, 8'd42, 16'd15073});
    cpu.write(REG_DELAY_B, {8'd0, 8'd7, 16'd100});
    cpu.write(REG_PWM0, 10); cpu.write(REG_PWM1, 500); cpu.write(REG_PWM2, 1023);
    cpu.write(REG_RELAY, 4'b1010);
    cpu.write(REG_SEQ_CFG, 32'h105);
    chk(cfg.lo_ftw == 32'h0184_2B3A && cfg.dds1_ftw == 32'h1111_2222 && cfg.dds2_ftw == 32'h3333_4444, "ftw fields");
    chk(cfg.cic_log2r == 12 && cfg.acq_count == 2048 && cfg.dma_base == 32'h1E00_0000, "acquisition fields");
    chk(cfg.d_int_a == 42 && cfg.d_frac_a == 15073 && cfg.d_int_b == 7 && cfg.d_frac_b == 100, "delay fields");
    chk(cfg.pwm0 == 10 && cfg.pwm1 == 500 && cfg.pwm2 == 1023 && cfg.relay == 4'b1010, "pwm/relay fields");
    chk(cfg.seq_len == 5 && cfg.seq_loop, "sequencer config");
    cpu.read(REG_LO_FTW, r);    chk(r == 32'h0184_2B3A, "read LO");
    cpu.read(REG_DELAY_A, r);   chk(r == {8'd0, 8'd42, 16'd15073}, "read delay A");
    cpu.read(REG_SEQ_CFG, r);   chk(r == 32'h105, "read seq cfg");
    cpu.read(REG_PWM1, r);      chk(r == 500, "read pwm1");
    cpu.read(12'hFF0, r);       chk(r == 0, "unmapped reads zero");
    // strobes
    cpu.write(REG_CTRL, 32'h1); cpu.write(REG_CTRL, 32'h2); cpu.write(REG_CTRL, 32'h4); cpu.write(REG_CTRL, 32'h5);
    repeat (2) @(negedge clk);
    chk(n_start == 2 && n_stop == 1 && n_acq == 2, $sformatf("strobes %0d %0d %0d", n_start, n_stop, n_acq));
    // FIR coefficients with auto-increment
    cpu.write(REG_FIR_ADDR, 300);
    for (int k = 0; k < 9; k++) cpu.write(REG_FIR_DATA, 32'(1000 * k - 3000));
    repeat (2) @(negedge clk);
    for (int k = 0; k < 9; k++) chk(fir_mem[300 + k] == 18'(1000 * k - 3000), $sformatf("coefficient %0d", 300 + k));
    cpu.read(REG_FIR_ADDR, r);  chk(r == 309, "address incremented");
    // parameter set 5
    cpu.write(REG_SET_BASE + 12'h050, {16'h1234, 16'h8765});
    cpu.write(REG_SET_BASE + 12'h054, {16'h0F0F, 16'hF0F0});
    cpu.write(REG_SET_BASE + 12'h058, 32'b1_10_10_01);
    cpu.write(REG_SET_BASE + 12'h05C, 32'd123456);
    repeat (2) @(negedge clk);
    chk(got_sets[5].path_a.w_cos == 16'h8765 && got_sets[5].path_a.w_sin == 16'h1234, "set 5 path a");
    chk(got_sets[5].path_b.w_cos == 16'hF0F0 && got_sets[5].path_b.w_sin == 16'h0F0F, "set 5 path b");
    chk(got_sets[5].path_a.src == SRC_DDS1 && got_sets[5].path_b.src == SRC_DDS2 && got_sets[5].cond == COND_FALL && got_sets[5].acq_trig, "set 5 flags");
    chk(got_sets[5].delay == 123456, "set 5 delay");
    cpu.read(REG_SET_BASE + 12'h05C, r); chk(r == 123456, "read set word");
    // status
    status.seq_running = 1; status.seq_index = 3'd6; status.acq_done = 1; status.dma_written = 777;
    cpu.read(REG_STATUS, r);    chk(r == 32'h2D, $sformatf("status %h", r));
    cpu.read(REG_DMA_COUNT, r); chk(r == 777, "dma count");
    chk(cpu.errors == 0, "bus errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
