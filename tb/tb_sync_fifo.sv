// tb_sync_fifo: the 2048 x 64 FIFO against a queue model under random
// pushes and pops; then fills it, checks full, count and the sticky overflow
// flag, and drains it in order.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  logic wr, rd, empty, full, ovf;
  logic [63:0] wd, rdat;
  logic [11:0] count;
  int checks = 0, failures = 0;
  logic [63:0] q [$];

  sync_fifo dut (.clk, .rst_n, .wr_en_i(wr), .wr_data_i(wd), .rd_en_i(rd), .rd_data_o(rdat),
                 .empty_o(empty), .full_o(full), .count_o(count), .overflow_o(ovf));
  always #4 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic step(input bit w, input bit r);
    @(negedge clk);
    checks++;
    if (count != 12'(q.size()) || empty != (q.size() == 0) || full != (q.size() == 2048)) begin
      failures++; if (failures < 5) $display("count %0d model %0d", count, q.size());
    end
    if (q.size() > 0) begin
      checks++;
      if (rdat != q[0]) begin failures++; if (failures < 5) $display("data %h exp %h", rdat, q[0]); end
    end
    wr = w; rd = r; wd = {$urandom, $urandom};
    @(posedge clk);
    #1;
    if (r && q.size() > 0) void'(q.pop_front());
    if (w && q.size() < 2048 + (r ? 1 : 0)) q.push_back(wd);
    wr = 0; rd = 0;
  endtask

  initial begin
    wr = 0; rd = 0; wd = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) step($urandom_range(0, 99) < 55, $urandom_range(0, 99) < 45);
    while (q.size() < 2048) step(1, 0);
    checks++; if (!full || ovf) begin failures++; $display("full/overflow wrong before overflow"); end
    step(1, 0);
    checks++; if (!ovf) begin failures++; $display("overflow not set"); end
    while (q.size() > 0) step(0, 1);
    step(0, 0);
    checks++; if (!empty || !ovf) begin failures++; $display("empty/sticky overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
