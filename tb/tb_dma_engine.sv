// tb_dma_engine: the DMA engine with a 2048-entry FIFO in front of it and a
// behavioural memory behind it. Samples (a counter pattern) arrive as strobes
// every few clocks; the engine must accept exactly num_samples of them
// (capture window), write them in order to base + 8*i, report done and the
// count, and obey the AXI handshake rules under random stalls. Runs two
// acquisitions, the second at a different address and length.
module tb_dma_engine;
  logic clk = 0, rst_n = 0;
  logic start, svalid, capture, fifo_rd, empty, full, ovf;
  logic [31:0] base, nsamp, written;
  logic [63:0] sdata, fdata;
  logic [11:0] cnt;
  logic [31:0] awaddr; logic [7:0] awlen; logic [2:0] awsize; logic [1:0] awburst;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready, busy, done, err;
  logic [63:0] wdata; logic [7:0] wstrb; logic [1:0] bresp;
  int perr, nwrites;
  int checks = 0, failures = 0;

  sync_fifo fifo (.clk, .rst_n, .wr_en_i(svalid && capture), .wr_data_i(sdata), .rd_en_i(fifo_rd),
                  .rd_data_o(fdata), .empty_o(empty), .full_o(full), .count_o(cnt), .overflow_o(ovf));
  dma_engine dut (.clk, .rst_n, .start_i(start), .base_addr_i(base), .num_samples_i(nsamp),
                  .sample_valid_i(svalid), .capture_o(capture), .fifo_data_i(fdata),
                  .fifo_empty_i(empty), .fifo_rd_o(fifo_rd),
                  .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize),
                  .m_axi_awburst(awburst), .m_axi_awvalid(awvalid), .m_axi_awready(awready),
                  .m_axi_wdata(wdata), .m_axi_wstrb(wstrb), .m_axi_wlast(wlast),
                  .m_axi_wvalid(wvalid), .m_axi_wready(wready), .m_axi_bresp(bresp),
                  .m_axi_bvalid(bvalid), .m_axi_bready(bready),
                  .busy_o(busy), .done_o(done), .err_o(err), .written_o(written));
  axi_mem_model mem (.clk, .rst_n, .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
                     .wdata, .wstrb, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready,
                     .protocol_errors(perr), .writes(nwrites));
  always #4 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // sample source: strobe every 3..8 clocks, data = running counter
  longint sample_no = 0;
  always @(posedge clk) begin
    if (!rst_n) begin svalid <= 0; sdata <= 0; end
    else if (!svalid && $urandom_range(0, 3) == 0) begin
      svalid <= 1; sdata <= {32'hA5A5_0000, 32'(sample_no)}; sample_no++;
    end else svalid <= 0;
  end

  task automatic acquire(input logic [31:0] b, input int n);
    longint first;
    int t = 0;
    @(negedge clk);
    base = b; nsamp = n; start = 1;
    @(negedge clk);
    start = 0;
    first = sample_no;    // the strobe on view now or the next one is the first accepted
    checks++; if (!busy || !capture || done) begin failures++; $display("not busy after start"); end
    while (!done && t < 100000) begin @(negedge clk); t++; end
    checks++; if (written != 32'(n) || busy) begin failures++; $display("written %0d of %0d", written, n); end
    for (int i = 0; i < n; i++) begin
      logic [63:0] w = mem.read_word(b + 32'(8 * i));
      checks++;
      if (w[63:32] != 32'hA5A5_0000 || (i > 0 && w[31:0] != mem.read_word(b + 32'(8 * (i - 1)))[31:0] + 1)) begin
        failures++; if (failures < 6) $display("word %0d = %h", i, w);
      end
    end
    checks++; if (mem.read_word(b + 32'(8 * n)) != 64'hDEAD_BEEF_DEAD_BEEF) begin failures++; $display("wrote past the end"); end
    checks++; if (!empty) begin failures++; $display("FIFO not drained"); end
    checks++; if (!(longint'(mem.read_word(b)) - longint'({32'hA5A5_0000, 32'(first)}) inside {-1, 0})) begin failures++; $display("first sample %h vs %0d", mem.read_word(b), first); end
  endtask

  initial begin
    start = 0; base = 0; nsamp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    acquire(32'h1000_0000, 100);
    repeat (50) @(negedge clk);
    acquire(32'h2000_0400, 37);
    checks++; if (perr != 0 || err || ovf) begin failures++; $display("protocol errors %0d", perr); end
    checks++; if (nwrites != 137) begin failures++; $display("memory writes %0d", nwrites); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
