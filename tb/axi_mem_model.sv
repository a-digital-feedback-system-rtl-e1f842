// axi_mem_model: behavioural model of the CPU main memory as seen by the DMA
// engine, for simulation only. It is an AXI4 write slave (single-beat and
// INCR bursts of 64-bit words) with randomly stalled AWREADY/WREADY and a
// randomly delayed write response; words are kept in an associative array
// indexed by byte address. It also checks the master's handshake rules:
// AWVALID/WVALID may not drop and address/data may not change while waiting.
// A testbench can set hold_off to stall both channels for as long as it
// likes, e.g. to make the acquisition FIFO fill up.
module axi_mem_model #(
  parameter int unsigned STALL_PCT = 30
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic [2:0]  awsize,
  input  logic [1:0]  awburst,
  input  logic        awvalid,
  output logic        awready,
  input  logic [63:0] wdata,
  input  logic [7:0]  wstrb,
  input  logic        wlast,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  output int          protocol_errors,
  output int          writes
);
  logic [63:0] mem [longint];
  logic [31:0] addr_q [$];
  logic [63:0] data_q [$];
  logic [31:0] aw_hold; logic [63:0] w_hold;
  bit aw_wait = 0, w_wait = 0;
  int resp_pending = 0;
  bit hold_off = 0;

  function automatic logic [63:0] read_word(input logic [31:0] a);
    return mem.exists(longint'(a)) ? mem[longint'(a)] : 64'hDEAD_BEEF_DEAD_BEEF;
  endfunction

  initial begin protocol_errors = 0; writes = 0; end

  assign bresp = 2'b00;

  always @(posedge clk) begin
    if (!rst_n) begin
      awready <= 0; wready <= 0; bvalid <= 0;
    end else begin
      // handshake rules
      if (aw_wait && (!awvalid || awaddr != aw_hold)) protocol_errors++;
      if (w_wait && (!wvalid || wdata != w_hold)) protocol_errors++;
      aw_wait = awvalid && !awready; aw_hold = awaddr;
      w_wait  = wvalid && !wready;   w_hold  = wdata;
      if (awvalid && awready) begin
        addr_q.push_back(awaddr);
        if (awlen != 0 || awsize != 3'd3 || awburst != 2'b01) protocol_errors++;
      end
      if (wvalid && wready) begin
        data_q.push_back(wdata);
        if (wstrb != 8'hFF || !wlast) protocol_errors++;
      end
      while (addr_q.size() > 0 && data_q.size() > 0) begin
        mem[longint'(addr_q.pop_front())] = data_q.pop_front();
        writes++;
        resp_pending++;
      end
      if (bvalid && bready) begin bvalid <= 0; resp_pending--; end
      else if (!bvalid && resp_pending > 0 && $urandom_range(0, 99) >= STALL_PCT) bvalid <= 1;
      awready <= !hold_off && ($urandom_range(0, 99) >= STALL_PCT);
      wready  <= !hold_off && ($urandom_range(0, 99) >= STALL_PCT);
    end
  end
endmodule
