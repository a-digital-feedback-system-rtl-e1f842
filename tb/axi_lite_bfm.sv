// axi_lite_bfm: AXI4-Lite master for testbenches, standing in for the CPU.
// write(addr, data) and read(addr, data) drive one transaction each and wait
// for the response; address and data are offered together, ready is awaited
// with a timeout. It checks that the slave answers with OKAY and counts
// handshake-rule violations (response without a request).
module axi_lite_bfm (
  input  logic        clk,
  input  logic        rst_n,
  output logic [11:0] awaddr,
  output logic        awvalid,
  input  logic        awready,
  output logic [31:0] wdata,
  output logic [3:0]  wstrb,
  output logic        wvalid,
  input  logic        wready,
  input  logic [1:0]  bresp,
  input  logic        bvalid,
  output logic        bready,
  output logic [11:0] araddr,
  output logic        arvalid,
  input  logic        arready,
  input  logic [31:0] rdata,
  input  logic [1:0]  rresp,
  input  logic        rvalid,
  output logic        rready
);
  int errors = 0;
  bit rd_open = 0, wr_open = 0;

  initial begin
    awaddr = 0; awvalid = 0; wdata = 0; wstrb = 4'hF; wvalid = 0; bready = 0;
    araddr = 0; arvalid = 0; rready = 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (bvalid && !wr_open) errors++;
    if (rvalid && !rd_open) errors++;
  end

  task automatic write(input logic [11:0] a, input logic [31:0] d);
    bit aw_ok = 0, w_ok = 0;
    int t = 0;
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1; bready = 1; wr_open = 1;
    while (!(aw_ok && w_ok) && t < 100) begin
      #1;                        // ready is sampled while stable, before the edge
      if (awvalid && awready) aw_ok = 1;
      if (wvalid && wready) w_ok = 1;
      @(negedge clk);
      if (aw_ok) awvalid = 0;
      if (w_ok) wvalid = 0;
      t++;
    end
    while (!bvalid && t < 200) begin @(negedge clk); t++; end
    if (t >= 200 || bresp != 2'b00) errors++;
    @(posedge clk);
    @(negedge clk);
    bready = 0; wr_open = 0;
  endtask

  task automatic read(input logic [11:0] a, output logic [31:0] d);
    int t = 0;
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 1; rd_open = 1;
    begin
      bit ok = 0;
      while (!ok && t < 100) begin
        #1;
        ok = arready;
        @(negedge clk);
        t++;
      end
    end
    arvalid = 0;
    while (!rvalid && t < 200) begin @(negedge clk); t++; end
    if (t >= 200 || rresp != 2'b00) errors++;
    d = rdata;
    @(posedge clk);
    @(negedge clk);
    rready = 0; rd_open = 0;
  endtask
endmodule
