// dma_engine: moves acquired samples from the buffering FIFO into CPU memory.
//
// On start_i the engine latches base_addr_i and num_samples_i and raises
// capture_o; while capture_o is high every filter output strobe
// (sample_valid_i) is counted as accepted into the FIFO, and capture_o drops
// after num_samples_i of them. Independently, the write side pops the FIFO and
// writes each 64-bit word to base + 8*i through an AXI4 write master, one
// single-beat burst per word (AWLEN = 0, AWSIZE = 8 bytes, INCR). The address
// and data channels are offered together; the next word goes out after the
// write response. done_o is set when all words have been acknowledged and
// stays set until the next start; written_o counts acknowledged words.
// That a DMA engine writes the stream into a reserved memory region follows
// the design description; the bus protocol and this control scheme are this
// design's choice. A start while busy is ignored. An error response is not
// retried; it sets err_o.
module dma_engine #(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DATA_W = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start_i,
  input  logic [ADDR_W-1:0]   base_addr_i,
  input  logic [31:0]         num_samples_i,
  input  logic                sample_valid_i,
  output logic                capture_o,
  // FIFO read side (show-ahead)
  input  logic [DATA_W-1:0]   fifo_data_i,
  input  logic                fifo_empty_i,
  output logic                fifo_rd_o,
  // AXI4 write master
  output logic [ADDR_W-1:0]   m_axi_awaddr,
  output logic [7:0]          m_axi_awlen,
  output logic [2:0]          m_axi_awsize,
  output logic [1:0]          m_axi_awburst,
  output logic                m_axi_awvalid,
  input  logic                m_axi_awready,
  output logic [DATA_W-1:0]   m_axi_wdata,
  output logic [DATA_W/8-1:0] m_axi_wstrb,
  output logic                m_axi_wlast,
  output logic                m_axi_wvalid,
  input  logic                m_axi_wready,
  input  logic [1:0]          m_axi_bresp,
  input  logic                m_axi_bvalid,
  output logic                m_axi_bready,
  // status
  output logic                busy_o,
  output logic                done_o,
  output logic                err_o,
  output logic [31:0]         written_o
);

  typedef enum logic [1:0] {W_IDLE, W_ADDR_DATA, W_RESP} wstate_e;

  wstate_e           state;
  logic [31:0]       target;      // samples in this acquisition
  logic [31:0]       captured;    // samples accepted into the FIFO
  logic [31:0]       issued;      // words popped from the FIFO
  logic [ADDR_W-1:0] addr;
  logic              aw_done, w_done;

  assign m_axi_awlen   = 8'd0;
  assign m_axi_awsize  = 3'($clog2(DATA_W / 8));
  assign m_axi_awburst = 2'b01;
  assign m_axi_wstrb   = '1;
  assign m_axi_wlast   = 1'b1;
  assign m_axi_bready  = (state == W_RESP);
  assign m_axi_awaddr  = addr;
  assign m_axi_awvalid = (state == W_ADDR_DATA) && !aw_done;
  assign m_axi_wvalid  = (state == W_ADDR_DATA) && !w_done;

  // pop the FIFO when a word is taken into the write register
  assign fifo_rd_o = busy_o && (state == W_IDLE) && !fifo_empty_i && (issued != target);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= W_IDLE;
      target       <= '0;
      captured     <= '0;
      issued       <= '0;
      addr         <= '0;
      aw_done      <= 1'b0;
      w_done       <= 1'b0;
      m_axi_wdata  <= '0;
      capture_o    <= 1'b0;
      busy_o       <= 1'b0;
      done_o       <= 1'b0;
      err_o        <= 1'b0;
      written_o    <= '0;
    end else begin
      if (start_i && !busy_o) begin
        target    <= num_samples_i;
        captured  <= '0;
        issued    <= '0;
        written_o <= '0;
        addr      <= base_addr_i;
        capture_o <= (num_samples_i != 0);
        busy_o    <= (num_samples_i != 0);
        done_o    <= (num_samples_i == 0);
        err_o     <= 1'b0;
      end else begin
        if (capture_o && sample_valid_i) begin
          captured <= captured + 1;
          if (captured + 1 == target) capture_o <= 1'b0;
        end
        unique case (state)
          W_IDLE: if (fifo_rd_o) begin
            m_axi_wdata <= fifo_data_i;
            issued      <= issued + 1;
            aw_done     <= 1'b0;
            w_done      <= 1'b0;
            state       <= W_ADDR_DATA;
          end
          W_ADDR_DATA: begin
            if (m_axi_awvalid && m_axi_awready) aw_done <= 1'b1;
            if (m_axi_wvalid && m_axi_wready)   w_done  <= 1'b1;
            if ((aw_done || m_axi_awready) && (w_done || m_axi_wready)) state <= W_RESP;
          end
          W_RESP: if (m_axi_bvalid) begin
            if (m_axi_bresp != 2'b00) err_o <= 1'b1;
            written_o <= written_o + 1;
            addr      <= addr + ADDR_W'(DATA_W / 8);
            state     <= W_IDLE;
            if (written_o + 1 == target) begin
              busy_o <= 1'b0;
              done_o <= 1'b1;
            end
          end
          default: state <= W_IDLE;
        endcase
      end
    end
  end

endmodule
