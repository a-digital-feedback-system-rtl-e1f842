// sync_fifo: single-clock buffering FIFO between the acquisition filters and
// the DMA engine.
//
// DEPTH entries of WIDTH bits (2048 x 64 in the acquisition system, as given in
// the design description: each entry holds one I/Q sample pair). Storage is a
// plain array, so it maps to block RAM. The read side is show-ahead: rd_data_o
// always shows the oldest entry while empty_o is low, and rd_en_i removes it.
// Writing while full drops the word and sets the sticky overflow_o flag, which
// only reset clears. count_o is the number of stored words. Read port style and
// overflow handling are this design's choice.
module sync_fifo #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en_i,
  input  logic [WIDTH-1:0]           wr_data_i,
  input  logic                       rd_en_i,
  output logic [WIDTH-1:0]           rd_data_o,
  output logic                       empty_o,
  output logic                       full_o,
  output logic [$clog2(DEPTH):0]     count_o,
  output logic                       overflow_o
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  assign empty_o = (count_o == '0);
  assign full_o  = (count_o == (AW+1)'(DEPTH));
  assign do_wr   = wr_en_i && !full_o;
  assign do_rd   = rd_en_i && !empty_o;
  assign rd_data_o = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      count_o    <= '0;
      overflow_o <= 1'b0;
    end else begin
      if (do_wr) wr_ptr <= (int'(wr_ptr) == int'(DEPTH) - 1) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (int'(rd_ptr) == int'(DEPTH) - 1) ? '0 : rd_ptr + 1'b1;
      case ({do_wr, do_rd})
        2'b10:   count_o <= count_o + 1'b1;
        2'b01:   count_o <= count_o - 1'b1;
        default: count_o <= count_o;
      endcase
      if (wr_en_i && full_o) overflow_o <= 1'b1;
    end
  end

endmodule
