// ernn_in_buf: on-chip input buffer of the accelerator.
//
// Holds the input voice vectors (feature frames) that the host sends over
// the data bus, one sequence of up to TMAX frames per compute unit, each
// frame as QX blocks of LB words. The controller reads block blk of frame t
// for all compute units at once and copies it into their BRAM 1. The paper
// names the buffer and its role; its organisation as one array indexed by
// (CU, frame, block) and the single read port shared by all CUs are this
// design's choices.
//
// Interface: wr_* host write of one block; rd_t/rd_blk select a block,
// rd_data[cu] returns it for every CU one cycle later (registered read).
//
// Lint notes: wr_cu/wr_blk are one bit wider than the array index so that
// out-of-range values can be detected; the compare guards the write, and
// the truncated index is therefore always in range (WIDTHTRUNC/WIDTHEXPAND).
module ernn_in_buf
  import ernn_pkg::*;
#(
  parameter int unsigned NCU  = 2,
  parameter int unsigned TMAX = 8,
  parameter int unsigned QX   = DIN / LB,
  parameter int unsigned BW   = LB * DW
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [$clog2(NCU+1)-1:0]  wr_cu,
  input  logic [$clog2(TMAX)-1:0]   wr_t,
  input  logic [$clog2(QX+1)-1:0]   wr_blk,
  input  logic [BW-1:0]             wr_data,
  input  logic [$clog2(TMAX)-1:0]   rd_t,
  input  logic [$clog2(QX+1)-1:0]   rd_blk,
  output logic [BW-1:0]             rd_data [NCU]
);
  logic [BW-1:0] mem [NCU][TMAX][QX];

  always_ff @(posedge clk) begin
    if (wr_en && wr_cu < NCU && wr_blk < QX) mem[wr_cu][wr_t][wr_blk] <= wr_data;
    for (int c = 0; c < NCU; c++) rd_data[c] <= mem[c][rd_t][rd_blk];
  end
endmodule
