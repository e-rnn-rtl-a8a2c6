// ernn_out_buf: on-chip output buffer of the accelerator.
//
// Collects the results of every compute unit, one vector c_t (QH blocks of
// LB words) per time step, for up to TMAX steps, until the host reads them
// over the data bus. Each CU has its own write port, so all CUs can deliver
// a block in the same cycle. The paper names the buffer and its role; the
// (CU, step, block) organisation and the ports are this design's choices.
//
// Interface: wr_en[cu], wr_idx[cu], wr_data[cu] write block wr_idx of step
// wr_t for that CU; rd_cu/rd_t/rd_blk select a block, rd_data follows one
// cycle later.
//
// Lint notes: as in the input buffer, index widths are one bit wider than
// needed and each index is range-guarded before the truncating access
// (WIDTHTRUNC/WIDTHEXPAND are harmless).
module ernn_out_buf
  import ernn_pkg::*;
#(
  parameter int unsigned NCU  = 2,
  parameter int unsigned TMAX = 8,
  parameter int unsigned QH   = HID / LB,
  parameter int unsigned BW   = LB * DW
) (
  input  logic                      clk,
  input  logic                      wr_en   [NCU],
  input  logic [15:0]               wr_idx  [NCU],
  input  logic [BW-1:0]             wr_data [NCU],
  input  logic [$clog2(TMAX)-1:0]   wr_t,
  input  logic [$clog2(NCU+1)-1:0]  rd_cu,
  input  logic [$clog2(TMAX)-1:0]   rd_t,
  input  logic [$clog2(QH+1)-1:0]   rd_blk,
  output logic [BW-1:0]             rd_data
);
  logic [BW-1:0] mem [NCU][TMAX][QH];

  always_ff @(posedge clk) begin
    for (int c = 0; c < NCU; c++)
      if (wr_en[c] && wr_idx[c] < 16'(QH)) mem[c][wr_t][wr_idx[c][$clog2(QH+1)-1:0]] <= wr_data[c];
    rd_data <= mem[(rd_cu < NCU) ? rd_cu : '0][rd_t][(rd_blk < QH) ? rd_blk : '0];
  end
endmodule
