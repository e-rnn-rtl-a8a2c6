// ernn_dbuf: double buffer between two coarse-grained pipeline stages.
//
// Two banks of DEPTH entries. The producer (the collector behind the PE
// array) writes a whole bank in one cycle, one entry per PE; the consumer
// (the element-wise stage) reads the oldest full bank entry by entry and
// releases it when done. While the consumer drains one bank the producer can
// already fill the other, which is what lets matrix-vector products of the
// next group of output blocks overlap the activation work of the previous
// group. The paper places such a double buffer between each pair of
// coarse-grained stages; the whole-bank write, the release handshake and the
// register-based storage are this design's choices.
//
// Interface:
//   wr_en / wr_data   commit DEPTH entries to the free bank (needs n_free > 0)
//   n_free            number of empty banks, 0..2
//   rd_valid          a full bank is available; entries appear on rd_data
//                     for rd_addr combinationally
//   rd_release        frees the bank being read (needs rd_valid)
// Timing: a bank written at edge t is readable from t+1; a release at edge t
// makes the bank writable from t+1. Banks are consumed in write order.
module ernn_dbuf #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned EW    = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [EW-1:0]            wr_data [DEPTH],
  output logic [1:0]               n_free,
  output logic                     rd_valid,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [EW-1:0]            rd_data,
  input  logic                     rd_release
);
  logic [EW-1:0] bank [2][DEPTH];
  logic [1:0]    full;
  logic          wsel, rsel;

  assign n_free   = 2'(!full[0]) + 2'(!full[1]);
  assign rd_valid = full[rsel];
  assign rd_data  = bank[rsel][rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0;
      wsel <= 1'b0;
      rsel <= 1'b0;
    end else begin
      if (wr_en) begin
        full[wsel] <= 1'b1;
        wsel       <= ~wsel;
      end
      if (rd_release) begin
        full[rsel] <= 1'b0;
        rsel       <= ~rsel;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) bank[wsel] <= wr_data;
  end

  // handshake rules
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full[wsel]);
  a_no_empty_release: assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> full[rsel]);

endmodule
