// ernn_top: FPGA side of the E-RNN system for a block-circulant GRU layer.
//
// The host reaches the accelerator through a data bus (behind a PCIe
// endpoint, which is not part of this RTL). Over this bus it loads the
// weight spectra and biases into the BRAMs of every compute unit (CU) and the
// input frames into the input buffer, starts a run, and reads the results
// from the output buffer. The controller then steps all NCU compute units
// through the sequence in lock step; every CU works on its own input
// sequence with its own copy of the weights, as in the paper's architecture
// figure (E-RNN controller, input buffer, output buffer, E-RNN accelerator of
// CU 1 .. CU N, each CU a group of PEs).
//
// Bus writes (bus_wr_en high for one cycle per block):
//   bus_wr_tgt = TGT_W_XC / TGT_W_CC / TGT_BIAS: block bus_wr_addr of BRAM 2,
//     4 or 3, bank bus_wr_bank, of CU bus_wr_cu (bus_wr_cu = NCU: all CUs)
//   bus_wr_tgt = TGT_INPUT: input buffer, CU bus_wr_cu, frame
//     bus_wr_addr / QX, block bus_wr_addr % QX
// Host writes are ignored while busy. run with num_steps starts a sequence;
// done pulses at its end. Bus reads: bus_rd_cu, bus_rd_addr = t*QH + block,
// bus_rd_data one cycle later.
// The number of CUs, the buffer depth and the bus format are this design's
// choices; the paper gives the blocks and how they are connected.
//
// Lint notes: only the low bits of bus_rd_cu select a CU (the port is
// 8 bits wide so the bus does not change with NCU). The SYNCASYNCNET note
// on rst_n comes from the compute unit, see its header.
module ernn_top
  import ernn_pkg::*;
#(
  parameter int unsigned N    = LB,
  parameter int unsigned H    = HID,
  parameter int unsigned DX   = DIN,
  parameter int unsigned NPE  = 16,
  parameter int unsigned NCU  = 2,
  parameter int unsigned TMAX = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // data bus, host side
  input  logic                      bus_wr_en,
  input  logic [2:0]                bus_wr_tgt,
  input  logic [7:0]                bus_wr_cu,
  input  logic [7:0]                bus_wr_bank,
  input  logic [15:0]               bus_wr_addr,
  input  logic [N*DW-1:0]           bus_wr_data,
  input  logic [7:0]                bus_rd_cu,
  input  logic [15:0]               bus_rd_addr,
  output logic [N*DW-1:0]           bus_rd_data,
  // run control
  input  logic                      run,
  input  logic [$clog2(TMAX+1)-1:0] num_steps,
  output logic                      busy,
  output logic                      done
);
  localparam int unsigned QX = DX / N;
  localparam int unsigned QH = H / N;
  localparam int unsigned BW = N * DW;
  localparam int unsigned CUW = $clog2(NCU + 1);
  localparam int unsigned TW  = $clog2(TMAX);

  // ---------------- controller ----------------
  logic [TW-1:0]           step, ib_rd_t;
  logic [$clog2(QX+1)-1:0] ib_rd_blk, ld_blk;
  logic                    ld_en, cu_clear, cu_start;
  logic                    cu_busy [NCU], cu_done [NCU];

  ernn_ctrl #(.NCU(NCU), .TMAX(TMAX), .QX(QX)) u_ctrl (
    .clk, .rst_n, .run, .num_steps, .busy, .done, .step, .ib_rd_t, .ib_rd_blk,
    .ld_en, .ld_blk, .cu_clear, .cu_start, .cu_busy, .cu_done);

  // ---------------- input buffer ----------------
  logic [BW-1:0] ib_data [NCU];
  logic          host_wr;
  assign host_wr = bus_wr_en && !busy;

  ernn_in_buf #(.NCU(NCU), .TMAX(TMAX), .QX(QX), .BW(BW)) u_in_buf (
    .clk,
    .wr_en(host_wr && tgt_e'(bus_wr_tgt) == TGT_INPUT),
    .wr_cu(CUW'(bus_wr_cu)),
    .wr_t(TW'(bus_wr_addr / 16'(QX))),
    .wr_blk(($clog2(QX+1))'(bus_wr_addr % 16'(QX))),
    .wr_data(bus_wr_data),
    .rd_t(ib_rd_t), .rd_blk(ib_rd_blk), .rd_data(ib_data));

  // ---------------- accelerator: NCU compute units ----------------
  logic          o_valid [NCU];
  logic [15:0]   o_idx   [NCU];
  logic [BW-1:0] o_data  [NCU];

  for (genvar c = 0; c < NCU; c++) begin : g_cu
    logic          wen;
    tgt_e          wtgt;
    logic [15:0]   waddr;
    logic [BW-1:0] wdata;
    always_comb begin
      if (ld_en) begin                     // controller copies x_t into BRAM 1
        wen = 1'b1; wtgt = TGT_INPUT; waddr = 16'(ld_blk); wdata = ib_data[c];
      end else begin
        wen   = host_wr && tgt_e'(bus_wr_tgt) != TGT_INPUT &&
                (bus_wr_cu == 8'(c) || bus_wr_cu == 8'(NCU));
        wtgt  = tgt_e'(bus_wr_tgt);
        waddr = bus_wr_addr;
        wdata = bus_wr_data;
      end
    end
    ernn_gru_cu #(.N(N), .H(H), .DX(DX), .NPE(NPE)) u_cu (
      .clk, .rst_n, .wr_en(wen), .wr_tgt(wtgt), .wr_bank(bus_wr_bank), .wr_addr(waddr),
      .wr_data(wdata), .clear(cu_clear), .start(cu_start), .busy(cu_busy[c]),
      .done(cu_done[c]), .out_valid(o_valid[c]), .out_idx(o_idx[c]), .out_data(o_data[c]));
  end

  // ---------------- output buffer ----------------
  ernn_out_buf #(.NCU(NCU), .TMAX(TMAX), .QH(QH), .BW(BW)) u_out_buf (
    .clk, .wr_en(o_valid), .wr_idx(o_idx), .wr_data(o_data), .wr_t(step),
    .rd_cu(CUW'(bus_rd_cu)),
    .rd_t(TW'(bus_rd_addr / 16'(QH))),
    .rd_blk(($clog2(QH+1))'(bus_rd_addr % 16'(QH))),
    .rd_data(bus_rd_data));

endmodule
