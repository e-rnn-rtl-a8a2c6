// tb_ernn_out_buf: all CUs write their blocks in the same cycles, for
// several steps and in a scrambled block order; then every (CU, step,
// block) is read back and compared. An out-of-range block index must be
// ignored.
module tb_ernn_out_buf;
  localparam int NCU = 2, TMAX = 4, QH = 6, BW = 24;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en [NCU];
  logic [15:0] wr_idx [NCU];
  logic [BW-1:0] wr_data [NCU], rd_data;
  logic [$clog2(TMAX)-1:0] wr_t, rd_t;
  logic [$clog2(NCU+1)-1:0] rd_cu;
  logic [$clog2(QH+1)-1:0] rd_blk;
  int checks = 0, failures = 0;

  ernn_out_buf #(.NCU(NCU), .TMAX(TMAX), .QH(QH), .BW(BW)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [BW-1:0] pat(input int c, input int t, input int b);
    return BW'(c * 5003 + t * 311 + b * 17 + 3);
  endfunction

  initial begin
    foreach (wr_en[c]) begin wr_en[c] = 0; wr_idx[c] = 0; wr_data[c] = 0; end
    wr_t = 0; rd_t = 0; rd_cu = 0; rd_blk = 0;
    for (int t = 0; t < TMAX; t++)
      for (int i = 0; i < QH; i++) begin
        @(negedge clk);
        wr_t = t[$bits(wr_t)-1:0];
        for (int c = 0; c < NCU; c++) begin
          automatic int b = (i * 5 + c) % QH;
          wr_en[c] = 1; wr_idx[c] = 16'(b); wr_data[c] = pat(c, t, b);
        end
      end
    @(negedge clk);
    wr_t = 0; wr_idx[0] = 16'(QH); wr_data[0] = '1; wr_en[1] = 0;     // ignored
    @(negedge clk);
    foreach (wr_en[c]) wr_en[c] = 0;
    for (int c = 0; c < NCU; c++)
      for (int t = 0; t < TMAX; t++)
        for (int b = 0; b < QH; b++) begin
          @(negedge clk);
          rd_cu = c[$bits(rd_cu)-1:0]; rd_t = t[$bits(rd_t)-1:0]; rd_blk = b[$bits(rd_blk)-1:0];
          @(posedge clk); #1;
          checks++;
          if (rd_data !== pat(c, t, b)) begin
            failures++;
            $display("cu %0d t %0d blk %0d: got %0h want %0h", c, t, b, rd_data, pat(c, t, b));
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
