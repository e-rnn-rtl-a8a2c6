// tb_ernn_in_buf: writes a distinct pattern into every (CU, frame, block)
// slot of a small input buffer, then reads every (frame, block) and checks
// the block returned for each CU one cycle later. Writes to an out-of-range
// CU number must be ignored.
module tb_ernn_in_buf;
  localparam int NCU = 3, TMAX = 4, QX = 5, BW = 24;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [$clog2(NCU+1)-1:0] wr_cu;
  logic [$clog2(TMAX)-1:0] wr_t, rd_t;
  logic [$clog2(QX+1)-1:0] wr_blk, rd_blk;
  logic [BW-1:0] wr_data, rd_data [NCU];
  int checks = 0, failures = 0;

  ernn_in_buf #(.NCU(NCU), .TMAX(TMAX), .QX(QX), .BW(BW)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [BW-1:0] pat(input int c, input int t, input int b);
    return BW'(c * 4099 + t * 257 + b * 13 + 7);
  endfunction

  initial begin
    wr_en = 0; wr_cu = 0; wr_t = 0; wr_blk = 0; wr_data = 0; rd_t = 0; rd_blk = 0;
    for (int c = 0; c < NCU; c++)
      for (int t = 0; t < TMAX; t++)
        for (int b = 0; b < QX; b++) begin
          @(negedge clk);
          wr_en = 1; wr_cu = c[$bits(wr_cu)-1:0]; wr_t = t[$bits(wr_t)-1:0];
          wr_blk = b[$bits(wr_blk)-1:0]; wr_data = pat(c, t, b);
        end
    // ignored write: CU number NCU
    @(negedge clk);
    wr_cu = NCU[$bits(wr_cu)-1:0]; wr_t = 0; wr_blk = 0; wr_data = '1;
    @(negedge clk);
    wr_en = 0;
    for (int t = 0; t < TMAX; t++)
      for (int b = 0; b < QX; b++) begin
        @(negedge clk);
        rd_t = t[$bits(rd_t)-1:0]; rd_blk = b[$bits(rd_blk)-1:0];
        @(posedge clk); #1;
        for (int c = 0; c < NCU; c++) begin
          checks++;
          if (rd_data[c] !== pat(c, t, b)) begin
            failures++;
            $display("cu %0d t %0d blk %0d: got %0h want %0h", c, t, b, rd_data[c], pat(c, t, b));
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
