// tb_ernn_dbuf: drives the double buffer with a producer and a consumer of
// random speeds and checks that banks come out complete, in order, with the
// data written, that n_free and rd_valid track the fill level, and that the
// producer can fill the second bank while the first is being drained.
module tb_ernn_dbuf;
  localparam int unsigned DEPTH = 4, EW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_valid, rd_release;
  logic [EW-1:0] wr_data [DEPTH], rd_data;
  logic [1:0] n_free;
  logic [$clog2(DEPTH)-1:0] rd_addr;
  int checks = 0, failures = 0;
  int wr_cnt = 0, rd_cnt = 0, level = 0, overlap = 0;

  ernn_dbuf #(.DEPTH(DEPTH), .EW(EW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [EW-1:0] pat(input int b, input int e);
    return EW'(b * 37 + e * 5 + 1);
  endfunction

  // producer
  initial begin
    wr_en = 0;
    foreach (wr_data[e]) wr_data[e] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (wr_cnt < 40) begin
      @(negedge clk);
      if (n_free > 0 && $urandom_range(0, 2) != 0) begin
        wr_en = 1;
        foreach (wr_data[e]) wr_data[e] = pat(wr_cnt, e);
        wr_cnt++;
      end else wr_en = 0;
    end
    @(negedge clk) wr_en = 0;
  end

  // consumer: reads every entry of a bank, then releases it
  initial begin
    rd_release = 0; rd_addr = '0;
    @(posedge rst_n);
    while (rd_cnt < 40) begin
      @(negedge clk);
      rd_release = 0;
      if (rd_valid) begin
        for (int e = 0; e < DEPTH; e++) begin
          rd_addr = e[$clog2(DEPTH)-1:0];
          #1;
          checks++;
          if (rd_data !== pat(rd_cnt, e)) begin
            failures++;
            $display("bank %0d entry %0d: got %0h want %0h", rd_cnt, e, rd_data, pat(rd_cnt, e));
          end
          repeat ($urandom_range(0, 3)) @(negedge clk);
          if (n_free == 0) overlap++;
        end
        rd_release = 1;
        rd_cnt++;
      end
    end
    @(negedge clk) rd_release = 0;
    checks++;
    if (overlap == 0) begin failures++; $display("producer never filled the second bank during a drain"); end
    repeat (2) @(posedge clk);
    checks++;
    if (n_free != 2 || rd_valid) begin failures++; $display("not empty at end: n_free=%0d", n_free); end
    $display("overlapped cycles: %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fill level model
  always @(posedge clk) if (rst_n) begin
    level = level + (wr_en ? 1 : 0) - (rd_release ? 1 : 0);
    #1;
    checks++;
    if (n_free != 2'(2 - level) || rd_valid != (level > 0)) begin
      failures++;
      $display("level %0d but n_free %0d rd_valid %0b", level, n_free, rd_valid);
    end
  end
endmodule
