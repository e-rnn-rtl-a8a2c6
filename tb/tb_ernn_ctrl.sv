// tb_ernn_ctrl: the controller drives two model CUs written here. Each
// model takes a random number of cycles to clear and to compute a step and
// records the input-buffer blocks it was loaded with. Checks: one clear per
// run, QX load writes with blocks 0..QX-1 and the right frame before every
// start, one start per step, no start before every CU finished the step
// before, done once after num_steps steps, busy meanwhile.
module tb_ernn_ctrl;
  localparam int NCU = 2, TMAX = 8, QX = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic run, busy, done, ld_en, cu_clear, cu_start;
  logic [$clog2(TMAX+1)-1:0] num_steps;
  logic [$clog2(TMAX)-1:0] step, ib_rd_t;
  logic [$clog2(QX+1)-1:0] ib_rd_blk, ld_blk;
  logic cu_busy [NCU], cu_done [NCU];
  int checks = 0, failures = 0;

  ernn_ctrl #(.NCU(NCU), .TMAX(TMAX), .QX(QX)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model CUs
  int clears = 0, starts = 0, loads = 0, dones = 0;
  int last_t_rd;
  logic [QX-1:0] loaded;
  int rem [NCU];
  initial foreach (rem[c]) begin rem[c] = 0; cu_busy[c] = 0; cu_done[c] = 0; end
  always @(posedge clk) begin
    last_t_rd <= int'(ib_rd_t);
    for (int c = 0; c < NCU; c++) begin
      cu_done[c] <= 0;
      if (cu_clear) begin rem[c] <= $urandom_range(1, 6); cu_busy[c] <= 1; end
      else if (cu_start) begin rem[c] <= $urandom_range(2, 30); cu_busy[c] <= 1; end
      else if (rem[c] > 1) rem[c] <= rem[c] - 1;
      else if (rem[c] == 1) begin
        rem[c] <= 0; cu_busy[c] <= 0;
        if (!(clears > 0 && starts == 0 && cu_busy[c] && last_clear_busy)) cu_done[c] <= 1;
      end
    end
  end
  // a clear does not produce done
  logic last_clear_busy = 0;
  always @(posedge clk) begin
    if (cu_clear) last_clear_busy <= 1;
    if (cu_start) last_clear_busy <= 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (cu_clear) clears++;
    if (ld_en) begin
      loads++;
      checks++;
      if (loaded[ld_blk]) begin failures++; $display("block %0d loaded twice", ld_blk); end
      loaded[ld_blk] <= 1'b1;
      checks++;
      if (int'(step) != starts) begin failures++; $display("load for step %0d while step=%0d", starts, step); end
    end
    if (cu_start) begin
      checks++;
      if (loaded != '1) begin failures++; $display("start with loaded=%b", loaded); end
      for (int c = 0; c < NCU; c++) begin
        checks++;
        if (cu_busy[c]) begin failures++; $display("start while CU %0d busy", c); end
      end
      loaded <= '0;
      starts++;
    end
    if (done) dones++;
  end

  task automatic do_run(input int n);
    clears = 0; starts = 0; loads = 0; dones = 0; loaded = '0;
    @(negedge clk); run = 1; num_steps = n[$bits(num_steps)-1:0];
    @(negedge clk); run = 0;
    checks++;
    if (!busy) begin failures++; $display("not busy after run"); end
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++; if (clears != 1) begin failures++; $display("%0d clears", clears); end
    checks++; if (starts != n) begin failures++; $display("%0d starts, want %0d", starts, n); end
    checks++; if (loads != n * QX) begin failures++; $display("%0d loads, want %0d", loads, n * QX); end
    checks++; if (dones != 1) begin failures++; $display("%0d done pulses", dones); end
    checks++; if (busy) begin failures++; $display("busy after done"); end
  endtask

  initial begin
    run = 0; num_steps = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_run(1);
    do_run(5);
    do_run(TMAX);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
