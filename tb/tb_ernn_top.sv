// tb_ernn_top: end-to-end test of the accelerator through its data bus.
// The testbench plays the host: it loads the weight spectra and biases of a
// random block-circulant GRU layer into all compute units at once
// (broadcast), a different input sequence for every CU into the input
// buffer, runs the sequence, reads every c_t of every CU back from the
// output buffer and compares it with a floating-point GRU evaluated here
// from the layer equations (same piecewise linear sigmoid/tanh segments).
// A second, shorter run checks that the recurrent state is cleared between
// sequences. It counts the mechanisms of the design and fails if one never
// happened: stage 3 working on one group while the PEs compute the next
// (double buffer), stage 2 reusing the PEs (TDM), spectra of x reused in
// stage 2 (only the r.c' blocks transformed again), the state clear, the
// broadcast write and all CUs running together. It also checks the cycles
// per time step against a bound derived from the schedule.
module tb_ernn_top;
  import ernn_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam int N = 16, H = 64, DX = 32, NPE = 2, NCU = 2, TMAX = 4;
  localparam int T1 = 3, T2 = 2;
  localparam int STEP_BOUND = 2 * (H / N) / NPE * (DX / N + H / N + 1) + (H / N) / NPE * (DX / N + H / N + 1) + DX / N + 90;
  localparam int QX = DX / N, QH = H / N, Q = QX + QH;
  localparam int GA = 2 * QH / NPE, GB = QH / NPE;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bus_wr_en, run, busy, done;
  logic [2:0] bus_wr_tgt;
  logic [7:0] bus_wr_cu, bus_wr_bank, bus_rd_cu;
  logic [15:0] bus_wr_addr, bus_rd_addr;
  logic [N*DW-1:0] bus_wr_data, bus_rd_data;
  logic [$clog2(TMAX+1)-1:0] num_steps;
  int checks = 0, failures = 0;

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  real wa [2*QH][Q][N];
  real wcx [QH][QX][N];
  real wcc [QH][QH][N];
  real br [H], bz [H], bc [H];
  real xs [NCU][TMAX][DX];
  real cref [NCU][H];
  real cexp [NCU][TMAX][H];

  function automatic real qz(input real v);
    real s = v * 256.0;
    return real'($rtoi(s >= 0.0 ? s + 0.5 : s - 0.5)) / 256.0;
  endfunction
  function automatic int qi(input real v, input int frac);
    real s = v * real'(1 << frac);
    return $rtoi(s >= 0.0 ? s + 0.5 : s - 0.5);
  endfunction
  function automatic real plan(input real v);
    real a = v < 0.0 ? -v : v, r;
    if (a >= 5.0) r = 1.0;
    else if (a >= 2.375) r = a / 32.0 + 0.84375;
    else if (a >= 1.0) r = a / 8.0 + 0.625;
    else r = a / 4.0 + 0.5;
    return v < 0.0 ? 1.0 - r : r;
  endfunction
  function automatic real rnd(input real amp);
    return (real'($urandom_range(0, 20000)) - 10000.0) / 10000.0 * amp;
  endfunction

  // one GRU step of CU cu on frame t; W_blk[r][c] = w[(c - r) mod N]
  task automatic ref_step(input int cu, input int t);
    real v [Q][N], rc [QH][N], pre, ct, s;
    real rr [H], zz [H], cn [H];
    for (int j = 0; j < QX; j++) for (int n = 0; n < N; n++) v[j][n] = xs[cu][t][j*N+n];
    for (int j = 0; j < QH; j++) for (int n = 0; n < N; n++) v[QX+j][n] = cref[cu][j*N+n];
    for (int i = 0; i < 2*QH; i++)
      for (int r = 0; r < N; r++) begin
        pre = 0.0;
        for (int j = 0; j < Q; j++) begin
          s = 0.0;
          for (int c = 0; c < N; c++) s += wa[i][j][(c - r + N) % N] * v[j][c];
          pre += s;
        end
        if (i < QH) rr[i*N+r] = plan(pre + br[i*N+r]);
        else        zz[(i-QH)*N+r] = plan(pre + bz[(i-QH)*N+r]);
      end
    for (int j = 0; j < QH; j++) for (int n = 0; n < N; n++) rc[j][n] = rr[j*N+n] * cref[cu][j*N+n];
    for (int i = 0; i < QH; i++)
      for (int r = 0; r < N; r++) begin
        pre = 0.0;
        for (int j = 0; j < QX; j++)
          for (int c = 0; c < N; c++) pre += wcx[i][j][(c - r + N) % N] * v[j][c];
        for (int j = 0; j < QH; j++)
          for (int c = 0; c < N; c++) pre += wcc[i][j][(c - r + N) % N] * rc[j][c];
        ct = 2.0 * plan(2.0 * (pre + bc[i*N+r])) - 1.0;
        cn[i*N+r] = (1.0 - zz[i*N+r]) * cref[cu][i*N+r] + zz[i*N+r] * ct;
      end
    for (int n = 0; n < H; n++) cref[cu][n] = cn[n];
  endtask

  // ---------------- host side of the data bus ----------------
  function automatic logic [N*DW-1:0] spec_of(input real w [N]);
    logic [N*DW-1:0] d;
    real re [N], im [N];
    for (int k = 0; k <= N/2; k++) begin
      re[k] = 0.0; im[k] = 0.0;
      for (int m = 0; m < N; m++) begin
        re[k] += w[m] * $cos(2.0 * PI * k * m / N);
        im[k] -= w[m] * $sin(2.0 * PI * k * m / N);
      end
    end
    d[0 +: DW] = DW'(qi(re[0], WFRAC));
    d[DW +: DW] = DW'(qi(re[N/2], WFRAC));
    for (int k = 1; k < N/2; k++) begin
      d[2*k*DW +: DW] = DW'(qi(re[k], WFRAC));
      d[(2*k+1)*DW +: DW] = DW'(qi(im[k], WFRAC));
    end
    return d;
  endfunction

  task automatic bus_wr(input tgt_e tg, input int cu, input int bank, input int addr,
                        input logic [N*DW-1:0] d);
    @(negedge clk);
    bus_wr_en = 1; bus_wr_tgt = tg; bus_wr_cu = 8'(cu); bus_wr_bank = 8'(bank);
    bus_wr_addr = 16'(addr); bus_wr_data = d;
    @(negedge clk);
    bus_wr_en = 0;
  endtask

  task automatic load_weights();
    logic [N*DW-1:0] d;
    for (int k = 0; k < NPE; k++) begin
      for (int g = 0; g < GA; g++)
        for (int j = 0; j < Q; j++) bus_wr(TGT_W_XC, NCU, k, g*Q + j, spec_of(wa[g*NPE+k][j]));
      for (int g = 0; g < GB; g++) begin
        for (int j = 0; j < QX; j++) bus_wr(TGT_W_XC, NCU, k, GA*Q + g*QX + j, spec_of(wcx[g*NPE+k][j]));
        for (int j = 0; j < QH; j++) bus_wr(TGT_W_CC, NCU, k, g*QH + j, spec_of(wcc[g*NPE+k][j]));
      end
    end
    for (int i = 0; i < QH; i++) begin
      for (int n = 0; n < N; n++) d[n*DW +: DW] = DW'(qi(br[i*N+n], FRAC));
      bus_wr(TGT_BIAS, NCU, 0, i, d);
      for (int n = 0; n < N; n++) d[n*DW +: DW] = DW'(qi(bz[i*N+n], FRAC));
      bus_wr(TGT_BIAS, NCU, 0, QH + i, d);
      for (int n = 0; n < N; n++) d[n*DW +: DW] = DW'(qi(bc[i*N+n], FRAC));
      bus_wr(TGT_BIAS, NCU, 0, 2*QH + i, d);
    end
  endtask

  task automatic load_inputs(input int nt);
    logic [N*DW-1:0] d;
    for (int cu = 0; cu < NCU; cu++)
      for (int t = 0; t < nt; t++) begin
        for (int n = 0; n < DX; n++) xs[cu][t][n] = qz(rnd(1.0));
        for (int j = 0; j < QX; j++) begin
          for (int n = 0; n < N; n++) d[n*DW +: DW] = DW'(qi(xs[cu][t][j*N+n], FRAC));
          bus_wr(TGT_INPUT, cu, 0, t*QX + j, d);
        end
      end
  endtask

  // ---------------- mechanism counters ----------------
  int n_overlap = 0, n_tdm = 0, n_fft_b = 0, n_clear = 0, n_multi = 0, n_bcast = 0;
  int n_start = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_cu[0].u_cu.iss_mac && dut.g_cu[0].u_cu.pst != 2'd0) n_overlap++;
    if (dut.g_cu[0].u_cu.iss_mac && dut.g_cu[0].u_cu.job_b) n_tdm++;
    if (dut.g_cu[0].u_cu.fin_valid[0] && dut.g_cu[0].u_cu.job_b) n_fft_b++;
    if (dut.cu_clear) n_clear++;
    if (dut.cu_start) n_start++;
    if (dut.g_cu[0].u_cu.busy && dut.g_cu[NCU-1].u_cu.busy) n_multi++;
    if (bus_wr_en && bus_wr_cu == 8'(NCU)) n_bcast++;
  end

  int cyc, fft_b_per_step;
  task automatic run_seq(input int nt);
    int steps0 = n_start;
    for (int cu = 0; cu < NCU; cu++) begin
      for (int n = 0; n < H; n++) cref[cu][n] = 0.0;
      for (int t = 0; t < nt; t++) begin
        ref_step(cu, t);
        for (int n = 0; n < H; n++) cexp[cu][t][n] = cref[cu][n];
      end
    end
    @(negedge clk); run = 1; num_steps = nt[$bits(num_steps)-1:0];
    @(negedge clk); run = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (n_start - steps0 != nt) begin failures++; $display("%0d steps started, want %0d", n_start - steps0, nt); end
    checks++;
    if (cyc > nt * STEP_BOUND + 3 * QH + 20) begin
      failures++; $display("run of %0d steps took %0d cycles, bound %0d", nt, cyc, nt * STEP_BOUND + 3 * QH + 20);
    end
    $display("run of %0d steps: %0d cycles (%0d per step)", nt, cyc, cyc / nt);
    // read back
    for (int cu = 0; cu < NCU; cu++)
      for (int t = 0; t < nt; t++)
        for (int b = 0; b < QH; b++) begin
          @(negedge clk);
          bus_rd_cu = 8'(cu); bus_rd_addr = 16'(t * QH + b);
          @(posedge clk); #1;
          for (int n = 0; n < N; n++) begin
            real got, want;
            got = real'($signed(bus_rd_data[n*DW +: DW])) / 256.0;
            want = cexp[cu][t][b*N+n];
            checks++;
            if (got - want > 0.06 || want - got > 0.06) begin
              failures++;
              if (failures < 10) $display("cu %0d t %0d c[%0d]: got %f want %f", cu, t, b*N+n, got, want);
            end
          end
        end
  endtask

  task automatic need(input int cnt, input string what);
    checks++;
    $display("%s: %0d", what, cnt);
    if (cnt == 0) begin failures++; $display("mechanism never happened: %s", what); end
  endtask

  initial begin
    bus_wr_en = 0; bus_wr_tgt = 0; bus_wr_cu = 0; bus_wr_bank = 0; bus_wr_addr = 0;
    bus_wr_data = '0; bus_rd_cu = 0; bus_rd_addr = 0; run = 0; num_steps = 0;
    foreach (wa[i, j, n]) wa[i][j][n] = rnd(0.6 / $sqrt(real'(Q * N)) * 1.7);
    foreach (wcx[i, j, n]) wcx[i][j][n] = rnd(0.6 / $sqrt(real'(Q * N)) * 1.7);
    foreach (wcc[i, j, n]) wcc[i][j][n] = rnd(0.6 / $sqrt(real'(QH * N)) * 1.7);
    foreach (br[n]) begin br[n] = qz(rnd(0.5)); bz[n] = qz(rnd(0.5)); bc[n] = qz(rnd(0.5)); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights();
    load_inputs(T1);
    run_seq(T1);
    fft_b_per_step = n_fft_b / T1;
    load_inputs(T2);
    run_seq(T2);
    need(n_overlap, "stage 3 overlapping PE jobs (cycles)");
    need(n_tdm, "stage 2 on the shared PEs (issue cycles)");
    need(n_clear, "state clears");
    need(n_multi, "cycles with all CUs busy");
    need(n_bcast, "broadcast writes");
    checks++;
    $display("stage-2 FFT issues per step: %0d (r.c' blocks %0d of %0d inputs)", fft_b_per_step, QH, Q);
    if (fft_b_per_step != (QH + NPE - 1) / NPE) begin
      failures++; $display("x spectra not reused in stage 2");
    end
    checks++;
    if (n_clear != 2) begin failures++; $display("%0d clears, want 2", n_clear); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  ernn_top #(.N(N), .H(H), .DX(DX), .NPE(NPE), .NCU(NCU), .TMAX(TMAX)) dut (.*);
endmodule
