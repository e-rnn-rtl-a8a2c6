// tb_ernn_gru_cu: runs a small GRU compute unit (H = 64, 32 inputs, block
// size 16, 2 PEs) through three time steps of one sequence and then a
// cleared second sequence, and compares every element of c_t with a
// floating-point GRU written here from the equations, using the same
// piecewise linear sigmoid/tanh segments. The weights are random first rows
// of circulant blocks; the testbench computes their spectra itself and loads
// them through the write port with the bank/address map of the CU.
// Also checks: one output block per hidden block and step, the done pulse,
// the cycle count of a step against (GA+GB)*(Q+1) plus a fixed overhead, and
// that stage 3 worked while the PEs were busy (double-buffer overlap).
module tb_ernn_gru_cu;
  import ernn_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam int N = 16, H = 64, DX = 32, NPE = 2;
  localparam int QX = DX / N, QH = H / N, Q = QX + QH;
  localparam int GA = 2 * QH / NPE, GB = QH / NPE;
  localparam int T = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, clear, start, busy, done, out_valid;
  tgt_e wr_tgt;
  logic [7:0] wr_bank;
  logic [15:0] wr_addr, out_idx;
  logic [N*DW-1:0] wr_data, out_data;
  int checks = 0, failures = 0;

  ernn_gru_cu #(.N(N), .H(H), .DX(DX), .NPE(NPE)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  real wa [2*QH][Q][N];      // [r; z] rows over [x; c]
  real wcx [QH][QX][N];
  real wcc [QH][QH][N];
  real br [H], bz [H], bc [H];
  real xs [T][DX];
  real cref [H];

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

  // circulant block product, row r of W_blk x_blk with first row w
  function automatic real circ(input real w [N], input real x [N], input int r);
    real s = 0.0;
    for (int c = 0; c < N; c++) s += w[(c - r + N) % N] * x[c];
    return s;
  endfunction

  task automatic ref_step(input int t);
    real v [Q][N], rc [QH][N], u [QX+QH][N], pre, rr [H], zz [H], ct, cn [H];
    for (int j = 0; j < QX; j++) for (int n = 0; n < N; n++) v[j][n] = xs[t][j*N+n];
    for (int j = 0; j < QH; j++) for (int n = 0; n < N; n++) v[QX+j][n] = cref[j*N+n];
    for (int i = 0; i < 2*QH; i++)
      for (int r = 0; r < N; r++) begin
        pre = 0.0;
        for (int j = 0; j < Q; j++) pre += circ(wa[i][j], v[j], r);
        if (i < QH) rr[i*N+r] = plan(pre + br[i*N+r]);
        else        zz[(i-QH)*N+r] = plan(pre + bz[(i-QH)*N+r]);
      end
    for (int j = 0; j < QH; j++) for (int n = 0; n < N; n++) rc[j][n] = rr[j*N+n] * cref[j*N+n];
    for (int i = 0; i < QH; i++)
      for (int r = 0; r < N; r++) begin
        pre = 0.0;
        for (int j = 0; j < QX; j++) pre += circ(wcx[i][j], v[j], r);
        for (int j = 0; j < QH; j++) pre += circ(wcc[i][j], rc[j], r);
        ct = 2.0 * plan(2.0 * (pre + bc[i*N+r])) - 1.0;
        cn[i*N+r] = (1.0 - zz[i*N+r]) * cref[i*N+r] + zz[i*N+r] * ct;
      end
    cref = cn;
  endtask

  // ---------------- loading ----------------
  function automatic logic [N*DW-1:0] spec_of(input real w [N]);
    logic [N*DW-1:0] d;
    real re [N], im [N];
    for (int k = 0; k < N; k++) begin
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

  task automatic wr(input tgt_e tg, input int bank, input int addr, input logic [N*DW-1:0] d);
    @(negedge clk);
    wr_en = 1; wr_tgt = tg; wr_bank = 8'(bank); wr_addr = 16'(addr); wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic load_all();
    logic [N*DW-1:0] d;
    for (int k = 0; k < NPE; k++) begin
      for (int g = 0; g < GA; g++)
        for (int j = 0; j < Q; j++) wr(TGT_W_XC, k, g*Q + j, spec_of(wa[g*NPE+k][j]));
      for (int g = 0; g < GB; g++) begin
        for (int j = 0; j < QX; j++) wr(TGT_W_XC, k, GA*Q + g*QX + j, spec_of(wcx[g*NPE+k][j]));
        for (int j = 0; j < QH; j++) wr(TGT_W_CC, k, g*QH + j, spec_of(wcc[g*NPE+k][j]));
      end
    end
    for (int i = 0; i < QH; i++) begin
      for (int n = 0; n < N; n++) d[n*DW +: DW] = DW'(qi(br[i*N+n], FRAC));
      wr(TGT_BIAS, 0, i, d);
      for (int n = 0; n < N; n++) d[n*DW +: DW] = DW'(qi(bz[i*N+n], FRAC));
      wr(TGT_BIAS, 0, QH + i, d);
      for (int n = 0; n < N; n++) d[n*DW +: DW] = DW'(qi(bc[i*N+n], FRAC));
      wr(TGT_BIAS, 0, 2*QH + i, d);
    end
  endtask

  task automatic load_x(input int t);
    logic [N*DW-1:0] d;
    for (int j = 0; j < QX; j++) begin
      for (int n = 0; n < N; n++) d[n*DW +: DW] = DW'(qi(xs[t][j*N+n], FRAC));
      wr(TGT_INPUT, 0, j, d);
    end
  endtask

  // ---------------- checking ----------------
  int nout, cyc, overlap = 0, maxerr_cnt = 0;
  real got, maxerr = 0.0;
  always @(posedge clk) if (dut.iss_mac && dut.pst != 2'd0) overlap++;

  task automatic run_step(input int t);
    load_x(t);
    ref_step(t);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    nout = 0; cyc = 1;
    while (!done) begin
      @(posedge clk); #1;
      cyc++;
      if (out_valid) begin
        nout++;
        for (int n = 0; n < N; n++) begin
          got = real'($signed(out_data[n*DW +: DW])) / 256.0;
          checks++;
          if (got - cref[out_idx*N+n] > 0.05 || cref[out_idx*N+n] - got > 0.05) begin
            failures++;
            if (failures < 10) $display("step %0d c[%0d]: got %f want %f", t, out_idx*N+n, got, cref[out_idx*N+n]);
          end
          if (got - cref[out_idx*N+n] > maxerr) maxerr = got - cref[out_idx*N+n];
          if (cref[out_idx*N+n] - got > maxerr) maxerr = cref[out_idx*N+n] - got;
        end
      end
      if (cyc > 5000) break;
    end
    checks++;
    if (nout != QH) begin failures++; $display("step %0d: %0d output blocks, want %0d", t, nout, QH); end
    checks++;
    if (cyc > (GA + GB) * (Q + 1) + 80) begin failures++; $display("step %0d took %0d cycles", t, cyc); end
    $display("step %0d: %0d cycles, max |error| so far %f", t, cyc, maxerr);
  endtask

  initial begin
    wr_en = 0; clear = 0; start = 0; wr_tgt = TGT_W_XC; wr_bank = 0; wr_addr = 0; wr_data = '0;
    foreach (wa[i, j, n]) wa[i][j][n] = rnd(0.15);
    foreach (wcx[i, j, n]) wcx[i][j][n] = rnd(0.15);
    foreach (wcc[i, j, n]) wcc[i][j][n] = rnd(0.2);
    foreach (br[n]) begin br[n] = qz(rnd(0.5)); bz[n] = qz(rnd(0.5)); bc[n] = qz(rnd(0.5)); end
    foreach (xs[t, n]) xs[t][n] = qz(rnd(1.0));
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_all();
    for (int s = 0; s < 2; s++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      while (busy) @(negedge clk);
      foreach (cref[n]) cref[n] = 0.0;
      for (int t = 0; t < T; t++) run_step(s == 0 ? t : T - 1 - t);
    end
    checks++;
    if (overlap == 0) begin failures++; $display("stage 3 never overlapped the PE jobs"); end
    $display("overlap cycles: %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
