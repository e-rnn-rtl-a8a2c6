// tb_ernn_pe: checks the processing element against direct circulant
// matrix-vector products computed in floating point.
//  1. The 4x4 circulant example (first row 1.14 -0.69 0.83 -2.26, input
//     0.78 -1.11 0.95 0.39) on a 4-point PE, against the full matrix
//     written out row by row.
//  2. Random block rows of Q = 6 blocks on the 16-point PE, several output
//     blocks back to back.
// Weight spectra are produced here by a floating-point DFT of the first
// rows and rounded to the weight format; the expected result uses the
// unquantised weights, so the tolerance covers all quantisation.
// It also checks the latency: res_valid two cycles after the mac_last beat.
module tb_ernn_pe;
  import ernn_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam int unsigned Q = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- 16-point DUT ----------------
  logic fin_valid, fout_valid, mac_valid, mac_first, mac_last, res_valid;
  logic signed [DW-1:0] fin_data [16], mac_w [16];
  logic signed [SW-1:0] fout_spec [16], mac_spec [16];
  logic signed [PW-1:0] res_data [16];
  ernn_pe #(.N(16)) dut (.*);

  // ---------------- 4-point DUT ----------------
  logic s_fin_valid, s_fout_valid, s_mac_valid, s_mac_first, s_mac_last, s_res_valid;
  logic signed [DW-1:0] s_fin_data [4], s_mac_w [4];
  logic signed [SW-1:0] s_fout_spec [4], s_mac_spec [4];
  logic signed [PW-1:0] s_res_data [4];
  ernn_pe #(.N(4)) dut4 (.clk, .rst_n, .fin_valid(s_fin_valid), .fin_data(s_fin_data),
    .fout_valid(s_fout_valid), .fout_spec(s_fout_spec), .mac_valid(s_mac_valid),
    .mac_first(s_mac_first), .mac_last(s_mac_last), .mac_spec(s_mac_spec), .mac_w(s_mac_w),
    .res_valid(s_res_valid), .res_data(s_res_data));

  function automatic int q(input real v, input int frac);
    real s = v * real'(1 << frac);
    return $rtoi(s >= 0.0 ? s + 0.5 : s - 0.5);
  endfunction

  // half spectrum of a real vector, rounded to the weight format
  function automatic void half_spec(input int n, input real w [], output int hs []);
    real re [], im [];
    re = new[n]; im = new[n]; hs = new[n];
    for (int k = 0; k < n; k++) begin
      re[k] = 0.0; im[k] = 0.0;
      for (int m = 0; m < n; m++) begin
        re[k] += w[m] * $cos(2.0 * PI * k * m / n);
        im[k] -= w[m] * $sin(2.0 * PI * k * m / n);
      end
    end
    hs[0] = q(re[0], WFRAC);
    hs[1] = q(re[n/2], WFRAC);
    for (int k = 1; k < n/2; k++) begin
      hs[2*k] = q(re[k], WFRAC);
      hs[2*k+1] = q(im[k], WFRAC);
    end
  endfunction

  real wr [4][Q][16];   // first rows: [out block][in block][elem]
  real xr [Q][16];
  logic signed [SW-1:0] spec [Q][16];
  int hs [];
  real exp_a, tol;
  int lat;

  initial begin
    fin_valid = 0; mac_valid = 0; mac_first = 0; mac_last = 0;
    s_fin_valid = 0; s_mac_valid = 0; s_mac_first = 0; s_mac_last = 0;
    foreach (fin_data[n]) begin fin_data[n] = '0; mac_w[n] = '0; mac_spec[n] = '0; end
    foreach (s_fin_data[n]) begin s_fin_data[n] = '0; s_mac_w[n] = '0; s_mac_spec[n] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ---------- 1. 4x4 circulant example ----------
    begin
      static real w4 [] = '{1.14, -0.69, 0.83, -2.26};
      static real x4 [4] = '{0.78, -1.11, 0.95, 0.39};
      static real m4 [4][4] = '{'{1.14, -0.69, 0.83, -2.26}, '{-2.26, 1.14, -0.69, 0.83},
                         '{0.83, -2.26, 1.14, -0.69}, '{-0.69, 0.83, -2.26, 1.14}};
      half_spec(4, w4, hs);
      s_fin_valid <= 1;
      foreach (x4[n]) s_fin_data[n] <= DW'(q(x4[n], FRAC));
      @(posedge clk);
      s_fin_valid <= 0;
      @(posedge clk);
      checks++;
      if (!s_fout_valid) begin failures++; $display("4pt: fout_valid missing"); end
      s_mac_valid <= 1; s_mac_first <= 1; s_mac_last <= 1;
      foreach (s_mac_spec[n]) begin s_mac_spec[n] <= s_fout_spec[n]; s_mac_w[n] <= DW'(hs[n]); end
      @(posedge clk);
      s_mac_valid <= 0; s_mac_first <= 0; s_mac_last <= 0;
      @(posedge clk);
      #1;
      checks++;
      if (!s_res_valid) begin failures++; $display("4pt: res_valid not 2 cycles after mac_last"); end
      for (int r = 0; r < 4; r++) begin
        exp_a = 0.0;
        for (int c = 0; c < 4; c++) exp_a += m4[r][c] * x4[c];
        checks++;
        if ((real'(s_res_data[r]) / 256.0 - exp_a) > 0.05 || (exp_a - real'(s_res_data[r]) / 256.0) > 0.05) begin
          failures++;
          $display("4pt row %0d: got %f want %f", r, real'(s_res_data[r]) / 256.0, exp_a);
        end
      end
    end

    // ---------- 2. random 16-point block rows ----------
    repeat (5) begin
      foreach (xr[j, n]) xr[j][n] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * 1.5;
      foreach (wr[i, j, n]) wr[i][j][n] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * 0.25;
      // front half: spectra of all input blocks
      for (int j = 0; j < Q; j++) begin
        @(negedge clk);
        fin_valid = 1;
        foreach (fin_data[n]) fin_data[n] = DW'(q(xr[j][n], FRAC));
        @(posedge clk); #1;
        fin_valid = 0;
        checks++;
        if (!fout_valid) begin failures++; $display("fout_valid missing"); end
        spec[j] = fout_spec;
      end
      // back half: 4 output blocks back to back
      fork
        begin
          for (int i = 0; i < 4; i++)
            for (int j = 0; j < Q; j++) begin
              real wv [];
              wv = new[16];
              foreach (wv[n]) wv[n] = wr[i][j][n];
              half_spec(16, wv, hs);
              @(negedge clk);
              mac_valid = 1; mac_first = (j == 0); mac_last = (j == Q - 1);
              mac_spec = spec[j];
              foreach (mac_w[n]) mac_w[n] = DW'(hs[n]);
            end
          @(negedge clk);
          mac_valid = 0; mac_first = 0; mac_last = 0;
        end
        begin
          for (int i = 0; i < 4; i++) begin
            lat = 0;
            // wait for the mac_last beat of block i
            do @(posedge clk); while (!(mac_valid && mac_last));
            do begin @(posedge clk); lat++; end while (!res_valid && lat < 10);
            #1;
            checks++;
            if (lat != 2) begin failures++; $display("latency %0d, want 2", lat); end
            for (int r = 0; r < 16; r++) begin
              exp_a = 0.0;
              for (int j = 0; j < Q; j++)
                for (int c = 0; c < 16; c++)
                  exp_a += wr[i][j][(c - r + 16) % 16] * xr[j][c];
              tol = 0.06;
              checks++;
              if ((real'(res_data[r]) / 256.0 - exp_a) > tol || (exp_a - real'(res_data[r]) / 256.0) > tol) begin
                failures++;
                if (failures < 10) $display("blk %0d row %0d: got %f want %f", i, r, real'(res_data[r]) / 256.0, exp_a);
              end
            end
          end
        end
      join
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
