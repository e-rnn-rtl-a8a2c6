// ernn_pe: processing element for block-circulant matrix-vector products.
//
// A PE computes one output block a_i = sum_j W_ij x_j, where every W_ij is an
// LB x LB circulant matrix whose first row is w_ij and whose row r is that
// row rotated right by r places, W_ij[r][c] = w_ij[(c - r) mod LB]. It follows
// the chain of the paper's PE figure: FFT with per-stage shift, conjugation,
// dot product with weight spectra from BRAM, accumulation, a second FFT with
// per-stage shift and a final right shift:
//
//   a_i = SR( FFT( sum_j conj(FFT(x_j)/LB) . FFT(w_ij) ) / LB )
//
// The second FFT replaces the IFFT: for real results FFT(conj(X).W)/LB
// equals IFFT(X.conj(W)), which is the circular correlation the circulant
// blocks above describe. The front half (FFT + Conj) and the back half
// (dot product, accumulator, FFT, shift) have separate ports because input
// spectra are computed once per input block and kept in a spectrum buffer
// (FFT/IFFT decoupling): a CU first runs input blocks through the front half,
// then streams the stored spectra with the weight spectra through the back.
//
// Real-valued signals have Hermitian spectra, so both the stored input
// spectra and the weight spectra hold only LB real words ("half spectrum"):
//   word 0 = Re X[0], word 1 = Re X[LB/2], words 2k, 2k+1 = Re X[k], Im X[k]
//   for k = 1 .. LB/2-1.
// The dot product therefore needs only 2 + 4(LB/2-1) = 2LB-2 multipliers;
// the full spectrum is rebuilt by symmetry in front of the second FFT.
//
// Formats (own choice): inputs DW bits with FRAC fraction bits; stored input
// spectra SW bits with SFRAC fraction bits; weight spectra DW bits with WFRAC
// fraction bits (the per-layer static scaling factor of the paper is folded
// into WFRAC); result PW bits with FRAC fraction bits, saturated. The final
// shift is OSHIFT = SFRAC + WFRAC - FRAC - log2(LB).
//
// Timing: front half, fin_valid -> fout_valid one cycle later. Back half,
// one (spectrum, weight) pair per cycle on mac_valid; mac_first clears the
// accumulator, mac_last marks the last term; res_valid/res_data follow two
// cycles after the mac_last beat. Terms of the next block may follow
// mac_last back to back.
//
// Lint notes: the imaginary output of the back FFT (b_out_im) is unused on
// purpose: for a Hermitian spectrum it is zero up to rounding.
module ernn_pe
  import ernn_pkg::*;
#(
  parameter int unsigned N = LB
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // front half: time-domain block -> conjugated half spectrum
  input  logic                 fin_valid,
  input  logic signed [DW-1:0] fin_data  [N],
  output logic                 fout_valid,
  output logic signed [SW-1:0] fout_spec [N],
  // back half: spectral multiply-accumulate
  input  logic                 mac_valid,
  input  logic                 mac_first,
  input  logic                 mac_last,
  input  logic signed [SW-1:0] mac_spec  [N],
  input  logic signed [DW-1:0] mac_w     [N],
  // output block
  output logic                 res_valid,
  output logic signed [PW-1:0] res_data  [N]
);
  localparam int unsigned LOGN   = $clog2(N);
  localparam int unsigned OSHIFT = SFRAC + WFRAC - FRAC - LOGN;
  localparam int unsigned PRW    = SW + DW + 1;

  // ---------------- front half: FFT w/ SR-1, then Conj -----------------
  logic signed [SW-1:0] f_in_re [N], f_in_im [N], f_out_re [N], f_out_im [N];

  always_comb begin
    for (int n = 0; n < N; n++) begin
      f_in_re[n] = SW'(fin_data[n]) <<< (SFRAC - FRAC);
      f_in_im[n] = '0;
    end
  end

  ernn_fft #(.N(N), .W(SW), .TWF(TWF)) u_fft_in (
    .in_re(f_in_re), .in_im(f_in_im), .out_re(f_out_re), .out_im(f_out_im));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fout_valid <= 1'b0;
      for (int n = 0; n < N; n++) fout_spec[n] <= '0;
    end else begin
      fout_valid <= fin_valid;
      if (fin_valid) begin
        fout_spec[0] <= f_out_re[0];
        fout_spec[1] <= f_out_re[N/2];
        for (int k = 1; k < N/2; k++) begin
          fout_spec[2*k]   <= f_out_re[k];
          fout_spec[2*k+1] <= -f_out_im[k];      // conjugation
        end
      end
    end
  end

  // ---------------- dot product and accumulator -------------------------
  logic signed [PRW-1:0] prod [N];
  logic signed [ACCW-1:0] acc [N];
  logic acc_done;

  always_comb begin
    prod[0] = PRW'(mac_spec[0] * mac_w[0]);
    prod[1] = PRW'(mac_spec[1] * mac_w[1]);
    for (int k = 1; k < N/2; k++) begin
      prod[2*k]   = PRW'(mac_spec[2*k] * mac_w[2*k]) - PRW'(mac_spec[2*k+1] * mac_w[2*k+1]);
      prod[2*k+1] = PRW'(mac_spec[2*k] * mac_w[2*k+1]) + PRW'(mac_spec[2*k+1] * mac_w[2*k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_done <= 1'b0;
      for (int n = 0; n < N; n++) acc[n] <= '0;
    end else begin
      acc_done <= mac_valid && mac_last;
      if (mac_valid)
        for (int n = 0; n < N; n++)
          acc[n] <= (mac_first ? '0 : acc[n]) + ACCW'(prod[n]);
    end
  end

  // ---------------- rebuild full spectrum, FFT w/ SR-1, SR ---------------
  logic signed [ACCW-1:0] b_in_re [N], b_in_im [N], b_out_re [N], b_out_im [N];

  always_comb begin
    b_in_re[0]   = acc[0];
    b_in_im[0]   = '0;
    b_in_re[N/2] = acc[1];
    b_in_im[N/2] = '0;
    for (int k = 1; k < N/2; k++) begin
      b_in_re[k]   = acc[2*k];
      b_in_im[k]   = acc[2*k+1];
      b_in_re[N-k] = acc[2*k];
      b_in_im[N-k] = -acc[2*k+1];
    end
  end

  ernn_fft #(.N(N), .W(ACCW), .TWF(TWF)) u_fft_out (
    .in_re(b_in_re), .in_im(b_in_im), .out_re(b_out_re), .out_im(b_out_im));

  // b_out_im is left unused: the transform of a Hermitian spectrum is real.

  function automatic logic signed [PW-1:0] shift_sat(input logic signed [ACCW-1:0] v);
    logic signed [ACCW-1:0] r;
    r = (v + ACCW'(1 << (OSHIFT - 1))) >>> OSHIFT;
    if (r > ACCW'((1 << (PW - 1)) - 1))  return PW'((1 << (PW - 1)) - 1);
    if (r < -ACCW'(1 << (PW - 1)))        return PW'(-(1 << (PW - 1)));
    return r[PW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      for (int n = 0; n < N; n++) res_data[n] <= '0;
    end else begin
      res_valid <= acc_done;
      if (acc_done)
        for (int n = 0; n < N; n++) res_data[n] <= shift_sat(b_out_re[n]);
    end
  end

endmodule
