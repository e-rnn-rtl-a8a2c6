// ernn_fft: N-point radix-2 FFT with a right shift by one after every stage.
//
// This is the "FFT w/ SR-1" operator of the processing element. It is a
// combinational decimation-in-time FFT: the inputs are taken in bit-reversed
// order and pass log2(N) butterfly stages. Each butterfly computes
// (a + b*W)/2 and (a - b*W)/2, so the result is FFT(x)/N and a stage can never
// grow the magnitude of its operands: the W-bit words cannot overflow as long
// as the input components stay inside the W-bit range divided by sqrt(2).
// The paper gives the FFT and the one-bit right shift per stage (one shift
// register per stage, log2 N in all); the radix-2 DIT structure, rounding of
// the twiddle products (round half up) and the truncating shift are this
// design's choices. Twiddle factors are built at elaboration from $cos/$sin
// and held as TWF-fraction-bit constants.
//
// Interface: in_re/in_im  N complex samples, W bits each, any fixed point;
//            out_re/out_im FFT(in)/N in the same format.
// Timing:    purely combinational; the caller registers around it.
//
// Lint notes: the loop indices are 32-bit ints of which only log2(N) bits
// are used (UNUSEDSIGNAL on i1), harmless.
module ernn_fft #(
  parameter int unsigned N   = 16,
  parameter int unsigned W   = 18,
  parameter int unsigned TWF = 14
) (
  input  logic signed [W-1:0] in_re  [N],
  input  logic signed [W-1:0] in_im  [N],
  output logic signed [W-1:0] out_re [N],
  output logic signed [W-1:0] out_im [N]
);
  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned TW   = TWF + 2;

  typedef logic signed [TW-1:0] tw_t;
  typedef tw_t tw_arr_t [N/2];
  typedef logic signed [W-1:0] smp_t;
  typedef smp_t vec_t [N];

  // W_N^k = cos(2 pi k/N) - j sin(2 pi k/N)
  function automatic tw_arr_t mk_tw(input bit imag);
    tw_arr_t t;
    real a, v;
    for (int k = 0; k < N/2; k++) begin
      a = 2.0 * 3.14159265358979323846 * real'(k) / real'(N);
      v = imag ? -$sin(a) : $cos(a);
      v = v * real'(1 << TWF);
      t[k] = tw_t'($rtoi(v >= 0.0 ? v + 0.5 : v - 0.5));
    end
    return t;
  endfunction

  localparam tw_arr_t TWR = mk_tw(1'b0);
  localparam tw_arr_t TWI = mk_tw(1'b1);

  function automatic int unsigned bitrev(input int unsigned v);
    int unsigned r = 0;
    for (int b = 0; b < LOGN; b++) if (v[b]) r |= 1 << (LOGN - 1 - b);
    return r;
  endfunction

  // (a*wr - b*wi) rounded back to the data's fraction
  function automatic logic signed [W:0] cmul_part(input smp_t a, input tw_t wa,
                                                   input smp_t b, input tw_t wb,
                                                   input bit sub);
    logic signed [W+TW:0] p;
    p = sub ? (W+TW+1)'(a * wa) - (W+TW+1)'(b * wb)
            : (W+TW+1)'(a * wa) + (W+TW+1)'(b * wb);
    p = p + (W+TW+1)'(1 << (TWF - 1));
    return (W+1)'(p >>> TWF);
  endfunction

  always_comb begin
    vec_t cr, ci, nr, ni;
    logic signed [W:0] tr, ti;
    logic signed [W+1:0] s0r, s0i, s1r, s1i;
    int unsigned h, i0, i1, k;
    for (int n = 0; n < N; n++) begin
      cr[n] = in_re[bitrev(n)];
      ci[n] = in_im[bitrev(n)];
    end
    nr = cr;
    ni = ci;
    for (int s = 0; s < LOGN; s++) begin
      h = 1 << s;
      for (int b = 0; b < N/2; b++) begin
        k  = b % h;
        i0 = (b / h) * 2 * h + k;
        i1 = i0 + h;
        // t = c[i1] * W_N^(k*N/(2h))
        tr = cmul_part(cr[i1], TWR[k * (N / (2 * h))], ci[i1], TWI[k * (N / (2 * h))], 1'b1);
        ti = cmul_part(cr[i1], TWI[k * (N / (2 * h))], ci[i1], TWR[k * (N / (2 * h))], 1'b0);
        s0r = (W+2)'(cr[i0]) + (W+2)'(tr);
        s0i = (W+2)'(ci[i0]) + (W+2)'(ti);
        s1r = (W+2)'(cr[i0]) - (W+2)'(tr);
        s1i = (W+2)'(ci[i0]) - (W+2)'(ti);
        nr[i0] = W'(s0r >>> 1);
        ni[i0] = W'(s0i >>> 1);
        nr[i1] = W'(s1r >>> 1);
        ni[i1] = W'(s1i >>> 1);
      end
      cr = nr;
      ci = ni;
    end
    out_re = cr;
    out_im = ci;
  end

endmodule
