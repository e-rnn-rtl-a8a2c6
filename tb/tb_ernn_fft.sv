// tb_ernn_fft: checks the FFT-with-per-stage-shift operator against a
// floating-point DFT divided by N, for an impulse, a constant and random
// complex vectors. Tolerance covers the truncating shifts (about one LSB per
// stage) and twiddle rounding.
module tb_ernn_fft;
  localparam int unsigned N = 16;
  localparam int unsigned W = 18;
  localparam real PI = 3.14159265358979323846;

  logic signed [W-1:0] in_re [N], in_im [N], out_re [N], out_im [N];
  int checks = 0, failures = 0;
  logic clk = 0;

  ernn_fft #(.N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_dft(input real tol);
    real er, ei, a;
    #1;
    for (int k = 0; k < N; k++) begin
      er = 0.0; ei = 0.0;
      for (int n = 0; n < N; n++) begin
        a = -2.0 * PI * real'(k * n) / real'(N);
        er += real'(in_re[n]) * $cos(a) - real'(in_im[n]) * $sin(a);
        ei += real'(in_re[n]) * $sin(a) + real'(in_im[n]) * $cos(a);
      end
      er /= real'(N); ei /= real'(N);
      checks++;
      if ((real'(out_re[k]) - er > tol) || (er - real'(out_re[k]) > tol) ||
          (real'(out_im[k]) - ei > tol) || (ei - real'(out_im[k]) > tol)) begin
        failures++;
        if (failures < 10)
          $display("mismatch bin %0d: got %0d,%0d want %f,%f", k, out_re[k], out_im[k], er, ei);
      end
    end
  endtask

  initial begin
    // impulse at sample 3, amplitude 16000
    foreach (in_re[n]) begin in_re[n] = (n == 3) ? 18'sd16000 : '0; in_im[n] = '0; end
    check_dft(6.0);
    // constant
    foreach (in_re[n]) begin in_re[n] = 18'sd20000; in_im[n] = '0; end
    check_dft(6.0);
    // random, components within +-32767
    repeat (200) begin
      foreach (in_re[n]) begin
        in_re[n] = W'($signed($urandom_range(0, 65534)) - 32767);
        in_im[n] = W'($signed($urandom_range(0, 65534)) - 32767);
      end
      check_dft(6.0);
    end
    // real-valued input: spectrum must be Hermitian
    foreach (in_re[n]) begin in_re[n] = W'($signed($urandom_range(0, 40000)) - 20000); in_im[n] = '0; end
    check_dft(6.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
