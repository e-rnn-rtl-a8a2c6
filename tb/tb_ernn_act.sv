// tb_ernn_act: sweeps the whole input range of the piecewise linear sigmoid
// and tanh. Each output is compared with the exact segment formula worked
// out in floating point (to within 2 LSB of truncation) and with the true
// function (to within the approximation error of the segments plus truncation, 0.025 for
// sigmoid and 0.045 for tanh). Also checks symmetry and saturation values.
module tb_ernn_act;
  import ernn_pkg::*;
  logic signed [PW-1:0] x;
  logic is_tanh;
  logic signed [DW-1:0] y;
  int checks = 0, failures = 0;

  ernn_act dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real plan(input real v);
    real a = v < 0.0 ? -v : v, r;
    if (a >= 5.0) r = 1.0;
    else if (a >= 2.375) r = a / 32.0 + 0.84375;
    else if (a >= 1.0) r = a / 8.0 + 0.625;
    else r = a / 4.0 + 0.5;
    return v < 0.0 ? 1.0 - r : r;
  endfunction

  task automatic chk(input real got, input real want, input real tol, input string what);
    checks++;
    if (got - want > tol || want - got > tol) begin
      failures++;
      if (failures < 10) $display("%s x=%f got %f want %f", what, real'(x) / 256.0, got, want);
    end
  endtask

  real xv, yv, ex, lsb;
  initial begin
    lsb = 1.0 / 256.0;
    for (int t = 0; t < 2; t++) begin
      is_tanh = t[0];
      for (int v = -4000; v <= 4000; v += 7) begin
        x = PW'(v);
        #1;
        xv = real'(v) / 256.0;
        yv = real'(y) / 256.0;
        if (!is_tanh) begin
          chk(yv, plan(xv), 2.0 * lsb, "sigmoid-seg");
          chk(yv, 1.0 / (1.0 + $exp(-xv)), 0.025, "sigmoid");
        end else begin
          chk(yv, 2.0 * plan(2.0 * xv) - 1.0, 3.0 * lsb, "tanh-seg");
          ex = (($exp(xv) - $exp(-xv)) / ($exp(xv) + $exp(-xv)));
          chk(yv, ex, 0.045, "tanh");
        end
      end
    end
    // saturation at the ends of the input range
    is_tanh = 0; x = 16'sh7fff; #1; chk(real'(y) / 256.0, 1.0, 0.0, "sat+");
    x = -16'sh8000; #1; chk(real'(y) / 256.0, 0.0, 0.0, "sat-");
    is_tanh = 1; x = 16'sh7fff; #1; chk(real'(y) / 256.0, 1.0, 0.0, "tsat+");
    x = -16'sh8000; #1; chk(real'(y) / 256.0, -1.0, 0.0, "tsat-");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
