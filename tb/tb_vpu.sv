// tb_vpu: applies every VPU operation to random operand words and compares
// each of the 16 lanes with the mathematical function evaluated in real
// arithmetic: exact-to-rounding for add/max/relu/copy, 1e-3 for the
// multiplications, 1% (relative, plus 1e-3 absolute) for exp and elu, and
// 0.02 for the piecewise-linear sigmoid.
module tb_vpu;
  import blockgnn_pkg::*;
  localparam int M = 1, WE = 16 * M;

  int checks = 0, failures = 0;
  vop_e op;
  fix_t scalar;
  fix_t a [WE], b [WE], y [WE];

  vpu #(.M(M)) dut (.op, .scalar, .a, .b, .y);

  function automatic fix_t tofix(real v); return fix_t'(longint'(v * 65536.0)); endfunction
  function automatic real tor(fix_t v); return real'(v) / 65536.0; endfunction

  initial begin
    real ar, br, sr, ex, got, tol;
    for (int t = 0; t < 40; t++) begin
      for (int o = 0; o <= 8; o++) begin
        op = vop_e'(o);
        sr = (real'($urandom_range(2000)) - 1000.0) / 250.0;
        scalar = tofix(sr);
        for (int e = 0; e < WE; e++) begin
          a[e] = tofix((real'($urandom_range(2000)) - 1000.0) / 125.0);   // [-8, 8]
          b[e] = tofix((real'($urandom_range(2000)) - 1000.0) / 125.0);
        end
        #1;
        for (int e = 0; e < WE; e++) begin
          ar = tor(a[e]); br = tor(b[e]); got = tor(y[e]);
          tol = 1.0e-4;
          case (o)
            0: ex = ar + br;
            1: begin ex = ar * br; tol = 1.0e-3; end
            2: ex = (ar > br) ? ar : br;
            3: ex = (ar > 0) ? ar : 0.0;
            4: begin ex = 1.0 / (1.0 + $exp(-ar)); tol = 0.02; end
            5: begin ex = $exp(ar); tol = 0.01 * ex + 1.0e-3; end
            6: begin ex = (ar > 0) ? ar : $exp(ar) - 1.0; tol = 0.01 * $exp(ar) + 1.0e-3; end
            7: begin ex = ar * sr; tol = 1.0e-3; end
            default: ex = ar;
          endcase
          checks++;
          if (got - ex > tol || ex - got > tol) begin
            failures++;
            if (failures < 10) $display("op %0d a=%f b=%f got %f exp %f", o, ar, br, got, ex);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
