// tb_fft_core: checks one forward and one inverse FFT channel against a
// direct DFT computed in real arithmetic, and checks the core's occupancy:
// the first output sample must appear NPT + (NPT/2)*log2(NPT) cycles after
// the first input sample.
module tb_fft_core;
  import blockgnn_pkg::*;
  localparam int NPT = 128;
  localparam int LOGN = $clog2(NPT);
  localparam real TOL = 0.02;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic  iv [2], ir [2], ov [2], ol [2];
  cplx_t id [2], od [2];
  logic [23:0] itag [2], otag [2];

  fft_core #(.NPT(NPT), .INVERSE(1'b0)) u_fwd (.clk, .rst_n,
    .in_valid(iv[0]), .in_ready(ir[0]), .in_data(id[0]), .in_tag(itag[0]),
    .out_valid(ov[0]), .out_ready(1'b1), .out_data(od[0]), .out_tag(otag[0]), .out_last(ol[0]));
  fft_core #(.NPT(NPT), .INVERSE(1'b1)) u_inv (.clk, .rst_n,
    .in_valid(iv[1]), .in_ready(ir[1]), .in_data(id[1]), .in_tag(itag[1]),
    .out_valid(ov[1]), .out_ready(1'b1), .out_data(od[1]), .out_tag(otag[1]), .out_last(ol[1]));

  real xr [NPT], xi [NPT];

  function automatic real tor(fix_t v); return real'(v) / 65536.0; endfunction
  function automatic fix_t tofix(real v); return fix_t'(longint'(v * 65536.0)); endfunction

  task automatic run(int k, int trial);
    real rr, ri, ang, sgn, scl, er, ei;
    int t0, t1, cyc;
    for (int i = 0; i < NPT; i++) begin
      xr[i] = (real'($urandom_range(2000)) - 1000.0) / 500.0;
      xi[i] = (k == 1) ? (real'($urandom_range(2000)) - 1000.0) / 500.0 : 0.0;
    end
    cyc = 0;
    for (int i = 0; i < NPT; i++) begin
      iv[k] = 1; id[k].re = tofix(xr[i]); id[k].im = tofix(xi[i]); itag[k] = 24'(trial*16 + k);
      while (!ir[k]) begin @(posedge clk); #1; end
      @(posedge clk); #1;
      cyc++;
    end
    iv[k] = 0;
    // first input was accepted NPT cycles ago
    t0 = NPT;
    while (!ov[k]) begin @(posedge clk); #1; t0++; end
    checks++;
    if (t0 != NPT + NPT/2*LOGN) begin
      failures++; $display("latency mismatch lane %0d: %0d", k, t0);
    end
    sgn = (k == 1) ? 1.0 : -1.0;
    scl = (k == 1) ? 1.0 / NPT : 1.0;
    for (int f = 0; f < NPT; f++) begin
      rr = 0; ri = 0;
      for (int i = 0; i < NPT; i++) begin
        ang = 2.0 * 3.14159265358979323846 * f * i / NPT;
        rr += xr[i] * $cos(ang) - sgn * xi[i] * $sin(ang);
        ri += xi[i] * $cos(ang) + sgn * xr[i] * $sin(ang);
      end
      rr *= scl; ri *= scl;
      er = tor(od[k].re) - rr; ei = tor(od[k].im) - ri;
      checks++;
      if (er > TOL || er < -TOL || ei > TOL || ei < -TOL || otag[k] != 24'(trial*16 + k)
          || ol[k] != (f == NPT-1)) begin
        failures++;
        if (failures < 10) $display("lane %0d bin %0d got %f %f exp %f %f", k, f,
                                    tor(od[k].re), tor(od[k].im), rr, ri);
      end
      @(posedge clk); #1;
    end
  endtask

  initial begin
    iv = '{0, 0}; id[0] = '0; id[1] = '0; itag[0] = '0; itag[1] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      run(0, t);
      run(1, t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
