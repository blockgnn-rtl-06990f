// tb_ifft_unit: streams several sub-vectors through a 4-channel IFFT unit
// (the FFT unit built with INVERSE=1, which also scales by 1/n) with
// random output back-pressure and checks that each spectrum matches a direct inverse
// DFT, that outputs leave in input order with their tags, and that the
// channels work in parallel (all sub-vectors done in far less time than
// one channel would need for them one after another).
module tb_ifft_unit;
  import blockgnn_pkg::*;
  localparam int LANES = 4, NPT = 16, NSUB = 7;
  localparam bit INV = 1'b1;
  localparam int T_ONE = NPT + NPT/2 * $clog2(NPT) + NPT;   // one transform, one channel
  localparam real TOL = 0.01;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, out_last;
  cplx_t in_data, out_data;
  logic [23:0] in_tag, out_tag;

  fft_unit #(.LANES(LANES), .NPT(NPT), .INVERSE(INV)) dut (.clk, .rst_n,
    .in_valid, .in_ready, .in_data, .in_tag, .out_valid, .out_ready, .out_data, .out_tag, .out_last);

  real xr [NSUB][NPT], xi [NSUB][NPT];
  function automatic fix_t tofix(real v); return fix_t'(longint'(v * 65536.0)); endfunction
  function automatic real tor(fix_t v); return real'(v) / 65536.0; endfunction

  int got = 0, cyc = 0, t_end = 0;
  always @(posedge clk) begin
    cyc++;
    out_ready <= ($urandom_range(3) != 0);
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int s = got / NPT, f = got % NPT;
    automatic real rr = 0, ri = 0, ang, sg = INV ? 1.0 : -1.0, sc = INV ? 1.0 / NPT : 1.0;
    for (int i = 0; i < NPT; i++) begin
      ang = 2.0 * PI * f * i / NPT;
      rr += xr[s][i] * $cos(ang) - sg * xi[s][i] * $sin(ang);
      ri += xi[s][i] * $cos(ang) + sg * xr[s][i] * $sin(ang);
    end
    rr *= sc; ri *= sc;
    checks++;
    if (out_tag != 24'(s * 3 + 1) || out_last != (f == NPT - 1) ||
        tor(out_data.re) - rr > TOL || rr - tor(out_data.re) > TOL ||
        tor(out_data.im) - ri > TOL || ri - tor(out_data.im) > TOL) begin
      failures++;
      if (failures < 8) $display("s%0d f%0d tag %0d got %f %f exp %f %f", s, f, out_tag,
                                 tor(out_data.re), tor(out_data.im), rr, ri);
    end
    got++;
    if (got == NSUB * NPT) t_end = cyc;
  end

  initial begin
    int t0;
    in_valid = 0; in_data = '0; in_tag = '0;
    for (int s = 0; s < NSUB; s++) for (int i = 0; i < NPT; i++) begin
      xr[s][i] = (real'($urandom_range(2000)) - 1000.0) / 500.0;
      xi[s][i] = (real'($urandom_range(2000)) - 1000.0) / 500.0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    t0 = cyc;
    for (int s = 0; s < NSUB; s++) for (int i = 0; i < NPT; i++) begin
      in_valid = 1; in_data.re = tofix(xr[s][i]); in_data.im = tofix(xi[s][i]);
      in_tag = 24'(s * 3 + 1);
      while (!in_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1;
    end
    in_valid = 0;
    wait (got == NSUB * NPT);
    checks++;
    // parallel channels: well under the time of NSUB back-to-back transforms
    if (t_end - t0 > (NSUB * T_ONE) * 2 / 3) begin
      failures++; $display("took %0d cycles, serial would be %0d", t_end - t0, NSUB * T_ONE);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
