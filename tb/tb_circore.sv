// tb_circore: end-to-end check of the CirCore pipeline at reduced size.
//
// Builds a random block-circulant layer (p x q blocks, each defined by its
// first column w_ij), preloads the spectral weights FFT(w_ij) (computed here
// in real arithmetic), streams several feature vectors through, and compares
// every output sample with the direct product
//   h'_i[r] = sum_j sum_c w_ij[(r - c) mod n] * h_j[c].
// The shape p=3, q=3 on a 2x2 array exercises zero padding of a partial
// input tile, a partial output tile, several tiles per vector, cross-vector
// channel sharing in the FFT unit and both MAC-input banks. The number of MAC
// issue cycles per vector must be ceil(q/R)*ceil(p/C)*n/L.
module tb_circore;
  import blockgnn_pkg::*;
  localparam int X = 4, Y = 2, R = 2, C = 2, L = 2, NPT = 16, TILES = 4, QMAX = 4;
  localparam int P = 3, Q = 3, NV = 4;
  localparam int NPK = NPT / L;
  localparam int QT = (Q + R - 1) / R, PT = (P + C - 1) / C;
  localparam real PI = 3.14159265358979323846;
  localparam real TOL = 0.01;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_we;
  logic [0:0] w_row, w_col;
  logic [$clog2(TILES*NPK)-1:0] w_addr;
  cplx_t w_data [L];
  logic in_valid, in_ready, out_valid, out_last, mac_active;
  fix_t in_data, out_data;
  logic [23:0] in_tag, out_tag;

  circore #(.X(X), .Y(Y), .R(R), .C(C), .L(L), .NPT(NPT), .TILES(TILES), .QMAX(QMAX)) dut (
    .clk, .rst_n, .cfg_p(8'(P)), .cfg_q(8'(Q)),
    .w_we, .w_row, .w_col, .w_addr, .w_data,
    .in_valid, .in_ready, .in_data, .in_tag,
    .out_valid, .out_ready(1'b1), .out_data, .out_tag, .out_last, .mac_active);

  real w [P][Q][NPT];
  real h [NV][Q][NPT];

  function automatic fix_t tofix(real v); return fix_t'(longint'(v * 65536.0)); endfunction
  function automatic real tor(fix_t v); return real'(v) / 65536.0; endfunction

  int issue_cycles = 0;
  always @(posedge clk) if (dut.issue) issue_cycles++;

  // collector
  int got = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int v = int'(out_tag[23:8]);
    automatic int i = int'(out_tag[7:0]);
    automatic int r = got % NPT;
    automatic real ref_v = 0.0;
    for (int j = 0; j < Q; j++)
      for (int c = 0; c < NPT; c++)
        ref_v += w[i][j][(r - c + NPT) % NPT] * h[v][j][c];
    checks++;
    if (v != got / (P * NPT) || i != (got / NPT) % P || out_last != (r == NPT - 1) ||
        tor(out_data) - ref_v > TOL || ref_v - tor(out_data) > TOL) begin
      failures++;
      if (failures < 10) $display("out v%0d i%0d r%0d got %f exp %f", v, i, r, tor(out_data), ref_v);
    end
    got++;
  end

  initial begin
    real sr, si;
    w_we = 0; w_row = 0; w_col = 0; w_addr = 0; in_valid = 0; in_data = 0; in_tag = 0;
    for (int e = 0; e < L; e++) w_data[e] = '0;
    for (int i = 0; i < P; i++) for (int j = 0; j < Q; j++) for (int k = 0; k < NPT; k++)
      w[i][j][k] = (real'($urandom_range(1000)) - 500.0) / 2000.0;
    for (int v = 0; v < NV; v++) for (int j = 0; j < Q; j++) for (int k = 0; k < NPT; k++)
      h[v][j][k] = (real'($urandom_range(1000)) - 500.0) / 250.0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // preload spectral weights
    for (int i = 0; i < P; i++) for (int j = 0; j < Q; j++) for (int pk = 0; pk < NPK; pk++) begin
      for (int e = 0; e < L; e++) begin
        sr = 0; si = 0;
        for (int t = 0; t < NPT; t++) begin
          sr += w[i][j][t] * $cos(2.0 * PI * (pk * L + e) * t / NPT);
          si -= w[i][j][t] * $sin(2.0 * PI * (pk * L + e) * t / NPT);
        end
        w_data[e].re = tofix(sr); w_data[e].im = tofix(si);
      end
      w_we = 1; w_row = 1'(j % R); w_col = 1'(i % C);
      w_addr = $bits(w_addr)'(((i / C) * QT + j / R) * NPK + pk);
      @(posedge clk); #1;
    end
    w_we = 0;
    // stream the vectors
    for (int v = 0; v < NV; v++) for (int j = 0; j < Q; j++) for (int k = 0; k < NPT; k++) begin
      in_valid = 1; in_data = tofix(h[v][j][k]); in_tag = {16'(v), 8'(j)};
      while (!in_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1;
    end
    in_valid = 0;
    wait (got == NV * P * NPT);
    repeat (5) @(posedge clk);
    checks++;
    if (issue_cycles != NV * QT * PT * NPK) begin
      failures++; $display("issue cycles %0d expected %0d", issue_cycles, NV * QT * PT * NPK);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d samples out", got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
