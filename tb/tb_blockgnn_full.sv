// tb_blockgnn_full: the same end-to-end GS-Pool layer run as
// tb_blockgnn_top, but on the accelerator at its default (full) size:
// block size 128, 16 FFT and 16 IFFT channels, a 4x4 array, 512 KB NFB and
// 256 KB WB. The layer maps 640 input features (5 sub-vectors, the size of a
// Reddit-like input padded to whole blocks) to 1024 aggregated features, with 6
// sampled neighbours, driven only through the host bus.
//
//   aggregation:  a = max_u ReLU(W_pool h_u + b),  u over S sampled neighbours
//   combination:  h' = ReLU(W (a | h_v))
//
// The host loads both block-circulant weight matrices (as spectral weights),
// the neighbour features, the node's own feature and the bias, then pushes
// the command list: SWAP, LDW, GEMV, VPU ADD (bias), VPU RELU, VPU MAX,
// VPU COPY (concatenation), LDW, GEMV, VPU RELU, SWAP. It reads the result
// from its NFB bank and compares it with the same layer computed here in
// real arithmetic. It also counts how often each mechanism of the design
// occurred (command-FIFO back-pressure, NFB bank swap, weight preload,
// FFT channels shared across vectors, zero-padded input tile, multi-tile
// spectral accumulation, MAC-input ping-pong, FFT-to-MAC stall, VPU ops)
// and counts a failure for any that never did.
module tb_blockgnn_full;
  import blockgnn_pkg::*;
  // default design size (the top is instantiated without parameters)
  localparam int R = 4, M = 1, NPT = 128, L = 1;
  // layer: Din = Q1*NPT, Dout = P1*NPT, S neighbours
  localparam int Q1 = 5, P1 = 8, S = 6;
  localparam int Q2 = P1 + Q1, P2 = 2;
  localparam int WE = 16 * M, WPS = NPT / WE;
  localparam int WATCHDOG = 1000000;
  localparam real PI = 3.14159265358979323846;
  localparam real TOL = 0.03;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        h_valid, h_ready, h_we, h_rvalid, busy;
  logic [1:0]  h_region;
  logic [19:0] h_addr;
  fix_t        h_wdata [WE], h_rdata [WE];

  blockgnn_top dut (
    .clk, .rst_n, .h_valid, .h_ready, .h_we, .h_region, .h_addr, .h_wdata,
    .h_rvalid, .h_rdata, .busy);

  // ---------------- data -----------------------------------------------------------
  real wp [P1*NPT][Q1*NPT];   // dense views of the block-circulant matrices
  real wc [P2*NPT][Q2*NPT];
  real wpf [P1][Q1][NPT];     // first columns
  real wcf [P2][Q2][NPT];
  real hu [S][Q1*NPT], hv [Q1*NPT], bias [P1*NPT];
  real agg [P1*NPT], outv [P2*NPT];

  function automatic fix_t tofix(real v); return fix_t'(longint'(v * 65536.0)); endfunction
  function automatic real tor(fix_t v); return real'(v) / 65536.0; endfunction
  function automatic real rnd(real s); return (real'($urandom_range(2000)) - 1000.0) / 1000.0 * s; endfunction

  // NFB word addresses (accelerator bank after the first swap)
  localparam int A_HU = 0, A_HV = A_HU + S * Q1 * WPS, A_B = A_HV + Q1 * WPS;
  localparam int A_Z = A_B + P1 * WPS, A_AGG = A_Z + S * P1 * WPS, A_OUT = A_AGG + Q2 * WPS;
  localparam int WB_P = 0, WB_C = P1 * Q1 * NPT;

  // ---------------- host bus tasks ------------------------------------------------
  task automatic bus_write(logic [1:0] reg_sel, int addr, fix_t d [WE]);
    h_valid = 1; h_we = 1; h_region = reg_sel; h_addr = 20'(addr); h_wdata = d;
    while (!h_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    h_valid = 0; h_we = 0;
  endtask

  task automatic bus_read(logic [1:0] reg_sel, int addr, output fix_t d [WE]);
    h_valid = 1; h_we = 0; h_region = reg_sel; h_addr = 20'(addr);
    @(posedge clk); #1;
    h_valid = 0;
    d = h_rdata;   // h_rvalid is high now
    if (!h_rvalid) begin failures++; $display("no read response"); end
  endtask

  task automatic push_cmd(opcode_e op, vop_e vop, int a, int b, int dst, int len,
                          int p, int q, fix_t sc);
    cmd_t c;
    logic [WE*32-1:0] flat;
    fix_t d [WE];
    c.op = op; c.vop = vop; c.src_a = 20'(a); c.src_b = 20'(b); c.dst = 20'(dst);
    c.len = 16'(len); c.p = 8'(p); c.q = 8'(q); c.scalar = sc;
    flat = '0;
    flat[$bits(cmd_t)-1:0] = c;
    for (int e = 0; e < WE; e++) d[e] = flat[e*32 +: 32];
    bus_write(2'd0, 0, d);
  endtask

  task automatic write_vec(int word, real v [], int n);
    fix_t d [WE];
    for (int w = 0; w < n / WE; w++) begin
      for (int e = 0; e < WE; e++) d[e] = tofix(v[w*WE + e]);
      bus_write(2'd2, word + w, d);
    end
  endtask

  task automatic write_weights(int base, int p, int q, bit second);
    fix_t d [WE];
    real sr, si, x;
    for (int i = 0; i < p; i++) for (int j = 0; j < q; j++) for (int k = 0; k < NPT; k++) begin
      sr = 0; si = 0;
      for (int t = 0; t < NPT; t++) begin
        x = second ? wcf[i][j][t] : wpf[i][j][t];
        sr += x * $cos(2.0 * PI * k * t / NPT);
        si -= x * $sin(2.0 * PI * k * t / NPT);
      end
      for (int e = 0; e < WE; e++) d[e] = '0;
      d[0] = tofix(sr); d[1] = tofix(si);
      bus_write(2'd1, base + (i * q + j) * NPT + k, d);
    end
  endtask

  // ---------------- mechanism counters ---------------------------------------------
  int n_fifo_full = 0, n_swap = 0, n_ldw = 0, n_share = 0, n_pad = 0, n_accum = 0;
  int n_bank1 = 0, n_stall = 0, n_vpu [9];
  int cyc = 0, gemv_start = 0, gemv_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (h_valid && !h_ready) n_fifo_full++;
    if (dut.nfb_swap) n_swap++;
    if (dut.w_we) n_ldw++;
    // FFT channel loaded while another channel holds a different vector
    if (dut.u_circore.u_fft.in_valid && dut.u_circore.u_fft.in_ready &&
        dut.u_circore.u_fft.in_ptr != 0 && dut.u_circore.u_fft.in_tag[7:0] == 0) n_share++;
    if (dut.u_circore.issue && int'(dut.u_circore.qt) * R + R > int'(dut.cfg_q)) n_pad++;
    if (dut.u_circore.sa_valid && !dut.u_circore.side_out[$bits(dut.u_circore.side_out)-1]) n_accum++;
    if (dut.u_circore.issue && dut.u_circore.cur_v[0]) n_bank1++;
    if (dut.u_circore.fo_valid && !dut.u_circore.fo_ready) n_stall++;
    if (int'(dut.u_ctrl.state) == 6) n_vpu[int'(dut.u_ctrl.cur.vop)]++;
  end

  // ---------------- reference ------------------------------------------------------
  task automatic reference();
    real t [P1*NPT], cat [Q2*NPT];
    for (int r = 0; r < P1*NPT; r++) agg[r] = -1.0e9;
    for (int s = 0; s < S; s++) begin
      for (int r = 0; r < P1*NPT; r++) begin
        t[r] = bias[r];
        for (int c = 0; c < Q1*NPT; c++) t[r] += wp[r][c] * hu[s][c];
        if (t[r] < 0) t[r] = 0;
        if (t[r] > agg[r]) agg[r] = t[r];
      end
    end
    for (int c = 0; c < P1*NPT; c++) cat[c] = agg[c];
    for (int c = 0; c < Q1*NPT; c++) cat[P1*NPT + c] = hv[c];
    for (int r = 0; r < P2*NPT; r++) begin
      outv[r] = 0;
      for (int c = 0; c < Q2*NPT; c++) outv[r] += wc[r][c] * cat[c];
      if (outv[r] < 0) outv[r] = 0;
    end
  endtask

  initial begin
    fix_t d [WE];
    real tmp [];
    h_valid = 0; h_we = 0; h_region = 0; h_addr = 0;
    for (int e = 0; e < WE; e++) h_wdata[e] = '0;
    foreach (n_vpu[i]) n_vpu[i] = 0;
    // random layer; W(r, c) = first column of block (r/n, c/n) at (r - c) mod n
    for (int i = 0; i < P1; i++) for (int j = 0; j < Q1; j++) for (int k = 0; k < NPT; k++)
      wpf[i][j][k] = rnd(0.25);
    for (int i = 0; i < P2; i++) for (int j = 0; j < Q2; j++) for (int k = 0; k < NPT; k++)
      wcf[i][j][k] = rnd(0.25);
    for (int r = 0; r < P1*NPT; r++) for (int c = 0; c < Q1*NPT; c++)
      wp[r][c] = wpf[r/NPT][c/NPT][((r % NPT) - (c % NPT) + NPT) % NPT];
    for (int r = 0; r < P2*NPT; r++) for (int c = 0; c < Q2*NPT; c++)
      wc[r][c] = wcf[r/NPT][c/NPT][((r % NPT) - (c % NPT) + NPT) % NPT];
    for (int s = 0; s < S; s++) for (int c = 0; c < Q1*NPT; c++) hu[s][c] = rnd(1.0);
    for (int c = 0; c < Q1*NPT; c++) hv[c] = rnd(1.0);
    for (int r = 0; r < P1*NPT; r++) bias[r] = rnd(0.5);
    reference();

    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // load weights and features
    write_weights(WB_P, P1, Q1, 1'b0);
    write_weights(WB_C, P2, Q2, 1'b1);
    tmp = new[Q1*NPT];
    for (int s = 0; s < S; s++) begin
      foreach (tmp[c]) tmp[c] = hu[s][c];
      write_vec(A_HU + s * Q1 * WPS, tmp, Q1*NPT);
    end
    foreach (tmp[c]) tmp[c] = hv[c];
    write_vec(A_HV, tmp, Q1*NPT);
    tmp = new[P1*NPT];
    foreach (tmp[c]) tmp[c] = bias[c];
    write_vec(A_B, tmp, P1*NPT);

    // command list
    push_cmd(CMD_SWAP, VOP_COPY, 0, 0, 0, 0, 0, 0, '0);
    push_cmd(CMD_LDW,  VOP_COPY, WB_P, 0, 0, 0, P1, Q1, '0);
    push_cmd(CMD_GEMV, VOP_COPY, A_HU, 0, A_Z, S, P1, Q1, '0);
    for (int s = 0; s < S; s++)
      push_cmd(CMD_VPU, VOP_ADD, A_Z + s*P1*WPS, A_B, A_Z + s*P1*WPS, P1*WPS, 0, 0, '0);
    push_cmd(CMD_VPU, VOP_RELU, A_Z, 0, A_Z, S*P1*WPS, 0, 0, '0);
    push_cmd(CMD_VPU, VOP_COPY, A_Z, 0, A_AGG, P1*WPS, 0, 0, '0);
    for (int s = 1; s < S; s++)
      push_cmd(CMD_VPU, VOP_MAX, A_AGG, A_Z + s*P1*WPS, A_AGG, P1*WPS, 0, 0, '0);
    push_cmd(CMD_VPU, VOP_COPY, A_HV, 0, A_AGG + P1*WPS, Q1*WPS, 0, 0, '0);
    push_cmd(CMD_LDW,  VOP_COPY, WB_C, 0, 0, 0, P2, Q2, '0);
    gemv_start = cyc;
    push_cmd(CMD_GEMV, VOP_COPY, A_AGG, 0, A_OUT, 1, P2, Q2, '0);
    push_cmd(CMD_VPU, VOP_RELU, A_OUT, 0, A_OUT, P2*WPS, 0, 0, '0);
    push_cmd(CMD_SWAP, VOP_COPY, 0, 0, 0, 0, 0, 0, '0);
    while (busy) begin @(posedge clk); #1; end

    // status register
    bus_read(2'd0, 0, d);
    checks++;
    if (d[0] != fix_t'(2 * S + 9)) begin
      failures++; $display("commands completed %0d", d[0]);
    end

    // result
    for (int w = 0; w < P2 * WPS; w++) begin
      bus_read(2'd2, A_OUT + w, d);
      for (int e = 0; e < WE; e++) begin
        automatic real g = tor(d[e]);
        automatic real x = outv[w*WE + e];
        checks++;
        if (g - x > TOL || x - g > TOL) begin
          failures++;
          if (failures < 10) $display("h'[%0d] got %f expected %f", w*WE + e, g, x);
        end
      end
    end
    // aggregation result too (still in the now host-side bank)
    for (int w = 0; w < P1 * WPS; w++) begin
      bus_read(2'd2, A_AGG + w, d);
      for (int e = 0; e < WE; e++) begin
        automatic real g = tor(d[e]);
        automatic real x = agg[w*WE + e];
        checks++;
        if (g - x > TOL || x - g > TOL) begin
          failures++;
          if (failures < 10) $display("a[%0d] got %f expected %f", w*WE + e, g, x);
        end
      end
    end

    $display("mechanisms: fifo_full=%0d swap=%0d pe_weight_writes=%0d fft_share=%0d pad_tile=%0d accum=%0d bank1=%0d fft_stall=%0d add=%0d relu=%0d max=%0d copy=%0d",
             n_fifo_full, n_swap, n_ldw, n_share, n_pad, n_accum, n_bank1, n_stall,
             n_vpu[VOP_ADD], n_vpu[VOP_RELU], n_vpu[VOP_MAX], n_vpu[VOP_COPY]);
    checks += 12;
    if (n_fifo_full == 0) begin failures++; $display("command FIFO never filled"); end
    if (n_swap != 2) begin failures++; $display("bank swaps %0d", n_swap); end
    if (n_ldw != (P1*Q1 + P2*Q2) * NPT / L) begin failures++; $display("weight writes %0d", n_ldw); end
    if (n_share == 0) begin failures++; $display("no cross-vector FFT channel use"); end
    if (n_pad == 0) begin failures++; $display("no padded tile"); end
    if (n_accum == 0) begin failures++; $display("no multi-tile accumulation"); end
    if (n_bank1 == 0) begin failures++; $display("MAC input bank 1 never used"); end
    if (n_stall == 0) begin failures++; $display("FFT-to-MAC stall never happened"); end
    if (n_vpu[VOP_ADD] == 0) begin failures++; $display("no VPU add"); end
    if (n_vpu[VOP_RELU] == 0) begin failures++; $display("no VPU relu"); end
    if (n_vpu[VOP_MAX] == 0) begin failures++; $display("no VPU max"); end
    if (n_vpu[VOP_COPY] == 0) begin failures++; $display("no VPU copy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
