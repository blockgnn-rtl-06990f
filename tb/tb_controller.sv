// tb_controller: runs the command sequencer against memories and a CirCore
// stand-in that live in the testbench, and checks what it does with them.
//
//   LDW   every PE weight write is captured; after the command each PE
//         (row, column, address, lane) must hold the weight-buffer value
//         that the block-to-PE mapping puts there, and the number of
//         writes must equal p*q*NPT/L.
//   GEMV  the samples streamed into the stand-in must be the NFB words of
//         the input vectors, in order, with tags {vector, sub-vector}; the
//         stand-in answers each complete vector with p*NPT samples of known
//         values (with random stalls on both sides), and the NFB words at
//         dst must hold them packed WE per word.
//   VPU   ADD, MAX and COPY over several words, checked element by element,
//         and the three-cycles-per-word timing.
//   SWAP  exactly one bank-swap pulse.
// Reduced sizes: NPT=32, R=C=2, L=2, one 16-element NFB word = half a
// sub-vector.
module tb_controller;
  import blockgnn_pkg::*;
  localparam int NPT = 32, R = 2, C = 2, L = 2, M = 1, TILES = 8;
  localparam int NFB_AW = 8, WB_AW = 12, WE = 16, NPK = NPT / L;
  localparam int WAW = $clog2(TILES * NPK);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_empty, cmd_pop;
  cmd_t cmd_data;
  logic wb_rd_en;
  logic [WB_AW-1:0] wb_rd_addr;
  cplx_t wb_rd_data;
  logic w_we;
  logic [0:0] w_row, w_col;
  logic [WAW-1:0] w_addr;
  cplx_t w_data [L];
  logic [7:0] cfg_p, cfg_q;
  logic cc_in_valid, cc_in_ready, cc_out_valid, cc_out_ready;
  fix_t cc_in_data, cc_out_data;
  logic [23:0] cc_in_tag;
  logic nfb_rd_en, nfb_wr_en, nfb_swap;
  logic [NFB_AW-1:0] nfb_rd_addr, nfb_wr_addr;
  fix_t nfb_rd_data [WE], nfb_wr_data [WE];
  vop_e vpu_op;
  fix_t vpu_scalar;
  fix_t vpu_a [WE], vpu_b [WE], vpu_y [WE];
  logic busy;
  logic [31:0] cmds_done;

  controller #(.NPT(NPT), .R(R), .C(C), .L(L), .M(M), .TILES(TILES),
               .NFB_AW(NFB_AW), .WB_AW(WB_AW)) dut (.*);

  vpu #(.M(M)) u_vpu (.op(vpu_op), .scalar(vpu_scalar), .a(vpu_a), .b(vpu_b), .y(vpu_y));

  // ---- command queue ----
  cmd_t cq [$];
  // the head of the queue is presented from the falling edge on
  always @(negedge clk) begin
    cmd_empty = (cq.size() == 0);
    if (cq.size() > 0) cmd_data = cq[0];
    else               cmd_data = '0;
  end
  always @(posedge clk) if (cmd_pop) void'(cq.pop_front());

  // ---- weight buffer and NFB models (synchronous read) ----
  cplx_t wb [1 << WB_AW];
  fix_t  nfb [1 << NFB_AW][WE];
  always_ff @(posedge clk) if (wb_rd_en) wb_rd_data <= wb[wb_rd_addr];
  always_ff @(posedge clk) begin
    if (nfb_rd_en) nfb_rd_data <= nfb[nfb_rd_addr];
    if (nfb_wr_en) nfb[nfb_wr_addr] <= nfb_wr_data;
  end

  // ---- PE weight capture ----
  cplx_t pew [R][C][TILES * NPK][L];
  int    n_wwrites = 0;
  always @(posedge clk) if (w_we) begin
    pew[w_row][w_col][w_addr] <= w_data;
    n_wwrites++;
  end

  // ---- swap pulses ----
  int n_swaps = 0;
  always @(posedge clk) if (rst_n && nfb_swap) n_swaps++;

  // ---- CirCore stand-in ----
  int in_count = 0, out_pending = 0, out_t = 0, exp_in_idx = 0;
  int g_src, g_q, g_p, g_vbase;
  fix_t exp_in [$];
  logic [23:0] exp_tag [$];
  always @(posedge clk) begin
    int d;
    d = 0;
    if (cc_in_valid && cc_in_ready) begin
      checks++;
      if (exp_in.size() == 0 || cc_in_data != exp_in[0] || cc_in_tag != exp_tag[0]) begin
        failures++;
        if (failures < 10) $display("GEMV input mismatch at sample %0d: %0d tag %h", in_count, cc_in_data, cc_in_tag);
      end
      if (exp_in.size() > 0) begin void'(exp_in.pop_front()); void'(exp_tag.pop_front()); end
      in_count++;
      if (in_count % (g_q * NPT) == 0) d += g_p * NPT;
    end
    if (cc_out_valid && cc_out_ready) begin
      d--;
      out_t <= out_t + 1;
    end
    out_pending <= out_pending + d;
    cc_in_ready  <= ($urandom_range(3) != 0);
  end
  // output valid/data presented combinationally from the pending count
  logic out_en;
  always @(posedge clk) out_en <= ($urandom_range(2) != 0);
  assign cc_out_valid = out_en && out_pending > 0;
  assign cc_out_data  = fix_t'(out_t * 7 + 3);

  task automatic wait_done(int n, int limit);
    int c = 0;
    while (int'(cmds_done) < n && c < limit) begin @(posedge clk); c++; end
    checks++;
    if (int'(cmds_done) < n) begin failures++; $display("command %0d did not finish", n); end
  endtask

  initial begin
    cmd_t c;
    int   t0, t1, src;
    cc_in_ready = 0; out_en = 0;
    cmd_empty = 1; cmd_data = '0;
    g_q = 1; g_p = 1;
    for (int a = 0; a < (1 << WB_AW); a++) wb[a] = {32'($urandom), 32'($urandom)};
    for (int a = 0; a < (1 << NFB_AW); a++)
      for (int e = 0; e < WE; e++) nfb[a][e] = fix_t'($urandom);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // ---- LDW: p=3, q=3 from WB base 100 ----
    c = '0; c.op = CMD_LDW; c.src_a = 20'd100; c.p = 8'd3; c.q = 8'd3;
    cq.push_back(c);
    wait_done(1, 5000);
    checks++;
    if (n_wwrites != 3 * 3 * NPK) begin failures++; $display("weight writes %0d", n_wwrites); end
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        for (int k = 0; k < NPT; k++) begin
          int addr;
          addr = ((i / C) * 2 + j / R) * NPK + k / L;
          checks++;
          if (pew[j % R][i % C][addr][k % L] != wb[100 + (i * 3 + j) * NPT + k]) begin
            failures++;
            if (failures < 10) $display("LDW block (%0d,%0d) element %0d wrong", i, j, k);
          end
        end

    // ---- GEMV: 3 vectors, q=3, p=2, src 0, dst 100 ----
    g_q = 3; g_p = 2;
    for (int v = 0; v < 3; v++)
      for (int s = 0; s < 3 * NPT; s++) begin
        exp_in.push_back(nfb[(v * 3 * NPT + s) / WE][s % WE]);
        exp_tag.push_back({16'(v), 8'(s / NPT)});
      end
    c = '0; c.op = CMD_GEMV; c.src_a = 20'd0; c.dst = 20'd100; c.len = 16'd3; c.p = 8'd2; c.q = 8'd3;
    cq.push_back(c);
    wait_done(2, 20000);
    checks++;
    if (exp_in.size() != 0 || out_pending != 0) begin failures++; $display("GEMV left %0d inputs, %0d outputs", exp_in.size(), out_pending); end
    for (int t = 0; t < 3 * 2 * NPT; t++) begin
      checks++;
      if (nfb[100 + t / WE][t % WE] != fix_t'(t * 7 + 3)) begin
        failures++;
        if (failures < 10) $display("GEMV output %0d wrong", t);
      end
    end

    // ---- VPU: ADD, MAX, COPY over 5 words each ----
    for (int o = 0; o < 3; o++) begin
      fix_t ea [5][WE], eb [5][WE];
      for (int w = 0; w < 5; w++) begin ea[w] = nfb[20 + w]; eb[w] = nfb[40 + w]; end
      c = '0; c.op = CMD_VPU; c.vop = (o == 0) ? VOP_ADD : (o == 1) ? VOP_MAX : VOP_COPY;
      c.src_a = 20'd20; c.src_b = 20'd40; c.dst = 20'(200 + o * 8); c.len = 16'd5;
      t0 = $time / 10;
      cq.push_back(c);
      wait_done(3 + o, 1000);
      t1 = $time / 10;
      // 1 pop + 1 decode + 3 per word + 1 done, seen one edge later
      checks++;
      if (t1 - t0 > 5 * 3 + 4) begin failures++; $display("VPU took %0d cycles", t1 - t0); end
      for (int w = 0; w < 5; w++)
        for (int e = 0; e < WE; e++) begin
          fix_t ex;
          ex = (o == 0) ? ea[w][e] + eb[w][e] : (o == 1) ? ((ea[w][e] > eb[w][e]) ? ea[w][e] : eb[w][e]) : ea[w][e];
          checks++;
          if (nfb[200 + o * 8 + w][e] != ex) begin
            failures++;
            if (failures < 10) $display("VPU op %0d word %0d lane %0d wrong", o, w, e);
          end
        end
    end

    // ---- SWAP ----
    c = '0; c.op = CMD_SWAP;
    cq.push_back(c);
    wait_done(6, 100);
    checks++;
    if (n_swaps != 1) begin failures++; $display("swaps %0d", n_swaps); end
    repeat (3) @(posedge clk);
    checks++;
    if (busy) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
