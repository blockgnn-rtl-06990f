// tb_mac_input_buf: fills both banks with known spectral sub-vectors (q=3,
// R=2, L=2) and checks the full flags, the R-row pack reads including the
// zero padding beyond q, and that a release empties only its own bank.
module tb_mac_input_buf;
  import blockgnn_pkg::*;
  localparam int NPT = 8, L = 2, R = 2, QMAX = 4, Q = 3;
  localparam int NPK = NPT / L;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, wr_bank, wr_last, rd_bank, rd_release;
  logic [2:0] wr_sub, rd_base, rd_q;
  logic [2:0] wr_elem;
  logic [1:0] rd_pack;
  logic [1:0] full;
  cplx_t wr_data, rd_data [R][L];

  mac_input_buf #(.NPT(NPT), .L(L), .R(R), .QMAX(QMAX)) dut (.clk, .rst_n,
    .wr_en, .wr_bank, .wr_sub, .wr_elem, .wr_data, .wr_last, .full,
    .rd_bank, .rd_base, .rd_pack, .rd_q, .rd_data, .rd_release);

  function automatic cplx_t val(int b, int s, int e);
    cplx_t c;
    c.re = fix_t'(b * 1000 + s * 100 + e);
    c.im = fix_t'(-(b * 1000 + s * 100 + e));
    return c;
  endfunction

  task automatic fill(int b);
    for (int s = 0; s < Q; s++) for (int e = 0; e < NPT; e++) begin
      wr_en = 1; wr_bank = 1'(b); wr_sub = 3'(s); wr_elem = 3'(e); wr_data = val(b, s, e);
      wr_last = (s == Q - 1) && (e == NPT - 1);
      checks++;
      if (full[b]) failures++;            // not full before its last element
      @(posedge clk); #1;
    end
    wr_en = 0; wr_last = 0;
  endtask

  initial begin
    wr_en = 0; wr_bank = 0; wr_last = 0; wr_sub = 0; wr_elem = 0; wr_data = '0;
    rd_bank = 0; rd_release = 0; rd_base = 0; rd_q = 3'(Q); rd_pack = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // leave non-zero data in the unused sub-vector slot of both banks, so
    // that the padding must come from the buffer's own zeroing
    for (int b = 0; b < 2; b++) for (int e = 0; e < NPT; e++) begin
      wr_en = 1; wr_bank = 1'(b); wr_sub = 3'(QMAX - 1); wr_elem = 3'(e); wr_data = val(7, 7, e);
      @(posedge clk); #1;
    end
    wr_en = 0;
    fill(0);
    checks++; if (full != 2'b01) begin failures++; $display("full %b", full); end
    fill(1);
    checks++; if (full != 2'b11) begin failures++; $display("full %b", full); end
    for (int b = 0; b < 2; b++) for (int base = 0; base < 4; base += R) for (int pk = 0; pk < NPK; pk++) begin
      rd_bank = 1'(b); rd_base = 3'(base); rd_pack = 2'(pk);
      #1;
      for (int i = 0; i < R; i++) for (int e = 0; e < L; e++) begin
        checks++;
        if (base + i < Q) begin
          if (rd_data[i][e] != val(b, base + i, pk * L + e)) failures++;
        end else if (rd_data[i][e] != '0) failures++;
      end
    end
    rd_bank = 1; rd_release = 1;
    @(posedge clk); #1;
    rd_release = 0;
    checks++; if (full != 2'b01) begin failures++; $display("after release full %b", full); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
