// tb_nfb: checks the ping-pong behaviour of the node-feature buffer. The
// host fills its bank while the accelerator fills the other, with the same
// addresses; after a swap each side must read what the other side wrote,
// and after a second swap its own data again.
module tb_nfb;
  import blockgnn_pkg::*;
  localparam int WORDS = 64, M = 1, WE = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic swap, sel, a_rd_en, a_wr_en, h_rd_en, h_wr_en;
  logic [5:0] a_rd_addr, a_wr_addr, h_rd_addr, h_wr_addr;
  fix_t a_rd_data [WE], a_wr_data [WE], h_rd_data [WE], h_wr_data [WE];

  nfb #(.WORDS_PER_BANK(WORDS), .M(M)) dut (.clk, .rst_n, .swap, .sel,
    .a_rd_en, .a_rd_addr, .a_rd_data, .a_wr_en, .a_wr_addr, .a_wr_data,
    .h_rd_en, .h_rd_addr, .h_rd_data, .h_wr_en, .h_wr_addr, .h_wr_data);

  function automatic fix_t pat(int side, int w, int e); return fix_t'(side * 100000 + w * 100 + e); endfunction

  task automatic check_reads(int a_expect_side, int h_expect_side);
    for (int w = 0; w < WORDS; w++) begin
      a_rd_en = 1; a_rd_addr = 6'(w); h_rd_en = 1; h_rd_addr = 6'(w);
      @(posedge clk); #1;
      for (int e = 0; e < WE; e++) begin
        checks += 2;
        if (a_rd_data[e] != pat(a_expect_side, w, e)) failures++;
        if (h_rd_data[e] != pat(h_expect_side, w, e)) failures++;
      end
    end
    a_rd_en = 0; h_rd_en = 0;
  endtask

  initial begin
    swap = 0; a_rd_en = 0; a_wr_en = 0; h_rd_en = 0; h_wr_en = 0;
    a_rd_addr = 0; a_wr_addr = 0; h_rd_addr = 0; h_wr_addr = 0;
    for (int e = 0; e < WE; e++) begin a_wr_data[e] = '0; h_wr_data[e] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int w = 0; w < WORDS; w++) begin
      a_wr_en = 1; a_wr_addr = 6'(w); h_wr_en = 1; h_wr_addr = 6'(w);
      for (int e = 0; e < WE; e++) begin a_wr_data[e] = pat(1, w, e); h_wr_data[e] = pat(2, w, e); end
      @(posedge clk); #1;
    end
    a_wr_en = 0; h_wr_en = 0;
    check_reads(1, 2);
    checks++; if (sel != 0) failures++;
    swap = 1; @(posedge clk); #1; swap = 0;
    checks++; if (sel != 1) failures++;
    check_reads(2, 1);
    swap = 1; @(posedge clk); #1; swap = 0;
    check_reads(1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
