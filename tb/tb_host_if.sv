// tb_host_if: random host bus traffic against the interface, with the
// command FIFO's full flag, the status inputs and the NFB read data driven
// by the testbench. Every cycle it checks that a write reaches exactly the
// port of its region with the right address and data (a command word from
// the low bits of the bus word, a complex weight from elements 0 and 1),
// that a command write is refused while the FIFO is full, and that each
// read answers one cycle later with NFB data or the status registers.
module tb_host_if;
  import blockgnn_pkg::*;
  localparam int M = 1, WE = 16, NFB_AW = 8, WB_AW = 10, FIFO_CW = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic h_valid, h_ready, h_we, h_rvalid;
  logic [1:0] h_region;
  logic [19:0] h_addr;
  fix_t h_wdata [WE], h_rdata [WE];
  logic cmd_push, cmd_full;
  cmd_t cmd_wdata;
  logic [FIFO_CW-1:0] cmd_count;
  logic wb_wr_en;
  logic [WB_AW-1:0] wb_wr_addr;
  cplx_t wb_wr_data;
  logic nfb_rd_en, nfb_wr_en;
  logic [NFB_AW-1:0] nfb_rd_addr, nfb_wr_addr;
  fix_t nfb_rd_data [WE], nfb_wr_data [WE];
  logic busy, nfb_sel;
  logic [31:0] cmds_done;

  host_if #(.M(M), .NFB_AW(NFB_AW), .WB_AW(WB_AW), .FIFO_CW(FIFO_CW)) dut (.*);

  // NFB read data: a known function of the address, one cycle after the read
  always_ff @(posedge clk)
    if (nfb_rd_en)
      for (int e = 0; e < WE; e++) nfb_rd_data[e] <= fix_t'(nfb_rd_addr * 1000 + e);

  int n_cmd = 0, n_wb = 0, n_nfbw = 0, n_rd = 0, n_refused = 0;

  initial begin
    bit   exp_rd, exp_nfb;
    logic [NFB_AW-1:0] exp_addr;
    logic [31:0] st_done;
    logic st_busy, st_sel;
    logic [FIFO_CW-1:0] st_cnt;
    logic [16*32-1:0] flat;
    h_valid = 0; h_we = 0; h_region = 0; h_addr = 0; cmd_full = 0; cmd_count = 0;
    busy = 0; nfb_sel = 0; cmds_done = 0;
    for (int e = 0; e < WE; e++) begin h_wdata[e] = '0; nfb_rd_data[e] = '0; end
    exp_rd = 0; exp_nfb = 0; exp_addr = '0;
    st_done = 0; st_busy = 0; st_sel = 0; st_cnt = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      h_valid  = ($urandom_range(3) != 0);
      h_we     = $urandom_range(1);
      h_region = 2'($urandom_range(2));
      h_addr   = 20'($urandom);
      for (int e = 0; e < WE; e++) h_wdata[e] = fix_t'($urandom);
      cmd_full  = ($urandom_range(3) == 0);
      cmd_count = FIFO_CW'($urandom);
      busy      = $urandom_range(1);
      nfb_sel   = $urandom_range(1);
      cmds_done = $urandom;
      for (int e = 0; e < WE; e++) flat[e*32 +: 32] = h_wdata[e];
      #1;
      // ---- request decoding, this cycle ----
      checks += 4;
      if (h_ready != !(h_we && h_region == 0 && cmd_full)) failures++;
      if (cmd_push != (h_valid && h_we && h_region == 0 && !cmd_full)) failures++;
      if (wb_wr_en != (h_valid && h_we && h_region == 1)) failures++;
      if (nfb_wr_en != (h_valid && h_we && h_region == 2) ||
          nfb_rd_en != (h_valid && !h_we && h_region == 2)) failures++;
      if (cmd_push) begin
        n_cmd++; checks++;
        if (cmd_wdata != cmd_t'(flat[$bits(cmd_t)-1:0])) failures++;
      end
      if (h_valid && h_we && h_region == 0 && cmd_full) n_refused++;
      if (wb_wr_en) begin
        n_wb++; checks++;
        if (wb_wr_addr != h_addr[WB_AW-1:0] || wb_wr_data.re != h_wdata[0] || wb_wr_data.im != h_wdata[1]) failures++;
      end
      if (nfb_wr_en) begin
        n_nfbw++; checks++;
        if (nfb_wr_addr != h_addr[NFB_AW-1:0] || nfb_wr_data != h_wdata) failures++;
      end
      // ---- read response for the previous cycle's request ----
      checks++;
      if (h_rvalid != exp_rd) failures++;
      if (exp_rd) begin
        n_rd++;
        for (int e = 0; e < WE; e++) begin
          fix_t ex;
          if (exp_nfb) ex = fix_t'(exp_addr * 1000 + e);
          else if (e == 0) ex = fix_t'(st_done);
          else if (e == 1) ex = fix_t'({st_busy, 31'(st_cnt)});
          else if (e == 2) ex = fix_t'(st_sel);
          else ex = '0;
          checks++;
          if (h_rdata[e] != ex) begin
            failures++;
            if (failures < 10) $display("read lane %0d: %h expected %h", e, h_rdata[e], ex);
          end
        end
      end
      exp_rd   = h_valid && !h_we && (h_region == 0 || h_region == 2);
      exp_nfb  = (h_region == 2);
      exp_addr = h_addr[NFB_AW-1:0];
      if (h_valid && !h_we && h_region == 0) begin
        st_done = cmds_done; st_busy = busy; st_sel = nfb_sel; st_cnt = cmd_count;
      end
      // a WB read also answers, with zeros
      if (h_valid && !h_we && h_region == 1) begin exp_rd = 1; exp_nfb = 0; st_done = 0; st_busy = 0; st_sel = 0; st_cnt = 0; end
      @(posedge clk); #1;
    end
    checks++;
    if (n_cmd == 0 || n_wb == 0 || n_nfbw == 0 || n_rd == 0 || n_refused == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
