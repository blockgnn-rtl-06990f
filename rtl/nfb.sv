// nfb: the Node-Feature Buffer (NFB), organised as ping-pong banks.
//
// Two banks of WORDS_PER_BANK words; a word is WE = 16*M fixed-point
// elements (the VPU width). The accelerator side (controller) owns bank
// `sel`, the host side owns the other one, so the host can load the next
// batch of node features and fetch the previous results while the
// accelerator works. A one-cycle `swap` pulse exchanges the banks. Each side
// has one write port and one read port with one cycle of read latency.
// Default size 2 x 4096 x 64 B = 512 KB, the prototype's NFB. The ping-pong
// use follows the paper; the word width and ports are this design's.
module nfb
  import blockgnn_pkg::*;
#(
  parameter int WORDS_PER_BANK = 4096,
  parameter int M              = 1,
  localparam int WE            = 16 * M,
  localparam int AW            = $clog2(WORDS_PER_BANK)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          swap,
  output logic          sel,
  // accelerator side (bank sel)
  input  logic          a_rd_en,
  input  logic [AW-1:0] a_rd_addr,
  output fix_t          a_rd_data [WE],
  input  logic          a_wr_en,
  input  logic [AW-1:0] a_wr_addr,
  input  fix_t          a_wr_data [WE],
  // host side (bank ~sel)
  input  logic          h_rd_en,
  input  logic [AW-1:0] h_rd_addr,
  output fix_t          h_rd_data [WE],
  input  logic          h_wr_en,
  input  logic [AW-1:0] h_wr_addr,
  input  fix_t          h_wr_data [WE]
);
  fix_t bank0 [WORDS_PER_BANK][WE];
  fix_t bank1 [WORDS_PER_BANK][WE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sel <= 1'b0;
    else if (swap) sel <= ~sel;
  end

  // bank 0: accelerator when sel == 0, host when sel == 1
  always_ff @(posedge clk) begin
    if (!sel) begin
      if (a_wr_en) bank0[a_wr_addr] <= a_wr_data;
      if (h_wr_en) bank1[h_wr_addr] <= h_wr_data;
      if (a_rd_en) a_rd_data <= bank0[a_rd_addr];
      if (h_rd_en) h_rd_data <= bank1[h_rd_addr];
    end else begin
      if (a_wr_en) bank1[a_wr_addr] <= a_wr_data;
      if (h_wr_en) bank0[h_wr_addr] <= h_wr_data;
      if (a_rd_en) a_rd_data <= bank1[a_rd_addr];
      if (h_rd_en) h_rd_data <= bank0[h_rd_addr];
    end
  end

endmodule
