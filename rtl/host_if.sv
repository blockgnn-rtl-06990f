// host_if: the accelerator's host interface.
//
// A simple word bus from the host (CPU and its DMA): a request is
// (h_valid, h_we, h_region, h_addr, h_wdata) and is taken when h_ready is
// high. Writes are decoded by region:
//   REG_CMD  push a command; the command word (blockgnn_pkg::cmd_t) sits in
//            the low bits of h_wdata (element 0 holds bits 31:0, and so on);
//            h_ready is low while the command FIFO is full;
//   REG_WB   weight-buffer word h_addr <= {re: element 0, im: element 1};
//   REG_NFB  host-side NFB bank word h_addr <= h_wdata.
// Reads return h_rdata with h_rvalid one cycle after the request:
//   REG_CMD  status: element 0 = commands completed, element 1 = {busy,
//            command-FIFO level}, element 2 = NFB bank owned by the accelerator;
//   REG_NFB  host-side NFB bank word; REG_WB reads return zero.
// The paper shows this interface as one block between host and buffers and
// does not describe it; the bus and the register map are this design's.
module host_if
  import blockgnn_pkg::*;
#(
  parameter int M      = 1,
  parameter int NFB_AW = 12,
  parameter int WB_AW  = 15,
  parameter int FIFO_CW = 5,
  localparam int WE    = 16 * M
) (
  input  logic               clk,
  input  logic               rst_n,
  // host bus
  input  logic               h_valid,
  output logic               h_ready,
  input  logic               h_we,
  input  logic [1:0]         h_region,
  input  logic [19:0]        h_addr,
  input  fix_t               h_wdata [WE],
  output logic               h_rvalid,
  output fix_t               h_rdata [WE],
  // command FIFO
  output logic               cmd_push,
  output cmd_t               cmd_wdata,
  input  logic               cmd_full,
  input  logic [FIFO_CW-1:0] cmd_count,
  // weight buffer write port
  output logic               wb_wr_en,
  output logic [WB_AW-1:0]   wb_wr_addr,
  output cplx_t              wb_wr_data,
  // NFB host side
  output logic               nfb_rd_en,
  output logic [NFB_AW-1:0]  nfb_rd_addr,
  input  fix_t               nfb_rd_data [WE],
  output logic               nfb_wr_en,
  output logic [NFB_AW-1:0]  nfb_wr_addr,
  output fix_t               nfb_wr_data [WE],
  // status
  input  logic               busy,
  input  logic [31:0]        cmds_done,
  input  logic               nfb_sel
);
  localparam logic [1:0] REG_CMD = 2'd0, REG_WB = 2'd1, REG_NFB = 2'd2;

  logic [WE*32-1:0] wflat;
  logic             fire;
  logic             rd_q;
  logic [1:0]       rreg_q;
  fix_t             status [WE];

  always_comb begin
    for (int e = 0; e < WE; e++) wflat[e*32 +: 32] = h_wdata[e];
  end

  assign h_ready   = !(h_we && h_region == REG_CMD && cmd_full);
  assign fire      = h_valid && h_ready;

  assign cmd_push  = fire && h_we && h_region == REG_CMD;
  assign cmd_wdata = cmd_t'(wflat[$bits(cmd_t)-1:0]);

  assign wb_wr_en        = fire && h_we && h_region == REG_WB;
  assign wb_wr_addr      = WB_AW'(h_addr);
  assign wb_wr_data.re   = h_wdata[0];
  assign wb_wr_data.im   = h_wdata[1];

  assign nfb_wr_en   = fire && h_we && h_region == REG_NFB;
  assign nfb_wr_addr = NFB_AW'(h_addr);
  assign nfb_wr_data = h_wdata;
  assign nfb_rd_en   = fire && !h_we && h_region == REG_NFB;
  assign nfb_rd_addr = NFB_AW'(h_addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q   <= 1'b0;
      rreg_q <= '0;
      for (int e = 0; e < WE; e++) status[e] <= '0;
    end else begin
      rd_q   <= fire && !h_we;
      rreg_q <= h_region;
      if (fire && !h_we && h_region == REG_CMD) begin
        status[0] <= fix_t'(cmds_done);
        status[1] <= fix_t'({busy, 31'(cmd_count)});
        status[2] <= fix_t'(nfb_sel);
      end
    end
  end

  assign h_rvalid = rd_q;
  always_comb begin
    for (int e = 0; e < WE; e++)
      unique case (rreg_q)
        REG_CMD: h_rdata[e] = status[e];
        REG_NFB: h_rdata[e] = nfb_rd_data[e];
        default: h_rdata[e] = '0;
      endcase
  end

endmodule
