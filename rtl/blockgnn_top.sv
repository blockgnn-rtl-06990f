// blockgnn_top: the BlockGNN accelerator.
//
// A host (CPU plus DRAM, outside this design) writes spectral weights into
// the weight buffer, node features into the host-side bank of the ping-pong
// node-feature buffer, and commands into the command FIFO, all through
// host_if. The controller executes the commands: it preloads the weights of
// a layer into the PEs, streams feature vectors through CirCore
// (FFT -> systolic MAC -> IFFT, i.e. block-circulant matrix times vector),
// and runs element-wise VPU operations (bias, ReLU, max pooling, ...) on the
// NFB. The host reads results from its NFB bank after a bank swap.
//
//   host bus --> host_if --+--> cmd_fifo --> controller --+--> circore
//                          +--> weight_buffer ----------->+--> vpu
//                          +--> nfb (host bank)   nfb (accelerator bank)
//
// Default parameters are the BlockGNN-base configuration of the paper's
// prototype: 16 FFT and 16 IFFT channels, a 4x4 systolic array, one
// complex MAC per PE (l=1), one SIMD-16 VPU lane (m=1), block size n=128,
// 32-bit fixed point, 256 KB WB and 512 KB NFB. TILES (weight tiles a PE can
// hold, 16), QMAX (sub-vectors per input vector, 40) and the FIFO depth are
// this design's choices; 16 and 40 let the largest GS-Pool layer of the
// evaluated graphs (3703 input features concatenated with 512, i.e. 33
// sub-vectors) be loaded at once.
//
// CirCore's output tag and last flag, and its mac_active flag, are left
// unconnected on purpose: the controller packs outputs purely by count, and
// the activity flag is only a probe point for performance counting.
//
// Host bus: see host_if. h_wdata/h_rdata are 16*M 32-bit elements.
module blockgnn_top
  import blockgnn_pkg::*;
#(
  parameter int X          = 16,
  parameter int Y          = 16,
  parameter int R          = 4,
  parameter int C          = 4,
  parameter int L          = 1,
  parameter int M          = 1,
  parameter int NPT        = 128,
  parameter int TILES      = 16,
  parameter int QMAX       = 40,
  parameter int NFB_WORDS  = 4096,
  parameter int WB_DEPTH   = 32768,
  parameter int FIFO_DEPTH = 16,
  localparam int WE        = 16 * M
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        h_valid,
  output logic        h_ready,
  input  logic        h_we,
  input  logic [1:0]  h_region,
  input  logic [19:0] h_addr,
  input  fix_t        h_wdata [WE],
  output logic        h_rvalid,
  output fix_t        h_rdata [WE],
  output logic        busy
);
  localparam int NFB_AW = $clog2(NFB_WORDS);
  localparam int WB_AW  = $clog2(WB_DEPTH);
  localparam int FCW    = $clog2(FIFO_DEPTH) + 1;
  localparam int NPK    = NPT / L;
  localparam int WAW    = $clog2(TILES * NPK);
  localparam int RW     = (R > 1) ? $clog2(R) : 1;
  localparam int CLW    = (C > 1) ? $clog2(C) : 1;

  // command FIFO
  logic           cmd_push, cmd_full, cmd_pop, cmd_empty;
  cmd_t           cmd_wdata, cmd_rdata;
  logic [FCW-1:0] cmd_count;
  // weight buffer
  logic              wb_wr_en, wb_rd_en;
  logic [WB_AW-1:0]  wb_wr_addr, wb_rd_addr;
  cplx_t             wb_wr_data, wb_rd_data;
  // NFB
  logic               nfb_swap, nfb_sel;
  logic               ha_rd_en, ha_wr_en, ac_rd_en, ac_wr_en;
  logic [NFB_AW-1:0]  ha_rd_addr, ha_wr_addr, ac_rd_addr, ac_wr_addr;
  fix_t               ha_rd_data [WE], ha_wr_data [WE], ac_rd_data [WE], ac_wr_data [WE];
  // PE weights
  logic               w_we;
  logic [RW-1:0]      w_row;
  logic [CLW-1:0]     w_col;
  logic [WAW-1:0]     w_addr;
  cplx_t              w_data [L];
  // CirCore
  logic [7:0]         cfg_p, cfg_q;
  logic               cc_in_valid, cc_in_ready, cc_out_valid, cc_out_ready, cc_out_last;
  fix_t               cc_in_data, cc_out_data;
  logic [23:0]        cc_in_tag, cc_out_tag;
  logic               mac_active;
  // VPU
  vop_e               vpu_op;
  fix_t               vpu_scalar;
  fix_t               vpu_a [WE], vpu_b [WE], vpu_y [WE];
  // status
  logic [31:0]        cmds_done;

  host_if #(.M(M), .NFB_AW(NFB_AW), .WB_AW(WB_AW), .FIFO_CW(FCW)) u_host_if (
    .clk, .rst_n,
    .h_valid, .h_ready, .h_we, .h_region, .h_addr, .h_wdata, .h_rvalid, .h_rdata,
    .cmd_push, .cmd_wdata, .cmd_full, .cmd_count,
    .wb_wr_en, .wb_wr_addr, .wb_wr_data,
    .nfb_rd_en(ha_rd_en), .nfb_rd_addr(ha_rd_addr), .nfb_rd_data(ha_rd_data),
    .nfb_wr_en(ha_wr_en), .nfb_wr_addr(ha_wr_addr), .nfb_wr_data(ha_wr_data),
    .busy, .cmds_done, .nfb_sel
  );

  cmd_fifo #(.DEPTH(FIFO_DEPTH)) u_cmd_fifo (
    .clk, .rst_n,
    .push(cmd_push), .wr_data(cmd_wdata), .full(cmd_full),
    .pop(cmd_pop), .rd_data(cmd_rdata), .empty(cmd_empty), .count(cmd_count)
  );

  weight_buffer #(.DEPTH(WB_DEPTH)) u_wb (
    .clk,
    .wr_en(wb_wr_en), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data),
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data)
  );

  nfb #(.WORDS_PER_BANK(NFB_WORDS), .M(M)) u_nfb (
    .clk, .rst_n, .swap(nfb_swap), .sel(nfb_sel),
    .a_rd_en(ac_rd_en), .a_rd_addr(ac_rd_addr), .a_rd_data(ac_rd_data),
    .a_wr_en(ac_wr_en), .a_wr_addr(ac_wr_addr), .a_wr_data(ac_wr_data),
    .h_rd_en(ha_rd_en), .h_rd_addr(ha_rd_addr), .h_rd_data(ha_rd_data),
    .h_wr_en(ha_wr_en), .h_wr_addr(ha_wr_addr), .h_wr_data(ha_wr_data)
  );

  controller #(.NPT(NPT), .R(R), .C(C), .L(L), .M(M), .TILES(TILES),
               .NFB_AW(NFB_AW), .WB_AW(WB_AW)) u_ctrl (
    .clk, .rst_n,
    .cmd_empty, .cmd_data(cmd_rdata), .cmd_pop,
    .wb_rd_en, .wb_rd_addr, .wb_rd_data,
    .w_we, .w_row, .w_col, .w_addr, .w_data,
    .cfg_p, .cfg_q,
    .cc_in_valid, .cc_in_ready, .cc_in_data, .cc_in_tag,
    .cc_out_valid, .cc_out_ready, .cc_out_data,
    .nfb_rd_en(ac_rd_en), .nfb_rd_addr(ac_rd_addr), .nfb_rd_data(ac_rd_data),
    .nfb_wr_en(ac_wr_en), .nfb_wr_addr(ac_wr_addr), .nfb_wr_data(ac_wr_data),
    .nfb_swap,
    .vpu_op, .vpu_scalar, .vpu_a, .vpu_b, .vpu_y,
    .busy, .cmds_done
  );

  circore #(.X(X), .Y(Y), .R(R), .C(C), .L(L), .NPT(NPT), .TILES(TILES), .QMAX(QMAX)) u_circore (
    .clk, .rst_n, .cfg_p, .cfg_q,
    .w_we, .w_row, .w_col, .w_addr, .w_data,
    .in_valid(cc_in_valid), .in_ready(cc_in_ready), .in_data(cc_in_data), .in_tag(cc_in_tag),
    .out_valid(cc_out_valid), .out_ready(cc_out_ready), .out_data(cc_out_data),
    .out_tag(cc_out_tag), .out_last(cc_out_last),
    .mac_active
  );

  vpu #(.M(M)) u_vpu (
    .op(vpu_op), .scalar(vpu_scalar), .a(vpu_a), .b(vpu_b), .y(vpu_y)
  );

endmodule
