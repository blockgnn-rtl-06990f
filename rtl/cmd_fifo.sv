// cmd_fifo: the command FIFO between the host interface and the controller.
//
// Synchronous first-in first-out queue of DEPTH command words (type
// blockgnn_pkg::cmd_t). push is ignored when full, pop when empty (both are
// also flagged by assertions). The head word is visible on rd_data whenever
// `empty` is low. The FIFO is named in the paper's system figure; depth and
// word format are this design's.
module cmd_fifo
  import blockgnn_pkg::*;
#(
  parameter int DEPTH = 16,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push,
  input  cmd_t  wr_data,
  output logic  full,
  input  logic  pop,
  output cmd_t  rd_data,
  output logic  empty,
  output logic [AW:0] count
);
  cmd_t          mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
