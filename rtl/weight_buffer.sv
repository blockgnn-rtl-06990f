// weight_buffer: the Weight Buffer (WB) of the global buffer.
//
// Holds the spectral weights W^ of every layer, one complex value per word,
// i.e. only the first row of each circulant block after its FFT, which is the
// 1/n storage of block-circulant compression. DEPTH = 32768 words of 8 bytes
// is the 256 KB of the prototype. One write port (filled by the host through
// the interface) and one read port with one cycle of latency (read by the
// controller when it preloads the PEs). Port arrangement is this design's.
module weight_buffer
  import blockgnn_pkg::*;
#(
  parameter int DEPTH = 32768,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  cplx_t         wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output cplx_t         rd_data
);
  cplx_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
