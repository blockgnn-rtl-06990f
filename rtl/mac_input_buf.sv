// mac_input_buf: the "MAC Input" buffer between the FFT unit and the
// systolic array.
//
// Two banks (ping-pong), each holding up to QMAX spectral sub-vectors of one
// feature vector. The FFT side writes one complex element per cycle into
// bank wr_bank, sub-vector wr_sub, element wr_elem; the write flagged wr_last
// (final element of the vector's final sub-vector) marks the bank full. The
// MAC side reads, combinationally, pack rd_pack of the R consecutive
// sub-vectors rd_base .. rd_base+R-1 from bank rd_bank; sub-vectors at or
// beyond rd_q read as zero, which is the zero padding when q is not a
// multiple of R. rd_release empties bank rd_bank. While one bank is read the
// other can be filled, so the FFT and MAC stages overlap.
//
// The buffer is named in the paper's CirCore figure; its organisation
// (banks, packing, full flags) is this design's choice.
module mac_input_buf
  import blockgnn_pkg::*;
#(
  parameter int NPT  = 128,
  parameter int L    = 1,
  parameter int R    = 4,
  parameter int QMAX = 40,
  localparam int NPK = NPT / L,
  localparam int QW  = $clog2(QMAX + 1),
  localparam int EW  = $clog2(NPT),
  localparam int PW  = (NPK > 1) ? $clog2(NPK) : 1,
  localparam int SAW = (QMAX > 1) ? $clog2(QMAX) : 1,
  localparam int LW  = (L > 1) ? $clog2(L) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // write side (FFT unit)
  input  logic           wr_en,
  input  logic           wr_bank,
  input  logic [QW-1:0]  wr_sub,
  input  logic [EW-1:0]  wr_elem,
  input  cplx_t          wr_data,
  input  logic           wr_last,
  output logic [1:0]     full,
  // read side (MAC sequencer)
  input  logic           rd_bank,
  input  logic [QW-1:0]  rd_base,
  input  logic [PW-1:0]  rd_pack,
  input  logic [QW-1:0]  rd_q,
  output cplx_t          rd_data [R][L],
  input  logic           rd_release
);
  cplx_t mem [2][QMAX][NPK][L];

  always_ff @(posedge clk) begin
    if (wr_en)
      mem[wr_bank][SAW'(wr_sub)][PW'(wr_elem / EW'(L))][LW'(wr_elem % EW'(L))] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) full <= '0;
    else begin
      if (rd_release) full[rd_bank] <= 1'b0;
      if (wr_en && wr_last) full[wr_bank] <= 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < R; i++) begin
      for (int e = 0; e < L; e++) begin
        if (int'(rd_base) + i < int'(rd_q) && int'(rd_base) + i < QMAX)
          rd_data[i][e] = mem[rd_bank][SAW'(int'(rd_base) + i)][rd_pack][e];
        else
          rd_data[i][e] = '0;
      end
    end
  end

  // A vector may only be written into an empty bank.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> !full[wr_bank]);

endmodule
