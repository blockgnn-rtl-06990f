// fft_unit: the FFT stage (INVERSE=0, LANES = x) or the IFFT stage
// (INVERSE=1, LANES = y) of CirCore.
//
// Holds LANES independent fft_core channels. Sub-vectors arrive as one
// stream, one complex sample per beat, NPT beats per sub-vector. Sub-vector
// number s (counted since reset, across vector boundaries) is sent to channel
// s mod LANES, so the q sub-vectors of one feature vector land on different
// channels and, when LANES > q, the next vector's sub-vectors fill the
// remaining channels. Results are collected from the channels in the same
// round-robin order, so the output stream keeps the input order; each output
// sample carries the tag given with its sub-vector.
//
// The channel count and the intra-vector-first dispatch follow the paper's
// CirCore description; the one-sample-per-cycle stream ports are this
// design's choice (one channel loads while the others compute).
module fft_unit
  import blockgnn_pkg::*;
#(
  parameter int LANES   = 16,
  parameter int NPT     = 128,
  parameter bit INVERSE = 1'b0,
  parameter int TAG_W   = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  cplx_t            in_data,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  input  logic             out_ready,
  output cplx_t            out_data,
  output logic [TAG_W-1:0] out_tag,
  output logic             out_last
);
  localparam int LW = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int CW = $clog2(NPT);

  logic [LW-1:0] in_ptr, out_ptr;
  logic [CW-1:0] in_cnt;

  logic             c_in_valid  [LANES];
  logic             c_in_ready  [LANES];
  logic             c_out_valid [LANES];
  logic             c_out_ready [LANES];
  cplx_t            c_out_data  [LANES];
  logic [TAG_W-1:0] c_out_tag   [LANES];
  logic             c_out_last  [LANES];

  for (genvar g = 0; g < LANES; g++) begin : g_lane
    assign c_in_valid[g]  = in_valid && (in_ptr == LW'(g));
    assign c_out_ready[g] = out_ready && (out_ptr == LW'(g));
    fft_core #(.NPT(NPT), .INVERSE(INVERSE), .TAG_W(TAG_W)) u_core (
      .clk, .rst_n,
      .in_valid (c_in_valid[g]),  .in_ready (c_in_ready[g]),
      .in_data,                   .in_tag,
      .out_valid(c_out_valid[g]), .out_ready(c_out_ready[g]),
      .out_data (c_out_data[g]),  .out_tag  (c_out_tag[g]),
      .out_last (c_out_last[g])
    );
  end

  assign in_ready  = c_in_ready[in_ptr];
  assign out_valid = c_out_valid[out_ptr];
  assign out_data  = c_out_data[out_ptr];
  assign out_tag   = c_out_tag[out_ptr];
  assign out_last  = c_out_last[out_ptr];

  function automatic logic [LW-1:0] next_lane(logic [LW-1:0] p);
    return (p == LW'(LANES - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_ptr  <= '0;
      out_ptr <= '0;
      in_cnt  <= '0;
    end else begin
      if (in_valid && in_ready) begin
        in_cnt <= in_cnt + 1'b1;
        if (in_cnt == CW'(NPT - 1)) in_ptr <= next_lane(in_ptr);
      end
      if (out_valid && out_ready && out_last) out_ptr <= next_lane(out_ptr);
    end
  end

endmodule
