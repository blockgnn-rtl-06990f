// pe: one processing element of the weight-stationary systolic array.
//
// The PE keeps the spectral weights of its (input sub-vector, output
// sub-vector) blocks in a local memory of WDEPTH packs, each pack holding L
// complex values. Every cycle with a_valid it:
//   * reads the weight pack at a_widx,
//   * multiplies it element-wise with the incoming feature pack a_in
//     (the "Parallel Mul-Add": L complex multipliers),
//   * adds the products to the partial-sum pack arriving from the PE above,
// and registers the result downwards (ps_out). The feature pack, its weight
// index and its valid bit are registered to the right (a_*_out). Both hops
// take one cycle.
//
// Left-to-right feature flow, top-to-bottom partial-sum flow, weight
// stationarity and the L-wide pack follow the paper's systolic dataflow;
// holding all tiles of a layer in the PE (WDEPTH = tiles * NPT/L) and passing
// the weight index along with the data are this design's choices.
module pe
  import blockgnn_pkg::*;
#(
  parameter int L      = 1,
  parameter int WDEPTH = 2048
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // weight preload
  input  logic                      w_we,
  input  logic [$clog2(WDEPTH)-1:0] w_addr,
  input  cplx_t                     w_data [L],
  // feature packs, left to right
  input  logic                      a_valid_in,
  input  logic [$clog2(WDEPTH)-1:0] a_widx_in,
  input  cplx_t                     a_in [L],
  output logic                      a_valid_out,
  output logic [$clog2(WDEPTH)-1:0] a_widx_out,
  output cplx_t                     a_out [L],
  // partial sums, top to bottom
  input  cplx_t                     ps_in [L],
  output cplx_t                     ps_out [L]
);
  cplx_t wmem [WDEPTH][L];

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr] <= w_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid_out <= 1'b0;
      a_widx_out  <= '0;
      for (int i = 0; i < L; i++) begin
        a_out[i]  <= '0;
        ps_out[i] <= '0;
      end
    end else begin
      a_valid_out <= a_valid_in;
      a_widx_out  <= a_widx_in;
      a_out       <= a_in;
      for (int i = 0; i < L; i++)
        ps_out[i] <= a_valid_in ? cadd(ps_in[i], cmul(a_in[i], wmem[a_widx_in][i])) : ps_in[i];
    end
  end

endmodule
