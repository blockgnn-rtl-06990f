// systolic_array: R x C weight-stationary array of PEs (the MAC stage of
// CirCore).
//
// Each issue cycle presents one L-element spectral pack for each of the R
// rows (rows = input sub-vectors h_1..h_R of the current input tile) and a
// weight index shared by all PEs. Row i is delayed by i cycles before
// entering column 0, packs then move one column per cycle, and partial sums
// move one row down per cycle, so PE(i,j) adds W_ij o FFT(h_i) to the sum
// from PE(i-1,j). The bottom of column j therefore carries
//   sum_i W_ij o FFT(h_i)
// which is output sub-vector j's contribution from this input tile. Column
// j is delayed by C-1-j cycles so all C sums, and the SW-bit sideband given at
// issue, leave together: out_valid rises LAT = R+C-1 cycles after the issue
// cycle.
//
// Array shape, dataflow directions and weight stationarity follow the paper;
// the skew/de-skew registers and the sideband are this design's.
module systolic_array
  import blockgnn_pkg::*;
#(
  parameter int R      = 4,
  parameter int C      = 4,
  parameter int L      = 1,
  parameter int WDEPTH = 2048,
  parameter int SW     = 32,
  localparam int RW    = (R > 1) ? $clog2(R) : 1,
  localparam int CLW   = (C > 1) ? $clog2(C) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // weight preload into PE(w_row, w_col)
  input  logic                      w_we,
  input  logic [RW-1:0]             w_row,
  input  logic [CLW-1:0]            w_col,
  input  logic [$clog2(WDEPTH)-1:0] w_addr,
  input  cplx_t                     w_data [L],
  // issue
  input  logic                      in_valid,
  input  logic [$clog2(WDEPTH)-1:0] in_widx,
  input  cplx_t                     in_data [R][L],
  input  logic [SW-1:0]             in_side,
  // result
  output logic                      out_valid,
  output cplx_t                     out_data [C][L],
  output logic [SW-1:0]             out_side
);
  localparam int AW  = $clog2(WDEPTH);
  localparam int LAT = R + C - 1;

  // --- input skew: row i delayed by i cycles -------------------------------
  logic          row_valid [R];
  logic [AW-1:0] row_widx  [R];
  cplx_t         row_data  [R][L];

  for (genvar i = 0; i < R; i++) begin : g_skew
    if (i == 0) begin : g_nodelay
      assign row_valid[0] = in_valid;
      assign row_widx[0]  = in_widx;
      assign row_data[0]  = in_data[0];
    end else begin : g_delay
      logic          v_sr [i];
      logic [AW-1:0] w_sr [i];
      cplx_t         d_sr [i][L];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < i; d++) begin
            v_sr[d] <= 1'b0;
            w_sr[d] <= '0;
            for (int e = 0; e < L; e++) d_sr[d][e] <= '0;
          end
        end else begin
          v_sr[0] <= in_valid;
          w_sr[0] <= in_widx;
          d_sr[0] <= in_data[i];
          for (int d = 1; d < i; d++) begin
            v_sr[d] <= v_sr[d-1];
            w_sr[d] <= w_sr[d-1];
            d_sr[d] <= d_sr[d-1];
          end
        end
      end
      assign row_valid[i] = v_sr[i-1];
      assign row_widx[i]  = w_sr[i-1];
      assign row_data[i]  = d_sr[i-1];
    end
  end

  // --- PE grid ---------------------------------------------------------------
  logic          a_v [R][C+1];
  logic [AW-1:0] a_w [R][C+1];
  cplx_t         a_d [R][C+1][L];
  cplx_t         ps  [R+1][C][L];

  for (genvar i = 0; i < R; i++) begin : g_row
    assign a_v[i][0] = row_valid[i];
    assign a_w[i][0] = row_widx[i];
    assign a_d[i][0] = row_data[i];
    for (genvar j = 0; j < C; j++) begin : g_col
      if (i == 0) begin : g_top
        for (genvar e = 0; e < L; e++) begin : g_zero
          assign ps[0][j][e] = '0;
        end
      end
      pe #(.L(L), .WDEPTH(WDEPTH)) u_pe (
        .clk, .rst_n,
        .w_we       (w_we && (w_row == RW'(i)) && (w_col == CLW'(j))),
        .w_addr, .w_data,
        .a_valid_in (a_v[i][j]),   .a_widx_in (a_w[i][j]),   .a_in (a_d[i][j]),
        .a_valid_out(a_v[i][j+1]), .a_widx_out(a_w[i][j+1]), .a_out(a_d[i][j+1]),
        .ps_in      (ps[i][j]),    .ps_out    (ps[i+1][j])
      );
    end
  end

  // --- output de-skew: column j delayed by C-1-j cycles ----------------------
  for (genvar j = 0; j < C; j++) begin : g_deskew
    if (j == C - 1) begin : g_nodelay
      assign out_data[j] = ps[R][j];
    end else begin : g_delay
      cplx_t d_sr [C-1-j][L];
      always_ff @(posedge clk) begin
        d_sr[0] <= ps[R][j];
        for (int d = 1; d < C - 1 - j; d++) d_sr[d] <= d_sr[d-1];
      end
      assign out_data[j] = d_sr[C-2-j];
    end
  end

  // --- sideband and valid delay line ----------------------------------------
  logic          v_line [LAT];
  logic [SW-1:0] s_line [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < LAT; d++) begin
        v_line[d] <= 1'b0;
        s_line[d] <= '0;
      end
    end else begin
      v_line[0] <= in_valid;
      s_line[0] <= in_side;
      for (int d = 1; d < LAT; d++) begin
        v_line[d] <= v_line[d-1];
        s_line[d] <= s_line[d-1];
      end
    end
  end
  assign out_valid = v_line[LAT-1];
  assign out_side  = s_line[LAT-1];

endmodule
