// mac_output: the "MAC Output" stage below the systolic array.
//
// For each of the C columns it keeps one output sub-vector in the spectral
// domain (NPT/L packs of L complex values). A column result arriving with
// `first` set overwrites the stored pack, otherwise it is added to it; this
// is the accumulation over the ceil(q/R) input tiles of Algorithm 1, done in
// the spectral domain so only one IFFT per output sub-vector is needed. When
// the pack NPT/L-1 of a result flagged `last` arrives, the first `ncol`
// columns are streamed out, column by column and element by element, each
// sample tagged {vector, output sub-vector = obase + column}. `busy` is high
// from the drain start until the final sample is taken; `done` pulses then.
//
// The column accumulators follow the "+" under each column of the paper's
// systolic-array figure; the drain order and the tagging are this design's.
module mac_output
  import blockgnn_pkg::*;
#(
  parameter int C     = 4,
  parameter int NPT   = 128,
  parameter int L     = 1,
  parameter int TAG_W = 24,
  localparam int NPK  = NPT / L,
  localparam int PW   = (NPK > 1) ? $clog2(NPK) : 1,
  localparam int CW   = $clog2(C + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  cplx_t            in_data [C][L],
  input  logic             in_first,
  input  logic             in_last,
  input  logic [PW-1:0]    in_pack,
  input  logic [15:0]      in_vec,
  input  logic [7:0]       in_obase,
  input  logic [CW-1:0]    in_ncol,
  output logic             out_valid,
  input  logic             out_ready,
  output cplx_t            out_data,
  output logic [TAG_W-1:0] out_tag,
  output logic             out_last,
  output logic             busy,
  output logic             done
);
  localparam int EW = $clog2(NPT);
  localparam int LW = (L > 1) ? $clog2(L) : 1;

  cplx_t acc [C][NPK][L];

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int j = 0; j < C; j++)
        for (int e = 0; e < L; e++)
          acc[j][in_pack][e] <= in_first ? in_data[j][e] : cadd(acc[j][in_pack][e], in_data[j][e]);
  end

  logic [CW-1:0] col, ncol_q;
  logic [EW-1:0] elem;
  logic [15:0]   vec_q;
  logic [7:0]    obase_q;

  assign out_valid = busy;
  assign out_data  = acc[col[$clog2(C > 1 ? C : 2)-1:0]][PW'(elem / EW'(L))][LW'(elem % EW'(L))];
  assign out_tag   = {vec_q, obase_q + 8'(col)};
  assign out_last  = (elem == EW'(NPT - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      col     <= '0;
      elem    <= '0;
      ncol_q  <= '0;
      vec_q   <= '0;
      obase_q <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (in_valid && in_last && in_pack == PW'(NPK - 1)) begin
          busy    <= 1'b1;
          col     <= '0;
          elem    <= '0;
          ncol_q  <= in_ncol;
          vec_q   <= in_vec;
          obase_q <= in_obase;
        end
      end else if (out_ready) begin
        elem <= elem + 1'b1;
        if (elem == EW'(NPT - 1)) begin
          col <= col + 1'b1;
          if (col == ncol_q - 1'b1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  // The next output tile must not arrive while this one drains.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !in_valid);

endmodule
