// circore: the three-stage block-circulant matrix-vector pipeline.
//
// Computes h' = W h for a block-circulant W of p x q circulant blocks of size
// NPT, following Algorithm 1 of the design: every input sub-vector h_j is
// transformed once (FFT unit, X channels), multiplied element-wise with the
// pre-loaded spectral weights W^_ij and accumulated over j in the spectral
// domain (systolic array of R x C PEs plus the MAC-output accumulators), and
// every output sub-vector is transformed back once (IFFT unit, Y channels).
//
// Stages and the buffers between them:
//   in stream --> fft_unit --> mac_input_buf (2 banks) --> MAC sequencer
//     --> systolic_array --> mac_output --> fft_unit(INVERSE) --> out stream
// The input stream carries real samples, NPT per sub-vector, q sub-vectors
// per vector, tagged {vector[15:0], sub-vector[7:0]}; vectors must be
// numbered 0,1,2,... in order. The output stream carries the real part of
// h', NPT samples per output sub-vector, p per vector, in order, tagged
// {vector, output sub-vector}.
//
// MAC sequencing for a vector in bank v mod 2: for each output tile pt
// (ceil(p/C) of them) and each input tile qt (ceil(q/R)), issue the NPT/L
// packs k, reading rows qt*R .. qt*R+R-1 and weight index
// (pt*ceil(q/R) + qt)*NPT/L + k. That is ceil(q/R)*ceil(p/C)*ceil(NPT/L)
// issue cycles per vector, as the paper states for a fully loaded array. A
// new output tile starts only after the previous one has drained to the IFFT
// unit (a single accumulator bank: this design's simplification).
//
// Weights are preloaded through w_* (PE row = input sub-vector mod R, PE
// column = output sub-vector mod C, address = tile*NPT/L + pack), and must
// fit: ceil(p/C)*ceil(q/R) <= TILES and q <= QMAX.
module circore
  import blockgnn_pkg::*;
#(
  parameter int X     = 16,
  parameter int Y     = 16,
  parameter int R     = 4,
  parameter int C     = 4,
  parameter int L     = 1,
  parameter int NPT   = 128,
  parameter int TILES = 16,
  parameter int QMAX  = 40,
  localparam int NPK    = NPT / L,
  localparam int WDEPTH = TILES * NPK,
  localparam int WAW    = $clog2(WDEPTH),
  localparam int RW     = (R > 1) ? $clog2(R) : 1,
  localparam int CLW    = (C > 1) ? $clog2(C) : 1,
  localparam int TAG_W  = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  // layer shape, held stable while vectors are in flight
  input  logic [7:0]       cfg_p,
  input  logic [7:0]       cfg_q,
  // weight preload
  input  logic             w_we,
  input  logic [RW-1:0]    w_row,
  input  logic [CLW-1:0]   w_col,
  input  logic [WAW-1:0]   w_addr,
  input  cplx_t            w_data [L],
  // spatial input samples
  input  logic             in_valid,
  output logic             in_ready,
  input  fix_t             in_data,
  input  logic [TAG_W-1:0] in_tag,
  // spatial output samples
  output logic             out_valid,
  input  logic             out_ready,
  output fix_t             out_data,
  output logic [TAG_W-1:0] out_tag,
  output logic             out_last,
  // activity, for status and performance counting
  output logic             mac_active
);
  localparam int QW = $clog2(QMAX + 1);
  localparam int EW = $clog2(NPT);
  localparam int PW = (NPK > 1) ? $clog2(NPK) : 1;
  localparam int CW = $clog2(C + 1);
  // sideband through the array: first, last, pack, vector, obase, ncol
  localparam int SW = 2 + PW + 16 + 8 + CW;

  // ---------------- stage 1: FFT ---------------------------------------------
  cplx_t            fin_data;
  logic             fo_valid, fo_ready, fo_last;
  cplx_t            fo_data;
  logic [TAG_W-1:0] fo_tag;

  assign fin_data.re = in_data;
  assign fin_data.im = '0;

  fft_unit #(.LANES(X), .NPT(NPT), .INVERSE(1'b0), .TAG_W(TAG_W)) u_fft (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(fin_data), .in_tag,
    .out_valid(fo_valid), .out_ready(fo_ready), .out_data(fo_data),
    .out_tag(fo_tag), .out_last(fo_last)
  );

  // FFT results into the MAC input buffer, bank = vector number mod 2
  logic [1:0]    mib_full;
  logic [EW-1:0] fo_elem;
  logic          fo_bank;
  logic [7:0]    fo_sub;

  assign fo_bank  = fo_tag[8];
  assign fo_sub   = fo_tag[7:0];
  assign fo_ready = !mib_full[fo_bank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fo_elem <= '0;
    else if (fo_valid && fo_ready) fo_elem <= fo_elem + 1'b1;
  end

  // ---------------- stage 2: MAC ---------------------------------------------
  logic [7:0]    qt_n, pt_n;        // input / output tiles
  assign qt_n = 8'((int'(cfg_q) + R - 1) / R);
  assign pt_n = 8'((int'(cfg_p) + C - 1) / C);

  typedef enum logic [1:0] {M_WAIT, M_ISSUE, M_DRAIN} mstate_e;
  mstate_e       mstate;
  logic [15:0]   cur_v;
  logic [7:0]    pt, qt;
  logic [PW-1:0] pk;
  logic          tile_open;         // an output tile is accumulating or draining
  logic          mo_busy, mo_done;

  cplx_t         rows [R][L];
  logic          issue, issue_last;
  logic [SW-1:0] side_in, side_out;
  logic [CW-1:0] ncol;

  always_comb begin
    int rem;
    rem  = int'(cfg_p) - int'(pt) * C;
    ncol = (rem >= C) ? CW'(C) : CW'(rem);
  end

  assign issue      = (mstate == M_ISSUE);
  assign issue_last = issue && pk == PW'(NPK - 1) && qt == qt_n - 1'b1 && pt == pt_n - 1'b1;
  assign side_in    = {qt == 8'd0, qt == qt_n - 1'b1, pk, cur_v, 8'(int'(pt) * C), ncol};
  assign mac_active = (mstate != M_WAIT);

  mac_input_buf #(.NPT(NPT), .L(L), .R(R), .QMAX(QMAX)) u_mib (
    .clk, .rst_n,
    .wr_en  (fo_valid && fo_ready),
    .wr_bank(fo_bank),
    .wr_sub (QW'(fo_sub)),
    .wr_elem(fo_elem),
    .wr_data(fo_data),
    .wr_last(fo_last && fo_sub == cfg_q - 1'b1),
    .full   (mib_full),
    .rd_bank(cur_v[0]),
    .rd_base(QW'(int'(qt) * R)),
    .rd_pack(pk),
    .rd_q   (QW'(cfg_q)),
    .rd_data(rows),
    .rd_release(issue_last)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mstate    <= M_WAIT;
      cur_v     <= '0;
      pt        <= '0;
      qt        <= '0;
      pk        <= '0;
      tile_open <= 1'b0;
    end else begin
      if (mo_done) tile_open <= 1'b0;
      unique case (mstate)
        M_WAIT: if (mib_full[cur_v[0]] && !tile_open) begin
          mstate    <= M_ISSUE;
          tile_open <= 1'b1;
        end
        M_ISSUE: begin
          pk <= pk + 1'b1;
          if (pk == PW'(NPK - 1)) begin
            pk <= '0;
            qt <= qt + 1'b1;
            if (qt == qt_n - 1'b1) begin
              qt     <= '0;
              mstate <= M_DRAIN;
            end
          end
        end
        M_DRAIN: if (mo_done) begin
          if (pt == pt_n - 1'b1) begin
            pt     <= '0;
            cur_v  <= cur_v + 1'b1;
            mstate <= M_WAIT;
          end else begin
            pt        <= pt + 1'b1;
            mstate    <= M_ISSUE;
            tile_open <= 1'b1;
          end
        end
        default: mstate <= M_WAIT;
      endcase
    end
  end

  logic          sa_valid;
  cplx_t         sa_data [C][L];

  systolic_array #(.R(R), .C(C), .L(L), .WDEPTH(WDEPTH), .SW(SW)) u_sa (
    .clk, .rst_n,
    .w_we, .w_row, .w_col, .w_addr, .w_data,
    .in_valid(issue),
    .in_widx (WAW'((int'(pt) * int'(qt_n) + int'(qt)) * NPK + int'(pk))),
    .in_data (rows),
    .in_side (side_in),
    .out_valid(sa_valid),
    .out_data (sa_data),
    .out_side (side_out)
  );

  logic             mo_valid, mo_ready, mo_last;
  cplx_t            mo_data;
  logic [TAG_W-1:0] mo_tag;

  mac_output #(.C(C), .NPT(NPT), .L(L), .TAG_W(TAG_W)) u_mo (
    .clk, .rst_n,
    .in_valid(sa_valid),
    .in_data (sa_data),
    .in_first(side_out[SW-1]),
    .in_last (side_out[SW-2]),
    .in_pack (side_out[SW-3 -: PW]),
    .in_vec  (side_out[CW+8 +: 16]),
    .in_obase(side_out[CW +: 8]),
    .in_ncol (side_out[CW-1:0]),
    .out_valid(mo_valid), .out_ready(mo_ready), .out_data(mo_data),
    .out_tag(mo_tag), .out_last(mo_last),
    .busy(mo_busy), .done(mo_done)
  );

  // ---------------- stage 3: IFFT ----------------------------------------------
  cplx_t ifo_data;

  fft_unit #(.LANES(Y), .NPT(NPT), .INVERSE(1'b1), .TAG_W(TAG_W)) u_ifft (
    .clk, .rst_n,
    .in_valid(mo_valid), .in_ready(mo_ready), .in_data(mo_data), .in_tag(mo_tag),
    .out_valid, .out_ready, .out_data(ifo_data), .out_tag, .out_last
  );

  assign out_data = ifo_data.re;

  // Layer shape limits of this instance
  a_tiles_fit: assert property (@(posedge clk) disable iff (!rst_n)
    issue |-> (int'(pt_n) * int'(qt_n) <= TILES) && (int'(cfg_q) <= QMAX));

endmodule
