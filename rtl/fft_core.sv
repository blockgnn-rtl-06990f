// fft_core: one FFT (or, with INVERSE=1, IFFT) channel of CirCore.
//
// Transforms one sub-vector of NPT complex samples. The core is an in-place
// radix-2 decimation-in-time engine built around a register array:
//   LOAD   NPT cycles, one sample per accepted beat, stored at the
//          bit-reversed address;
//   CALC   (NPT/2)*log2(NPT) cycles, one butterfly per cycle;
//   UNLOAD NPT cycles, spectrum in natural order, one sample per beat.
// A tag presented with the first input sample is returned with every output
// sample so that callers can track which sub-vector a result belongs to.
//
// The forward transform uses twiddles exp(-2*pi*i*e/NPT) and is unscaled
// (growth of log2(NPT) bits, kept inside Q16.16 headroom). The inverse uses
// the conjugate twiddles and halves after every stage, so it carries the 1/NPT
// of the inverse DFT. Twiddles are computed at elaboration time.
//
// The accelerator this follows used a vendor FFT IP per channel and only
// states that FFT and IFFT channels share one architecture with different
// twiddle factors (which is what INVERSE selects). The radix-2 iterative
// structure, the scaling and the handshake are this design's own. At
// NPT=128 a transform occupies the core for 704 cycles (vendor IP: 484).
//
// Interface: valid/ready on input and output; out_last marks sample NPT-1.
module fft_core
  import blockgnn_pkg::*;
#(
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
  localparam int LOGN = $clog2(NPT);
  localparam int HALF = NPT / 2;

  typedef fix_t tw_tab_t [HALF];

  // Fixed-point cos (IM=0) or twiddle imaginary part (IM=1) of angle 2*pi*e/NPT
  function automatic tw_tab_t make_twiddles(bit im);
    tw_tab_t t;
    for (int e = 0; e < HALF; e++) begin
      if (!im)
        t[e] = fix_t'(longint'($cos(2.0 * 3.14159265358979323846 * e / NPT) * 65536.0));
      else if (INVERSE)
        t[e] = fix_t'(longint'($sin(2.0 * 3.14159265358979323846 * e / NPT) * 65536.0));
      else
        t[e] = fix_t'(longint'(-$sin(2.0 * 3.14159265358979323846 * e / NPT) * 65536.0));
    end
    return t;
  endfunction

  localparam tw_tab_t TW_RE = make_twiddles(1'b0);
  localparam tw_tab_t TW_IM = make_twiddles(1'b1);

  typedef enum logic [1:0] {S_LOAD, S_CALC, S_UNLOAD} state_e;
  state_e state;

  cplx_t              mem [NPT];
  logic [LOGN-1:0]    cnt;
  logic [LOGN-2:0]    bfly;
  logic [$clog2(LOGN)-1:0] stage;
  logic [TAG_W-1:0]   tag_q;

  function automatic logic [LOGN-1:0] bitrev(logic [LOGN-1:0] v);
    logic [LOGN-1:0] r;
    for (int b = 0; b < LOGN; b++) r[b] = v[LOGN-1-b];
    return r;
  endfunction

  // Butterfly addressing for the current stage
  logic [LOGN-1:0] idx_a, idx_b, pos, span;
  logic [LOGN-2:0] tw_idx;
  cplx_t           tw, bw, sum, dif;

  always_comb begin
    span   = LOGN'(1) << stage;
    pos    = LOGN'(bfly) & (span - LOGN'(1));
    idx_a  = ((LOGN'(bfly) >> stage) << (stage + 1)) | pos;
    idx_b  = idx_a | span;
    tw_idx = (LOGN-1)'(pos << (LOGN - 1 - int'(stage)));
    tw.re  = TW_RE[tw_idx];
    tw.im  = TW_IM[tw_idx];
    bw     = cmul(mem[idx_b], tw);
    sum    = cadd(mem[idx_a], bw);
    dif    = csub(mem[idx_a], bw);
    if (INVERSE) begin
      sum.re = sum.re >>> 1;  sum.im = sum.im >>> 1;
      dif.re = dif.re >>> 1;  dif.im = dif.im >>> 1;
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_UNLOAD);
  assign out_data  = mem[cnt];
  assign out_tag   = tag_q;
  assign out_last  = (state == S_UNLOAD) && (cnt == LOGN'(NPT - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      bfly  <= '0;
      stage <= '0;
      tag_q <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (cnt == '0) tag_q <= in_tag;
          cnt <= cnt + 1'b1;
          if (cnt == LOGN'(NPT - 1)) begin
            state <= S_CALC;
            bfly  <= '0;
            stage <= '0;
          end
        end
        S_CALC: begin
          bfly <= bfly + 1'b1;
          if (bfly == (LOGN-1)'(HALF - 1)) begin
            stage <= stage + 1'b1;
            if (int'(stage) == LOGN - 1) begin
              state <= S_UNLOAD;
              cnt   <= '0;
            end
          end
        end
        S_UNLOAD: if (out_ready) begin
          cnt <= cnt + 1'b1;
          if (cnt == LOGN'(NPT - 1)) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // Sample memory (not reset: every location is written during LOAD)
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid)
      mem[bitrev(cnt)] <= in_data;
    else if (state == S_CALC) begin
      mem[idx_a] <= sum;
      mem[idx_b] <= dif;
    end
  end

endmodule
