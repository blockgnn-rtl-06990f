// controller: command sequencer of the BlockGNN accelerator.
//
// Pops one command at a time from the command FIFO and runs it to the end:
//
//   CMD_LDW   preload a layer's spectral weights from the weight buffer into
//             the PEs. Block (i,j) of the p x q layer is stored in the WB at
//             src_a + (i*q + j)*NPT, one complex value per word; its NPT
//             values go to PE(j mod R, i mod C) at pack addresses
//             ((i/C)*ceil(q/R) + j/R)*NPT/L + k/L.
//   CMD_GEMV  h' = W h for `len` vectors. A feeder reads the vectors from
//             NFB words src_a.. (q*NPT elements per vector, WE elements per
//             word) and streams them, one element per cycle, into CirCore;
//             a write-back packs CirCore's output (p*NPT elements per
//             vector) into words at dst.. Both run concurrently, so the
//             three CirCore stages and the buffer traffic overlap.
//   CMD_VPU   for w in 0..len-1: NFB[dst+w] = vop(NFB[src_a+w], NFB[src_b+w]),
//             three cycles per word (read a, read b, write).
//   CMD_SWAP  exchange the NFB ping-pong banks.
//
// Feature vectors get tags from a running counter that is never reset
// between commands, which keeps CirCore's bank alternation consistent
// across GEMV commands of any length. `busy` is high while a command runs
// or commands wait; `cmds_done` counts completed commands.
//
// The paper only names the control block and says the accelerator acts on
// host commands; the command set and all sequencing here are this design's.
module controller
  import blockgnn_pkg::*;
#(
  parameter int NPT    = 128,
  parameter int R      = 4,
  parameter int C      = 4,
  parameter int L      = 1,
  parameter int M      = 1,
  parameter int TILES  = 16,
  parameter int NFB_AW = 12,
  parameter int WB_AW  = 15,
  localparam int WE    = 16 * M,
  localparam int NPK   = NPT / L,
  localparam int WAW   = $clog2(TILES * NPK),
  localparam int RW    = (R > 1) ? $clog2(R) : 1,
  localparam int CLW   = (C > 1) ? $clog2(C) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // command FIFO
  input  logic              cmd_empty,
  input  cmd_t              cmd_data,
  output logic              cmd_pop,
  // weight buffer read port
  output logic              wb_rd_en,
  output logic [WB_AW-1:0]  wb_rd_addr,
  input  cplx_t             wb_rd_data,
  // PE weight preload
  output logic              w_we,
  output logic [RW-1:0]     w_row,
  output logic [CLW-1:0]    w_col,
  output logic [WAW-1:0]    w_addr,
  output cplx_t             w_data [L],
  // CirCore
  output logic [7:0]        cfg_p,
  output logic [7:0]        cfg_q,
  output logic              cc_in_valid,
  input  logic              cc_in_ready,
  output fix_t              cc_in_data,
  output logic [23:0]       cc_in_tag,
  input  logic              cc_out_valid,
  output logic              cc_out_ready,
  input  fix_t              cc_out_data,
  // NFB, accelerator side
  output logic              nfb_rd_en,
  output logic [NFB_AW-1:0] nfb_rd_addr,
  input  fix_t              nfb_rd_data [WE],
  output logic              nfb_wr_en,
  output logic [NFB_AW-1:0] nfb_wr_addr,
  output fix_t              nfb_wr_data [WE],
  output logic              nfb_swap,
  // VPU
  output vop_e              vpu_op,
  output fix_t              vpu_scalar,
  output fix_t              vpu_a [WE],
  output fix_t              vpu_b [WE],
  input  fix_t              vpu_y [WE],
  // status
  output logic              busy,
  output logic [31:0]       cmds_done
);
  localparam int EW  = $clog2(NPT);
  localparam int LNW = (WE > 1) ? $clog2(WE) : 1;
  localparam int WPS = NPT / WE;       // NFB words per sub-vector

  typedef enum logic [2:0] {S_IDLE, S_DECODE, S_LDW, S_GEMV, S_VPU_A, S_VPU_B, S_VPU_W, S_DONE}
    state_e;
  state_e state;
  cmd_t   cur;

  assign cfg_p      = cur.p;
  assign cfg_q      = cur.q;
  assign vpu_op     = cur.vop;
  assign vpu_scalar = cur.scalar;
  assign busy       = (state != S_IDLE) || !cmd_empty;
  assign cmd_pop    = (state == S_IDLE) && !cmd_empty;

  // ---------------- weight preload (CMD_LDW) --------------------------------
  logic [7:0]     li, lj;              // block row (output) / column (input)
  logic [EW-1:0]  lk;
  logic           l_issue_done;
  logic           s1_valid;
  logic [RW-1:0]  s1_row;
  logic [CLW-1:0] s1_col;
  logic [WAW-1:0] s1_addr;
  logic [$clog2(L+1)-1:0] s1_lane;
  cplx_t          pack_buf [L];
  logic [7:0]     qtn;

  assign qtn = 8'((int'(cur.q) + R - 1) / R);

  always_comb begin
    for (int e = 0; e < L; e++) w_data[e] = pack_buf[e];
    w_data[L-1] = wb_rd_data;
  end
  assign w_we   = s1_valid && (int'(s1_lane) == L - 1);
  assign w_row  = s1_row;
  assign w_col  = s1_col;
  assign w_addr = s1_addr;

  // ---------------- GEMV feeder and write-back --------------------------------
  typedef enum logic [1:0] {F_RD, F_SEND, F_DONE} fstate_e;
  fstate_e        fstate;
  logic [31:0]    f_words, f_total, wb_words, wb_total;
  logic [LNW-1:0] f_lane, w_lane;
  logic [EW-1:0]  f_elem;
  logic [7:0]     f_sub;
  logic [15:0]    gvec;               // running vector number (tag)
  fix_t           wbuf [WE];

  assign f_total  = 32'(cur.len) * 32'(cur.q) * 32'(WPS);
  assign wb_total = 32'(cur.len) * 32'(cur.p) * 32'(WPS);

  assign cc_in_valid  = (state == S_GEMV) && (fstate == F_SEND);
  assign cc_in_data   = nfb_rd_data[f_lane];
  assign cc_in_tag    = {gvec, f_sub};
  assign cc_out_ready = (state == S_GEMV);

  // ---------------- VPU ---------------------------------------------------------
  logic [15:0] vidx;
  fix_t        areg [WE];

  assign vpu_a = areg;
  assign vpu_b = nfb_rd_data;

  // ---------------- memory port muxing -----------------------------------------
  always_comb begin
    nfb_rd_en   = 1'b0;
    nfb_rd_addr = '0;
    nfb_wr_en   = 1'b0;
    nfb_wr_addr = '0;
    nfb_wr_data = vpu_y;
    wb_rd_en    = 1'b0;
    wb_rd_addr  = WB_AW'(int'(cur.src_a) + (int'(li) * int'(cur.q) + int'(lj)) * NPT + int'(lk));
    unique case (state)
      S_LDW: wb_rd_en = !l_issue_done;
      S_GEMV: begin
        nfb_rd_en   = (fstate == F_RD);
        nfb_rd_addr = NFB_AW'(cur.src_a + f_words);
        nfb_wr_en   = cc_out_valid && (int'(w_lane) == WE - 1);
        nfb_wr_addr = NFB_AW'(cur.dst + wb_words);
        for (int e = 0; e < WE - 1; e++) nfb_wr_data[e] = wbuf[e];
        nfb_wr_data[WE-1] = cc_out_data;
      end
      S_VPU_A: begin
        nfb_rd_en   = 1'b1;
        nfb_rd_addr = NFB_AW'(cur.src_a + vidx);
      end
      S_VPU_B: begin
        nfb_rd_en   = 1'b1;
        nfb_rd_addr = NFB_AW'(cur.src_b + vidx);
      end
      S_VPU_W: begin
        nfb_wr_en   = 1'b1;
        nfb_wr_addr = NFB_AW'(cur.dst + vidx);
      end
      default: ;
    endcase
  end

  assign nfb_swap = (state == S_DECODE) && (cur.op == CMD_SWAP);

  // ---------------- sequencing ---------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cur          <= '0;
      cmds_done    <= '0;
      li           <= '0;
      lj           <= '0;
      lk           <= '0;
      l_issue_done <= 1'b0;
      s1_valid     <= 1'b0;
      s1_row       <= '0;
      s1_col       <= '0;
      s1_addr      <= '0;
      s1_lane      <= '0;
      fstate       <= F_RD;
      f_words      <= '0;
      wb_words     <= '0;
      f_lane       <= '0;
      w_lane       <= '0;
      f_elem       <= '0;
      f_sub        <= '0;
      gvec         <= '0;
      vidx         <= '0;
      for (int e = 0; e < L; e++) pack_buf[e] <= '0;
      for (int e = 0; e < WE; e++) begin
        wbuf[e] <= '0;
        areg[e] <= '0;
      end
    end else begin
      s1_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (!cmd_empty) begin
          cur   <= cmd_data;
          state <= S_DECODE;
        end

        S_DECODE: begin
          li <= '0; lj <= '0; lk <= '0; l_issue_done <= 1'b0;
          fstate <= F_RD; f_words <= '0; wb_words <= '0;
          f_lane <= '0; w_lane <= '0; f_elem <= '0; f_sub <= '0;
          vidx <= '0;
          unique case (cur.op)
            CMD_LDW:  state <= (cur.p == 0 || cur.q == 0) ? S_DONE : S_LDW;
            CMD_GEMV: state <= (cur.len == 0 || cur.p == 0 || cur.q == 0) ? S_DONE : S_GEMV;
            CMD_VPU:  state <= (cur.len == 0) ? S_DONE : S_VPU_A;
            default:  state <= S_DONE;   // CMD_SWAP (pulsed above), CMD_NOP
          endcase
        end

        S_LDW: begin
          if (!l_issue_done) begin
            s1_valid <= 1'b1;
            s1_row   <= RW'(int'(lj) % R);
            s1_col   <= CLW'(int'(li) % C);
            s1_addr  <= WAW'(((int'(li) / C) * int'(qtn) + int'(lj) / R) * NPK + int'(lk) / L);
            s1_lane  <= ($clog2(L+1))'(int'(lk) % L);
            lk <= lk + 1'b1;
            if (lk == EW'(NPT - 1)) begin
              lk <= '0;
              lj <= lj + 1'b1;
              if (lj == cur.q - 1'b1) begin
                lj <= '0;
                li <= li + 1'b1;
                if (li == cur.p - 1'b1) l_issue_done <= 1'b1;
              end
            end
          end else if (!s1_valid) begin
            state <= S_DONE;
          end
          if (s1_valid) pack_buf[s1_lane] <= wb_rd_data;
        end

        S_GEMV: begin
          // feeder
          unique case (fstate)
            F_RD: fstate <= F_SEND;
            F_SEND: if (cc_in_ready) begin
              f_lane <= f_lane + 1'b1;
              f_elem <= f_elem + 1'b1;
              if (f_elem == EW'(NPT - 1)) begin
                f_sub <= f_sub + 1'b1;
                if (f_sub == cur.q - 1'b1) begin
                  f_sub <= '0;
                  gvec  <= gvec + 1'b1;
                end
              end
              if (int'(f_lane) == WE - 1) begin
                f_lane  <= '0;
                f_words <= f_words + 1'b1;
                fstate  <= (f_words + 1 == f_total) ? F_DONE : F_RD;
              end
            end
            default: ;
          endcase
          // write-back
          if (cc_out_valid) begin
            wbuf[w_lane] <= cc_out_data;
            w_lane <= w_lane + 1'b1;
            if (int'(w_lane) == WE - 1) begin
              w_lane   <= '0;
              wb_words <= wb_words + 1'b1;
              if (wb_words + 1 == wb_total) state <= S_DONE;
            end
          end
        end

        S_VPU_A: state <= S_VPU_B;
        S_VPU_B: begin
          areg  <= nfb_rd_data;
          state <= S_VPU_W;
        end
        S_VPU_W: begin
          vidx  <= vidx + 1'b1;
          state <= (vidx == cur.len - 1'b1) ? S_DONE : S_VPU_A;
        end

        S_DONE: begin
          cmds_done <= cmds_done + 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
