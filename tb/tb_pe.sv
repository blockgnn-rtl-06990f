// tb_pe: loads a PE (L=2 lanes) with integer-valued complex weights, then
// drives random packs and partial sums and checks, one cycle later,
//   ps_out = ps_in + w[widx] o a_in   (exact for integer values)
// and that the pack, its index and its valid bit are forwarded unchanged.
// Cycles without a_valid must pass the partial sum through.
module tb_pe;
  import blockgnn_pkg::*;
  localparam int L = 2, WDEPTH = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_we, a_valid_in, a_valid_out;
  logic [2:0] w_addr, a_widx_in, a_widx_out;
  cplx_t w_data [L], a_in [L], a_out [L], ps_in [L], ps_out [L];

  pe #(.L(L), .WDEPTH(WDEPTH)) dut (.clk, .rst_n, .w_we, .w_addr, .w_data,
    .a_valid_in, .a_widx_in, .a_in, .a_valid_out, .a_widx_out, .a_out, .ps_in, .ps_out);

  int wr [WDEPTH][L], wi [WDEPTH][L];

  function automatic fix_t fi(int v); return fix_t'(v * 65536); endfunction

  initial begin
    int ar [L], ai [L], pr [L], pii [L], idx;
    bit v;
    w_we = 0; w_addr = 0; a_valid_in = 0; a_widx_in = 0;
    for (int e = 0; e < L; e++) begin w_data[e] = '0; a_in[e] = '0; ps_in[e] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int d = 0; d < WDEPTH; d++) begin
      for (int e = 0; e < L; e++) begin
        wr[d][e] = $urandom_range(20) - 10; wi[d][e] = $urandom_range(20) - 10;
        w_data[e].re = fi(wr[d][e]); w_data[e].im = fi(wi[d][e]);
      end
      w_we = 1; w_addr = 3'(d);
      @(posedge clk); #1;
    end
    w_we = 0;
    for (int t = 0; t < 200; t++) begin
      idx = $urandom_range(WDEPTH - 1);
      v = ($urandom_range(4) != 0);
      for (int e = 0; e < L; e++) begin
        ar[e] = $urandom_range(200) - 100; ai[e] = $urandom_range(200) - 100;
        pr[e] = $urandom_range(2000) - 1000; pii[e] = $urandom_range(2000) - 1000;
        a_in[e].re = fi(ar[e]); a_in[e].im = fi(ai[e]);
        ps_in[e].re = fi(pr[e]); ps_in[e].im = fi(pii[e]);
      end
      a_valid_in = v; a_widx_in = 3'(idx);
      @(posedge clk); #1;
      for (int e = 0; e < L; e++) begin
        automatic int er = v ? pr[e] + ar[e] * wr[idx][e] - ai[e] * wi[idx][e] : pr[e];
        automatic int ei = v ? pii[e] + ar[e] * wi[idx][e] + ai[e] * wr[idx][e] : pii[e];
        checks++;
        if (ps_out[e].re != fi(er) || ps_out[e].im != fi(ei) || a_out[e] != a_in[e]) begin
          failures++;
          if (failures < 8) $display("t%0d lane %0d got %0d %0d exp %0d %0d", t, e,
                                     ps_out[e].re >>> 16, ps_out[e].im >>> 16, er, ei);
        end
      end
      checks++;
      if (a_valid_out != v || a_widx_out != 3'(idx)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
