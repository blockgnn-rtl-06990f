// tb_mac_output: C=2 columns, NPT=4, L=1. Feeds three input tiles of column
// results (first, middle, last), then checks that the drained stream holds
// the per-column sums, column by column, with tags {vector, obase+column},
// out_last on each sub-vector's final element, a one-cycle done pulse, and
// that only `ncol` columns are drained when the output tile is partial.
module tb_mac_output;
  import blockgnn_pkg::*;
  localparam int C = 2, NPT = 4, L = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_first, in_last, out_valid, out_ready, out_last, busy, done;
  cplx_t in_data [C][L], out_data;
  logic [1:0] in_pack, in_ncol;
  logic [15:0] in_vec;
  logic [7:0] in_obase;
  logic [23:0] out_tag;

  mac_output #(.C(C), .NPT(NPT), .L(L)) dut (.clk, .rst_n, .in_valid, .in_data, .in_first,
    .in_last, .in_pack, .in_vec, .in_obase, .in_ncol, .out_valid, .out_ready, .out_data,
    .out_tag, .out_last, .busy, .done);

  int sum [C][NPT];
  int ndone = 0;
  always @(posedge clk) if (done) ndone++;

  task automatic run(int vec, int obase, int ncol);
    int v;
    for (int j = 0; j < C; j++) for (int k = 0; k < NPT; k++) sum[j][k] = 0;
    for (int t = 0; t < 3; t++) for (int k = 0; k < NPT; k++) begin
      in_valid = 1; in_first = (t == 0); in_last = (t == 2); in_pack = 2'(k);
      in_vec = 16'(vec); in_obase = 8'(obase); in_ncol = 2'(ncol);
      for (int j = 0; j < C; j++) begin
        v = $urandom_range(1000) - 500;
        sum[j][k] += v;
        in_data[j][0].re = fix_t'(v); in_data[j][0].im = fix_t'(-2 * v);
      end
      @(posedge clk); #1;
    end
    in_valid = 0;
    for (int j = 0; j < ncol; j++) for (int k = 0; k < NPT; k++) begin
      out_ready = ($urandom_range(2) != 0);
      while (!out_ready) begin @(posedge clk); #1; out_ready = ($urandom_range(2) != 0); end
      checks++;
      if (!out_valid || out_data.re != fix_t'(sum[j][k]) || out_data.im != fix_t'(-2 * sum[j][k]) ||
          out_tag != {16'(vec), 8'(obase + j)} || out_last != (k == NPT - 1)) begin
        failures++;
        if (failures < 8) $display("col %0d k %0d got %0d exp %0d tag %h", j, k, out_data.re, sum[j][k], out_tag);
      end
      @(posedge clk); #1;
    end
    out_ready = 0;
    checks++;
    if (busy || out_valid) begin failures++; $display("still busy after drain"); end
  endtask

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_pack = 0; in_vec = 0; in_obase = 0; in_ncol = 0;
    out_ready = 0;
    for (int j = 0; j < C; j++) in_data[j][0] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run(5, 0, 2);
    run(6, 2, 1);
    repeat (2) @(posedge clk);
    checks++;
    if (ndone != 2) begin failures++; $display("done pulses %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
