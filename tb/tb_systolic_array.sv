// tb_systolic_array: a 3x2 array (L=1) with integer weights. Random issue
// patterns (with gaps) present R packs and a weight index per cycle; each
// result must equal, exactly,
//   out[j] = sum_i W[i][j][widx] * in[i]
// and appear with its sideband exactly R+C-1 cycles after its issue cycle.
module tb_systolic_array;
  import blockgnn_pkg::*;
  localparam int R = 3, C = 2, L = 1, WDEPTH = 4, SW = 16;
  localparam int LAT = R + C - 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_we, in_valid, out_valid;
  logic [1:0] w_row, w_addr, in_widx;
  logic [0:0] w_col;
  cplx_t w_data [L], in_data [R][L], out_data [C][L];
  logic [SW-1:0] in_side, out_side;

  systolic_array #(.R(R), .C(C), .L(L), .WDEPTH(WDEPTH), .SW(SW)) dut (.clk, .rst_n,
    .w_we, .w_row, .w_col, .w_addr, .w_data, .in_valid, .in_widx, .in_data, .in_side,
    .out_valid, .out_data, .out_side);

  int wr [R][C][WDEPTH], wi [R][C][WDEPTH];
  // expected results, indexed by issue cycle
  int exp_r [2000][C], exp_i [2000][C], exp_side [2000];
  bit issued [2000];
  int cyc = 0;

  function automatic fix_t fi(int v); return fix_t'(v * 65536); endfunction

  always @(posedge clk) if (rst_n) begin
    if (cyc >= LAT) begin
      automatic int t = cyc - LAT;
      checks++;
      if (out_valid != issued[t]) begin
        failures++; $display("valid mismatch at cycle %0d", cyc);
      end else if (issued[t]) begin
        for (int j = 0; j < C; j++)
          if (out_data[j][0].re != fi(exp_r[t][j]) || out_data[j][0].im != fi(exp_i[t][j])) begin
            failures++;
            if (failures < 8) $display("t%0d col %0d got %0d exp %0d", t, j,
                                       out_data[j][0].re >>> 16, exp_r[t][j]);
          end
        if (out_side != 16'(exp_side[t])) failures++;
      end
    end
    cyc++;
  end

  initial begin
    int ar [R], ai [R], idx;
    w_we = 0; w_row = 0; w_col = 0; w_addr = 0; in_valid = 0; in_widx = 0; in_side = 0;
    w_data[0] = '0;
    for (int i = 0; i < R; i++) in_data[i][0] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // preload
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) for (int d = 0; d < WDEPTH; d++) begin
      wr[i][j][d] = $urandom_range(10) - 5; wi[i][j][d] = $urandom_range(10) - 5;
      w_data[0].re = fi(wr[i][j][d]); w_data[0].im = fi(wi[i][j][d]);
      w_we = 1; w_row = 2'(i); w_col = 1'(j); w_addr = 2'(d);
      issued[cyc] = 0;
      @(posedge clk); #1;
    end
    w_we = 0;
    for (int t = 0; t < 300; t++) begin
      automatic int c0 = cyc;
      in_valid = ($urandom_range(3) != 0);
      idx = $urandom_range(WDEPTH - 1);
      in_widx = 2'(idx);
      in_side = 16'($urandom);
      for (int i = 0; i < R; i++) begin
        ar[i] = $urandom_range(100) - 50; ai[i] = $urandom_range(100) - 50;
        in_data[i][0].re = fi(ar[i]); in_data[i][0].im = fi(ai[i]);
      end
      issued[c0] = in_valid;
      exp_side[c0] = int'(in_side);
      for (int j = 0; j < C; j++) begin
        exp_r[c0][j] = 0; exp_i[c0][j] = 0;
        for (int i = 0; i < R; i++) begin
          exp_r[c0][j] += ar[i] * wr[i][j][idx] - ai[i] * wi[i][j][idx];
          exp_i[c0][j] += ar[i] * wi[i][j][idx] + ai[i] * wr[i][j][idx];
        end
      end
      @(posedge clk); #1;
    end
    in_valid = 0;
    for (int k = 0; k < LAT + 2; k++) begin issued[cyc] = 0; @(posedge clk); #1; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
