// tb_cmd_fifo: random pushes and pops against a queue model; checks the
// head word, the count, and the full and empty flags every cycle, and that
// the FIFO really fills and really empties during the run.
module tb_cmd_fifo;
  import blockgnn_pkg::*;
  localparam int DEPTH = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push, full, pop, empty;
  cmd_t wr_data, rd_data;
  logic [2:0] count;

  cmd_fifo #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .wr_data, .full, .pop, .rd_data, .empty, .count);

  cmd_t q [$];
  int n_full = 0, n_empty = 0;

  initial begin
    push = 0; pop = 0; wr_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      // bias the direction in phases so the FIFO swings between full and empty
      push = ((t / 50) % 2 == 0) ? ($urandom_range(3) != 0) : ($urandom_range(3) == 0);
      pop  = ((t / 50) % 2 == 0) ? ($urandom_range(3) == 0) : ($urandom_range(3) != 0);
      if (full)  push = 0;
      if (empty) pop = 0;
      wr_data = {$urandom, $urandom, $urandom, $urandom, $urandom};
      checks += 3;
      if (int'(count) != q.size()) failures++;
      if (full != (q.size() == DEPTH) || empty != (q.size() == 0)) failures++;
      if (q.size() > 0 && rd_data != q[0]) failures++;
      if (full) n_full++;
      if (empty) n_empty++;
      @(posedge clk); #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wr_data);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("never full or never empty"); end
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
