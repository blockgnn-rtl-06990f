// tb_weight_buffer: writes random complex words to random addresses of a
// 1024-word buffer, keeps a model, and checks every read one cycle after
// its request, with reads and writes overlapping.
module tb_weight_buffer;
  import blockgnn_pkg::*;
  localparam int DEPTH = 1024;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, rd_en;
  logic [9:0] wr_addr, rd_addr;
  cplx_t wr_data, rd_data;

  weight_buffer #(.DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  cplx_t model [DEPTH];
  bit    valid [DEPTH];

  initial begin
    cplx_t expv;
    bit    chk;
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    @(posedge clk); #1;
    for (int t = 0; t < 3000; t++) begin
      wr_en = ($urandom_range(1) == 1);
      wr_addr = 10'($urandom_range(DEPTH - 1));
      wr_data = {32'($urandom), 32'($urandom)};
      rd_en = 1;
      rd_addr = 10'($urandom_range(DEPTH - 1));
      chk = valid[rd_addr];
      expv = model[rd_addr];
      if (wr_en && wr_addr == rd_addr) chk = 0;   // read-during-write: not checked
      @(posedge clk); #1;
      if (wr_en) begin model[wr_addr] = wr_data; valid[wr_addr] = 1; end
      if (chk) begin
        checks++;
        if (rd_data != expv) failures++;
      end
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
