// tb_forest_mem: self-checking test of the Central FPGA's forest memory.
// Random writes and reads on the two ports are compared with a model array;
// it checks the one-cycle read latency and that a read of the word being
// written in the same cycle returns the old contents.
module tb_forest_mem;
  import nde_pkg::*;

  localparam int unsigned N = 64;
  localparam int unsigned NTREES = 4;
  localparam int unsigned WORDS = NTREES * N / 2;
  localparam int unsigned AW = $clog2(WORDS);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [AW-1:0] raddr, waddr;
  word_t rdata, wdata;
  logic we;

  forest_mem #(.N(N), .NTREES(NTREES)) dut (.*);

  int checks = 0, failures = 0;
  word_t model [WORDS];
  bit    valid [WORDS];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t expect_q;
    bit    expect_v;
    int    collisions = 0;
    we = 0; raddr = '0; waddr = '0; wdata = '0;
    for (int i = 0; i < WORDS; i++) valid[i] = 0;
    expect_v = 0;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      if (expect_v) begin
        checks++;
        if (rdata !== expect_q) begin
          failures++;
          $display("FAIL: read %h expected %h", rdata, expect_q);
        end
      end
      we = ($urandom_range(0, 1) == 1) || cyc < WORDS;
      waddr = (cyc < WORDS) ? AW'(cyc) : AW'($urandom);
      wdata = {$urandom, $urandom};
      raddr = ($urandom_range(0, 3) == 0) ? waddr : AW'($urandom);
      expect_v = valid[raddr];
      expect_q = model[raddr];          // old contents on a collision
      if (we && raddr == waddr && valid[raddr]) collisions++;
      @(posedge clk);
      if (we) begin model[waddr] = wdata; valid[waddr] = 1; end
    end
    checks++;
    if (collisions == 0) begin failures++; $display("FAIL: no read/write collision tested"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
