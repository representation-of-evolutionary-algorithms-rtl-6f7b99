// tb_flow_controller: self-checking test of the Flow Controller FIFO.
// A random producer writes numbered transactions, a random consumer raises
// waitrequest, and the host enable is toggled. Every transaction must come
// out once, in order, unchanged; the FIFO must fill (waitrequest to the
// producer) and nothing may leave while enable is low unless it was already
// presented. The forwarded counter must match.
module tb_flow_controller;
  import nde_pkg::*;

  localparam int unsigned DEPTH = 4;
  localparam int unsigned TOTAL = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic enable, s_write, s_waitrequest, m_write, m_waitrequest;
  addr_t s_address, m_address;
  word_t s_writedata, m_writedata;
  logic [31:0] forwarded, full_cycles;

  flow_controller #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t payload(int i);
    return {32'(i) * 32'h9E3779B1, 32'(i)};
  endfunction

  int sent = 0, got = 0, disabled_out = 0;
  bit was_presented;

  // producer: a write counts as accepted at the clock edge where
  // s_waitrequest is low
  initial begin
    bit acc;
    s_write = 0; s_address = '0; s_writedata = '0;
    acc = 0;
    @(posedge rst_n);
    while (sent < TOTAL) begin
      @(negedge clk);
      if (acc) s_write = 0;
      if (!s_write && $urandom_range(0, 3) != 0) begin
        s_write = 1; s_address = addr_t'(sent); s_writedata = payload(sent);
      end
      @(posedge clk);
      acc = s_write && !s_waitrequest;
      if (acc) sent++;
    end
    @(negedge clk);
    s_write = 0;
  end

  // consumer
  always @(posedge clk) begin
    if (rst_n && m_write && !m_waitrequest) begin
      check(m_address == addr_t'(got) && m_writedata == payload(got), $sformatf("item %0d", got));
      if (!enable && !was_presented) disabled_out++;
      got++;
    end
    was_presented <= m_write && m_waitrequest;
    m_waitrequest <= ($urandom_range(0, 2) == 0);
  end

  initial begin
    enable = 1;
    m_waitrequest = 0;
    was_presented = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (got < TOTAL) begin
      @(negedge clk);
      if ($urandom_range(0, 99) == 0) enable = !enable;
    end
    enable = 1;
    repeat (3) @(posedge clk);
    check(got == TOTAL, "all transactions delivered");
    check(disabled_out == 0, "nothing new leaves while disabled");
    check(forwarded == TOTAL, "forwarded counter");
    check(full_cycles > 0, "FIFO was full at least once");
    $display("full cycles %0d", full_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
