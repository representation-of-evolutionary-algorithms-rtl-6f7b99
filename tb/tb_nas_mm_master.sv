// tb_nas_mm_master: self-checking test of the NAS receive frontend.
// Random frames are sent on the Avalon-ST side with random gaps: good frames
// (sometimes padded to the minimum size, sometimes only four beats), frames
// for another MAC address, with another EtherType, with the error flag, or
// too short, and a stray beat outside any frame. Each good frame must give
// exactly one Avalon-MM write with its address and data, in order, under
// random waitrequest, with the command held while waiting; every other
// frame must be dropped and counted.
module tb_nas_mm_master;
  import nde_pkg::*;

  localparam logic [47:0] LMAC = 48'h02_00_00_00_00_02;
  localparam int unsigned TOTAL = 600;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic st_valid, st_ready, st_sop, st_eop, st_error, m_write, m_waitrequest;
  word_t st_data, m_writedata;
  addr_t m_address;
  logic [31:0] frames_ok, frames_dropped;

  nas_mm_master #(.LOCAL_MAC(LMAC)) dut (.*);

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

  addr_t exp_a [$];
  word_t exp_d [$];
  int good = 0, bad = 0, got = 0;

  task automatic send_beat(word_t d, bit sop, bit eop, bit err);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin st_valid = 0; @(negedge clk); end
    st_valid = 1; st_data = d; st_sop = sop; st_eop = eop; st_error = err;
    @(posedge clk);
    while (!st_ready) @(posedge clk);
    @(negedge clk);
    st_valid = 0; st_sop = 0; st_eop = 0; st_error = 0;
  endtask

  // consumer
  always @(posedge clk) begin
    if (rst_n && m_write && !m_waitrequest) begin
      check(exp_a.size() > 0, "write expected");
      if (exp_a.size() > 0) begin
        check(m_address == exp_a[0] && m_writedata == exp_d[0], $sformatf("write %0d contents", got));
        void'(exp_a.pop_front());
        void'(exp_d.pop_front());
      end
      got++;
    end
    m_waitrequest <= ($urandom_range(0, 2) == 0);
  end

  initial begin
    st_valid = 0; st_data = '0; st_sop = 0; st_eop = 0; st_error = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_beat(64'h1234, 0, 0, 0);   // stray beat outside any frame
    for (int f = 0; f < TOTAL; f++) begin
      int kind, nb;
      logic [47:0] dst;
      logic [15:0] et;
      addr_t a;
      word_t d;
      kind = $urandom_range(0, 9);
      dst = (kind == 6) ? 48'h02_00_00_00_00_09 : LMAC;
      et = (kind == 7) ? 16'h0800 : 16'h88B5;
      nb = (kind == 9) ? 3 : ((kind == 5) ? 4 : 8);
      a = addr_t'($urandom); d = {$urandom, $urandom};
      if (kind <= 5) begin good++; exp_a.push_back(a); exp_d.push_back(d); end
      else bad++;
      for (int b = 0; b < nb; b++) begin
        word_t w;
        case (b)
          0: w = {dst, 16'h0200};
          1: w = {32'h0000_0001, et, 16'(f)};
          2: w = word_t'(a);
          3: w = d;
          default: w = '0;
        endcase
        send_beat(w, b == 0, b == nb - 1, (kind == 8) && (b == nb - 1));
      end
    end
    repeat (20) @(posedge clk);
    check(got == good, $sformatf("writes %0d expected %0d", got, good));
    check(frames_ok == good, "good frame counter");
    check(frames_dropped == bad, $sformatf("dropped %0d expected %0d", frames_dropped, bad));
    $display("good %0d dropped %0d", good, bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
