// tb_nas_mm_slave: self-checking test of the NAS transmit frontend.
// Random writes go in on the Avalon-MM side; the Avalon-ST side is read with
// random ready. Each frame must have eight beats with sop/eop in place,
// empty = 4 on the last beat, the expected MAC addresses and EtherType, an
// incrementing sequence number, the write's address and data, zero padding,
// and a beat may only change once it was taken. Each write must occupy the
// slave for at least eight cycles (one frame).
module tb_nas_mm_slave;
  import nde_pkg::*;

  localparam logic [47:0] LMAC = 48'h02_00_00_00_00_01;
  localparam logic [47:0] RMAC = 48'h02_00_00_00_00_02;
  localparam int unsigned TOTAL = 500;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic s_write, s_waitrequest, st_valid, st_ready, st_sop, st_eop;
  addr_t s_address;
  word_t s_writedata, st_data;
  logic [2:0] st_empty;
  logic [31:0] frames_sent;

  nas_mm_slave #(.LOCAL_MAC(LMAC), .REMOTE_MAC(RMAC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  addr_t exp_a [$];
  word_t exp_d [$];
  int    accept_cycle [$];
  int    cyc = 0;
  always @(posedge clk) cyc++;

  // producer
  initial begin
    bit acc;
    s_write = 0; s_address = '0; s_writedata = '0; acc = 0;
    @(posedge rst_n);
    for (int i = 0; i < TOTAL; ) begin
      @(negedge clk);
      if (acc) s_write = 0;
      if (!s_write && $urandom_range(0, 1) == 0) begin
        s_write = 1; s_address = addr_t'($urandom); s_writedata = {$urandom, $urandom};
      end
      @(posedge clk);
      acc = s_write && !s_waitrequest;
      if (acc) begin
        exp_a.push_back(s_address); exp_d.push_back(s_writedata); accept_cycle.push_back(cyc);
        i++;
      end
    end
    @(negedge clk);
    s_write = 0;
  end

  // consumer
  int frames = 0, beat = 0;
  word_t held;
  bit held_v = 0;
  initial begin
    st_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (frames < TOTAL) begin
      @(negedge clk);
      st_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (held_v) check(st_valid && st_data == held, "beat held while not taken");
      held_v = st_valid && !st_ready;
      held = st_data;
      if (st_valid && st_ready) begin
        check(st_sop == (beat == 0) && st_eop == (beat == 7), $sformatf("sop/eop at beat %0d", beat));
        check(st_empty == (beat == 7 ? 3'd4 : 3'd0), "empty");
        case (beat)
          0: check(st_data == {RMAC, LMAC[47:32]}, "beat 0: MAC addresses");
          1: check(st_data == {LMAC[31:0], 16'h88B5, 16'(frames)}, "beat 1: EtherType and sequence");
          2: check(st_data == word_t'(exp_a[0]), "beat 2: address");
          3: check(st_data == exp_d[0], "beat 3: data");
          default: check(st_data == '0, "padding");
        endcase
        if (beat == 7) begin
          beat = 0;
          frames++;
          void'(exp_a.pop_front());
          void'(exp_d.pop_front());
        end else beat++;
      end
    end
    for (int i = 1; i < TOTAL; i++)
      check(accept_cycle[i] - accept_cycle[i-1] >= 8, "at most one write per eight cycles");
    @(negedge clk);
    check(frames_sent == TOTAL, "frame counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
