// tb_worker_controller: self-checking test of the Worker Controller with its
// four Workers.
//
// Each trial writes a random tree pair and a job word over the slave port,
// as the Central FPGA would, with random idle gaps. The moves drawn by the
// four Workers (ip, ia) are taken from the Workers by hierarchical reference;
// for each move the testbench computes on its own whether it is legal and
// improving, picks the best one, builds the two trees it produces, and checks
// the words that arrive on the master port (random wait states there), the
// status word, the winner's number and the weight change. It also checks the
// one-cycle wait state after each tree word, and that a weight request from
// a Worker is always answered. After an accepted result the testbench sends
// either the fetch command (trees and end word must follow) or the discard
// command (nothing may follow).
module tb_worker_controller;
  import nde_pkg::*;

  localparam int unsigned N = 64;
  localparam int unsigned NW = 4;
  localparam int unsigned DMAX = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic s_write, s_waitrequest, m_write, m_waitrequest, mem_req, mem_ack, busy;
  addr_t s_address, m_address;
  word_t s_writedata, m_writedata;
  node_t mem_u, mem_v;
  wgt_t mem_data;
  logic [31:0] jobs_done;

  worker_controller #(.N(N), .NW(NW), .DMAX(DMAX)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic wgt_t weight(node_t u, node_t v);
    int unsigned s = int'(u) + int'(v);
    if (s % 11 == 0) return NO_EDGE;
    return wgt_t'(((int'(u) * int'(v) + 3 * s) % 251) + 1);
  endfunction

  initial begin
    mem_ack = 1'b0; mem_data = '0;
    forever begin
      @(posedge clk);
      mem_ack <= 1'b0;
      if (mem_req && !mem_ack) begin
        repeat ($urandom_range(0, 3)) @(posedge clk);
        mem_data <= weight(mem_u, mem_v);
        mem_ack <= 1'b1;
      end
    end
  end

  // collect master writes
  word_t rx_from [N/2], rx_to [N/2];
  word_t rx_stat;
  bit stat_seen, end_seen;
  int tree_writes = 0;
  always @(posedge clk) begin
    m_waitrequest <= ($urandom_range(0, 3) == 0);
    if (m_write && !m_waitrequest) begin
      case (m_address[15:14])
        2'd0: begin rx_from[m_address[13:0]] = m_writedata; tree_writes++; end
        2'd1: begin rx_to[m_address[13:0]] = m_writedata; tree_writes++; end
        2'd2: begin rx_stat = m_writedata; stat_seen = 1; end
        default: begin check(m_writedata == rx_stat, "end word repeats the result"); end_seen = 1; end
      endcase
    end
  end

  nde_entry_t ta[N], tb[N], ea[N], eb[N];

  task automatic gen_tree(ref nde_entry_t t[N], input int len, input int base);
    t[0] = '{node: node_t'(base), depth: '0};
    for (int k = 1; k < len; k++) begin
      t[k].node = node_t'(base + k);
      t[k].depth = depth_t'($urandom_range(1, int'(t[k-1].depth) + 1));
    end
  endtask

  task automatic mm_write(addr_t a, word_t d);
    int waits = 0;
    @(negedge clk);
    s_write = 1; s_address = a; s_writedata = d;
    @(posedge clk);
    while (s_waitrequest) begin waits++; @(posedge clk); end
    @(negedge clk);
    s_write = 0;
    if (a[15:14] < 2'd2) check(s_waitrequest == 1'b1, "one wait state after a tree word");
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  function automatic len_t mv(int g, int which);
    case (g)
      0: return which == 0 ? dut.g_worker[0].u_worker.mv_ip : dut.g_worker[0].u_worker.mv_ia;
      1: return which == 0 ? dut.g_worker[1].u_worker.mv_ip : dut.g_worker[1].u_worker.mv_ia;
      2: return which == 0 ? dut.g_worker[2].u_worker.mv_ip : dut.g_worker[2].u_worker.mv_ia;
      default: return which == 0 ? dut.g_worker[3].u_worker.mv_ip : dut.g_worker[3].u_worker.mv_ia;
    endcase
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int accepts = 0, none = 0, distinct_winner = 0, discards = 0;

  initial begin
    s_write = 0; s_address = '0; s_writedata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 150; trial++) begin
      int la, lb, best, bsz, bip, bia, bdp, bda;
      int bdelta;
      job_word_t jw;
      result_word_t rs;
      la = $urandom_range(2, N / 2);
      lb = $urandom_range(1, N / 2);
      gen_tree(ta, la, 0);
      gen_tree(tb, lb, 100);
      for (int w = 0; w < (la + 1) / 2; w++)
        mm_write(make_addr(REG_FROM, 14'(w)), {(2*w+1 < la) ? ta[2*w+1] : 32'h0, ta[2*w]});
      for (int w = 0; w < (lb + 1) / 2; w++)
        mm_write(make_addr(REG_TO, 14'(w)), {(2*w+1 < lb) ? tb[2*w+1] : 32'h0, tb[2*w]});
      stat_seen = 0; end_seen = 0; tree_writes = 0;
      jw.len_from = len_t'(la); jw.len_to = len_t'(lb); jw.seed = $urandom;
      mm_write(make_addr(REG_CTRL, 14'd0), word_t'(jw));
      while (!stat_seen) @(posedge clk);
      // reference: evaluate every Worker's move
      best = -1; bdelta = 0;
      for (int g = 0; g < NW; g++) begin
        int ip, ia, il, dp, da, deg, sz, d;
        node_t par;
        wgt_t wo, wn;
        ip = int'(mv(g, 0)); ia = int'(mv(g, 1));
        check(ip >= 1 && ip < la && ia < lb, "move in range");
        dp = int'(ta[ip].depth);
        il = la - 1;
        for (int k = ip + 1; k < la; k++) if (int'(ta[k].depth) <= dp) begin il = k - 1; break; end
        par = '0;
        for (int k = ip - 1; k >= 0; k--) if (int'(ta[k].depth) == dp - 1) begin par = ta[k].node; break; end
        da = int'(tb[ia].depth);
        deg = (ia != 0) ? 1 : 0;
        for (int k = ia + 1; k < lb; k++) begin
          if (int'(tb[k].depth) <= da) break;
          if (int'(tb[k].depth) == da + 1) deg++;
        end
        wo = weight(ta[ip].node, par);
        wn = weight(ta[ip].node, tb[ia].node);
        sz = il - ip + 1;
        d = int'(wn) - int'(wo);
        if ((wn != NO_EDGE) && (deg < DMAX) && (lb + sz <= N) && (wn < wo) && (best < 0 || d < bdelta)) begin
          best = g; bdelta = d; bsz = sz; bip = ip; bia = ia; bdp = dp; bda = da;
        end
      end
      rs = result_word_t'(rx_stat);
      check(rs.accepted == (best >= 0), $sformatf("accepted %0d expected %0d", rs.accepted, best >= 0));
      if (best < 0) begin
        none++;
        check(rs.len_from == len_t'(la) && rs.len_to == len_t'(lb), "lengths unchanged");
        continue;
      end
      check(tree_writes == 0, "no trees before the fetch command");
      if ($urandom_range(0, 3) == 0) begin
        mm_write(make_addr(REG_CMD, 14'd0), CMD_DISCARD);
        repeat (30) @(posedge clk);
        check(tree_writes == 0 && !end_seen && !busy, "discard sends nothing and ends the job");
        discards++;
        continue;
      end
      mm_write(make_addr(REG_CMD, 14'd0), CMD_FETCH);
      while (!end_seen) @(posedge clk);
      accepts++;
      if (best != 0) distinct_winner++;
      check(int'(rs.worker) == best, $sformatf("winner %0d expected %0d", rs.worker, best));
      check(int'(rs.delta) == bdelta, "delta");
      check(int'(rs.len_from) == la - bsz && int'(rs.len_to) == lb + bsz, "new lengths");
      for (int k = 0; k < bip; k++) ea[k] = ta[k];
      for (int k = bip + bsz; k < la; k++) ea[k - bsz] = ta[k];
      for (int k = 0; k <= bia; k++) eb[k] = tb[k];
      for (int k = 0; k < bsz; k++) begin
        eb[bia + 1 + k].node = ta[bip + k].node;
        eb[bia + 1 + k].depth = depth_t'(int'(ta[bip + k].depth) - bdp + bda + 1);
      end
      for (int k = bia + 1; k < lb; k++) eb[k + bsz] = tb[k];
      for (int k = 0; k < la - bsz; k++)
        check(rx_from[k/2][32*(k%2) +: 32] == ea[k], $sformatf("result from[%0d]", k));
      for (int k = 0; k < lb + bsz; k++)
        check(rx_to[k/2][32*(k%2) +: 32] == eb[k], $sformatf("result to[%0d]", k));
    end
    $display("jobs with a move %0d (winner other than worker 0: %0d), jobs without %0d", accepts, distinct_winner, none);
    check(accepts > 5 && none > 5 && distinct_winner > 0 && discards > 0, "all outcomes exercised");
    check(jobs_done == 32'd150, "job counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
