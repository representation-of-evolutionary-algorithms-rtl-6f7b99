// tb_pao_worker: self-checking test of one PAO Worker.
//
// Random NDE tree pairs are loaded, the Worker is started with a random seed
// and the move it drew (ip, ia) is taken from its outputs. From those two
// positions the testbench works out on its own the pruned subtree, the
// parent of p, the degree of a, both weights, the accept decision and both
// resulting trees, and compares them with what the Worker reports and reads
// out. It also checks that ip never selects a root and that each move ends
// within len_from + len_to + 40 cycles. Weights come from a symmetric formula
// in which some pairs have no edge.
module tb_pao_worker;
  import nde_pkg::*;

  localparam int unsigned N = 64;
  localparam int unsigned DMAX = 3;
  localparam int unsigned IW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ld_we, ld_sel, start, busy, done, accepted, w_req, w_ack, nrd_sel;
  logic [IW-1:0] ld_idx;
  nde_entry_t ld_entry, nrd_entry;
  len_t len_from, len_to, mv_ip, mv_il, mv_ia, nlf, nlt, nrd_idx;
  logic [31:0] seed;
  delta_t delta;
  node_t w_u, w_v;
  wgt_t w_data;

  pao_worker #(.N(N), .DMAX(DMAX), .ID(3)) dut (
    .clk, .rst_n, .ld_we, .ld_sel, .ld_idx, .ld_entry, .start, .len_from, .len_to, .seed,
    .busy, .done, .accepted, .delta, .mv_ip, .mv_il, .mv_ia, .new_len_from(nlf),
    .new_len_to(nlt), .w_req, .w_u, .w_v, .w_ack, .w_data, .nrd_sel, .nrd_idx, .nrd_entry);

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

  // weight memory model: answers after a random 1..3 cycle delay
  initial begin
    w_ack = 1'b0; w_data = '0;
    forever begin
      @(posedge clk);
      w_ack <= 1'b0;
      if (w_req && !w_ack) begin
        repeat ($urandom_range(0, 2)) @(posedge clk);
        w_data <= weight(w_u, w_v);
        w_ack <= 1'b1;
      end
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

  int accepts = 0, rejects = 0, deg_rejects = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_we = 0; ld_sel = 0; ld_idx = '0; ld_entry = '0; start = 0; len_from = '0; len_to = '0;
    seed = '0; nrd_sel = 0; nrd_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 400; trial++) begin
      int la, lb, ip, ia, il, dp, da, deg, cyc;
      int sz;
      node_t par;
      wgt_t wo, wn;
      bit acc;
      la = (trial % 7 == 0) ? 1 : $urandom_range(2, N / 2);
      lb = $urandom_range(1, N / 2);
      gen_tree(ta, la, 0);
      gen_tree(tb, lb, 100);
      for (int k = 0; k < la; k++) begin
        @(negedge clk); ld_we = 1; ld_sel = 0; ld_idx = IW'(k); ld_entry = ta[k];
      end
      for (int k = 0; k < lb; k++) begin
        @(negedge clk); ld_we = 1; ld_sel = 1; ld_idx = IW'(k); ld_entry = tb[k];
      end
      @(negedge clk); ld_we = 0;
      start = 1; len_from = len_t'(la); len_to = len_t'(lb); seed = $urandom;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc <= la + lb + 40, $sformatf("latency %0d for lengths %0d/%0d", cyc, la, lb));
      if (la < 2) begin
        check(!accepted, "single-node from tree must be rejected");
        rejects++;
        continue;
      end
      ip = int'(mv_ip); ia = int'(mv_ia);
      check(ip >= 1 && ip < la, $sformatf("ip %0d out of range", ip));
      check(ia >= 0 && ia < lb, $sformatf("ia %0d out of range", ia));
      if (!(ip >= 1 && ip < la && ia < lb)) continue;
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
      acc = (wn != NO_EDGE) && (deg < DMAX) && (lb + sz <= N) && (wn < wo);
      if (deg >= DMAX) deg_rejects++;
      check(int'(mv_il) == il, $sformatf("il %0d expected %0d", mv_il, il));
      check(accepted == acc, $sformatf("accepted %0d expected %0d (deg %0d wo %0d wn %0d)", accepted, acc, deg, wo, wn));
      if (acc) check(delta == delta_t'(int'(wn) - int'(wo)), "delta");
      if (!acc) begin rejects++; continue; end
      accepts++;
      // expected new trees
      for (int k = 0; k < ip; k++) ea[k] = ta[k];
      for (int k = il + 1; k < la; k++) ea[k - sz] = ta[k];
      for (int k = 0; k <= ia; k++) eb[k] = tb[k];
      for (int k = 0; k < sz; k++) begin
        eb[ia + 1 + k].node = ta[ip + k].node;
        eb[ia + 1 + k].depth = depth_t'(int'(ta[ip + k].depth) - dp + da + 1);
      end
      for (int k = ia + 1; k < lb; k++) eb[k + sz] = tb[k];
      check(int'(nlf) == la - sz && int'(nlt) == lb + sz, "new lengths");
      for (int k = 0; k < la - sz; k++) begin
        nrd_sel = 0; nrd_idx = len_t'(k);
        @(negedge clk);
        check(nrd_entry == ea[k], $sformatf("new from[%0d]", k));
      end
      for (int k = 0; k < lb + sz; k++) begin
        nrd_sel = 1; nrd_idx = len_t'(k);
        @(negedge clk);
        check(nrd_entry == eb[k], $sformatf("new to[%0d] %h expected %h", k, nrd_entry, eb[k]));
      end
    end
    $display("accepted moves %0d, rejected %0d, degree rejections %0d", accepts, rejects, deg_rejects);
    check(accepts > 10 && rejects > 10 && deg_rejects > 0, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
