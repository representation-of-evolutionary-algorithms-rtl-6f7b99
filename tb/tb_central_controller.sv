// tb_central_controller: self-checking test of the Central Controller with
// its forest memory, serving two Satellites. The testbench plays the host and
// both Satellites.
//
// The host loads a random forest and starts a run. For every job the
// testbench checks that "from" and "to" are two different trees, that every
// word each Satellite receives equals the model forest, in order, under
// random waitrequest on each port, and that the job word carries both
// lengths. Each Satellite then reports, after its own random delay, either a
// rejection or an accepted move with a random weight change. The testbench
// works out which Satellite should win (largest reduction, lower number on a
// tie) and checks that exactly that one receives the fetch command and the
// other accepting one the discard command. The winner then sends arbitrary
// new contents and lengths for both trees (this block stores them without
// interpreting them). At the end the forest is read back through the host
// port and compared with the model, and the iteration, improvement and
// weight-change counters are checked; every ordered tree pair must have
// been drawn, and each Satellite must have won at least once.
module tb_central_controller;
  import nde_pkg::*;

  localparam int unsigned N = 32;
  localparam int unsigned NTREES = 4;
  localparam int unsigned NSAT = 2;
  localparam int unsigned TW = $clog2(NTREES);
  localparam int unsigned WI = $clog2(N / 2);
  localparam int unsigned AW = TW + WI;
  localparam int unsigned ITER = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic host_we, host_len_we, start, busy, fm_we;
  logic [NSAT-1:0] m_write, m_waitrequest, s_write, s_waitrequest;
  logic [AW-1:0] host_waddr, host_raddr, fm_raddr, fm_waddr;
  word_t host_wdata, host_rdata, fm_rdata, fm_wdata;
  word_t m_writedata [NSAT], s_writedata [NSAT];
  addr_t m_address [NSAT], s_address [NSAT];
  logic [TW-1:0] host_len_tree;
  len_t host_len;
  logic [31:0] iterations, seed, iter_count, improvements;
  logic signed [31:0] delta_sum;

  central_controller #(.N(N), .NTREES(NTREES), .NSAT(NSAT)) dut (.*);
  forest_mem #(.N(N), .NTREES(NTREES)) u_mem (
    .clk, .raddr(fm_raddr), .rdata(fm_rdata), .we(fm_we), .waddr(fm_waddr), .wdata(fm_wdata));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t model [NTREES][N/2];
  int    mlen [NTREES];

  // Satellite receive sides
  word_t rx_from [NSAT][$], rx_to [NSAT][$];
  job_word_t rx_job [NSAT];
  word_t rx_cmd [NSAT];
  bit job_seen [NSAT], cmd_seen [NSAT];
  for (genvar g = 0; g < NSAT; g++) begin : g_sat
    always @(posedge clk) begin
      if (rst_n && m_write[g] && !m_waitrequest[g]) begin
        case (m_address[g][15:14])
          2'd0: begin check(int'(m_address[g][13:0]) == rx_from[g].size(), "from words in order"); rx_from[g].push_back(m_writedata[g]); end
          2'd1: begin check(int'(m_address[g][13:0]) == rx_to[g].size(), "to words in order"); rx_to[g].push_back(m_writedata[g]); end
          2'd2: begin rx_job[g] = job_word_t'(m_writedata[g]); job_seen[g] = 1; end
          default: begin rx_cmd[g] = m_writedata[g]; cmd_seen[g] = 1; end
        endcase
      end
      m_waitrequest[g] <= ($urandom_range(0, 2) == 0);
    end
  end

  task automatic sat_write(int g, addr_t a, word_t d);
    @(negedge clk);
    s_write[g] = 1; s_address[g] = a; s_writedata[g] = d;
    @(negedge clk);
    s_write[g] = 0;
    if ($urandom_range(0, 1) == 0) @(negedge clk);
  endtask

  int pairs [NTREES][NTREES];
  int wins [NSAT];

  initial begin
    int acc_n = 0, dsum = 0;
    host_we = 0; host_len_we = 0; start = 0; host_waddr = '0; host_raddr = '0; host_wdata = '0;
    host_len_tree = '0; host_len = '0; iterations = ITER; seed = 32'hCAFE_0001;
    s_write = '0;
    for (int g = 0; g < NSAT; g++) begin
      s_address[g] = '0; s_writedata[g] = '0; job_seen[g] = 0; cmd_seen[g] = 0; wins[g] = 0;
    end
    for (int a = 0; a < NTREES; a++) for (int b = 0; b < NTREES; b++) pairs[a][b] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NTREES; t++) begin
      mlen[t] = $urandom_range(1, N / 2);
      for (int w = 0; w < N / 2; w++) begin
        model[t][w] = {$urandom, $urandom};
        @(negedge clk);
        host_we = 1; host_waddr = {TW'(t), WI'(w)}; host_wdata = model[t][w];
      end
      @(negedge clk);
      host_we = 0; host_len_we = 1; host_len_tree = TW'(t); host_len = len_t'(mlen[t]);
      @(negedge clk);
      host_len_we = 0;
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int it = 0; it < ITER; it++) begin
      int tf, tt, nf, nt, best, bd;
      int d [NSAT];
      bit a [NSAT];
      while (!(job_seen[0] && job_seen[1])) @(negedge clk);
      tf = int'(dut.t_from); tt = int'(dut.t_to);
      check(tf != tt, "two different trees");
      pairs[tf][tt]++;
      for (int g = 0; g < NSAT; g++) begin
        job_seen[g] = 0;
        check(int'(rx_job[g].len_from) == mlen[tf] && int'(rx_job[g].len_to) == mlen[tt], "job lengths");
        check(rx_from[g].size() == (mlen[tf] + 1) / 2 && rx_to[g].size() == (mlen[tt] + 1) / 2, "word counts");
        for (int w = 0; w < rx_from[g].size(); w++) check(rx_from[g][w] == model[tf][w], "from word");
        for (int w = 0; w < rx_to[g].size(); w++) check(rx_to[g][w] == model[tt][w], "to word");
        rx_from[g].delete(); rx_to[g].delete();
      end
      // both Satellites report, in random order
      best = -1; bd = 0;
      for (int g = 0; g < NSAT; g++) begin
        a[g] = ($urandom_range(0, 2) != 0);
        d[g] = -$urandom_range(1, 8);
        if (a[g] && (best < 0 || d[g] < bd)) begin best = g; bd = d[g]; end
      end
      begin
        int first, g;
        first = $urandom_range(0, 1);
        for (int k = 0; k < NSAT; k++) begin
          result_word_t r;
          g = (first + k) % NSAT;
          repeat ($urandom_range(0, 10)) @(negedge clk);
          r = '{accepted: a[g], worker: 7'd1, delta: a[g] ? delta_t'(d[g]) : '0,
                len_to: len_t'(mlen[tt]), len_from: len_t'(mlen[tf])};
          sat_write(g, make_addr(REG_CTRL, 14'd0), word_t'(r));
        end
      end
      if (best < 0) continue;
      while (!cmd_seen[best]) @(negedge clk);
      wins[best]++;
      begin
        result_word_t r;
        nf = $urandom_range(1, N / 2); nt = $urandom_range(1, N / 2);
        for (int w = 0; w < (nf + 1) / 2; w++) begin
          model[tf][w] = {$urandom, $urandom};
          sat_write(best, make_addr(REG_FROM, 14'(w)), model[tf][w]);
        end
        for (int w = 0; w < (nt + 1) / 2; w++) begin
          model[tt][w] = {$urandom, $urandom};
          sat_write(best, make_addr(REG_TO, 14'(w)), model[tt][w]);
        end
        mlen[tf] = nf; mlen[tt] = nt;
        r = '{accepted: 1'b1, worker: 7'd2, delta: delta_t'(bd), len_to: len_t'(nt), len_from: len_t'(nf)};
        sat_write(best, make_addr(REG_CMD, 14'd0), word_t'(r));
        acc_n++; dsum += bd;
      end
      // a losing Satellite may take its command late (its port waits)
      for (int g = 0; g < NSAT; g++) while (a[g] && !cmd_seen[g]) @(negedge clk);
      repeat (2) @(negedge clk);
      for (int g = 0; g < NSAT; g++) begin
        check(cmd_seen[g] == a[g], $sformatf("command sent to Satellite %0d only if it accepted", g));
        if (a[g]) check(rx_cmd[g] == ((g == best) ? CMD_FETCH : CMD_DISCARD), $sformatf("command to Satellite %0d", g));
        cmd_seen[g] = 0;
      end
    end
    while (busy) @(negedge clk);
    check(iter_count == ITER, "iteration counter");
    check(improvements == 32'(acc_n), "improvement counter");
    check(delta_sum == dsum, "weight change sum");
    for (int t = 0; t < NTREES; t++) begin
      check(int'(dut.len[t]) == mlen[t], "length register");
      for (int w = 0; w < (mlen[t] + 1) / 2; w++) begin
        host_raddr = {TW'(t), WI'(w)};
        @(negedge clk);
        check(host_rdata == model[t][w], $sformatf("forest tree %0d word %0d", t, w));
      end
    end
    for (int a = 0; a < NTREES; a++)
      for (int b = 0; b < NTREES; b++)
        if (a != b) check(pairs[a][b] > 0, $sformatf("pair %0d->%0d drawn", a, b));
    for (int g = 0; g < NSAT; g++) check(wins[g] > 0, $sformatf("Satellite %0d won", g));
    $display("improvements %0d, wins %0d/%0d", acc_n, wins[0], wins[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
