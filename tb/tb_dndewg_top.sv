// tb_dndewg_top: end-to-end test of a Central FPGA and two Satellite FPGAs
// joined by models of their Ethernet links.
//
// The host loads a random forest that covers every node of the graph exactly
// once, then runs ITER iterations of the evolutionary loop. Each link model
// passes frames between two MAC interfaces with random stalls, and
// before the run it injects frames that the NAS must drop (wrong
// destination, wrong EtherType, error flag). Weights come from a symmetric
// formula in which some pairs have no edge. During the run the host pauses
// the Flow Controller for a while.
//
// At the end the forest is read back and checked: every tree is valid NDE,
// every node appears exactly once, the total weight equals the initial
// total plus the weight changes the Central Controller reported, and it did
// not grow. The test counts how often each mechanism happened (improving
// moves, rejected moves, Flow Controller full, paused Flow Controller,
// dropped frames, link stalls, each Satellite winning, a losing Satellite
// told to discard) and fails if one never did.
module tb_dndewg_top;
  import nde_pkg::*;

  localparam int unsigned N = 64;
  localparam int unsigned NTREES = 4;
  localparam int unsigned NSAT = 2;
  localparam int unsigned NW = 4;
  localparam int unsigned ITER = 60;
  localparam int unsigned TOT = N;               // graph nodes
  localparam int unsigned TW = $clog2(NTREES);
  localparam int unsigned WI = $clog2(N / 2);
  localparam int unsigned AW = TW + WI;
  localparam longint WATCHDOG = 3000000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic host_we, host_len_we, host_start, host_fc_enable, busy;
  logic [AW-1:0] host_waddr, host_raddr;
  word_t host_wdata, host_rdata;
  logic [TW-1:0] host_len_tree;
  len_t host_len;
  logic [31:0] host_iterations, host_seed, iter_count, improvements;
  logic [31:0] fc_full_cycles [NSAT], c_frames_dropped [NSAT], s_frames_dropped [NSAT], sat_jobs_done [NSAT];
  logic signed [31:0] delta_sum;
  logic [NSAT-1:0] c_tx_valid, c_tx_ready, c_tx_sop, c_tx_eop, c_rx_valid, c_rx_ready, c_rx_sop, c_rx_eop, c_rx_error;
  logic [NSAT-1:0] s_tx_valid, s_tx_ready, s_tx_sop, s_tx_eop, s_rx_valid, s_rx_ready, s_rx_sop, s_rx_eop, s_rx_error;
  logic [2:0] c_tx_empty [NSAT], s_tx_empty [NSAT];
  word_t c_tx_data [NSAT], c_rx_data [NSAT], s_tx_data [NSAT], s_rx_data [NSAT];
  logic [NSAT-1:0] mem_req, mem_ack;
  node_t mem_u [NSAT], mem_v [NSAT];
  wgt_t mem_data [NSAT];

  dndewg_top #(.N(N), .NTREES(NTREES), .NSAT(NSAT), .NW(NW), .DMAX(3), .FC_DEPTH(4)) dut (.*);

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

  // graph memory models and link models, one per Satellite; inj_* lets the
  // testbench drive link 0's receivers directly while the link is idle
  int lookups = 0, stalls = 0;
  logic inj_s, inj_c;
  word_t inj_data;
  logic inj_valid, inj_sop, inj_eop, inj_err;

  for (genvar g = 0; g < NSAT; g++) begin : g_env
    logic gate_cs, gate_sc;
    logic is_inj_s, is_inj_c;
    assign is_inj_s = inj_s && (g == 0);
    assign is_inj_c = inj_c && (g == 0);
    initial begin
      mem_ack[g] = 1'b0; mem_data[g] = '0;
      forever begin
        @(posedge clk);
        mem_ack[g] <= 1'b0;
        if (rst_n && mem_req[g] && !mem_ack[g]) begin
          repeat ($urandom_range(0, 2)) @(posedge clk);
          mem_data[g] <= weight(mem_u[g], mem_v[g]);
          mem_ack[g] <= 1'b1;
          lookups++;
        end
      end
    end
    always @(posedge clk) begin
      gate_cs <= ($urandom_range(0, 7) != 0);
      gate_sc <= ($urandom_range(0, 7) != 0);
      if ((c_tx_valid[g] && !gate_cs) || (s_tx_valid[g] && !gate_sc)) stalls++;
    end
    assign s_rx_valid[g] = is_inj_s ? inj_valid : (c_tx_valid[g] && gate_cs);
    assign s_rx_data[g]  = is_inj_s ? inj_data : c_tx_data[g];
    assign s_rx_sop[g]   = is_inj_s ? inj_sop : c_tx_sop[g];
    assign s_rx_eop[g]   = is_inj_s ? inj_eop : c_tx_eop[g];
    assign s_rx_error[g] = is_inj_s ? inj_err : 1'b0;
    assign c_tx_ready[g] = !is_inj_s && s_rx_ready[g] && gate_cs;
    assign c_rx_valid[g] = is_inj_c ? inj_valid : (s_tx_valid[g] && gate_sc);
    assign c_rx_data[g]  = is_inj_c ? inj_data : s_tx_data[g];
    assign c_rx_sop[g]   = is_inj_c ? inj_sop : s_tx_sop[g];
    assign c_rx_eop[g]   = is_inj_c ? inj_eop : s_tx_eop[g];
    assign c_rx_error[g] = is_inj_c ? inj_err : 1'b0;
    assign s_tx_ready[g] = !is_inj_c && c_rx_ready[g] && gate_sc;
  end

  // winner statistics from the Central Controller's commands
  int sat_wins [NSAT];
  int discards = 0;
  int single_jobs = 0;  // jobs whose "from" tree is a lone root: nothing to prune
  always @(posedge clk) begin
    if (rst_n && dut.cc_write[0] && !dut.cc_wait[0] && dut.cc_addr[0][15:14] == 2'd2 &&
        dut.cc_data[0][15:0] == 16'd1) single_jobs++;
    for (int g = 0; g < NSAT; g++) begin
      if (rst_n && dut.cc_write[g] && !dut.cc_wait[g] && dut.cc_addr[g][15:14] == 2'd3) begin
        if (dut.cc_data[g] == CMD_FETCH) sat_wins[g]++;
        else discards++;
      end
    end
  end

  task automatic inject(input bit to_sat, input logic [47:0] dst, input logic [15:0] et, input bit err);
    word_t beats [8];
    beats[0] = {dst, 16'h0200};
    beats[1] = {32'h0000_0099, et, 16'h0};
    beats[2] = word_t'(make_addr(REG_CTRL, 14'd0));
    beats[3] = '1;
    for (int b = 4; b < 8; b++) beats[b] = '0;
    @(negedge clk);
    inj_s = to_sat; inj_c = !to_sat;
    for (int b = 0; b < 8; b++) begin
      inj_valid = 1; inj_data = beats[b]; inj_sop = (b == 0); inj_eop = (b == 7); inj_err = err && (b == 7);
      @(posedge clk);
      while (!(to_sat ? s_rx_ready[0] : c_rx_ready[0])) @(posedge clk);
      @(negedge clk);
    end
    inj_valid = 0; inj_s = 0; inj_c = 0; inj_sop = 0; inj_eop = 0; inj_err = 0;
  endtask

  nde_entry_t forest [NTREES][N];
  int flen [NTREES];

  function automatic longint total_weight();
    longint s = 0;
    for (int t = 0; t < NTREES; t++)
      for (int k = 1; k < flen[t]; k++)
        for (int j = k - 1; j >= 0; j--)
          if (forest[t][j].depth == forest[t][k].depth - 1) begin
            s += longint'(weight(forest[t][k].node, forest[t][j].node));
            break;
          end
    return s;
  endfunction

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pause_cycles = 0;
  always @(posedge clk) if (busy && !host_fc_enable) pause_cycles++;

  initial begin
    int perm [TOT];
    int seen [TOT];
    longint w0, w1;
    int t0, cycles;
    host_we = 0; host_len_we = 0; host_start = 0; host_fc_enable = 1; host_waddr = '0; host_raddr = '0;
    host_wdata = '0; host_len_tree = '0; host_len = '0; host_iterations = ITER; host_seed = 32'h1234_5678;
    for (int g = 0; g < NSAT; g++) sat_wins[g] = 0;
    inj_s = 0; inj_c = 0; inj_valid = 0; inj_data = '0; inj_sop = 0; inj_eop = 0; inj_err = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // random forest over all TOT nodes
    for (int i = 0; i < TOT; i++) perm[i] = i;
    for (int i = TOT - 1; i > 0; i--) begin
      int j, x;
      j = $urandom_range(0, i);
      x = perm[i]; perm[i] = perm[j]; perm[j] = x;
    end
    for (int t = 0; t < NTREES; t++) begin
      flen[t] = TOT / NTREES;
      for (int k = 0; k < flen[t]; k++) begin
        forest[t][k].node = node_t'(perm[t * flen[t] + k]);
        forest[t][k].depth = (k == 0) ? '0 : depth_t'($urandom_range(1, int'(forest[t][k-1].depth) + 1));
      end
    end
    w0 = total_weight();
    // load through the host port
    for (int t = 0; t < NTREES; t++) begin
      for (int w = 0; w < (flen[t] + 1) / 2; w++) begin
        @(negedge clk);
        host_we = 1; host_waddr = {TW'(t), WI'(w)};
        host_wdata = {(2*w+1 < flen[t]) ? forest[t][2*w+1] : 32'h0, forest[t][2*w]};
      end
      @(negedge clk);
      host_we = 0; host_len_we = 1; host_len_tree = TW'(t); host_len = len_t'(flen[t]);
      @(negedge clk);
      host_len_we = 0;
    end
    // frames the NAS must drop
    inject(1, 48'h02_00_00_00_00_07, 16'h88B5, 0);
    inject(1, 48'h02_00_00_00_01_00, 16'h0800, 0);
    inject(0, 48'h02_00_00_00_00_01, 16'h88B5, 1);
    repeat (5) @(negedge clk);
    check(s_frames_dropped[0] == 2 && c_frames_dropped[0] == 1,
          $sformatf("dropped frames %0d/%0d", s_frames_dropped[0], c_frames_dropped[0]));
    // run
    @(negedge clk);
    host_start = 1;
    @(negedge clk);
    host_start = 0;
    t0 = $time;
    cycles = 0;
    while (busy) begin
      @(negedge clk);
      cycles++;
      if (cycles == 300) host_fc_enable = 0;
      if (cycles == 700) host_fc_enable = 1;
    end
    check(iter_count == ITER, "iteration count");
    for (int g = 0; g < NSAT; g++) check(sat_jobs_done[g] == ITER, $sformatf("Satellite %0d job count", g));
    // read the forest back
    for (int t = 0; t < NTREES; t++) begin
      flen[t] = int'(dut.u_central.len[t]);
      for (int w = 0; w < (flen[t] + 1) / 2; w++) begin
        host_raddr = {TW'(t), WI'(w)};
        @(negedge clk);
        forest[t][2*w] = host_rdata[31:0];
        if (2*w+1 < flen[t]) forest[t][2*w+1] = host_rdata[63:32];
      end
    end
    for (int i = 0; i < TOT; i++) seen[i] = 0;
    begin
      int total = 0;
      for (int t = 0; t < NTREES; t++) begin
        total += flen[t];
        check(flen[t] >= 1 && forest[t][0].depth == '0, $sformatf("tree %0d root", t));
        for (int k = 0; k < flen[t]; k++) begin
          if (int'(forest[t][k].node) < TOT) seen[forest[t][k].node]++;
          if (k > 0) check(forest[t][k].depth >= 1 && forest[t][k].depth <= forest[t][k-1].depth + 1,
                           $sformatf("tree %0d entry %0d depth", t, k));
        end
      end
      check(total == TOT, "node count");
      for (int i = 0; i < TOT; i++) check(seen[i] == 1, $sformatf("node %0d appears %0d times", i, seen[i]));
    end
    w1 = total_weight();
    $display("weight %0d -> %0d, reported change %0d, improvements %0d of %0d, %0d cycles",
             w0, w1, delta_sum, improvements, ITER, cycles);
    check(w1 == w0 + longint'(delta_sum), "total weight matches reported changes");
    check(w1 <= w0, "weight did not grow");
    // mechanisms
    $display("mechanisms: improving %0d, rejected %0d, fifo-full %0d, paused %0d, dropped %0d, link stalls %0d, lookups %0d, discards %0d",
             improvements, ITER - improvements, fc_full_cycles[0], pause_cycles,
             s_frames_dropped[0] + c_frames_dropped[0], stalls, lookups, discards);
    for (int g = 0; g < NSAT; g++) begin
      $display("Satellite %0d won %0d times", g, sat_wins[g]);
      check(sat_wins[g] > 0, $sformatf("Satellite %0d won at least once", g));
    end
    check(int'(improvements) == sat_wins.sum(), "one fetch per improvement");
    if (NSAT > 1) check(discards > 0, "a losing Satellite was told to discard");
    check(improvements > 0, "an improving move happened");
    check(improvements < ITER, "a rejected move happened");
    check(fc_full_cycles[0] > 0, "Flow Controller became full");
    check(pause_cycles > 0, "Flow Controller was paused");
    check(stalls > 0, "link stalled");
    check(lookups == 2 * NW * NSAT * (ITER - single_jobs),
          $sformatf("two weight look-ups per Worker per job (%0d single-node jobs)", single_jobs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
