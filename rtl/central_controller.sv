// central_controller: the Central Controller of the Central FPGA. It owns
// the forest of NTREES spanning trees (held in forest_mem) and drives the
// evolutionary loop on NSAT Satellite FPGAs, each reached over its own link
// (a star).
//
// One iteration:
//   1. draw two different trees "from" and "to" at random;
//   2. broadcast every word of "from" (region 0), every word of "to"
//      (region 1) and a job_word_t with both lengths and a fresh seed
//      (region 2) to all Satellites: a word moves on once every Satellite
//      port has taken it;
//   3. collect one result_word_t (region 2) from every Satellite;
//   4. if none accepted a move, the iteration ends. Otherwise the Satellite
//      with the largest weight reduction (lowest number on a tie) gets
//      CMD_FETCH and the other accepting ones CMD_DISCARD (region 3);
//   5. the winner's tree words go straight into the two trees' slots in
//      forest_mem, and its end word (region 3) updates the lengths, the
//      improvement counter and the running sum of weight changes.
// A rejected move leaves the forest as it was. The loop runs `iterations`
// times after a start pulse.
//
// Host side (the processor on the Central FPGA): while idle the host may
// write forest words and tree lengths and read forest words back
// (host_rdata one cycle after host_raddr; it is the forest memory's read
// data passed straight through, as the memory sits outside this module).
// The master ports issue one word per two cycles at best and hold it while
// m_waitrequest is high; the slave ports never wait, so s_waitrequest is
// tied low and kept only to complete the Avalon-MM port.
//
// From the paper: a Central FPGA in a star with Satellite FPGAs, each over a
// dedicated link, that manages the spanning trees, chooses a pair of trees at
// random, has the Workers apply the operator and keeps the result only if
// it improves the weight. Broadcasting each job to all Satellites and
// fetching the trees from the best one, the number of trees, the random
// generator, the message layout and the host interface are this design's
// own choices.
module central_controller
  import nde_pkg::*;
#(
  parameter int unsigned N      = 4096,  // nodes a tree can hold
  parameter int unsigned NTREES = 4,     // trees in the forest
  parameter int unsigned NSAT   = 1,     // Satellite FPGAs
  localparam int unsigned TW    = $clog2(NTREES),
  localparam int unsigned WI    = $clog2(N / 2),
  localparam int unsigned AW    = TW + WI,
  localparam int unsigned SW    = (NSAT > 1) ? $clog2(NSAT) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // host control and forest access
  input  logic             host_we,
  input  logic [AW-1:0]    host_waddr,
  input  word_t            host_wdata,
  input  logic             host_len_we,
  input  logic [TW-1:0]    host_len_tree,
  input  len_t             host_len,
  input  logic [AW-1:0]    host_raddr,
  output word_t            host_rdata,
  input  logic             start,
  input  logic [31:0]      iterations,
  input  logic [31:0]      seed,
  output logic             busy,
  output logic [31:0]      iter_count,
  output logic [31:0]      improvements,
  output logic signed [31:0] delta_sum,
  // jobs to the Satellites (Avalon-MM masters, write only)
  output logic [NSAT-1:0]  m_write,
  output addr_t            m_address [NSAT],
  output word_t            m_writedata [NSAT],
  input  logic [NSAT-1:0]  m_waitrequest,
  // results from the Satellites (Avalon-MM slaves, write only)
  input  logic [NSAT-1:0]  s_write,
  input  addr_t            s_address [NSAT],
  input  word_t            s_writedata [NSAT],
  output logic [NSAT-1:0]  s_waitrequest,
  // forest memory
  output logic [AW-1:0]    fm_raddr,
  input  word_t            fm_rdata,
  output logic             fm_we,
  output logic [AW-1:0]    fm_waddr,
  output word_t            fm_wdata
);

  typedef enum logic [2:0] {M_IDLE, M_PICK, M_RD, M_WR, M_CTRL, M_COLLECT, M_CMD, M_TREES} mstate_e;
  mstate_e state;

  len_t          len [NTREES];
  logic [31:0]   rng;
  logic [TW-1:0] t_from, t_to;
  logic          sel;        // 0: sending "from", 1: sending "to"
  len_t          wcnt;
  logic [31:0]   job_seed;
  logic [31:0]   r_next;
  logic [TW-1:0] cur_tree;
  len_t          cur_words;
  logic [NSAT-1:0] taken;    // ports that already took the current word
  logic [NSAT-1:0] got;      // Satellites that reported
  logic [NSAT-1:0] acc;      // Satellites that accepted a move
  delta_t        sat_delta [NSAT];
  logic [SW-1:0] win;
  logic [NSAT-1:0] need;     // ports that must take the current word
  logic [NSAT-1:0] take_now;
  logic          end_seen;   // winner's end word came before all commands left

  assign r_next = xorshift32(rng);
  assign cur_tree = sel ? t_to : t_from;
  assign cur_words = (len[cur_tree] + 16'd1) >> 1;

  // ---------------- forest memory ports ----------------
  region_e win_region;
  logic    s_tree_wr;
  assign win_region = region_e'(s_address[win][15:14]);
  assign s_waitrequest = '0;
  assign s_tree_wr = s_write[win] && (state inside {M_CMD, M_TREES}) &&
                     (win_region inside {REG_FROM, REG_TO}) &&
                     (32'(s_address[win][13:0]) < N / 2);

  always_comb begin
    fm_we = 1'b0;
    fm_waddr = host_waddr;
    fm_wdata = host_wdata;
    if (s_tree_wr) begin
      fm_we = 1'b1;
      fm_waddr = {(win_region == REG_TO) ? t_to : t_from, s_address[win][WI-1:0]};
      fm_wdata = s_writedata[win];
    end else if (host_we && state == M_IDLE) begin
      fm_we = 1'b1;
    end
  end

  assign fm_raddr = (state == M_IDLE) ? host_raddr : {cur_tree, wcnt[WI-1:0]};
  assign host_rdata = fm_rdata;

  // ---------------- outgoing words ----------------
  job_word_t jw;
  assign jw = '{seed: job_seed, len_to: len[t_to], len_from: len[t_from]};

  always_comb begin
    need = '0;
    unique case (state)
      M_WR, M_CTRL: need = ~taken;
      M_CMD:        need = acc & ~taken;
      default:      ;
    endcase
  end

  assign m_write = need;
  assign take_now = need & ~m_waitrequest;
  for (genvar s = 0; s < NSAT; s++) begin : g_port
    always_comb begin
      unique case (state)
        M_CTRL: begin
          m_address[s] = make_addr(REG_CTRL, 14'd0);
          m_writedata[s] = word_t'(jw);
        end
        M_CMD: begin
          m_address[s] = make_addr(REG_CMD, 14'd0);
          m_writedata[s] = (SW'(s) == win) ? CMD_FETCH : CMD_DISCARD;
        end
        default: begin
          m_address[s] = make_addr(sel ? REG_TO : REG_FROM, wcnt[13:0]);
          m_writedata[s] = fm_rdata;
        end
      endcase
    end
  end
  assign busy = (state != M_IDLE);

  // ---------------- choice of the winning Satellite ----------------
  logic          any_acc;
  logic [SW-1:0] best;
  always_comb begin
    any_acc = 1'b0;
    best = '0;
    for (int s = 0; s < NSAT; s++) begin
      if (acc[s] && (!any_acc || sat_delta[s] < sat_delta[best])) begin
        any_acc = 1'b1;
        best = SW'(s);
      end
    end
  end

  result_word_t res_w;
  assign res_w = result_word_t'(s_writedata[win]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= M_IDLE;
      for (int t = 0; t < NTREES; t++) len[t] <= '0;
      for (int s = 0; s < NSAT; s++) sat_delta[s] <= '0;
      rng <= 32'h1; t_from <= '0; t_to <= '0; sel <= 1'b0; wcnt <= '0; job_seed <= '0;
      taken <= '0; got <= '0; acc <= '0; win <= '0; end_seen <= 1'b0;
      iter_count <= '0; improvements <= '0; delta_sum <= '0;
    end else begin
      unique case (state)
        M_IDLE: begin
          if (host_len_we) len[host_len_tree] <= host_len;
          if (start) begin
            rng <= (seed == '0) ? 32'h1 : seed;
            iter_count <= '0;
            improvements <= '0;
            delta_sum <= '0;
            state <= (iterations == '0) ? M_IDLE : M_PICK;
          end
        end
        M_PICK: begin
          logic [TW-1:0] a;
          a = TW'(scale_rand(r_next[15:0], 16'(NTREES)));
          t_from <= a;
          t_to <= TW'((32'(a) + 32'd1 + 32'(scale_rand(r_next[31:16], 16'(NTREES - 1)))) % NTREES);
          job_seed <= xorshift32(r_next);
          rng <= r_next;
          sel <= 1'b0;
          wcnt <= '0;
          taken <= '0;
          state <= M_RD;
        end
        M_RD: begin
          if (wcnt < cur_words) begin
            state <= M_WR;
          end else if (sel) begin
            state <= M_CTRL;
          end else begin
            sel <= 1'b1;              // an empty "from" tree: nothing to send
            wcnt <= '0;
          end
        end
        M_WR: begin
          if ((taken | take_now) == '1) begin
            taken <= '0;
            if (wcnt + 16'd1 < cur_words) begin
              wcnt <= wcnt + 16'd1;
              state <= M_RD;
            end else if (!sel) begin
              sel <= 1'b1;
              wcnt <= '0;
              state <= M_RD;
            end else begin
              state <= M_CTRL;
            end
          end else begin
            taken <= taken | take_now;
          end
        end
        M_CTRL: begin
          if ((taken | take_now) == '1) begin
            taken <= '0;
            got <= '0;
            acc <= '0;
            state <= M_COLLECT;
          end else begin
            taken <= taken | take_now;
          end
        end
        M_COLLECT: begin
          logic [NSAT-1:0] g;
          g = got;
          for (int s = 0; s < NSAT; s++) begin
            if (s_write[s] && s_address[s][15:14] == REG_CTRL) begin
              result_word_t r;
              r = result_word_t'(s_writedata[s]);
              g[s] = 1'b1;
              acc[s] <= r.accepted;
              sat_delta[s] <= r.delta;
            end
          end
          got <= g;
          if (got == '1) begin
            win <= best;
            taken <= '0;
            if (any_acc) begin
              state <= M_CMD;
            end else begin
              iter_count <= iter_count + 32'd1;
              state <= (iter_count + 32'd1 < iterations) ? M_PICK : M_IDLE;
            end
          end
        end
        M_CMD, M_TREES: begin
          // The winner may start sending trees while a losing Satellite has
          // not yet taken its discard command, so both are handled here.
          logic fin, cmds_done;
          fin = end_seen || (s_write[win] && win_region == REG_CMD);
          cmds_done = (state == M_TREES) || ((taken | take_now) == acc);
          if (s_write[win] && win_region == REG_CMD) begin
            len[t_from] <= res_w.len_from;
            len[t_to] <= res_w.len_to;
            improvements <= improvements + 32'd1;
            delta_sum <= delta_sum + 32'(res_w.delta);
          end
          if (state == M_CMD) taken <= taken | take_now;
          if (fin && cmds_done) begin
            end_seen <= 1'b0;
            taken <= '0;
            iter_count <= iter_count + 32'd1;
            state <= (iter_count + 32'd1 < iterations) ? M_PICK : M_IDLE;
          end else begin
            end_seen <= fin;
            if (cmds_done) state <= M_TREES;
          end
        end
        default: ;
      endcase
    end
  end

endmodule
