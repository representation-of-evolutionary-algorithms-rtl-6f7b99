// worker_controller: the Worker Controller of a Satellite FPGA together with
// its set of NW Workers (the "Worker Set").
//
// The Central FPGA writes a job into this block over its memory-mapped slave
// port: the "from" tree words (region 0), the "to" tree words (region 1),
// each 64-bit word holding two NDE entries, and last a job_word_t (region
// 2) with both lengths and a seed. Tree words are broadcast to every Worker;
// each 64-bit word is split into two entry writes, so the slave raises
// s_waitrequest for one cycle after each tree word. The control word starts
// all Workers at once with the same seed (each Worker mixes in its own ID).
//
// When every Worker is done, the Worker with the largest weight reduction
// among those that accepted their move wins (lowest ID on a tie), and the
// controller reports it with a result_word_t written to region 2 of its
// master port. If no Worker accepted, the job ends there. Otherwise the
// controller waits for a command word in region 3 (the Central FPGA compares
// the reports of all its Satellites): CMD_DISCARD ends the job, CMD_FETCH
// makes it read both resulting trees out of the winning Worker and write
// them, two entries per word, to regions 0 and 1 (about 4 cycles per word
// plus wait states), followed by the result word again in region 3 to mark
// the end of the trees. Tree and control writes are only taken while idle.
//
// The Workers share one edge-weight memory port (the Satellite's local
// memory); a fixed-priority arbiter gives it to the lowest-numbered Worker
// that asks. The port is a req/ack handshake: mem_req with mem_u/mem_v is
// held until a one-cycle mem_ack carrying mem_data.
//
// From the paper: Workers working in parallel on the same tree pair with
// different seeds, selection of the best weight reduction, one local memory
// per Satellite module, the 64-bit bus. The message layout, the two-step
// report-then-fetch exchange, the arbiter and the number of Workers are this
// design's own choices. Worker g of Satellite SAT_ID uses ID SAT_ID*NW+g.
module worker_controller
  import nde_pkg::*;
#(
  parameter int unsigned N    = 4096,  // nodes a tree can hold
  parameter int unsigned NW   = 4,     // Workers on this Satellite
  parameter int unsigned DMAX = 4,     // degree restriction
  parameter int unsigned SAT_ID = 0,   // Satellite number, varies the seeds
  localparam int unsigned IW  = $clog2(N),
  localparam int unsigned WW  = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic   clk,
  input  logic   rst_n,
  // job input (Avalon-MM slave, write only)
  input  logic   s_write,
  input  addr_t  s_address,
  input  word_t  s_writedata,
  output logic   s_waitrequest,
  // result output (Avalon-MM master, write only)
  output logic   m_write,
  output addr_t  m_address,
  output word_t  m_writedata,
  input  logic   m_waitrequest,
  // edge-weight memory
  output logic   mem_req,
  output node_t  mem_u,
  output node_t  mem_v,
  input  logic   mem_ack,
  input  wgt_t   mem_data,
  // status
  output logic   busy,
  output logic [31:0] jobs_done
);

  typedef enum logic [3:0] {C_IDLE, C_RUN, C_SELECT, C_STAT, C_CMD, C_R0, C_R1, C_R2, C_WR, C_END} cstate_e;
  cstate_e state;

  // ---------------- Worker array ----------------
  logic            ld_we, ld_sel;
  logic [IW-1:0]   ld_idx;
  nde_entry_t      ld_entry;
  logic            w_start;
  job_word_t       job, job_in;
  logic [NW-1:0]   wk_busy, wk_done, wk_acc, wk_req, wk_ack;
  delta_t          wk_delta [NW];
  len_t            wk_nlf [NW], wk_nlt [NW];
  node_t           wk_u [NW], wk_v [NW];
  nde_entry_t      wk_nrd [NW];
  logic            nrd_sel;
  len_t            nrd_idx;

  for (genvar g = 0; g < NW; g++) begin : g_worker
    len_t ip_unused, il_unused, ia_unused;
    pao_worker #(.N(N), .DMAX(DMAX), .ID(SAT_ID * NW + g)) u_worker (
      .clk, .rst_n,
      .ld_we, .ld_sel, .ld_idx, .ld_entry,
      .start(w_start), .len_from(job_in.len_from), .len_to(job_in.len_to), .seed(job_in.seed),
      .busy(wk_busy[g]), .done(wk_done[g]),
      .accepted(wk_acc[g]), .delta(wk_delta[g]),
      .mv_ip(ip_unused), .mv_il(il_unused), .mv_ia(ia_unused),
      .new_len_from(wk_nlf[g]), .new_len_to(wk_nlt[g]),
      .w_req(wk_req[g]), .w_u(wk_u[g]), .w_v(wk_v[g]), .w_ack(wk_ack[g]), .w_data(mem_data),
      .nrd_sel, .nrd_idx, .nrd_entry(wk_nrd[g]));
  end

  // ---------------- weight memory arbiter ----------------
  logic          granted;
  logic [WW-1:0] grant;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      granted <= 1'b0;
      grant <= '0;
    end else if (granted) begin
      if (mem_ack) granted <= 1'b0;
    end else begin
      for (int i = NW - 1; i >= 0; i--) begin
        if (wk_req[i]) begin
          granted <= 1'b1;
          grant <= WW'(i);
        end
      end
    end
  end

  assign mem_req = granted;
  assign mem_u = wk_u[grant];
  assign mem_v = wk_v[grant];
  always_comb begin
    wk_ack = '0;
    if (granted && mem_ack) wk_ack[grant] = 1'b1;
  end

  // ---------------- job loading ----------------
  logic  pend;
  word_t pend_word;
  logic  pend_sel;
  logic [IW-1:0] pend_idx;
  region_e s_region;
  logic [13:0] s_word;
  logic  s_accept;

  assign s_region = region_e'(s_address[15:14]);
  assign s_word = s_address[13:0];
  assign s_waitrequest = pend || !(state inside {C_IDLE, C_CMD});
  assign s_accept = s_write && !s_waitrequest;

  always_comb begin
    ld_we = 1'b0;
    ld_sel = 1'b0;
    ld_idx = '0;
    ld_entry = '0;
    if (pend) begin
      ld_we = 1'b1;
      ld_sel = pend_sel;
      ld_idx = pend_idx;
      ld_entry = pend_word[63:32];
    end else if (s_accept && state == C_IDLE && s_region inside {REG_FROM, REG_TO} &&
                 32'(s_word) < 32'(N / 2)) begin
      ld_we = 1'b1;
      ld_sel = (s_region == REG_TO);
      ld_idx = IW'({s_word, 1'b0});
      ld_entry = s_writedata[31:0];
    end
  end

  assign w_start = s_accept && (state == C_IDLE) && (s_region == REG_CTRL);
  assign job_in = job_word_t'(s_writedata);

  // ---------------- selection ----------------
  logic          any_acc;
  logic [WW-1:0] best;
  always_comb begin
    any_acc = 1'b0;
    best = '0;
    for (int i = 0; i < NW; i++) begin
      if (wk_acc[i] && (!any_acc || wk_delta[i] < wk_delta[best])) begin
        any_acc = 1'b1;
        best = WW'(i);
      end
    end
  end

  // ---------------- result transfer ----------------
  logic          win_acc;
  logic [WW-1:0] win;
  delta_t        win_delta;
  len_t          out_len [2];
  logic          osel;
  len_t          oword;
  nde_entry_t    lo, hi;

  assign nrd_sel = osel;
  assign nrd_idx = (state == C_R0) ? {oword[14:0], 1'b0} : {oword[14:0], 1'b1};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      pend <= 1'b0; pend_word <= '0; pend_sel <= 1'b0; pend_idx <= '0;
      job <= '0; win_acc <= 1'b0; win <= '0; win_delta <= '0;
      out_len[0] <= '0; out_len[1] <= '0; osel <= 1'b0; oword <= '0;
      lo <= '0; hi <= '0; jobs_done <= '0;
    end else begin
      pend <= 1'b0;
      if (s_accept && state == C_IDLE && s_region inside {REG_FROM, REG_TO} &&
          32'(s_word) < 32'(N / 2)) begin
        pend <= 1'b1;
        pend_word <= s_writedata;
        pend_sel <= (s_region == REG_TO);
        pend_idx <= IW'({s_word, 1'b1});
      end
      unique case (state)
        C_IDLE: if (w_start) begin
          job <= job_in;
          state <= C_RUN;
        end
        C_RUN: if (&wk_done) state <= C_SELECT;
        C_SELECT: begin
          win_acc <= any_acc;
          win <= best;
          win_delta <= any_acc ? wk_delta[best] : '0;
          out_len[0] <= any_acc ? wk_nlf[best] : job.len_from;
          out_len[1] <= any_acc ? wk_nlt[best] : job.len_to;
          osel <= 1'b0;
          oword <= '0;
          state <= C_STAT;
        end
        C_STAT: if (!m_waitrequest) begin
          if (win_acc) begin
            state <= C_CMD;
          end else begin
            jobs_done <= jobs_done + 32'd1;
            state <= C_IDLE;
          end
        end
        C_CMD: if (s_accept && s_region == REG_CMD) begin
          if (s_writedata[0]) begin
            state <= C_R0;
          end else begin
            jobs_done <= jobs_done + 32'd1;
            state <= C_IDLE;
          end
        end
        C_R0: state <= C_R1;
        C_R1: begin lo <= wk_nrd[win]; state <= C_R2; end
        C_R2: begin
          hi <= ({oword[14:0], 1'b1} < out_len[osel]) ? wk_nrd[win] : '0;
          state <= C_WR;
        end
        C_WR: if (!m_waitrequest) begin
          if ({oword[14:0], 1'b0} + 16'd2 < out_len[osel]) begin
            oword <= oword + 16'd1;
            state <= C_R0;
          end else if (!osel) begin
            osel <= 1'b1;
            oword <= '0;
            state <= C_R0;
          end else begin
            state <= C_END;
          end
        end
        C_END: if (!m_waitrequest) begin
          jobs_done <= jobs_done + 32'd1;
          state <= C_IDLE;
        end
        default: ;
      endcase
    end
  end

  result_word_t res;
  always_comb begin
    res.accepted = win_acc;
    res.worker = 7'(win);
    res.delta = win_delta;
    res.len_from = out_len[0];
    res.len_to = out_len[1];
  end

  assign m_write = (state == C_WR) || (state == C_STAT) || (state == C_END);
  always_comb begin
    unique case (state)
      C_STAT:  m_address = make_addr(REG_CTRL, 14'd0);
      C_END:   m_address = make_addr(REG_CMD, 14'd0);
      default: m_address = make_addr(osel ? REG_TO : REG_FROM, oword[13:0]);
    endcase
  end
  assign m_writedata = (state == C_STAT || state == C_END) ? word_t'(res) : {hi, lo};
  assign busy = (state != C_IDLE) || (|wk_busy);

endmodule
