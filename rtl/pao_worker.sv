// pao_worker: one Worker of the Satellite FPGA. It applies the Preserve
// Ancestor Operator (PAO) to a pair of trees held in Node-Depth Encoding and
// reports whether the move lowers the total edge weight.
//
// How it works. The Worker Controller first writes the "from" tree into
// memory A and the "to" tree into memory B (ld_* port, one entry per cycle).
// A start pulse gives the two lengths and a seed. The Worker then
//   1. draws a random prune position ip in [1, len_from) (never the root) and
//      a random adoption position ia in [0, len_to) from its xorshift32
//      generator, seeded from the job seed and the Worker's ID;
//   2. scans A once: the subtree of p = A[ip] is the run A[ip..il] whose
//      depths stay above depth(p); the parent of p is the last entry before
//      ip whose depth is depth(p)-1;
//   3. scans B from ia+1 to count the children of a = B[ia] (its degree is
//      that count, plus one for its own parent unless a is the root);
//   4. looks up w(p,parent) and w(p,a) on the weight port;
//   5. accepts the move when a has degree below DMAX, the edge (p,a) exists,
//      the "to" tree has room, and w(p,a) < w(p,parent).
// The resulting trees are never written back into A and B. Instead the
// nrd_* port reads them out on the fly: the new "from" tree is A without
// A[ip..il]; the new "to" tree is B[0..ia], then A[ip..il] with every depth
// shifted by depth(a)+1-depth(p), then B[ia+1..].
//
// Timing: one start runs in about len_from + (len_to - ia) + 8 cycles plus
// two weight look-ups. done stays high until the next start. nrd_entry is
// valid one cycle after nrd_sel/nrd_idx (synchronous block-RAM read).
// Weight port: hold w_req with w_u/w_v until a one-cycle w_ack with w_data.
//
// From the paper: the NDE list of (node, depth) pairs in depth-first order,
// PAO applied to a randomly chosen pair of trees, each Worker using its own
// random seed, rejection of moves that do not lower the weight, the degree
// restriction. The paper does not describe the Worker's insides: the serial
// scan, the random number generator and the way positions are drawn are this
// design's own choices (a serial scan is O(n) cycles per move, slower than
// the paper's own Workers).
module pao_worker
  import nde_pkg::*;
#(
  parameter int unsigned N    = 4096,  // nodes a tree can hold
  parameter int unsigned DMAX = 4,     // degree restriction
  parameter int unsigned ID   = 0,     // Worker number, varies the seed
  localparam int unsigned IW  = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  // tree load
  input  logic            ld_we,
  input  logic            ld_sel,     // 0: from tree (A), 1: to tree (B)
  input  logic [IW-1:0]   ld_idx,
  input  nde_entry_t      ld_entry,
  // job control
  input  logic            start,
  input  len_t            len_from,
  input  len_t            len_to,
  input  logic [31:0]     seed,
  output logic            busy,
  output logic            done,
  // result
  output logic            accepted,
  output delta_t          delta,
  output len_t            mv_ip,
  output len_t            mv_il,
  output len_t            mv_ia,
  output len_t            new_len_from,
  output len_t            new_len_to,
  // edge weight look-up
  output logic            w_req,
  output node_t           w_u,
  output node_t           w_v,
  input  logic            w_ack,
  input  wgt_t            w_data,
  // read-out of the resulting trees
  input  logic            nrd_sel,    // 0: new from tree, 1: new to tree
  input  len_t            nrd_idx,
  output nde_entry_t      nrd_entry
);

  typedef enum logic [3:0] {
    S_IDLE, S_PICK, S_FETCH, S_LATCH, S_SCANA, S_BINIT, S_SCANB,
    S_WOLD, S_WNEW, S_DECIDE, S_DONE
  } state_e;

  state_e state;

  nde_entry_t memA [N];
  nde_entry_t memB [N];
  nde_entry_t rdA, rdB;
  logic [IW-1:0] raddrA, raddrB;

  logic [31:0] rng;
  len_t  lenA, lenB, ip, ia, il, j, pk, deg;
  logic  pv, found, stopb, bad;
  node_t p_node, par_node, a_node;
  depth_t dp, da;
  wgt_t  w_old, w_new;

  // read-out mapping
  logic  o_srcA, o_adj;
  len_t  sz;
  assign sz = il - ip + 16'd1;

  // ---------------- memories ----------------
  always_ff @(posedge clk) begin
    if (ld_we && !ld_sel) memA[ld_idx] <= ld_entry;
    if (ld_we &&  ld_sel) memB[ld_idx] <= ld_entry;
    rdA <= memA[raddrA];
    rdB <= memB[raddrB];
  end

  always_comb begin
    raddrA = '0;
    raddrB = '0;
    unique case (state)
      S_FETCH: begin raddrA = IW'(ip); raddrB = IW'(ia); end
      S_SCANA: raddrA = IW'(j);
      S_SCANB: raddrB = IW'(j);
      S_DONE: begin
        if (!nrd_sel) begin
          raddrA = (nrd_idx < ip) ? IW'(nrd_idx) : IW'(nrd_idx + sz);
        end else if (nrd_idx <= ia) begin
          raddrB = IW'(nrd_idx);
        end else if (nrd_idx <= ia + sz) begin
          raddrA = IW'(ip + nrd_idx - ia - 16'd1);
        end else begin
          raddrB = IW'(nrd_idx - sz);
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    o_srcA <= !nrd_sel || (nrd_idx > ia && nrd_idx <= ia + sz);
    o_adj  <= nrd_sel;
  end

  always_comb begin
    if (o_srcA) begin
      nrd_entry = rdA;
      if (o_adj) nrd_entry.depth = rdA.depth + da + 16'd1 - dp;
    end else begin
      nrd_entry = rdB;
    end
  end

  // ---------------- control ----------------
  logic [31:0] r_next;
  assign r_next = xorshift32(rng);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      rng <= 32'h1; lenA <= '0; lenB <= '0; ip <= '0; ia <= '0; il <= '0;
      j <= '0; pk <= '0; pv <= 1'b0; deg <= '0; found <= 1'b0; stopb <= 1'b0;
      bad <= 1'b0; p_node <= '0; par_node <= '0; a_node <= '0; dp <= '0;
      da <= '0; w_old <= '0; w_new <= '0; accepted <= 1'b0; delta <= '0;
    end else begin
      if (start && state inside {S_IDLE, S_DONE}) begin
        logic [31:0] s;
        s = seed ^ (32'(ID + 1) * 32'h9E37_79B9);
        rng <= (s == 32'd0) ? 32'h1 : s;
        lenA <= len_from;
        lenB <= len_to;
        accepted <= 1'b0;
        state <= S_PICK;
      end else begin
        unique case (state)
          S_PICK: begin
            rng <= r_next;
            ip  <= 16'd1 + scale_rand(r_next[15:0], lenA - 16'd1);
            ia  <= scale_rand(r_next[31:16], lenB);
            bad <= (lenA < 16'd2) || (lenB == 16'd0) || (lenA > 16'(N)) || (lenB > 16'(N));
            state <= S_FETCH;
          end
          S_FETCH: state <= bad ? S_DECIDE : S_LATCH;
          S_LATCH: begin
            p_node <= rdA.node; dp <= rdA.depth;
            a_node <= rdB.node; da <= rdB.depth;
            par_node <= '0;
            found <= 1'b0; il <= lenA - 16'd1;
            j <= '0; pv <= 1'b0;
            state <= S_SCANA;
          end
          S_SCANA: begin
            pv <= (j < lenA);
            pk <= j;
            if (j < lenA) j <= j + 16'd1;
            if (pv) begin
              if (pk < ip && rdA.depth == dp - 16'd1) par_node <= rdA.node;
              if (pk > ip && !found && rdA.depth <= dp) begin
                found <= 1'b1;
                il <= pk - 16'd1;
              end
            end
            if (j >= lenA && !pv) state <= S_BINIT;
          end
          S_BINIT: begin
            j <= ia + 16'd1;
            pv <= 1'b0;
            stopb <= 1'b0;
            deg <= (ia != '0) ? 16'd1 : 16'd0;
            state <= S_SCANB;
          end
          S_SCANB: begin
            pv <= (j < lenB);
            pk <= j;
            if (j < lenB) j <= j + 16'd1;
            if (pv && !stopb) begin
              if (rdB.depth <= da) stopb <= 1'b1;
              else if (rdB.depth == da + 16'd1) deg <= deg + 16'd1;
            end
            if (j >= lenB && !pv) state <= S_WOLD;
          end
          S_WOLD: if (w_ack) begin w_old <= w_data; state <= S_WNEW; end
          S_WNEW: if (w_ack) begin w_new <= w_data; state <= S_DECIDE; end
          S_DECIDE: begin
            delta <= delta_t'(w_new) - delta_t'(w_old);
            accepted <= !bad && (w_new != NO_EDGE) && (deg < 16'(DMAX)) &&
                        (32'(lenB) + 32'(sz) <= 32'(N)) && (w_new < w_old);
            state <= S_DONE;
          end
          default: ;
        endcase
      end
    end
  end

  assign busy = !(state inside {S_IDLE, S_DONE});
  assign done = (state == S_DONE);
  assign mv_ip = ip;
  assign mv_il = il;
  assign mv_ia = ia;
  assign new_len_from = accepted ? lenA - sz : lenA;
  assign new_len_to   = accepted ? lenB + sz : lenB;

  assign w_req = (state == S_WOLD) || (state == S_WNEW);
  assign w_u   = p_node;
  assign w_v   = (state == S_WNEW) ? a_node : par_node;

endmodule
