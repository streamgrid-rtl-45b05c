// kd_search_pe -- one kd-tree k-nearest-neighbour search PE with a fixed
// termination deadline.
//
// The PE searches the WIN chunk trees of the current window for the K points
// closest to its query. The search is the usual depth-first kd-tree descent
// with backtracking: visiting a node computes its squared distance to the
// query, inserts it into a sorted list of the K best, then pushes the far child
// (only if the splitting plane is closer than the current K-th best) and the
// near child on a stack. The roots of all WIN trees start on the stack, so the
// search covers the neighbouring chunk as well as its own (compulsory
// splitting keeps the cross-chunk dependency of adjacent chunks).
//
// Deterministic termination: one step is one pop of the stack and takes two
// cycles (ISSUE: present the node address to the banked buffer; DATA: use the
// returned point). The PE always runs exactly DEADLINE steps. If the stack
// empties early it idles through the remaining steps; if the deadline arrives
// first the search is cut and the best list found so far is the result
// (ev_cut). The latency from start to done is therefore always
// 2*DEADLINE + 1 cycles, independent of the data.
//
// Range search (range_en = 1, used by set-abstraction layers that group the
// points within a radius): only points whose squared distance is at most
// radius2 enter the list, and a far child is skipped when its splitting plane
// is outside the radius, so the result is the nearest (up to) K points within
// the radius. The deadline and timing are the same as for kNN.
//
// Bank conflicts: when the arbiter elides the PE's request, the node is popped
// without being read and its subtree is skipped; the step still counts.
//
// Interface:
//   start/query/base_slot    begin a search (PE must be idle, busy low)
//   range_en/radius2         search mode, sampled with start
//   req_*                    node request to the bank arbiter, same cycle
//                            grant/elided answers
//   bank_data                read data of every bank, one cycle after request
//   done                     one-cycle pulse; nbrs holds the K results sorted
//                            by distance, entries without a neighbour have
//                            valid = 0
//   ev_cut / ev_elide / ev_early   event pulses for statistics
//
// From the paper: the step-count deadline, a deadline of a quarter of a full
// traversal by default, the skip-subtree reaction to a bank conflict, K = 4,
// range search as the other global operation of the evaluated networks.
// Own choices: the two-cycle step, pruning at push time, fixed-size stack,
// range search returning the nearest K inside the radius.
module kd_search_pe
  import sg_pkg::*;
#(
  parameter int unsigned LEVELS   = 15,
  parameter int unsigned WIN      = 2,
  parameter int unsigned NSLOT    = 3,
  parameter int unsigned NBANK    = 2,
  parameter int unsigned K        = 4,
  parameter int unsigned DEADLINE = (WIN * ((1 << LEVELS) - 1)) / 4,
  localparam int unsigned SLOT_W  = (NSLOT > 1) ? $clog2(NSLOT) : 1,
  localparam int unsigned BANK_W  = (NBANK > 1) ? $clog2(NBANK) : 1,
  localparam int unsigned LADDR_W = SLOT_W + LEVELS - $clog2(NBANK)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  point_t             query,
  input  logic [SLOT_W-1:0]  base_slot,
  input  logic               range_en,    // range search: keep points within radius2
  input  dist_t              radius2,     // squared search radius (range search)
  output logic               busy,
  // node requests
  output logic               req_valid,
  output logic [BANK_W-1:0]  req_bank,
  output logic [LADDR_W-1:0] req_addr,
  input  logic               grant,
  input  logic               elided,
  input  point_t             bank_data [NBANK],
  // result
  output logic               done,
  output nbr_t               nbrs [K],
  // events
  output logic               ev_cut,
  output logic               ev_elide,
  output logic               ev_early
);

  localparam int unsigned NODES   = (1 << LEVELS) - 1;
  localparam int unsigned TREE_W  = (WIN > 1) ? $clog2(WIN) : 1;
  localparam int unsigned STACK_D = WIN + LEVELS;
  localparam int unsigned SP_W    = $clog2(STACK_D + 1);
  localparam int unsigned STEP_W  = $clog2(DEADLINE + 1);

  typedef struct packed {
    logic [TREE_W-1:0] tree;
    logic [LEVELS-1:0] idx;   // heap index inside the chunk tree
    logic [1:0]        dim;   // split dimension of the node
  } entry_t;

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DATA, S_DONE} state_t;

  state_t            state;
  entry_t            stack [STACK_D];
  logic [SP_W-1:0]   sp;
  logic [STEP_W-1:0] steps;
  point_t            q;
  logic [SLOT_W-1:0] base;
  logic              rng;
  dist_t             r2;
  nbr_t              best [K];
  entry_t            cur;
  logic              cur_visit;
  logic              cur_req;
  logic [BANK_W-1:0] cur_bank;

  // ---------------------------------------------------------------- request
  entry_t            top;
  logic [SLOT_W-1:0] top_slot;

  always_comb begin
    logic [SLOT_W:0] s;
    top      = stack[(sp == '0) ? '0 : sp - 1'b1];
    // slot of the tree: base + tree, modulo NSLOT (tree < WIN <= NSLOT)
    s        = (SLOT_W+1)'(base) + (SLOT_W+1)'(top.tree);
    if (s >= (SLOT_W+1)'(NSLOT)) s = s - (SLOT_W+1)'(NSLOT);
    top_slot = s[SLOT_W-1:0];
  end

  assign req_valid = (state == S_ISSUE) && (sp != '0) && (steps != STEP_W'(DEADLINE));
  assign req_bank  = (NBANK > 1) ? BANK_W'(top.idx) : '0;
  assign req_addr  = {top_slot, top.idx[LEVELS-1:$clog2(NBANK)]};
  assign busy      = (state != S_IDLE);

  // ---------------------------------------------------------------- visit
  point_t            node_pt;
  dist_t             node_d2;
  nbr_t              best_nx [K];
  logic [$clog2(K+1)-1:0] pos;
  logic              accept;
  coord_t            qc, pc;
  logic signed [COORD_W:0] diff;
  dist_t             plane_d2;
  logic              full_nx;
  dist_t             worst_nx;
  logic [LEVELS:0]   lchild;
  logic [LEVELS-1:0] rchild;
  logic              has_child;

  always_comb begin
    node_pt = bank_data[cur_bank];
    node_d2 = sq_dist(q, node_pt);
    // sorted insertion into the K-best list
    // in range search a point outside the radius is not a candidate
    accept = !rng || (node_d2 <= r2);
    pos = '0;
    for (int i = 0; i < K; i++)
      if (best[i].valid && best[i].d2 <= node_d2) pos = pos + 1'b1;
    if (!accept) pos = ($clog2(K+1))'(K);
    for (int i = 0; i < K; i++) begin
      if (i < int'(pos))       best_nx[i] = best[i];
      else if (i == int'(pos)) best_nx[i] = '{valid: 1'b1, d2: node_d2, pt: node_pt};
      else                     best_nx[i] = best[i - 1];
    end
    full_nx  = best_nx[K-1].valid;
    worst_nx = best_nx[K-1].d2;
    qc       = coord_of(q, cur.dim);
    pc       = coord_of(node_pt, cur.dim);
    diff     = {qc[COORD_W-1], qc} - {pc[COORD_W-1], pc};
    plane_d2 = dist_t'((2*COORD_W+2)'(diff) * (2*COORD_W+2)'(diff));
    lchild   = {cur.idx, 1'b1};          // 2i+1
    rchild   = lchild[LEVELS-1:0] + 1'b1;  // 2i+2, in range whenever lchild is
    has_child = (lchild < (LEVELS+1)'(NODES));
  end

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      sp       <= '0;
      steps    <= '0;
      done     <= 1'b0;
      ev_cut   <= 1'b0;
      ev_elide <= 1'b0;
      ev_early <= 1'b0;
      cur_visit <= 1'b0;
      cur_req   <= 1'b0;
      for (int i = 0; i < K; i++) best[i] <= '0;
    end else begin
      done     <= 1'b0;
      ev_cut   <= 1'b0;
      ev_elide <= 1'b0;
      ev_early <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          q     <= query;
          base  <= base_slot;
          rng   <= range_en;
          r2    <= radius2;
          steps <= '0;
          for (int i = 0; i < K; i++) best[i] <= '{valid: 1'b0, d2: '1, pt: '0};
          // roots of all window trees, tree 0 on top
          for (int t = 0; t < WIN; t++)
            stack[t] <= '{tree: TREE_W'(WIN - 1 - t), idx: '0, dim: 2'd0};
          sp    <= SP_W'(WIN);
          state <= (DEADLINE == 0) ? S_DONE : S_ISSUE;
        end
        S_ISSUE: begin
          cur       <= top;
          cur_bank  <= req_bank;
          cur_visit <= req_valid && grant;
          cur_req   <= req_valid;
          if (req_valid) sp <= sp - 1'b1;
          if (req_valid && elided) ev_elide <= 1'b1;
          state <= S_DATA;
        end
        S_DATA: begin
          logic [SP_W-1:0] nsp;
          nsp = sp;
          if (cur_visit) begin
            for (int i = 0; i < K; i++) best[i] <= best_nx[i];
            if (has_child) begin
              // far child first (if the plane is within reach), near child on top
              if ((!full_nx || plane_d2 < worst_nx) && (!rng || plane_d2 <= r2)) begin
                stack[nsp] <= '{tree: cur.tree,
                                idx:  (diff < 0) ? rchild : lchild[LEVELS-1:0],
                                dim:  (cur.dim == 2'd2) ? 2'd0 : cur.dim + 2'd1};
                nsp = nsp + 1'b1;
              end
              stack[nsp] <= '{tree: cur.tree,
                              idx:  (diff < 0) ? lchild[LEVELS-1:0] : rchild,
                              dim:  (cur.dim == 2'd2) ? 2'd0 : cur.dim + 2'd1};
              nsp = nsp + 1'b1;
            end
          end
          sp    <= nsp;
          steps <= steps + 1'b1;
          if (steps + 1'b1 == STEP_W'(DEADLINE)) state <= S_DONE;
          else                                   state <= S_ISSUE;
          // the stack ran empty before the deadline: the search is complete
          if (cur_req && nsp == '0 && steps + 1'b1 != STEP_W'(DEADLINE)) ev_early <= 1'b1;
        end
        S_DONE: begin
          done   <= 1'b1;
          ev_cut <= (sp != '0);
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign nbrs = best;

  a_stack: assert property (@(posedge clk) disable iff (!rst_n) sp <= SP_W'(STACK_D));
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);

endmodule
