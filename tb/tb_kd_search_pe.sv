// tb_kd_search_pe -- self-checking test of one kd-tree search PE.
//
// Two PEs are tested side by side on the same random window of two chunk
// trees: one with a deadline long enough for a complete traversal (its
// distances must equal an exact brute-force kNN), one with a short deadline
// and randomly elided requests (its neighbour list must equal the step-exact
// reference model, including whether the search was cut). The banked buffer
// is modelled here: a request's node is looked up by decoding the bank-local
// address back to slot and heap index. The start-to-done latency must be
// 2*DEADLINE + 1 cycles for every query. The second half of the queries run
// in range search mode with a random radius: the full PE must then return
// exactly the nearest (up to) K points within the radius, and the short PE
// must again match the reference step for step.
module tb_kd_search_pe;
  import sg_pkg::*;
  import sg_tb_pkg::*;

  localparam int LEVELS = 5;
  localparam int NODES  = (1 << LEVELS) - 1;
  localparam int WIN    = 2;
  localparam int NSLOT  = 3;
  localparam int NBANK  = 2;
  localparam int K      = 4;
  localparam int DL_FULL = WIN * NODES;
  localparam int DL_CUT  = 9;
  localparam int LADDR_W = 2 + LEVELS - 1;
  localparam int NQ      = 120;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  pts_q slots [NSLOT];

  // ------------------------------------------------------------ two DUTs
  logic start;
  point_t query;
  logic [1:0] base_slot;
  logic range_en;
  dist_t radius2;
  int range_hits = 0;

  logic        f_req_valid, c_req_valid;
  logic [0:0]  f_req_bank, c_req_bank;
  logic [LADDR_W-1:0] f_req_addr, c_req_addr;
  logic        c_elided;
  point_t      f_bank [NBANK];
  point_t      c_bank [NBANK];
  logic        f_done, c_done, f_busy, c_busy;
  nbr_t        f_nbrs [K];
  nbr_t        c_nbrs [K];
  logic        f_cut, f_el, f_early, c_cut, c_el, c_early;
  bit          elide_pat[$];
  int          c_req_n;

  kd_search_pe #(.LEVELS(LEVELS), .WIN(WIN), .NSLOT(NSLOT), .NBANK(NBANK), .K(K),
                 .DEADLINE(DL_FULL)) u_full (
    .clk, .rst_n, .start, .query, .base_slot, .range_en, .radius2, .busy(f_busy),
    .req_valid(f_req_valid), .req_bank(f_req_bank), .req_addr(f_req_addr),
    .grant(1'b1), .elided(1'b0), .bank_data(f_bank),
    .done(f_done), .nbrs(f_nbrs), .ev_cut(f_cut), .ev_elide(f_el), .ev_early(f_early));

  kd_search_pe #(.LEVELS(LEVELS), .WIN(WIN), .NSLOT(NSLOT), .NBANK(NBANK), .K(K),
                 .DEADLINE(DL_CUT)) u_cut (
    .clk, .rst_n, .start, .query, .base_slot, .range_en, .radius2, .busy(c_busy),
    .req_valid(c_req_valid), .req_bank(c_req_bank), .req_addr(c_req_addr),
    .grant(!c_elided), .elided(c_elided), .bank_data(c_bank),
    .done(c_done), .nbrs(c_nbrs), .ev_cut(c_cut), .ev_elide(c_el), .ev_early(c_early));

  // elision decision for the n-th request of the short-deadline PE
  assign c_elided = c_req_valid && (c_req_n < elide_pat.size()) && elide_pat[c_req_n];

  function automatic point_t node_at(logic [LADDR_W-1:0] a, logic b);
    int s, i;
    s = int'(a >> (LEVELS - 1));
    i = (int'(a & ((1 << (LEVELS - 1)) - 1)) << 1) | int'(b);
    if (s >= NSLOT || i >= NODES) return '0;
    return slots[s][i];
  endfunction

  // banked memory model, one-cycle read latency
  always @(posedge clk) begin
    if (f_req_valid) f_bank[f_req_bank] <= node_at(f_req_addr, f_req_bank);
    if (c_req_valid && !c_elided) c_bank[c_req_bank] <= node_at(c_req_addr, c_req_bank);
    if (c_req_valid) c_req_n <= c_req_n + 1;
  end

  int cut_seen = 0, elide_seen = 0, early_seen = 0;
  always @(posedge clk) begin
    if (f_early) early_seen++;
    if (c_el) elide_seen++;
    if (c_cut) cut_seen++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pts_q win_nodes;
    start = 0; query = '0; base_slot = 0; c_req_n = 0; range_en = 0; radius2 = '0;
    for (int s = 0; s < NSLOT; s++) slots[s] = gen_tree(LEVELS, 3000);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NQ; n++) begin
      nbr_q  exp_cut;
      dist_q exp_full;
      bit    exp_was_cut;
      int    t0, lat;
      if (n % 20 == 0) for (int s = 0; s < NSLOT; s++) slots[s] = gen_tree(LEVELS, 3000);
      base_slot = 2'(n % NSLOT);
      query     = (n % 3 == 0) ? slots[(n + 1) % NSLOT][$urandom % NODES] : rnd_point(3500);
      win_nodes = {slots[base_slot], slots[(int'(base_slot) + 1) % NSLOT]};
      elide_pat.delete();
      for (int i = 0; i < DL_CUT; i++) elide_pat.push_back(((n % 4) == 3) && ($urandom % 4 == 0));
      range_en = (n >= NQ / 2);
      if (range_en) begin
        longint r;
        r = 100 + $urandom % 1400;
        radius2 = dist_t'(r * r);
        exp_full = brute_range(win_nodes, K, query, r * r);
        exp_cut  = ref_search(win_nodes, NODES, WIN, K, DL_CUT, query, elide_pat, exp_was_cut, r * r);
        if (exp_full.size() > 0 && exp_full.size() < K) range_hits++;
      end else begin
        exp_full = brute_knn(win_nodes, K, query);
        exp_cut  = ref_search(win_nodes, NODES, WIN, K, DL_CUT, query, elide_pat, exp_was_cut);
      end
      @(negedge clk);
      c_req_n = 0;
      start = 1;
      @(posedge clk); t0 = $time;
      @(negedge clk); start = 0;
      // wait for both
      wait (f_done === 1'b1 || c_done === 1'b1);
      while (!(f_done === 1'b1)) begin
        if (c_done) begin
          lat = ($time - t0) / 10;
          checks++;
          if (lat != 2 * DL_CUT + 1) begin failures++; $display("FAIL cut latency %0d", lat); end
          for (int k = 0; k < K; k++) begin
            checks++;
            if (c_nbrs[k] !== exp_cut[k]) begin
              failures++;
              $display("FAIL q%0d cut rank %0d got v%0d d%0d exp v%0d d%0d", n, k,
                       c_nbrs[k].valid, c_nbrs[k].d2, exp_cut[k].valid, exp_cut[k].d2);
            end
          end
          checks++;
          if (c_cut !== exp_was_cut) begin failures++; $display("FAIL q%0d cut flag", n); end
        end
        @(posedge clk); #1;
      end
      lat = ($time - 1 - t0) / 10;
      checks++;
      if (lat != 2 * DL_FULL + 1) begin failures++; $display("FAIL full latency %0d", lat); end
      for (int k = 0; k < K; k++) begin
        checks++;
        if (k >= exp_full.size() ? f_nbrs[k].valid :
            (!f_nbrs[k].valid || f_nbrs[k].d2 != exp_full[k] ||
             dist_t'(d2_of(query, f_nbrs[k].pt)) != f_nbrs[k].d2)) begin
          failures++;
          $display("FAIL q%0d full rank %0d got %0d exp %0d", n, k, f_nbrs[k].d2, exp_full[k]);
        end
      end
      checks++;
      if (f_cut) begin failures++; $display("FAIL full search reported cut"); end
      repeat (2) @(posedge clk);
    end
    checks++;
    if (cut_seen == 0 || elide_seen == 0 || early_seen == 0 || range_hits == 0) begin
      failures++; $display("FAIL mechanisms not exercised cut=%0d elide=%0d", cut_seen, elide_seen);
    end
    $display("cut searches %0d, elided requests %0d, early finishes %0d, range queries with 1..K-1 hits %0d",
             cut_seen, elide_seen, early_seen, range_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
