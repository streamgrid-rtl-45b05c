// tb_knn_engine -- self-checking test of the kNN stage with its chunk buffer.
//
// Frames of 4 random kd-tree chunks (4-level trees) stream into a chunk line
// buffer; the engine takes 4 queries per window, 2 per group, with a short
// deadline so that searches are cut and the two PEs collide on banks. Every
// result burst is compared entry by entry with a lock-step reference of both
// PEs and the arbiter. Also checked: the number of window slides and frame
// ends, that groups of one window follow each other at a constant period,
// that no group was ever held back, and that cuts and elisions happened.
module tb_knn_engine;
  import sg_pkg::*;
  import sg_tb_pkg::*;

  localparam int LEVELS = 4, NODES = 15, WIN = 2, NSLOT = 3, NBANK = 2;
  localparam int NPE = 2, K = 4, DL = 10, QPW = 4, NCH = 4, NFRAMES = 3;
  localparam int LADDR_W = 2 + LEVELS - 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pt_valid = 0, pt_ready, pt_last = 0;
  point_t pt_point = '0;
  logic q_valid = 0, q_ready;
  point_t q_point = '0;
  logic win_valid, win_last, rel_valid, rel_all, ev_overwrite;
  logic [1:0] win_base;
  logic [LADDR_W-1:0] rd_addr [NBANK];
  point_t rd_data [NBANK];
  logic res_valid;
  nbr_t res_nbrs [NPE*K];
  logic [NPE-1:0] ev_cut, ev_elide, ev_early;
  logic ev_hold;

  chunk_line_buffer #(.LEVELS(LEVELS), .NSLOT(NSLOT), .NBANK(NBANK), .WIN(WIN)) u_lb1 (
    .clk, .rst_n, .wr_valid(pt_valid), .wr_ready(pt_ready), .wr_point(pt_point),
    .wr_last(pt_last), .win_valid, .win_base, .win_last, .rel_valid, .rel_all,
    .rd_addr, .rd_data, .ev_overwrite);

  knn_engine #(.LEVELS(LEVELS), .WIN(WIN), .NSLOT(NSLOT), .NBANK(NBANK), .NPE(NPE),
               .K(K), .DEADLINE(DL), .QCNT_W(8)) dut (
    .clk, .rst_n, .cfg_qpw(8'(QPW)), .cfg_range(1'b0), .cfg_radius2('0), .q_valid, .q_ready, .q_point,
    .win_valid, .win_base, .win_last, .rel_valid, .rel_all, .rd_addr, .rd_data,
    .res_space_ok(1'b1), .res_valid, .res_nbrs, .ev_cut, .ev_elide, .ev_early, .ev_hold);

  int checks = 0, failures = 0;
  pts_q chunks [NFRAMES*NCH];
  point_t queries [$];
  nbr_q expected [$];
  int exp_elide = 0, exp_cut = 0, n_elide = 0, n_cut = 0, n_slide = 0, n_end = 0, n_hold = 0;
  int n_res = 0, cyc = 0, last_res = -1, period = -1, grp_in_win = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      n_elide += $countones(ev_elide);
      n_cut   += $countones(ev_cut);
      if (rel_valid && !rel_all) n_slide++;
      if (rel_valid && rel_all) n_end++;
      if (ev_hold) n_hold++;
      if (rel_valid) grp_in_win = 0;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // chunk producer
  initial begin
    wait (rst_n);
    for (int c = 0; c < NFRAMES*NCH; c++)
      for (int i = 0; i < NODES; i++) begin
        @(negedge clk);
        pt_valid = 1; pt_point = chunks[c][i]; pt_last = (c % NCH) == NCH - 1;
        @(posedge clk);
        while (!pt_ready) @(posedge clk);
      end
    @(negedge clk) pt_valid = 0;
  end

  // queries and expected results, window by window
  initial begin
    for (int c = 0; c < NFRAMES*NCH; c++) chunks[c] = gen_tree(LEVELS, 2000);
    for (int f = 0; f < NFRAMES; f++)
      for (int w = 0; w < NCH - 1; w++) begin
        pts_q win_nodes;
        win_nodes = {chunks[f*NCH + w], chunks[f*NCH + w + 1]};
        for (int g = 0; g < QPW / NPE; g++) begin
          pts_q qs;
          nbr_q r;
          int ne, nc;
          qs.delete();
          for (int p = 0; p < NPE; p++) begin
            point_t q;
            q = ($urandom % 2) ? win_nodes[$urandom % (2*NODES)] : rnd_point(2200);
            qs.push_back(q);
            queries.push_back(q);
          end
          r = ref_group(win_nodes, NODES, WIN, K, DL, NBANK, qs, ne, nc);
          exp_elide += ne; exp_cut += nc;
          expected.push_back(r);
        end
      end
  end

  initial begin
    int total;
    total = NFRAMES * (NCH - 1) * QPW;
    #1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // query feeder
    fork
      begin
        foreach (queries[i]) begin
          @(negedge clk);
          q_valid = 1; q_point = queries[i];
          @(posedge clk);
          while (!q_ready) @(posedge clk);
        end
        @(negedge clk) q_valid = 0;
      end
    join_none
    while (n_res < total / NPE) begin
      @(posedge clk);
      if (res_valid) begin
        nbr_q e;
        e = expected.pop_front();
        for (int i = 0; i < NPE*K; i++) begin
          checks++;
          if (res_nbrs[i] !== e[i]) begin
            failures++;
            $display("FAIL group %0d entry %0d got v%0d d%0d exp v%0d d%0d", n_res, i,
                     res_nbrs[i].valid, res_nbrs[i].d2, e[i].valid, e[i].d2);
          end
        end
        if (grp_in_win > 0) begin
          checks++;
          if (period < 0) period = cyc - last_res;
          else if (cyc - last_res != period) begin failures++; $display("FAIL period %0d vs %0d", cyc - last_res, period); end
        end
        grp_in_win++;
        last_res = cyc;
        n_res++;
      end
    end
    repeat (5) @(posedge clk);
    checks += 6;
    // load NPE queries, start, 2*DL+1 search cycles, result, next load
    if (period != NPE + 2 * DL + 4) begin failures++; $display("FAIL period %0d", period); end
    if (n_slide != NFRAMES * (NCH - 2)) begin failures++; $display("FAIL slides %0d", n_slide); end
    if (n_end != NFRAMES) begin failures++; $display("FAIL frame ends %0d", n_end); end
    if (n_hold != 0) begin failures++; $display("FAIL holds %0d", n_hold); end
    if (n_elide != exp_elide || n_elide == 0) begin failures++; $display("FAIL elisions %0d exp %0d", n_elide, exp_elide); end
    if (n_cut != exp_cut || n_cut == 0) begin failures++; $display("FAIL cuts %0d exp %0d", n_cut, exp_cut); end
    $display("groups %0d period %0d slides %0d frame ends %0d elisions %0d cuts %0d",
             n_res, period, n_slide, n_end, n_elide, n_cut);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
