// tb_workload_lidar -- registration-style kNN workload on a LiDAR-like scan,
// with the pipeline at its default size.
//
// A synthetic spinning-LiDAR scan of 4 x 32767 points (64 beams, ground plane
// and walls, in centimetres) is cut into four chunks in sensor order, the way
// a LiDAR stream is split, and each chunk is turned into a median-split
// kd-tree. Queries are scan points moved by up to 40 cm, standing in for the
// feature points of the next scan that a scan-to-scan registration matches.
// Each window of two chunks gets 16 queries from those two chunks.
//
// Checks: every neighbour entry equals the lock-step reference (deadline,
// elision), the stencil stream equals the distances of consecutive
// neighbours, the reduction stream equals the farthest valid neighbour of
// each query, groups of a window follow every NPE + 2*DEADLINE + 4 cycles, the
// window slides twice and the frame ends once, no hold and no overflow.
// Quality: a query is exact when its 4 neighbour distances equal the
// brute-force answer over the window. PE 0 always wins bank conflicts, so when
// no search is cut by the deadline its search is complete and every one of its
// queries must be exact. PE 1 loses every conflict with a different address
// and drops the subtree behind it; its exact rate is printed to show what
// elision with fixed priority costs (on this scan it is very low). The
// single-PE model's exact rate at shorter deadlines is printed as well, to
// show what the deadline alone costs.
module tb_workload_lidar;
  import sg_pkg::*;
  import sg_tb_pkg::*;

  localparam int NODES = 32767, WIN = 2, NBANK = 2, NPE = 2, K = 4;
  localparam int DL = 16383, QPW = 16, NCH = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pt_valid = 0, pt_ready, pt_last = 0;
  point_t pt_point = '0;
  logic q_valid = 0, q_ready;
  point_t q_point = '0;
  logic nbr_valid, st_valid;
  nbr_t nbr;
  dist_t st_value;
  logic rm_valid, rm_any;
  dist_t rm_value;
  logic so_ready, sorted_valid, sorted_last;
  point_t sorted_point;
  logic ev_overwrite, ev_slide, ev_frame_end, ev_hold, lb2_overflow;
  logic [NPE-1:0] ev_cut, ev_elide, ev_early;

  streamgrid_top dut (
    .clk, .rst_n, .cfg_qpw(16'(QPW)), .cfg_range(1'b0), .cfg_radius2('0),
    .pt_valid, .pt_ready, .pt_point, .pt_last,
    .q_valid, .q_ready, .q_point,
    .nbr_valid, .nbr, .st_clear(1'b0), .st_valid, .st_value,
    .rm_valid, .rm_any, .rm_value,
    .so_key_dim(2'd0), .so_valid(1'b0), .so_ready, .so_point('0),
    .sorted_valid, .sorted_ready(1'b1), .sorted_point, .sorted_last,
    .ev_overwrite, .ev_slide, .ev_frame_end, .ev_cut, .ev_elide, .ev_early,
    .ev_hold, .lb2_overflow);

  int checks = 0, failures = 0;
  pts_q chunks [NCH];
  point_t queries [$];
  nbr_t exp_nbr [$];
  dist_t exp_st [$];
  dist_t exp_rm [$];
  bit exp_rma [$];
  int n_rm = 0;

  // reduction: the farthest valid neighbour of each query
  always @(posedge clk) if (rst_n && rm_valid) begin
    checks++;
    if (exp_rm.size() == 0) begin failures++; $display("FAIL extra reduction output"); end
    else begin
      dist_t ev;
      bit ea;
      ev = exp_rm.pop_front(); ea = exp_rma.pop_front();
      if (rm_any !== ea || rm_value !== ev) begin failures++; $display("FAIL reduction %0d", n_rm); end
    end
    n_rm++;
  end
  int n_slide = 0, n_end = 0, n_hold = 0, n_nbr = 0, n_st = 0, n_cut = 0, n_elide = 0;
  int exact = 0, nq = 0, exact_pe [NPE] = '{0, 0};
  longint cyc = 0;
  longint burst_t [$];
  logic nbr_valid_q = 0;

  always @(posedge clk) begin
    cyc++;
    nbr_valid_q <= nbr_valid;
    if (rst_n && nbr_valid && !nbr_valid_q) burst_t.push_back(cyc);
  end

  always @(posedge clk) if (rst_n) begin
    n_slide += int'(ev_slide);
    n_end   += int'(ev_frame_end);
    n_hold  += int'(ev_hold);
    n_cut   += $countones(ev_cut);
    n_elide += $countones(ev_elide);
    if (nbr_valid) begin
      checks++;
      if (exp_nbr.size() == 0 || nbr !== exp_nbr.pop_front()) begin
        failures++; $display("FAIL neighbour %0d", n_nbr);
      end
      n_nbr++;
    end
    if (st_valid) begin
      checks++;
      if (exp_st.size() == 0 || st_value != exp_st.pop_front()) begin
        failures++; $display("FAIL stencil %0d", n_st);
      end
      n_st++;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scan, kd-trees, queries and expected streams
  initial begin
    pts_q scan;
    point_t prev;
    int dls [4] = '{64, 256, 1024, 4096};
    int ex_dl [4] = '{0, 0, 0, 0};
    scan = lidar_scan(NCH * NODES);
    for (int c = 0; c < NCH; c++) chunks[c] = build_kdtree(scan[c*NODES : c*NODES + NODES - 1]);
    for (int w = 0; w < NCH - 1; w++) begin
      pts_q win_nodes;
      win_nodes = {chunks[w], chunks[w + 1]};
      for (int g = 0; g < QPW / NPE; g++) begin
        pts_q qs;
        nbr_q r;
        int ne, nc;
        qs.delete();
        for (int p = 0; p < NPE; p++) begin
          point_t q;
          q = win_nodes[$urandom % (2 * NODES)];
          q.x = q.x + coord_t'(int'($urandom % 81) - 40);
          q.y = q.y + coord_t'(int'($urandom % 81) - 40);
          q.z = q.z + coord_t'(int'($urandom % 81) - 40);
          qs.push_back(q);
          queries.push_back(q);
        end
        r = ref_group(win_nodes, NODES, WIN, K, DL, NBANK, qs, ne, nc);
        foreach (r[i]) exp_nbr.push_back(r[i]);
        // exact answer and the model's answer at shorter deadlines
        for (int p = 0; p < NPE; p++) begin
          dist_q bf;
          bit ok;
          bit cut;
          bit no_elide[$];
          bf = brute_knn(win_nodes, K, qs[p]);
          ok = 1;
          for (int k = 0; k < K; k++) if (r[p*K + k].d2 != bf[k]) ok = 0;
          exact += int'(ok);
          exact_pe[p] += int'(ok);
          nq++;
          no_elide.delete();
          foreach (dls[i]) begin
            nbr_q rs;
            rs = ref_search(win_nodes, NODES, WIN, K, dls[i], qs[p], no_elide, cut);
            ok = 1;
            for (int k = 0; k < K; k++) if (rs[k].d2 != bf[k]) ok = 0;
            ex_dl[i] += int'(ok);
          end
        end
      end
    end
    foreach (exp_nbr[i]) begin
      if (i > 0) exp_st.push_back(dist_t'(d2_of(prev, exp_nbr[i].pt)));
      if (i % K == K - 1) begin
        bit a;
        dist_t m;
        a = 0; m = '0;
        for (int j = i - K + 1; j <= i; j++)
          if (exp_nbr[j].valid && (!a || exp_nbr[j].d2 > m)) begin a = 1; m = exp_nbr[j].d2; end
        exp_rm.push_back(m); exp_rma.push_back(a);
      end
      prev = exp_nbr[i].pt;
    end
    foreach (dls[i])
      $display("reference model, single PE, deadline %0d steps: %0d of %0d queries exact", dls[i], ex_dl[i], nq);
  end

  initial begin
    int total_nbr;
    #1;
    total_nbr = exp_nbr.size();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    fork
      for (int c = 0; c < NCH; c++)
        for (int i = 0; i < NODES; i++) begin
          @(negedge clk);
          pt_valid = 1; pt_point = chunks[c][i]; pt_last = (c == NCH - 1);
          @(posedge clk);
          while (!pt_ready) @(posedge clk);
        end
      foreach (queries[i]) begin
        @(negedge clk);
        q_valid = 1; q_point = queries[i];
        @(posedge clk);
        while (!q_ready) @(posedge clk);
      end
    join
    @(negedge clk) begin pt_valid = 0; q_valid = 0; end
    wait (n_nbr == total_nbr);
    repeat (10) @(posedge clk);
    for (int b = 1; b < burst_t.size(); b++)
      if (b % (QPW / NPE) != 0) begin
        checks++;
        if (burst_t[b] - burst_t[b-1] != NPE + 2*DL + 4) begin
          failures++; $display("FAIL group period %0d", burst_t[b] - burst_t[b-1]);
        end
      end
    checks += 4;
    if (exp_nbr.size() != 0 || exp_st.size() != 0 || exp_rm.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    if (n_slide != NCH - 2 || n_end != 1) begin failures++; $display("FAIL slides %0d ends %0d", n_slide, n_end); end
    if (n_hold != 0 || lb2_overflow) begin failures++; $display("FAIL hold or overflow"); end
    if (n_cut == 0 && exact_pe[0] != nq / NPE) begin
      failures++; $display("FAIL PE 0 only %0d of %0d queries exact", exact_pe[0], nq / NPE);
    end
    $display("lidar scan %0d points, %0d queries, deadline %0d: %0d cut searches, %0d elided requests",
             NCH * NODES, nq, DL, n_cut, n_elide);
    $display("exact queries: PE 0 %0d of %0d, PE 1 %0d of %0d", exact_pe[0], nq / NPE, exact_pe[1], nq / NPE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
