// tb_workload_objects -- ball-query workload (range search) on a scan of
// objects, with the pipeline at its default size.
//
// The neighbour gathering of a point-cloud network such as PointNet++ takes,
// for every centroid, the points within a fixed radius (a ball query). Here a
// synthetic scene of spheres and boxes (millimetres) is cut into three chunks
// along x, each chunk is made into a median-split kd-tree, and the engine runs
// in range mode with a 20 mm radius: each query gets its nearest 4 points
// inside the ball, the other entries stay invalid. Half the queries are cloud
// points moved by up to 3 mm (centroids), half are random points in the
// scene's box, many of which have no point within the radius. Each window of
// two chunks gets 16 queries.
//
// Checks: every neighbour entry equals the lock-step reference in range mode,
// the stencil stream equals the distances of consecutive neighbours, the
// reduction stream equals the farthest valid neighbour of each query, groups
// of a window follow every NPE + 2*DEADLINE + 4 cycles, one slide and one
// frame end, no hold and no overflow. Quality: a query is exact when its
// entries equal the brute-force ball query over the window; PE 0 wins every
// bank conflict, so with no search cut by the deadline all its queries must be
// exact. PE 1's exact rate and the number of queries with fewer than 4
// points in the ball are printed.
module tb_workload_objects;
  import sg_pkg::*;
  import sg_tb_pkg::*;

  localparam int NODES = 32767, WIN = 2, NBANK = 2, NPE = 2, K = 4;
  localparam int DL = 16383, QPW = 16, NCH = 3;
  localparam longint R2 = 400;

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
    .clk, .rst_n, .cfg_qpw(16'(QPW)), .cfg_range(1'b1), .cfg_radius2(dist_t'(R2)),
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
  int exact = 0, nq = 0, exact_pe [NPE] = '{0, 0}, n_short_q = 0, n_empty_q = 0;
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
    point_t prev;
    for (int c = 0; c < NCH; c++) chunks[c] = build_kdtree(object_cloud(NODES, -900 + 600 * c));
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
          if ((g + p) % 2 == 0) begin
            q = win_nodes[$urandom % (2 * NODES)];
            q.x = q.x + coord_t'(int'($urandom % 7) - 3);
            q.y = q.y + coord_t'(int'($urandom % 7) - 3);
            q.z = q.z + coord_t'(int'($urandom % 7) - 3);
          end else begin
            q.x = coord_t'(-900 + 600 * w + int'($urandom % 1200));
            q.y = coord_t'(int'($urandom % 401) - 200);
            q.z = coord_t'(int'($urandom % 401) - 200);
          end
          qs.push_back(q);
          queries.push_back(q);
        end
        r = ref_group(win_nodes, NODES, WIN, K, DL, NBANK, qs, ne, nc, R2);
        foreach (r[i]) exp_nbr.push_back(r[i]);
        for (int p = 0; p < NPE; p++) begin
          dist_q bf;
          bit ok;
          bf = brute_range(win_nodes, K, qs[p], R2);
          ok = 1;
          for (int k = 0; k < K; k++) begin
            if (k < bf.size()) begin
              if (!r[p*K + k].valid || r[p*K + k].d2 != bf[k]) ok = 0;
            end else if (r[p*K + k].valid) ok = 0;
          end
          exact += int'(ok);
          exact_pe[p] += int'(ok);
          n_short_q += int'(bf.size() < K);
          n_empty_q += int'(bf.size() == 0);
          nq++;
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
    $display("object scan %0d points, %0d ball queries (%0d with fewer than %0d points, %0d empty), deadline %0d: %0d cut searches, %0d elided requests",
             NCH * NODES, nq, n_short_q, K, n_empty_q, DL, n_cut, n_elide);
    $display("exact queries: PE 0 %0d of %0d, PE 1 %0d of %0d", exact_pe[0], nq / NPE, exact_pe[1], nq / NPE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
