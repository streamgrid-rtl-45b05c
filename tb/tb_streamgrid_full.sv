// tb_streamgrid_full -- one complete frame through the streaming kNN pipeline
// at its default size: four chunks of 32767 points (15-level kd-trees), a
// window of two chunks, two PEs, K = 4 and a deadline of 16383 steps (a
// quarter of the window's 65534 nodes).
//
// The four chunks stream in while eight queries arrive for each of the three
// windows. The neighbour stream leaving the
// kNN-to-stencil line buffer must equal, entry by entry, a lock-step reference
// of the two PEs with bank conflict elision and the step deadline; every
// stencil output must equal the squared distance of two consecutive
// neighbours; every reduction output must equal the largest squared distance
// among the valid neighbours of its query. Each mechanism of the design is counted and must occur:
// slot overwrite in the chunk buffer, window slide, frame end, search finished
// before the deadline, elided bank conflict. At this size a deadline of a
// quarter of the window is far more than a 4-neighbour search needs, so the
// number of cut searches only has to match the reference (it is normally 0;
// the reduced-size pipeline test forces cuts with a tight deadline).
// The stall mechanisms must never occur: no engine hold, no overflow of the
// line buffer. Query groups of one window must follow at a fixed period.
// In parallel, three 64-point chunks go through the sorting path with random
// input gaps and output stalls; each must come out sorted (stably) along y
// with its last point marked.
module tb_streamgrid_full;
  import sg_pkg::*;
  import sg_tb_pkg::*;

  localparam int LEVELS = 15, NODES = 32767, WIN = 2, NBANK = 2, NPE = 2, K = 4;
  localparam int DL = 16383, QPW = 8, NCH = 4, NFRAMES = 1;

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
  logic ev_overwrite, ev_slide, ev_frame_end, ev_hold, lb2_overflow;
  logic [NPE-1:0] ev_cut, ev_elide, ev_early;

  int checks = 0, failures = 0;

  // sorting path: SORT_CH chunks along y, random output stalls
  localparam int SORT_N = 64, SORT_CH = 3;
  logic so_valid = 0, so_ready, sorted_valid, sorted_ready = 1, sorted_last;
  point_t so_point = '0, sorted_point;
  pts_q so_in, so_exp;
  int n_sorted = 0, n_sort_chunks = 0;
  always @(posedge clk) if (rst_n && sorted_valid && sorted_ready) begin
    checks++;
    if (so_exp.size() == 0 || sorted_point !== so_exp.pop_front() ||
        sorted_last !== (n_sorted % SORT_N == SORT_N - 1)) begin
      failures++; $display("FAIL sorted point %0d", n_sorted);
    end
    n_sorted++;
    n_sort_chunks += int'(sorted_last);
  end
  initial begin
    for (int c = 0; c < SORT_CH; c++) begin
      pts_q raw, srt;
      sort_chunk(SORT_N, -12000 + c * 3000, (c % 2 == 1) ? 5 : 3000, 2'd1, raw, srt);
      foreach (raw[i]) so_in.push_back(raw[i]);
      foreach (srt[i]) so_exp.push_back(srt[i]);
    end
    wait (rst_n);
    fork
      while (so_in.size() != 0) begin
        @(negedge clk);
        so_valid = ($urandom % 5) != 0; so_point = so_in[0];
        @(posedge clk);
        if (so_valid && so_ready) void'(so_in.pop_front());
        @(negedge clk) so_valid = 0;
      end
      while (n_sorted < SORT_CH * SORT_N) begin
        @(negedge clk) sorted_ready = ($urandom % 3) != 0;
      end
    join
    @(negedge clk) sorted_ready = 1;
  end

  streamgrid_top dut (
    .clk, .rst_n, .cfg_qpw(16'(QPW)), .cfg_range(1'b0), .cfg_radius2('0),
    .pt_valid, .pt_ready, .pt_point, .pt_last,
    .q_valid, .q_ready, .q_point,
    .nbr_valid, .nbr, .st_clear(1'b0), .st_valid, .st_value,
    .rm_valid, .rm_any, .rm_value,
    .so_key_dim(2'd1), .so_valid, .so_ready, .so_point,
    .sorted_valid, .sorted_ready, .sorted_point, .sorted_last,
    .ev_overwrite, .ev_slide, .ev_frame_end, .ev_cut, .ev_elide, .ev_early,
    .ev_hold, .lb2_overflow);

  pts_q chunks [NFRAMES*NCH];
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
  int exp_elide = 0, exp_cut = 0;
  int n_over = 0, n_slide = 0, n_end = 0, n_cut = 0, n_elide = 0, n_early = 0, n_hold = 0;
  int n_nbr = 0, n_st = 0;
  // cycle of the first neighbour of every burst, for the group period
  longint cyc = 0;
  longint burst_t [$];
  logic nbr_valid_q = 0;
  always @(posedge clk) begin
    cyc++;
    nbr_valid_q <= nbr_valid;
    if (rst_n && nbr_valid && !nbr_valid_q) burst_t.push_back(cyc);
  end

  always @(posedge clk) if (rst_n) begin
    n_over  += int'(ev_overwrite);
    n_slide += int'(ev_slide);
    n_end   += int'(ev_frame_end);
    n_cut   += $countones(ev_cut);
    n_elide += $countones(ev_elide);
    n_early += $countones(ev_early);
    n_hold  += int'(ev_hold);
    if (nbr_valid) begin
      checks++;
      if (exp_nbr.size() == 0) begin failures++; $display("FAIL extra neighbour"); end
      else begin
        nbr_t e;
        e = exp_nbr.pop_front();
        if (nbr !== e) begin
          failures++;
          $display("FAIL neighbour %0d got v%0d d%0d exp v%0d d%0d", n_nbr, nbr.valid, nbr.d2, e.valid, e.d2);
        end
      end
      n_nbr++;
    end
    if (st_valid) begin
      checks++;
      if (exp_st.size() == 0) begin failures++; $display("FAIL extra stencil output"); end
      else if (st_value != exp_st.pop_front()) begin failures++; $display("FAIL stencil %0d", n_st); end
      n_st++;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: queries, neighbour stream and stencil stream
  initial begin
    point_t prev;
    for (int c = 0; c < NFRAMES*NCH; c++) chunks[c] = gen_tree(LEVELS, 30000);
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
            // far-away queries end early, near ones tend to be cut
            q = (g == 0 && p == 0) ? point_t'{x: 16'sd32000, y: 16'sd32000, z: 16'sd32000}
              : (($urandom % 2) != 0) ? win_nodes[$urandom % (2*NODES)] : rnd_point(30000);
            qs.push_back(q);
            queries.push_back(q);
          end
          r = ref_group(win_nodes, NODES, WIN, K, DL, NBANK, qs, ne, nc);
          exp_elide += ne; exp_cut += nc;
          foreach (r[i]) exp_nbr.push_back(r[i]);
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
      begin : producer
        for (int c = 0; c < NFRAMES*NCH; c++)
          for (int i = 0; i < NODES; i++) begin
            @(negedge clk);
            pt_valid = 1; pt_point = chunks[c][i]; pt_last = (c % NCH) == NCH - 1;
            @(posedge clk);
            while (!pt_ready) @(posedge clk);
          end
        @(negedge clk) pt_valid = 0;
      end
      begin : feeder
        foreach (queries[i]) begin
          @(negedge clk);
          q_valid = 1; q_point = queries[i];
          @(posedge clk);
          while (!q_ready) @(posedge clk);
        end
        @(negedge clk) q_valid = 0;
      end
    join
    wait (n_nbr == total_nbr);
    repeat (10) @(posedge clk);
    // groups of one window follow each other every NPE + 2*DL + 4 cycles
    for (int b = 0; b < burst_t.size(); b++)
      if (b % (QPW / NPE) != 0) begin
        checks++;
        if (burst_t[b] - burst_t[b-1] != NPE + 2*DL + 4) begin
          failures++; $display("FAIL group period %0d", burst_t[b] - burst_t[b-1]);
        end
      end
    checks++;
    if (n_sorted != SORT_CH * SORT_N || n_sort_chunks != SORT_CH) begin
      failures++; $display("FAIL sorted %0d points, %0d chunks", n_sorted, n_sort_chunks);
    end
    checks += 9;
    if (exp_nbr.size() != 0 || exp_st.size() != 0 || exp_rm.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    if (n_over == 0)  begin failures++; $display("FAIL no slot overwrite"); end
    if (n_slide != NFRAMES * (NCH - 2)) begin failures++; $display("FAIL slides %0d", n_slide); end
    if (n_end != NFRAMES) begin failures++; $display("FAIL frame ends %0d", n_end); end
    if (n_cut != exp_cut) begin failures++; $display("FAIL cuts %0d exp %0d", n_cut, exp_cut); end
    if (n_elide == 0 || n_elide != exp_elide) begin failures++; $display("FAIL elisions %0d exp %0d", n_elide, exp_elide); end
    if (n_early == 0) begin failures++; $display("FAIL no early finish"); end
    if (n_hold != 0)  begin failures++; $display("FAIL engine held %0d cycles", n_hold); end
    if (lb2_overflow) begin failures++; $display("FAIL line buffer overflow"); end
    $display("neighbours %0d stencil %0d | overwrites %0d slides %0d frame ends %0d cuts %0d early %0d elisions %0d holds %0d",
             n_nbr, n_st, n_over, n_slide, n_end, n_cut, n_early, n_elide, n_hold);
    $display("sorted chunks %0d", n_sort_chunks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
