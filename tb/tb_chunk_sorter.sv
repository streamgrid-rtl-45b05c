// tb_chunk_sorter -- self-checking test of the chunk sorter at its default
// chunk size.
//
// Chunks of N random points are generated so that chunk c holds keys in its
// own key interval (as a spatial partition along the key axis would give),
// some with many equal keys. The output must be every chunk sorted stably by
// the chosen coordinate, out_last on each chunk's last point, and the whole
// stream must be in ascending key order. Phase 1 streams continuously with
// the output always ready and checks the rate: one point per cycle with no
// gap between chunks, and the first point of a chunk one cycle after the
// chunk's last input. Phase 2 applies random input gaps and output stalls and
// switches the key dimension between chunks (after the sorter is empty).
module tb_chunk_sorter;
  import sg_pkg::*;

  localparam int N = 64;
  localparam int NCH1 = 6, NCH2 = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0] key_dim = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, out_last;
  point_t in_point = '0, out_point;

  chunk_sorter dut (.clk, .rst_n, .key_dim, .in_valid, .in_ready, .in_point,
                    .out_valid, .out_ready, .out_point, .out_last);

  int checks = 0, failures = 0;
  point_t exp_q [$];
  point_t in_q [$];
  int cyc = 0, n_out = 0, n_in = 0, last_out_cyc = -1;
  int last_in_cyc [NCH1 + NCH2];
  int gaps = 0;
  bit phase1 = 1;
  int key_prev;
  bit have_prev = 0;

  function automatic int key_of(point_t p, logic [1:0] d);
    return int'(coord_of(p, d));
  endfunction

  // one chunk, its keys inside [lo, lo + span)
  task automatic make_chunk(int lo, int span, logic [1:0] d);
    point_t ch [$];
    point_t srt [$];
    ch.delete(); srt.delete();
    for (int i = 0; i < N; i++) begin
      point_t p;
      p.x = coord_t'($urandom_range(0, 4000)) - 16'sd2000;
      p.y = coord_t'($urandom_range(0, 4000)) - 16'sd2000;
      p.z = coord_t'($urandom_range(0, 4000)) - 16'sd2000;
      case (d)
        2'd0: p.x = coord_t'(lo + int'($urandom % span));
        2'd1: p.y = coord_t'(lo + int'($urandom % span));
        default: p.z = coord_t'(lo + int'($urandom % span));
      endcase
      ch.push_back(p);
    end
    // stable insertion sort
    foreach (ch[i]) begin
      int pos;
      pos = 0;
      while (pos < srt.size() && key_of(srt[pos], d) <= key_of(ch[i], d)) pos++;
      srt.insert(pos, ch[i]);
    end
    foreach (srt[i]) exp_q.push_back(srt[i]);
    foreach (ch[i]) in_q.push_back(ch[i]);
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (in_valid && in_ready) begin
      if (n_in % N == N - 1) last_in_cyc[n_in / N] = cyc;
      n_in++;
    end
    if (out_valid && out_ready) begin
      point_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL extra output"); end
      else begin
        e = exp_q.pop_front();
        if (out_point !== e) begin
          failures++;
          $display("FAIL output %0d got %0d exp %0d", n_out, key_of(out_point, key_dim), key_of(e, key_dim));
        end
      end
      checks++;
      if (out_last !== ((n_out % N) == N - 1)) begin failures++; $display("FAIL out_last at %0d", n_out); end
      checks++;
      if (have_prev && key_of(out_point, key_dim) < key_prev) begin
        failures++; $display("FAIL stream order at %0d", n_out);
      end
      key_prev = key_of(out_point, key_dim); have_prev = 1;
      if (phase1) begin
        // rate: outputs back to back, the first one right after the chunk's input
        checks++;
        if (n_out % N == 0 ? (cyc != last_in_cyc[n_out / N] + 1) : (cyc != last_out_cyc + 1)) begin
          failures++; $display("FAIL rate at output %0d cycle %0d", n_out, cyc);
        end
      end
      last_out_cyc = cyc;
      n_out++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // phase 1: continuous, key x, out_ready always high
    for (int c = 0; c < NCH1; c++) make_chunk(-20000 + c * 1000, (c % 3 == 2) ? 4 : 1000, 2'd0);
    while (in_q.size() != 0) begin
      @(negedge clk);
      in_valid = 1; in_point = in_q[0];
      @(posedge clk);
      if (in_ready) void'(in_q.pop_front());
      else begin failures++; $display("FAIL input stalled in the continuous phase"); end
    end
    @(negedge clk) in_valid = 0;
    wait (exp_q.size() == 0);
    repeat (3) @(posedge clk);
    checks++;
    if (n_out != NCH1 * N) begin failures++; $display("FAIL phase 1 outputs %0d", n_out); end
    // phase 2: random gaps and stalls, key dimension changes between chunks
    @(negedge clk) phase1 = 0;
    for (int c = 0; c < NCH2; c++) begin
      key_dim = 2'(c % 3);
      have_prev = 0;
      make_chunk(-15000 + c * 2000, (c % 4 == 1) ? 3 : 2000, key_dim);
      fork
        begin
          while (in_q.size() != 0) begin
            @(negedge clk);
            in_valid = ($urandom % 4) != 0; in_point = in_q[0];
            @(posedge clk);
            if (in_valid && in_ready) void'(in_q.pop_front());
          end
          @(negedge clk) in_valid = 0;
        end
        begin
          while (exp_q.size() != 0) begin
            @(negedge clk);
            out_ready = ($urandom % 3) != 0;
            if (!out_ready) gaps++;
          end
          @(negedge clk) out_ready = 1;
        end
      join
    end
    repeat (5) @(posedge clk);
    checks++;
    if (n_out != (NCH1 + NCH2) * N || exp_q.size() != 0 || gaps == 0) begin
      failures++; $display("FAIL total outputs %0d", n_out);
    end
    $display("sorted %0d points in %0d chunks, %0d output stalls", n_out, NCH1 + NCH2, gaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
