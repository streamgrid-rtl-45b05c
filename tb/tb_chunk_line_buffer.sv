// tb_chunk_line_buffer -- self-checking test of the chunk line buffer.
//
// Chunks of 7 points (3-level trees) are written with random gaps; frames of
// 2 to 4 chunks end with a chunk marked last. A reference model keeps the
// slot contents and the count of complete chunks. Each cycle the test checks
// wr_ready, win_valid, win_base and win_last against the model, reads random
// nodes of the two window chunks through both bank ports and compares the
// data one cycle later, and releases the oldest chunk (or the whole window at
// the end of a frame) at random times, so slots are reused and every
// overwrite pulse is checked.
module tb_chunk_line_buffer;
  import sg_pkg::*;
  import sg_tb_pkg::*;

  localparam int LEVELS = 3, NODES = 7, NSLOT = 3, NBANK = 2, WIN = 2;
  localparam int LADDR_W = 2 + LEVELS - 1;

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_ready, wr_last = 0;
  point_t wr_point = '0;
  logic win_valid, win_last, rel_valid = 0, rel_all = 0, ev_overwrite;
  logic [1:0] win_base;
  logic [LADDR_W-1:0] rd_addr [NBANK];
  point_t rd_data [NBANK];
  always #5 clk = ~clk;

  chunk_line_buffer #(.LEVELS(LEVELS), .NSLOT(NSLOT), .NBANK(NBANK), .WIN(WIN)) dut (.*);

  int checks = 0, failures = 0, n_over = 0, n_rel = 0, n_relall = 0;
  point_t mem [NSLOT][NODES];
  bit     last_of [NSLOT];
  bit     used [NSLOT];
  int full = 0, base = 0, wslot = 0, widx = 0;
  int frame_len = 3, frame_pos = 0;
  point_t exp_rd [NBANK];
  bit     chk_rd [NBANK];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NBANK; b++) begin rd_addr[b] = '0; chk_rd[b] = 0; end
    for (int s = 0; s < NSLOT; s++) begin used[s] = 0; last_of[s] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int c = 0; c < 8000; c++) begin
      @(negedge clk);
      // read data requested in the previous cycle
      for (int b = 0; b < NBANK; b++) if (chk_rd[b]) begin
        checks++;
        if (rd_data[b] !== exp_rd[b]) begin failures++; $display("FAIL read c%0d bank %0d", c, b); end
      end
      // status
      checks += 3;
      if (wr_ready !== (full < NSLOT)) begin failures++; $display("FAIL wr_ready c%0d", c); end
      if (win_valid !== (full >= WIN)) begin failures++; $display("FAIL win_valid c%0d", c); end
      if (win_valid && (win_base != base || win_last != last_of[(base + 1) % NSLOT])) begin
        failures++; $display("FAIL window c%0d", c);
      end
      // random reads inside the window
      for (int b = 0; b < NBANK; b++) begin
        int t, s, i;
        chk_rd[b] = 0;
        t = $urandom % WIN;
        s = (base + t) % NSLOT;
        i = (($urandom % 4) << 1) | b;
        rd_addr[b] = LADDR_W'((s << (LEVELS - 1)) | (i >> 1));
        if (win_valid && i < NODES) begin chk_rd[b] = 1; exp_rd[b] = mem[s][i]; end
      end
      // release
      rel_valid = win_valid && (($urandom % 4) == 0);
      rel_all   = rel_valid && last_of[(base + 1) % NSLOT];
      // write
      wr_valid = ($urandom % 3) != 0;
      wr_point = rnd_point(1000);
      wr_last  = (frame_pos == frame_len - 1);
      @(posedge clk);
      #1;
      // model update
      if (rel_valid) begin
        if (rel_all) begin full -= WIN; base = (base + WIN) % NSLOT; n_relall++; end
        else         begin full -= 1;   base = (base + 1) % NSLOT;   n_rel++; end
      end
    end
    checks++;
    if (n_over == 0 || n_rel == 0 || n_relall == 0) begin
      failures++; $display("FAIL coverage over=%0d rel=%0d relall=%0d", n_over, n_rel, n_relall);
    end
    $display("overwrites %0d releases %0d frame ends %0d", n_over, n_rel, n_relall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // write side of the model, evaluated at the clock edge
  always @(posedge clk) if (rst_n && wr_valid && full_before_edge() < NSLOT) begin
    checks++;
    if (ev_overwrite !== (widx == 0 && used[wslot])) begin failures++; $display("FAIL overwrite pulse"); end
    if (widx == 0 && used[wslot]) n_over++;
    mem[wslot][widx] = wr_point;
    if (widx == NODES - 1) begin
      last_of[wslot] = wr_last;
      used[wslot] = 1;
      wslot = (wslot + 1) % NSLOT;
      widx = 0;
      full++;
      frame_pos++;
      if (frame_pos == frame_len) begin frame_pos = 0; frame_len = 2 + $urandom % 3; end
    end else widx++;
  end

  function automatic int full_before_edge();
    return full;
  endfunction
endmodule
