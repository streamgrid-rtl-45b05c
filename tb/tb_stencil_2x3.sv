// tb_stencil_2x3 -- self-checking test of the 2x3 stencil stage.
//
// A random stream with gaps and occasional clears is fed in; every output
// must be the squared distance between the last two points since the latest
// clear, and appear exactly two cycles after the input that completes it.
module tb_stencil_2x3;
  import sg_pkg::*;
  import sg_tb_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, out_valid;
  point_t in_point = '0;
  dist_t  out_value;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  dist_t exp_q[$];
  int    exp_t[$];
  int    cyc = 0;

  stencil_2x3 dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      dist_t e; int t;
      e = exp_q.pop_front(); t = exp_t.pop_front();
      if (out_value != e) begin failures++; $display("FAIL value %0d exp %0d", out_value, e); end
      if (cyc != t + 2) begin failures++; $display("FAIL timing %0d exp %0d", cyc, t + 2); end
    end
  end

  initial begin
    point_t prev;
    bit have;
    have = 0; prev = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 5) != 0;
      clear    = ($urandom % 97) == 0;
      in_point = rnd_point(32767);
      if (in_valid && have && !clear) begin
        exp_q.push_back(dist_t'(d2_of(prev, in_point)));
        exp_t.push_back(cyc);
      end
      if (clear) have = 0;
      else if (in_valid) have = 1;
      if (in_valid) prev = in_point;
    end
    @(negedge clk) in_valid = 0; clear = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
