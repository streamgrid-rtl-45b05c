// tb_reduce_max -- self-checking test of the max-reduction stage at its
// default group size.
//
// A random stream with gaps, random keep flags (including whole groups with
// nothing kept), repeated and extreme values and occasional clears is fed in.
// A model counts the elements since reset or the latest clear; after every G
// of them one output is expected, exactly one cycle after the group's last
// input, carrying the largest kept value and whether any value was kept.
module tb_reduce_max;
  import sg_pkg::*;

  localparam int G = 4;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_keep = 0;
  dist_t in_value = '0;
  logic out_valid, out_any;
  dist_t out_value;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  dist_t exp_v[$];
  bit    exp_a[$];
  int    exp_t[$];
  int    cyc = 0;
  int    n_empty = 0, n_out = 0;

  reduce_max dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    n_out++;
    if (exp_v.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      dist_t v; bit a; int t;
      v = exp_v.pop_front(); a = exp_a.pop_front(); t = exp_t.pop_front();
      if (out_value !== v || out_any !== a) begin
        failures++; $display("FAIL value %0d any %0d exp %0d %0d", out_value, out_any, v, a);
      end
      if (cyc != t + 1) begin failures++; $display("FAIL timing %0d exp %0d", cyc, t + 1); end
    end
  end

  initial begin
    int n;
    bit any;
    dist_t mx;
    n = 0; any = 0; mx = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      clear    = ($urandom % 89) == 0;
      // about one group in five keeps nothing
      in_keep  = ((i / 16) % 5 == 3) ? 1'b0 : (($urandom % 4) != 0);
      case ($urandom % 4)
        0: in_value = dist_t'($urandom % 8);
        1: in_value = '1 - dist_t'($urandom % 3);
        default: in_value = {$urandom, $urandom};
      endcase
      if (clear) begin
        n = 0; any = 0; mx = '0;
      end else if (in_valid) begin
        if (in_keep && (!any || in_value > mx)) mx = in_value;
        any = any || in_keep;
        n++;
        if (n == G) begin
          exp_v.push_back(any ? mx : '0);
          exp_a.push_back(any);
          exp_t.push_back(cyc);
          if (!any) n_empty++;
          n = 0; any = 0; mx = '0;
        end
      end
    end
    @(negedge clk) begin in_valid = 0; clear = 0; end
    repeat (5) @(posedge clk);
    checks++;
    if (exp_v.size() != 0 || n_empty == 0) begin
      failures++; $display("FAIL %0d outputs missing, %0d empty groups", exp_v.size(), n_empty);
    end
    $display("%0d groups reduced, %0d with nothing kept", n_out, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
