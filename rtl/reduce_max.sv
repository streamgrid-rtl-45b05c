// reduce_max -- a local-dependent reduction stage: the maximum over each
// group of G consecutive stream elements.
//
// The stage reads one element per cycle and produces one output per G inputs
// (a group of inputs contributes to a single output, o_freq = 1/G). A running
// maximum is kept in a register; the element that completes the group is
// folded in and the result is registered, so an output appears one cycle
// after the last input of its group (one pipeline stage). Elements with
// in_keep low take part in the group count but not in the maximum; out_any
// tells whether any element of the group was kept.
//
// In the top it follows the neighbour stream with G = K: each query's K
// neighbours form a group, invalid entries (range mode, nothing found) are
// not kept, and the output is the squared distance of the farthest neighbour
// found, the radius of the query's neighbourhood.
//
// Interface: in_valid/in_keep/in_value input stream (no back-pressure), clear
// restarts the group count, out_valid/out_any/out_value result stream.
//
// From the paper: the reduction operation (the maximum over a chain of
// points), many inputs to one output at a fixed output rate. Own choices: the
// reduced quantity, the group size G = K, the keep flag and the single stage.
module reduce_max
  import sg_pkg::*;
#(
  parameter int unsigned G = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   in_valid,
  input  logic   in_keep,
  input  dist_t  in_value,
  output logic   out_valid,
  output logic   out_any,
  output dist_t  out_value
);

  localparam int unsigned CNT_W = (G > 1) ? $clog2(G) : 1;

  logic [CNT_W-1:0] cnt;
  logic             any;
  dist_t            mx;
  logic             any_nx;
  dist_t            mx_nx;

  // fold the incoming element into the group's running maximum
  always_comb begin
    any_nx = any || in_keep;
    mx_nx  = mx;
    if (in_keep && (!any || in_value > mx)) mx_nx = in_value;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      cnt       <= '0;
      any       <= 1'b0;
      mx        <= '0;
      out_valid <= 1'b0;
      out_any   <= 1'b0;
      out_value <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (cnt == CNT_W'(G - 1)) begin
          cnt       <= '0;
          any       <= 1'b0;
          mx        <= '0;
          out_valid <= 1'b1;
          out_any   <= any_nx;
          out_value <= any_nx ? mx_nx : '0;
        end else begin
          cnt <= cnt + 1'b1;
          any <= any_nx;
          mx  <= mx_nx;
        end
      end
    end
  end

endmodule
