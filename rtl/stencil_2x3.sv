// stencil_2x3 -- the local-dependent stage after the kNN stage: a 2x3 stencil
// over the stream of neighbour points.
//
// Each cycle the stage may take one point (1x3 input). The previous point is
// kept in a register, so every input point is used twice (reuse 2 along the
// point dimension) and the window is two consecutive points by three
// coordinates. For each window the stage outputs one value (1x1): the squared
// Euclidean distance between the two points. It has two pipeline stages:
// stage 1 forms the coordinate differences, stage 2 squares and adds them.
// An output appears two cycles after the input that completes its window;
// the first point after reset (or after clear) only fills the window.
//
// Interface: in_valid/in_point input stream (no back-pressure), clear
// restarts the window, out_valid/out_value result stream.
//
// From the paper: the 2x3 window with input reuse 2, one 1x3 input and one
// 1x1 output per cycle, two pipeline stages. Own choice: what the stencil
// computes (the paper leaves the kernel to the application).
module stencil_2x3
  import sg_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   in_valid,
  input  point_t in_point,
  output logic   out_valid,
  output dist_t  out_value
);

  typedef logic signed [COORD_W:0] diff_t;

  point_t prev;
  logic   have_prev;
  diff_t  d1 [3];
  logic   v1;

  function automatic diff_t sub(coord_t a, coord_t b);
    return {a[COORD_W-1], a} - {b[COORD_W-1], b};
  endfunction

  function automatic dist_t sq(diff_t d);
    logic signed [2*COORD_W+1:0] w;
    w = (2*COORD_W+2)'(d);
    return dist_t'(w * w);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      have_prev <= 1'b0;
      v1        <= 1'b0;
      out_valid <= 1'b0;
      out_value <= '0;
      prev      <= '0;
      for (int i = 0; i < 3; i++) d1[i] <= '0;
    end else begin
      // stage 1: window shift and differences
      v1 <= in_valid && have_prev && !clear;
      if (in_valid) begin
        d1[0] <= sub(in_point.x, prev.x);
        d1[1] <= sub(in_point.y, prev.y);
        d1[2] <= sub(in_point.z, prev.z);
        prev  <= in_point;
      end
      if (clear)         have_prev <= 1'b0;
      else if (in_valid) have_prev <= 1'b1;
      // stage 2: squares and sum
      out_valid <= v1;
      if (v1) out_value <= sq(d1[0]) + sq(d1[1]) + sq(d1[2]);
    end
  end

endmodule
