// streamgrid_top -- a fully streaming kNN pipeline for point clouds built
// from compulsory splitting and deterministic termination.
//
// Data path:
//
//   chunk stream --> chunk_line_buffer (LB1, 3 chunk slots, 2 banks)
//                        |  window of 2 chunks, banked node reads
//   query stream --> knn_engine (2 kd_search_pe + bank_arbiter, kNN or range)
//                        |  2x4 neighbours per group, one burst
//                    point_line_buffer (LB2) --> neighbour stream out
//                        |  one neighbour per cycle
//                    stencil_2x3 --> stencil value stream out
//                    reduce_max  --> per-query farthest neighbour out
//
//   sort stream  --> chunk_sorter (chunks of SORT_N, ping-pong) --> sorted out
//
// The point cloud is split offline into equal chunks, each delivered as a
// complete kd-tree in heap order. The kNN stage searches the window of two
// adjacent chunks, so no stage ever needs the whole cloud on chip. Every
// search is cut after a fixed number of steps, so each query group takes the
// same number of cycles and the buffer between the kNN and stencil stages can
// be sized offline and never stalls. Bank conflicts between the two PEs are
// resolved by dropping the losing request's subtree, not by waiting.
//
// Interface:
//   cfg_qpw          queries per window (a multiple of NPE), held constant
//   cfg_range        0 = kNN search, 1 = range search (nearest K points
//                    within squared radius cfg_radius2); may change between
//                    query groups
//   pt_*             chunk points, valid/ready; pt_last on the frame's last chunk
//   q_*              query points, valid/ready; cfg_qpw queries per window,
//                    in window order
//   nbr_valid/nbr    the K neighbours of each query, PE 0's first, nearest first
//   st_valid/st_value  stencil output, two cycles after its second input
//   rm_valid/rm_any/rm_value  per query: the largest squared distance among
//                    its valid neighbours (rm_any low if it has none), one
//                    cycle after the query's last neighbour
//   st_clear         restarts the stencil window and the reduction group
//   so_*/sorted_*    independent sorting path: chunks of SORT_N points in,
//                    each chunk sorted along coordinate so_key_dim out
//   ev_*             one-cycle event pulses for statistics; lb2_overflow sticky
//
// Defaults: trees of 15 levels (32767 points per chunk), window 2, 3 chunk
// slots, 2 banks, 2 PEs, K = 4, deadline a quarter of the window's nodes,
// 64-point sort chunks (the chunk size for sorting is this design's choice).
// Where the reduction is applied (the farthest of each query's neighbours) is
// also this design's choice; the paper names the reduction operation only.
module streamgrid_top
  import sg_pkg::*;
#(
  parameter int unsigned LEVELS   = 15,
  parameter int unsigned WIN      = 2,
  parameter int unsigned NSLOT    = WIN + 1,
  parameter int unsigned NBANK    = 2,
  parameter int unsigned NPE      = 2,
  parameter int unsigned K        = 4,
  parameter int unsigned DEADLINE = (WIN * ((1 << LEVELS) - 1)) / 4,
  parameter int unsigned QCNT_W   = 16,
  parameter int unsigned LB2_DEPTH = NPE * K,
  parameter int unsigned SORT_N   = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [QCNT_W-1:0] cfg_qpw,
  input  logic              cfg_range,
  input  dist_t             cfg_radius2,
  // chunk points
  input  logic              pt_valid,
  output logic              pt_ready,
  input  point_t            pt_point,
  input  logic              pt_last,
  // queries
  input  logic              q_valid,
  output logic              q_ready,
  input  point_t            q_point,
  // neighbour stream (contents of LB2)
  output logic              nbr_valid,
  output nbr_t              nbr,
  // stencil stream
  input  logic              st_clear,
  output logic              st_valid,
  output dist_t             st_value,
  // reduction stream
  output logic              rm_valid,
  output logic              rm_any,
  output dist_t             rm_value,
  // sorting path
  input  logic [1:0]        so_key_dim,
  input  logic              so_valid,
  output logic              so_ready,
  input  point_t            so_point,
  output logic              sorted_valid,
  input  logic              sorted_ready,
  output point_t            sorted_point,
  output logic              sorted_last,
  // events
  output logic              ev_overwrite,
  output logic              ev_slide,
  output logic              ev_frame_end,
  output logic [NPE-1:0]    ev_cut,
  output logic [NPE-1:0]    ev_elide,
  output logic [NPE-1:0]    ev_early,
  output logic              ev_hold,
  output logic              lb2_overflow
);

  localparam int unsigned SLOT_W  = (NSLOT > 1) ? $clog2(NSLOT) : 1;
  localparam int unsigned LADDR_W = SLOT_W + LEVELS - $clog2(NBANK);

  logic               win_valid, win_last, rel_valid, rel_all;
  logic [SLOT_W-1:0]  win_base;
  logic [LADDR_W-1:0] rd_addr [NBANK];
  point_t             rd_data [NBANK];
  logic               res_valid, res_space_ok;
  nbr_t               res_nbrs [NPE*K];

  chunk_line_buffer #(
    .LEVELS(LEVELS), .NSLOT(NSLOT), .NBANK(NBANK), .WIN(WIN)
  ) u_lb1 (
    .clk          (clk),
    .rst_n        (rst_n),
    .wr_valid     (pt_valid),
    .wr_ready     (pt_ready),
    .wr_point     (pt_point),
    .wr_last      (pt_last),
    .win_valid    (win_valid),
    .win_base     (win_base),
    .win_last     (win_last),
    .rel_valid    (rel_valid),
    .rel_all      (rel_all),
    .rd_addr      (rd_addr),
    .rd_data      (rd_data),
    .ev_overwrite (ev_overwrite)
  );

  knn_engine #(
    .LEVELS(LEVELS), .WIN(WIN), .NSLOT(NSLOT), .NBANK(NBANK),
    .NPE(NPE), .K(K), .DEADLINE(DEADLINE), .QCNT_W(QCNT_W)
  ) u_knn (
    .clk          (clk),
    .rst_n        (rst_n),
    .cfg_qpw      (cfg_qpw),
    .cfg_range    (cfg_range),
    .cfg_radius2  (cfg_radius2),
    .q_valid      (q_valid),
    .q_ready      (q_ready),
    .q_point      (q_point),
    .win_valid    (win_valid),
    .win_base     (win_base),
    .win_last     (win_last),
    .rel_valid    (rel_valid),
    .rel_all      (rel_all),
    .rd_addr      (rd_addr),
    .rd_data      (rd_data),
    .res_space_ok (res_space_ok),
    .res_valid    (res_valid),
    .res_nbrs     (res_nbrs),
    .ev_cut       (ev_cut),
    .ev_elide     (ev_elide),
    .ev_early     (ev_early),
    .ev_hold      (ev_hold)
  );

  point_line_buffer #(
    .WR_N(NPE * K), .DEPTH(LB2_DEPTH)
  ) u_lb2 (
    .clk      (clk),
    .rst_n    (rst_n),
    .wr_valid (res_valid),
    .wr_data  (res_nbrs),
    .space_ok (res_space_ok),
    .rd_valid (nbr_valid),
    .rd_data  (nbr),
    .overflow (lb2_overflow)
  );

  stencil_2x3 u_stencil (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (st_clear),
    .in_valid  (nbr_valid),
    .in_point  (nbr.pt),
    .out_valid (st_valid),
    .out_value (st_value)
  );

  reduce_max #(
    .G(K)
  ) u_rmax (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (st_clear),
    .in_valid  (nbr_valid),
    .in_keep   (nbr.valid),
    .in_value  (nbr.d2),
    .out_valid (rm_valid),
    .out_any   (rm_any),
    .out_value (rm_value)
  );

  chunk_sorter #(
    .N(SORT_N)
  ) u_sort (
    .clk       (clk),
    .rst_n     (rst_n),
    .key_dim   (so_key_dim),
    .in_valid  (so_valid),
    .in_ready  (so_ready),
    .in_point  (so_point),
    .out_valid (sorted_valid),
    .out_ready (sorted_ready),
    .out_point (sorted_point),
    .out_last  (sorted_last)
  );

  assign ev_slide     = rel_valid && !rel_all;
  assign ev_frame_end = rel_valid && rel_all;

endmodule
