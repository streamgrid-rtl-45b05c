// chunk_sorter -- sorts a point stream chunk by chunk along one coordinate.
//
// Compulsory splitting applied to sorting: the point cloud is partitioned
// spatially along the sort key before it reaches this block, so the chunks
// already come in key order and sorting inside each chunk gives the order of
// the whole cloud. Only one chunk (plus the one being emitted) is ever held
// on chip instead of the whole cloud.
//
// How it works: two banks of N cells each, used ping-pong. The filling bank
// is an insertion array: every cell compares its key with the incoming
// point's key in the same cycle, cells above the insertion position shift up
// by one and the point drops into the gap, so the bank is always sorted
// (ascending, equal keys keep arrival order). The other bank drains its sorted
// chunk from cell 0, shifting down one cell per output. When the filling bank
// holds N points and the draining bank is (or becomes) empty, the roles swap
// at that clock edge, so a continuous input stream is sorted at one point per
// cycle with no bubble between chunks.
//
// Interface:
//   key_dim              0 = x, 1 = y, 2 = z; hold it constant while a chunk
//                        is in the block
//   in_valid/in_ready/in_point    input stream; every N points form a chunk
//   out_valid/out_ready/out_point output stream, the chunk in ascending key
//   out_last             marks the last point of a chunk
//
// Timing: with out_ready high and a continuous input, the first point of a
// chunk leaves one cycle after the chunk's last point entered, and points
// leave at one per cycle.
//
// From the paper: splitting the cloud into chunks and sorting within each
// chunk to get the global order, sorting along one axis. Own choices: the
// chunk size N (not given), the insertion-array structure, the ping-pong
// banks and the stable order of equal keys.
module chunk_sorter
  import sg_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] key_dim,
  input  logic       in_valid,
  output logic       in_ready,
  input  point_t     in_point,
  output logic       out_valid,
  input  logic       out_ready,
  output point_t     out_point,
  output logic       out_last
);

  localparam int unsigned CNT_W = $clog2(N + 1);

  point_t           ent  [2][N];
  logic [CNT_W-1:0] cnt  [2];
  logic             fb;           // bank being filled; !fb drains

  logic ins, pop, fill_full_nx, drain_empty_nx, swap;

  assign in_ready  = (cnt[fb] != CNT_W'(N));
  assign ins       = in_valid && in_ready;
  assign out_valid = (cnt[!fb] != '0);
  assign out_point = ent[!fb][0];
  assign out_last  = (cnt[!fb] == CNT_W'(1));
  assign pop       = out_valid && out_ready;

  assign fill_full_nx   = (cnt[fb] + CNT_W'(ins)) == CNT_W'(N);
  assign drain_empty_nx = (cnt[!fb] - CNT_W'(pop)) == '0;
  assign swap           = fill_full_nx && drain_empty_nx;

  // insertion into the filling bank
  coord_t in_key;
  logic   le [N];        // cell holds a point whose key is <= the new key
  point_t ins_nx [N];

  always_comb begin
    coord_t ck;
    in_key = coord_of(in_point, key_dim);
    for (int i = 0; i < N; i++) begin
      ck    = coord_of(ent[fb][i], key_dim);
      le[i] = (CNT_W'(i) < cnt[fb]) && (ck <= in_key);
    end
    for (int i = 0; i < N; i++) begin
      if (le[i])                   ins_nx[i] = ent[fb][i];
      else if (i == 0 || le[i-1])  ins_nx[i] = in_point;
      else                         ins_nx[i] = ent[fb][i-1];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt[0] <= '0;
      cnt[1] <= '0;
      fb     <= 1'b0;
    end else begin
      if (ins) begin
        for (int i = 0; i < N; i++) ent[fb][i] <= ins_nx[i];
      end
      if (pop) begin
        for (int i = 0; i < N - 1; i++) ent[!fb][i] <= ent[!fb][i+1];
      end
      cnt[fb]  <= cnt[fb] + CNT_W'(ins);
      cnt[!fb] <= cnt[!fb] - CNT_W'(pop);
      if (swap) fb <= !fb;
    end
  end

  // the filling bank never holds more than a chunk
  a_cnt: assert property (@(posedge clk) disable iff (!rst_n)
                          cnt[0] <= CNT_W'(N) && cnt[1] <= CNT_W'(N));

endmodule
