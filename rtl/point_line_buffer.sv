// point_line_buffer -- the line buffer (LB2) between the kNN stage and the
// stencil stage.
//
// A circular buffer of DEPTH neighbour entries. The producer writes WR_N
// entries in one cycle (the NPE*K neighbours of a query group); the consumer
// takes one entry per cycle whenever the buffer is not empty, so an entry is
// overwritten only after it has been read. The size follows the line-buffer
// sizing rule: with a burst of WR_N entries and a consumer that drains one per
// cycle long before the next burst, the peak occupancy is WR_N, so the default
// DEPTH equals WR_N.
//
// Interface:
//   wr_valid / wr_data   burst write of WR_N entries (entry 0 is read first)
//   space_ok             at least WR_N free entries
//   rd_valid / rd_data   the oldest entry, popped in the same cycle
//   overflow             sticky: a burst arrived without room and was dropped
//                        (never happens under the intended schedule; the
//                        writer is expected to check space_ok first)
//
// From the paper: a line buffer sized from the producer and consumer rates,
// written with the kNN stage's 4x3 output, read 1x3 per cycle. Own choices:
// the always-drain consumer side and the overflow flag.
module point_line_buffer
  import sg_pkg::*;
#(
  parameter int unsigned WR_N  = 8,
  parameter int unsigned DEPTH = WR_N,
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_valid,
  input  nbr_t  wr_data [WR_N],
  output logic  space_ok,
  output logic  rd_valid,
  output nbr_t  rd_data,
  output logic  overflow
);

  nbr_t              mem [DEPTH];
  logic [PTR_W-1:0]  rd_ptr, wr_ptr;
  logic [CNT_W-1:0]  count;
  logic              wr_fire;

  function automatic logic [PTR_W-1:0] ptr_add(logic [PTR_W-1:0] p, int unsigned n);
    return PTR_W'((int'(p) + n) % DEPTH);
  endfunction

  assign space_ok = (int'(count) + WR_N <= DEPTH);
  assign wr_fire  = wr_valid && space_ok;
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr   <= '0;
      wr_ptr   <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (wr_fire) begin
        for (int i = 0; i < WR_N; i++) mem[ptr_add(wr_ptr, i)] <= wr_data[i];
        wr_ptr <= ptr_add(wr_ptr, WR_N);
      end
      if (wr_valid && !space_ok) overflow <= 1'b1;
      if (rd_valid) rd_ptr <= ptr_add(rd_ptr, 1);
      count <= count + (wr_fire ? CNT_W'(WR_N) : '0) - (rd_valid ? CNT_W'(1) : '0);
    end
  end

endmodule
