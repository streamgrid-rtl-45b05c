// chunk_line_buffer -- the chunk line buffer (LB1) in front of the kNN stage.
//
// The input point cloud is split into equal chunks. Each chunk arrives as a
// complete kd-tree of NODES = 2^LEVELS - 1 points in heap order, one point per
// cycle. The buffer has NSLOT chunk slots. A slot fills while the search engine
// reads a window of WIN older chunks; once the oldest chunk of the window is no
// longer needed the engine releases it and the slot is overwritten by a later
// chunk, so the window slides by one chunk (a 1xWIN stencil over chunks with
// stride 1). At the end of a frame the engine releases the whole window.
//
// Storage is split into NBANK banks, interleaved on the low bits of the node
// index inside a chunk. Each bank has one write port (shared by the producer)
// and one synchronous read port (data one cycle after the address).
//
// Interface:
//   wr_*      producer stream, valid/ready; wr_last marks points of the last
//             chunk of a frame (it may be set on any point of that chunk).
//   win_*     window status: win_valid when WIN full chunks are present,
//             win_base the slot of the oldest, win_last when the newest chunk
//             of the window is the last of its frame.
//   rel_valid / rel_all   release the oldest chunk, or all WIN chunks.
//   rd_addr / rd_data     one read port per bank, bank-local address
//             {slot, node index / NBANK}.
//   ev_overwrite          pulses when a new chunk starts overwriting a slot
//             that held an earlier chunk.
//
// From the paper: the chunk window, three slots (two read, one written), the
// banked organisation. Own choices: the kd-tree heap layout, low-bit bank
// interleaving, valid/ready on the write side, the release handshake.
module chunk_line_buffer
  import sg_pkg::*;
#(
  parameter int unsigned LEVELS = 15,
  parameter int unsigned NSLOT  = 3,
  parameter int unsigned NBANK  = 2,
  parameter int unsigned WIN    = 2,
  localparam int unsigned NODES   = (1 << LEVELS) - 1,
  localparam int unsigned SLOT_W  = (NSLOT > 1) ? $clog2(NSLOT) : 1,
  localparam int unsigned BANK_W  = (NBANK > 1) ? $clog2(NBANK) : 1,
  localparam int unsigned IDX_W   = LEVELS,
  localparam int unsigned LADDR_W = SLOT_W + LEVELS - $clog2(NBANK)
) (
  input  logic                clk,
  input  logic                rst_n,
  // producer
  input  logic                wr_valid,
  output logic                wr_ready,
  input  point_t              wr_point,
  input  logic                wr_last,
  // window status and release
  output logic                win_valid,
  output logic [SLOT_W-1:0]   win_base,
  output logic                win_last,
  input  logic                rel_valid,
  input  logic                rel_all,
  // banked read ports
  input  logic [LADDR_W-1:0]  rd_addr [NBANK],
  output point_t              rd_data [NBANK],
  // events
  output logic                ev_overwrite
);

  localparam int unsigned CNT_W = $clog2(NSLOT + 1);
  localparam int unsigned BANK_DEPTH = 1 << LADDR_W;

  logic [SLOT_W-1:0] wr_slot, base_slot;
  logic [IDX_W-1:0]  wr_idx;
  logic [CNT_W-1:0]  full_cnt;
  logic [NSLOT-1:0]  slot_last, slot_used;
  logic              cur_last;
  logic              wr_fire, chunk_done;
  logic [CNT_W-1:0]  rel_n;

  // (s + n) mod NSLOT for n <= NSLOT
  function automatic logic [SLOT_W-1:0] slot_add(logic [SLOT_W-1:0] s, logic [CNT_W-1:0] n);
    logic [SLOT_W+CNT_W-1:0] t;
    t = (SLOT_W+CNT_W)'(s) + (SLOT_W+CNT_W)'(n);
    if (t >= (SLOT_W+CNT_W)'(NSLOT)) t = t - (SLOT_W+CNT_W)'(NSLOT);
    return t[SLOT_W-1:0];
  endfunction

  assign wr_ready   = (full_cnt < CNT_W'(NSLOT));
  assign wr_fire    = wr_valid && wr_ready;
  assign chunk_done = wr_fire && (wr_idx == IDX_W'(NODES - 1));
  assign win_valid  = (full_cnt >= CNT_W'(WIN));
  assign win_base   = base_slot;
  assign win_last   = slot_last[slot_add(base_slot, CNT_W'(WIN - 1))];
  assign rel_n      = !rel_valid ? '0 : (rel_all ? CNT_W'(WIN) : CNT_W'(1));
  assign ev_overwrite = wr_fire && (wr_idx == '0) && slot_used[wr_slot];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_slot   <= '0;
      base_slot <= '0;
      wr_idx    <= '0;
      full_cnt  <= '0;
      slot_last <= '0;
      slot_used <= '0;
      cur_last  <= '0;
    end else begin
      if (wr_fire) begin
        if (chunk_done) begin
          wr_idx             <= '0;
          wr_slot            <= slot_add(wr_slot, CNT_W'(1));
          slot_last[wr_slot] <= cur_last | wr_last;
          slot_used[wr_slot] <= 1'b1;
          cur_last           <= '0;
        end else begin
          wr_idx      <= wr_idx + 1'b1;
          cur_last <= cur_last | wr_last;
        end
      end
      full_cnt <= full_cnt + CNT_W'(chunk_done) - rel_n;
      if (rel_valid) base_slot <= slot_add(base_slot, rel_n);
    end
  end

  // Banks: node index i of slot s lives in bank i % NBANK at {s, i / NBANK}.
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    point_t mem [BANK_DEPTH];
    logic   we;
    logic [LADDR_W-1:0] waddr;
    assign we    = wr_fire && (BANK_W'(wr_idx) == BANK_W'(b) || NBANK == 1);
    assign waddr = {wr_slot, wr_idx[IDX_W-1:$clog2(NBANK)]};
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wr_point;
      rd_data[b] <= mem[rd_addr[b]];
    end
  end

  // The engine never releases more chunks than are present.
  a_rel_ok: assert property (@(posedge clk) disable iff (!rst_n)
                             rel_valid |-> full_cnt >= rel_n);

endmodule
