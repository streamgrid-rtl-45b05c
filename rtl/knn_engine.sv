// knn_engine -- the global-dependent stage: kNN search over a sliding window
// of chunks with NPE deadline-bounded search PEs.
//
// For every window of WIN chunks in the chunk line buffer the engine takes
// cfg_qpw queries from the query stream, NPE at a time, and starts all PEs
// together. Because every PE runs for exactly DEADLINE steps, all finish in
// the same cycle, 2*DEADLINE+1 cycles after the start; the engine then writes
// the NPE*K neighbours at once into the following line buffer. When the
// window's last group is written, the oldest chunk is released (the window
// slides by one chunk) or, if the newest chunk of the window closes the
// frame, the whole window is released.
//
// The PEs share the banked chunk buffer through the bank arbiter, which elides
// conflicting requests instead of stalling.
//
// Timing of one group: NPE cycles to load queries (one per cycle, more if the
// query stream is not ready), one start cycle, 2*DEADLINE+1 cycles of search,
// one result cycle, so a window's groups follow each other every
// NPE + 2*DEADLINE + 4 cycles. The result is written only when the downstream
// buffer has room for all of it (res_space_ok); with that buffer sized for
// the schedule this never holds the engine back, which ev_hold reports.
//
// cfg_range selects kNN search or range search (nearest K within the squared
// radius cfg_radius2) for all PEs; it is sampled at every group start.
//
// From the paper: the window of chunks, the PEs sharing a banked buffer, the
// deadline, conflict elision, K = 4 outputs per query, kNN and range search as
// global operations. Own choices: the query grouping and cfg_qpw, the release
// handshake, the hold check.
module knn_engine
  import sg_pkg::*;
#(
  parameter int unsigned LEVELS   = 15,
  parameter int unsigned WIN      = 2,
  parameter int unsigned NSLOT    = 3,
  parameter int unsigned NBANK    = 2,
  parameter int unsigned NPE      = 2,
  parameter int unsigned K        = 4,
  parameter int unsigned DEADLINE = (WIN * ((1 << LEVELS) - 1)) / 4,
  parameter int unsigned QCNT_W   = 16,
  localparam int unsigned SLOT_W  = (NSLOT > 1) ? $clog2(NSLOT) : 1,
  localparam int unsigned BANK_W  = (NBANK > 1) ? $clog2(NBANK) : 1,
  localparam int unsigned LADDR_W = SLOT_W + LEVELS - $clog2(NBANK)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [QCNT_W-1:0]  cfg_qpw,        // queries per window, multiple of NPE
  input  logic               cfg_range,      // 0: kNN search, 1: range search
  input  dist_t              cfg_radius2,    // squared radius of the range search
  // query stream
  input  logic               q_valid,
  output logic               q_ready,
  input  point_t             q_point,
  // chunk line buffer: window and release
  input  logic               win_valid,
  input  logic [SLOT_W-1:0]  win_base,
  input  logic               win_last,
  output logic               rel_valid,
  output logic               rel_all,
  // chunk line buffer: banked reads
  output logic [LADDR_W-1:0] rd_addr [NBANK],
  input  point_t             rd_data [NBANK],
  // results to the next line buffer
  input  logic               res_space_ok,
  output logic               res_valid,
  output nbr_t               res_nbrs [NPE*K],
  // events
  output logic [NPE-1:0]     ev_cut,
  output logic [NPE-1:0]     ev_elide,
  output logic [NPE-1:0]     ev_early,
  output logic               ev_hold
);

  localparam int unsigned PE_W = (NPE > 1) ? $clog2(NPE) : 1;

  typedef enum logic [2:0] {E_IDLE, E_LOAD, E_WAIT, E_RUN, E_OUT} estate_t;

  estate_t           state;
  logic [PE_W-1:0]   ld_idx;
  logic [QCNT_W-1:0] qdone;
  point_t            qbuf [NPE];
  logic              pe_start;

  logic              p_req_valid [NPE];
  logic [BANK_W-1:0] p_req_bank  [NPE];
  logic [LADDR_W-1:0] p_req_addr [NPE];
  logic              p_grant     [NPE];
  logic              p_elided    [NPE];
  logic              p_done      [NPE];
  logic              p_busy      [NPE];
  nbr_t              p_nbrs      [NPE][K];

  assign q_ready  = (state == E_LOAD);
  assign pe_start  = (state == E_WAIT);
  assign res_valid = (state == E_OUT) && res_space_ok;
  assign ev_hold   = (state == E_OUT) && !res_space_ok;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= E_IDLE;
      ld_idx    <= '0;
      qdone     <= '0;
      rel_valid <= 1'b0;
      rel_all   <= 1'b0;
    end else begin
      rel_valid <= 1'b0;
      rel_all   <= 1'b0;
      unique case (state)
        // wait for the window; a release issued last cycle is visible now
        E_IDLE: if (win_valid && !rel_valid) begin
          ld_idx <= '0;
          state  <= E_LOAD;
        end
        E_LOAD: if (q_valid) begin
          qbuf[ld_idx] <= q_point;
          ld_idx       <= ld_idx + 1'b1;
          if (ld_idx == PE_W'(NPE - 1)) state <= E_WAIT;
        end
        E_WAIT: state <= E_RUN;
        E_RUN:  if (p_done[0]) state <= E_OUT;
        E_OUT: if (res_space_ok) begin
          if (qdone + QCNT_W'(NPE) >= cfg_qpw) begin
            qdone     <= '0;
            rel_valid <= 1'b1;
            rel_all   <= win_last;
            state     <= E_IDLE;
          end else begin
            qdone  <= qdone + QCNT_W'(NPE);
            ld_idx <= '0;
            state  <= E_LOAD;
          end
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  // results are captured from the PEs in the cycle their done pulses
  always_ff @(posedge clk) begin
    if (p_done[0])
      for (int p = 0; p < NPE; p++)
        for (int k = 0; k < K; k++)
          res_nbrs[p*K + k] <= p_nbrs[p][k];
  end

  bank_arbiter #(
    .NPE(NPE), .NBANK(NBANK), .ADDR_W(LADDR_W)
  ) u_arb (
    .req_valid (p_req_valid),
    .req_bank  (p_req_bank),
    .req_addr  (p_req_addr),
    .grant     (p_grant),
    .elided    (p_elided),
    .bank_addr (rd_addr)
  );

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    logic cut_p, elide_p, early_p;
    kd_search_pe #(
      .LEVELS(LEVELS), .WIN(WIN), .NSLOT(NSLOT), .NBANK(NBANK),
      .K(K), .DEADLINE(DEADLINE)
    ) u_pe (
      .clk       (clk),
      .rst_n     (rst_n),
      .start     (pe_start),
      .query     (qbuf[p]),
      .base_slot (win_base),
      .range_en  (cfg_range),
      .radius2   (cfg_radius2),
      .busy      (p_busy[p]),
      .req_valid (p_req_valid[p]),
      .req_bank  (p_req_bank[p]),
      .req_addr  (p_req_addr[p]),
      .grant     (p_grant[p]),
      .elided    (p_elided[p]),
      .bank_data (rd_data),
      .done      (p_done[p]),
      .nbrs      (p_nbrs[p]),
      .ev_cut    (cut_p),
      .ev_elide  (elide_p),
      .ev_early  (early_p)
    );
    assign ev_cut[p]   = cut_p;
    assign ev_elide[p] = elide_p;
    assign ev_early[p] = early_p;

    // all PEs run the same fixed number of steps, so they finish together
    a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                                 p_done[p] == p_done[0] && p_busy[p] == p_busy[0]);
  end

endmodule
