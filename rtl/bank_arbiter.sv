// bank_arbiter -- bank conflict elision for the search PEs.
//
// Every cycle each of NPE search PEs may request one node from the banked chunk
// line buffer. Each bank serves one address per cycle. When several PEs ask
// for different addresses in the same bank, the lowest-numbered PE wins and the
// others are told that their request was elided: they do not wait, they drop
// the requested node and with it the part of the tree below it. Requests for
// the very same address in a bank are all served by the one read.
//
// Interface (all combinational, no state):
//   req_valid/req_bank/req_addr   one request per PE (bank, bank-local address)
//   grant     the PE's request is served this cycle
//   elided    the PE's request lost a bank conflict
//   bank_addr address presented to each bank's read port
//
// From the paper: one request proceeds, the rest skip the subtree below the
// conflicting node (taken from prior kd-tree hardware). Own choice: fixed
// priority to the lowest PE index, and shared reads of an identical address.
module bank_arbiter #(
  parameter int unsigned NPE     = 2,
  parameter int unsigned NBANK   = 2,
  parameter int unsigned ADDR_W  = 15,
  localparam int unsigned BANK_W = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic              req_valid [NPE],
  input  logic [BANK_W-1:0] req_bank  [NPE],
  input  logic [ADDR_W-1:0] req_addr  [NPE],
  output logic              grant     [NPE],
  output logic              elided    [NPE],
  output logic [ADDR_W-1:0] bank_addr [NBANK]
);

  logic              bank_busy [NBANK];

  always_comb begin
    for (int b = 0; b < NBANK; b++) begin
      bank_busy[b] = 1'b0;
      bank_addr[b] = '0;
    end
    for (int p = 0; p < NPE; p++) begin
      grant[p]  = 1'b0;
      elided[p] = 1'b0;
      if (req_valid[p]) begin
        if (!bank_busy[req_bank[p]]) begin
          bank_busy[req_bank[p]] = 1'b1;
          bank_addr[req_bank[p]] = req_addr[p];
          grant[p]               = 1'b1;
        end else if (bank_addr[req_bank[p]] == req_addr[p]) begin
          grant[p]  = 1'b1;
        end else begin
          elided[p] = 1'b1;
        end
      end
    end
  end

endmodule
