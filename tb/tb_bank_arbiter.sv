// tb_bank_arbiter -- self-checking test of the bank conflict elision arbiter.
//
// Random request patterns from 4 PEs onto 2 banks (with many repeated
// addresses so that shared reads happen). For every bank the expected winner
// is the lowest-numbered requesting PE; another PE is granted only when it
// asks for the winner's very address, otherwise it is elided. The bank
// address must be the winner's address.
module tb_bank_arbiter;
  localparam int NPE = 4, NBANK = 2, AW = 6;

  logic          req_valid [NPE];
  logic [0:0]    req_bank  [NPE];
  logic [AW-1:0] req_addr  [NPE];
  logic          grant     [NPE];
  logic          elided    [NPE];
  logic [AW-1:0] bank_addr [NBANK];

  int checks = 0, failures = 0, n_conf = 0, n_share = 0;

  bank_arbiter #(.NPE(NPE), .NBANK(NBANK), .ADDR_W(AW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int win [NBANK];
      for (int p = 0; p < NPE; p++) begin
        req_valid[p] = ($urandom % 4) != 0;
        req_bank[p]  = 1'($urandom);
        req_addr[p]  = AW'($urandom % 3);
      end
      #1;
      for (int b = 0; b < NBANK; b++) begin
        win[b] = -1;
        for (int p = NPE - 1; p >= 0; p--)
          if (req_valid[p] && req_bank[p] == b) win[b] = p;
        if (win[b] >= 0) begin
          checks++;
          if (bank_addr[b] != req_addr[win[b]]) begin
            failures++; $display("FAIL bank %0d address", b);
          end
        end
      end
      for (int p = 0; p < NPE; p++) begin
        bit eg, ee;
        int w;
        w  = win[req_bank[p]];
        eg = req_valid[p] && (w == p || req_addr[w] == req_addr[p]);
        ee = req_valid[p] && !eg;
        if (req_valid[p] && w != p && eg) n_share++;
        if (ee) n_conf++;
        checks++;
        if (grant[p] !== eg || elided[p] !== ee) begin
          failures++;
          $display("FAIL it%0d pe%0d grant %0d/%0d elided %0d/%0d", it, p, grant[p], eg, elided[p], ee);
        end
      end
      #1;
    end
    checks++;
    if (n_conf == 0 || n_share == 0) failures++;
    $display("conflicts %0d shared reads %0d", n_conf, n_share);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
