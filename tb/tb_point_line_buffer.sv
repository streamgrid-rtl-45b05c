// tb_point_line_buffer -- self-checking test of the kNN-to-stencil line buffer.
//
// Bursts of WR_N entries are written at random times whenever space_ok allows;
// each cycle the output must be the oldest unread entry of a reference queue,
// and rd_valid must be high exactly when that queue is non-empty. space_ok is
// checked against the queue's free space. At the end one burst is forced into
// a full buffer and the sticky overflow flag must rise.
module tb_point_line_buffer;
  import sg_pkg::*;
  import sg_tb_pkg::*;

  localparam int WR_N = 4, DEPTH = 10;

  logic clk = 0, rst_n = 0, wr_valid = 0, space_ok, rd_valid, overflow;
  nbr_t wr_data [WR_N];
  nbr_t rd_data;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  nbr_t model[$];

  point_line_buffer #(.WR_N(WR_N), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < WR_N; i++) wr_data[i] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      checks += 2;
      if (rd_valid !== (model.size() != 0)) begin failures++; $display("FAIL rd_valid c%0d", c); end
      if (space_ok !== (model.size() + WR_N <= DEPTH)) begin failures++; $display("FAIL space_ok c%0d", c); end
      if (model.size() != 0) begin
        checks++;
        if (rd_data !== model[0]) begin failures++; $display("FAIL data c%0d", c); end
      end
      // the consumer pops whenever valid
      if (model.size() != 0) void'(model.pop_front());
      wr_valid = space_ok && (($urandom % 3) == 0);
      for (int i = 0; i < WR_N; i++) begin
        wr_data[i] = '{valid: 1'($urandom), d2: dist_t'({$urandom, $urandom}), pt: rnd_point(30000)};
        if (wr_valid) model.push_back(wr_data[i]);
      end
    end
    // drive a burst into a buffer with no room
    @(negedge clk) wr_valid = 1;
    @(negedge clk) wr_valid = 1;
    @(negedge clk) wr_valid = 1;
    @(negedge clk) wr_valid = 0;
    checks++;
    if (!overflow) begin failures++; $display("FAIL overflow flag"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
