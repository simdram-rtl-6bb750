// tb_bbop_fifo: random push/pop test of bbop_fifo against a queue model.
// A small FIFO (16-bit words, depth 8) is driven with random writes (never
// while full, which the FIFO asserts against) and random reads, including
// reads when empty, which must be ignored. Every cycle the head word, empty,
// full and count are compared with a SystemVerilog queue. Inputs change on
// the falling edge and outputs are checked before the next rising edge.
// A watchdog ends the run.
module tb_bbop_fifo;
  localparam int unsigned W = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int unsigned checks = 0, failures = 0;
  logic [W-1:0] q[$];

  bbop_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned n_full = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == DEPTH), "full");
      check(32'(count) == q.size(), "count");
      if (q.size() != 0) check(rd_data == q[0], "head data");
      if (full) n_full++;
      // bias towards filling in the first half, draining in the second
      wr_en   = !full && (($urandom % 100) < ((c % 400) < 200 ? 70 : 30));
      rd_en   = ($urandom % 100) < ((c % 400) < 200 ? 30 : 70);
      wr_data = W'($urandom);
      @(posedge clk);
      #1;
    end
    check(n_full != 0, "FIFO never became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model update at the clock edge
  always @(posedge clk) if (rst_n) begin
    bit do_r, do_w;
    do_r = rd_en && q.size() != 0;
    do_w = wr_en && q.size() != DEPTH;
    if (do_r) void'(q.pop_front());
    if (do_w) q.push_back(wr_data);
  end
endmodule
