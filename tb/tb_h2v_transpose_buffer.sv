// tb_h2v_transpose_buffer: for n = 1, 2, ..., 64 writes the n horizontal
// cache lines of one object slice in random order, one per cycle (the
// paper's rate), and checks every vertical line against a transposition
// computed here: vertical line i holds bit i of each of the 512 elements
// of the slice, element e at bit e; element e sits in horizontal line
// e / (512/n) at bits n*(e % (512/n)) upwards. Also checks the received
// bits and that all_received rises exactly with the n-th line. Watchdog.
module tb_h2v_transpose_buffer;
  import simdram_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, wr_valid = 0, all_received;
  logic [N_W-1:0] n_in = 7'd8;
  logic [5:0] wr_j = '0, rd_i = '0;
  logic [511:0] wr_line = '0, rd_line;
  logic [63:0] received;
  logic [511:0] h [64];
  int unsigned checks = 0, failures = 0;

  h2v_transpose_buffer dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++)
    for (int lg = 0; lg <= 6; lg++) begin
      int n, epl, order[$];
      n = 1 << lg; epl = 512 / n; order.delete();
      @(negedge clk);
      clear = 1; n_in = 7'(n);
      @(negedge clk);
      clear = 0;
      for (int j = 0; j < n; j++) begin
        for (int k = 0; k < 16; k++) h[j][32*k +: 32] = $urandom;
        order.push_back(j);
      end
      order.shuffle();
      foreach (order[k]) begin
        check(all_received == 0, "all_received early");
        wr_valid = 1; wr_j = 6'(order[k]); wr_line = h[order[k]];
        @(negedge clk);
      end
      wr_valid = 0;
      check(all_received == 1, "all_received after n lines");
      check(received == ((n == 64) ? '1 : (64'(1) << n) - 1), "received bits");
      for (int i = 0; i < n; i++) begin
        logic [511:0] exp;
        for (int e = 0; e < 512; e++) exp[e] = h[e / epl][n * (e % epl) + i];
        rd_i = 6'(i);
        #1;
        check(rd_line == exp, $sformatf("vertical line %0d for n=%0d", i, n));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
