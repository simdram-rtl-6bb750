// tb_v2h_transpose_buffer: for n = 1, 2, ..., 64 writes the n vertical
// lines of one object slice (line i = bit i of all 512 elements) in random
// order, one per cycle, and checks every horizontal line j against the
// inverse transposition computed here: bit p of line j is bit p % n of
// element j*(512/n) + p/n. Also checks received and all_received. Watchdog.
module tb_v2h_transpose_buffer;
  import simdram_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, wr_valid = 0, all_received;
  logic [N_W-1:0] n_in = 7'd8;
  logic [5:0] wr_i = '0, rd_j = '0;
  logic [511:0] wr_line = '0, rd_line;
  logic [63:0] received;
  logic [511:0] v [64];
  int unsigned checks = 0, failures = 0;

  v2h_transpose_buffer dut (.*);

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
      for (int i = 0; i < n; i++) begin
        for (int k = 0; k < 16; k++) v[i][32*k +: 32] = $urandom;
        order.push_back(i);
      end
      order.shuffle();
      foreach (order[k]) begin
        check(all_received == 0, "all_received early");
        wr_valid = 1; wr_i = 6'(order[k]); wr_line = v[order[k]];
        @(negedge clk);
      end
      wr_valid = 0;
      check(all_received == 1, "all_received after n lines");
      check(received == ((n == 64) ? '1 : (64'(1) << n) - 1), "received bits");
      for (int j = 0; j < n; j++) begin
        logic [511:0] exp;
        for (int p = 0; p < 512; p++) exp[p] = v[p % n][j * epl + p / n];
        rd_j = 6'(j);
        #1;
        check(rd_line == exp, $sformatf("horizontal line %0d for n=%0d", j, n));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
