// tb_ureg_addressing_unit: loads random operand base rows, n and element
// size, then checks the row every uRegister index resolves to on both
// lookup ports: B0..B15 the B-group addresses 1008+k, B16/B17 the constant
// rows 1006/1007, all in the subarray of the output operand; B18..B21 the
// operand base plus the current bit (n - B22); B22 and up no row. Then
// shifts the bases by n (the next chunk) and writes B18..B21 directly, and
// checks raw reads. A watchdog ends the run.
module tb_ureg_addressing_unit;
  import simdram_pkg::*;
  localparam int unsigned RW = ROW_ADDR_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load = 0, shift = 0, we = 0, a_is_row, b_is_row;
  logic [RW-1:0] ld_in0 = '0, ld_in1 = '0, ld_in2 = '0, ld_out = '0, a_row, b_row;
  logic [N_W-1:0] ld_n = '0;
  logic [4:0] wr_idx = '0, raw_idx = '0, a_idx = '0, b_idx = '0;
  logic [31:0] wr_data = '0, raw_data, esize = '0;
  logic [RW-1:0] mb [4];
  int n;
  int unsigned checks = 0, failures = 0;

  ureg_addressing_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [RW:0] exp_row(input int idx);
    logic [8:0] sa;
    sa = ld_out[RW-1:10];
    if (idx < 16)  return {1'b1, sa, 10'(1008 + idx)};
    if (idx == 16) return {1'b1, sa, 10'd1006};
    if (idx == 17) return {1'b1, sa, 10'd1007};
    if (idx <= 21) return {1'b1, RW'(mb[idx-18] + RW'(n) - RW'(esize))};
    return '0;
  endfunction

  task automatic check_all();
    for (int k = 0; k < 32; k++) begin
      a_idx = 5'(k); b_idx = 5'(31 - k); raw_idx = 5'(k);
      #1;
      check(a_is_row == exp_row(k)[RW], $sformatf("a_is_row B%0d", k));
      if (a_is_row) check(a_row == exp_row(k)[RW-1:0], $sformatf("a_row B%0d", k));
      check(b_is_row == exp_row(31 - k)[RW], $sformatf("b_is_row B%0d", 31 - k));
      if (b_is_row) check(b_row == exp_row(31 - k)[RW-1:0], $sformatf("b_row B%0d", 31 - k));
      if (k >= 18 && k <= 21) check(raw_data == 32'(mb[k-18]), $sformatf("raw B%0d", k));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      n = 1 << ($urandom % 7);
      ld_out = RW'($urandom); ld_in0 = RW'($urandom); ld_in1 = RW'($urandom); ld_in2 = RW'($urandom);
      ld_n = 7'(n); load = 1;
      mb[0] = ld_in0; mb[1] = ld_in1; mb[2] = ld_in2; mb[3] = ld_out;
      @(negedge clk);
      load = 0;
      for (int b = 0; b < 3; b++) begin
        esize = 32'(1 + $urandom % n);
        check_all();
        @(negedge clk);
      end
      shift = 1;
      @(negedge clk);
      shift = 0;
      for (int k = 0; k < 4; k++) mb[k] = mb[k] + RW'(n);
      check_all();
      we = 1; wr_idx = 5'(18 + $urandom % 4); wr_data = $urandom;
      mb[wr_idx - 18] = wr_data[RW-1:0];
      @(negedge clk);
      we = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
