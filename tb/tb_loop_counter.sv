// tb_loop_counter: checks the Loop Counter. It loads random counts,
// decrements them at random and checks count, is_zero and last every cycle
// against a model that stops at zero. It also runs one bbop-like loop
// (load k, decrement once per uProgram pass until zero) and checks that the
// number of passes equals k. A watchdog ends the run.
module tb_loop_counter;
  localparam int unsigned W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load = 0, en_decrement = 0, is_zero, last;
  logic [W-1:0] load_value = '0, count, model;
  int unsigned checks = 0, failures = 0;

  loop_counter #(.W(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    if (!rst_n)                             model <= '0;
    else if (load)                          model <= load_value;
    else if (en_decrement && model != '0)   model <= model - 1'b1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int passes;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      check(count == model, "count");
      check(is_zero == (model == 0), "is_zero");
      check(last == (model == 1), "last");
      load         = ($urandom % 30) == 0;
      load_value   = $urandom % 12;
      en_decrement = ($urandom % 2) == 0;
    end
    // one loop of 5 passes
    @(negedge clk); load = 1; load_value = 5; en_decrement = 0;
    @(negedge clk); load = 0;
    passes = 0;
    while (!is_zero) begin
      passes++;
      en_decrement = 1;
      @(negedge clk);
      en_decrement = 0;
    end
    check(passes == 5, "loop of 5 passes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
