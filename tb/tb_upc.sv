// tb_upc: random test of the uProgram counter. clear, branch and inc are
// driven at random and the counter is compared every cycle with a model
// that applies the same priority (clear, then branch, then increment,
// wrapping at 2^W). A watchdog ends the run.
module tb_upc;
  localparam int unsigned W = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, branch = 0, inc = 0;
  logic [W-1:0] target = '0, pc, model;
  int unsigned checks = 0, failures = 0;

  upc #(.W(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    if (!rst_n || clear) model <= '0;
    else if (branch)     model <= target;
    else if (inc)        model <= model + 1'b1;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      checks++;
      if (pc != model) begin failures++; if (failures < 10) $display("FAIL pc %0d exp %0d", pc, model); end
      clear  = ($urandom % 20) == 0;
      branch = ($urandom % 8) == 0;
      inc    = ($urandom % 2) == 0;
      target = W'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
