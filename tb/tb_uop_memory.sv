// tb_uop_memory: loads whole random 64-uOp programs (1024 bits in one
// cycle, the paper's read port width) and reads every uOp address back,
// checking it against the loaded bits; reloads several times. A watchdog
// ends the run.
module tb_uop_memory;
  logic clk = 0;
  always #5 clk = ~clk;
  logic load_en = 0;
  logic [1023:0] load_data = '0, prog;
  logic [5:0] pc = '0;
  logic [15:0] uop;
  int unsigned checks = 0, failures = 0;

  uop_memory dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 8; r++) begin
      @(negedge clk);
      for (int k = 0; k < 32; k++) prog[32*k +: 32] = $urandom;
      load_en = 1; load_data = prog;
      @(negedge clk);
      load_en = 0; load_data = ~prog;
      for (int p = 0; p < 64; p++) begin
        pc = 6'(p);
        #1;
        checks++;
        if (uop != prog[16*p +: 16]) begin failures++; if (failures < 10) $display("FAIL uop %0d", p); end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
