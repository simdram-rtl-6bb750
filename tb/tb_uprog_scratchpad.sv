// tb_uprog_scratchpad: fills random entries of the 16-entry uProgram
// scratchpad with random 1024-bit uPrograms and reads random entries back
// every cycle, checking rd_valid (only filled entries are valid after
// reset) and rd_data against a model array. A watchdog ends the run.
module tb_uprog_scratchpad;
  localparam int unsigned ENTRIES = 16, BITS = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic fill_en = 0, rd_valid;
  logic [3:0] fill_idx = '0, rd_idx = '0;
  logic [BITS-1:0] fill_data = '0, rd_data;
  logic [BITS-1:0] m [ENTRIES];
  bit mv [ENTRIES];
  int unsigned checks = 0, failures = 0;

  uprog_scratchpad dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && fill_en) begin
    m[fill_idx] <= fill_data;
    mv[fill_idx] <= 1;
  end

  initial begin
    foreach (mv[k]) mv[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      checks++;
      if (rd_valid != mv[rd_idx]) begin failures++; if (failures < 10) $display("FAIL valid %0d", rd_idx); end
      if (mv[rd_idx]) begin
        checks++;
        if (rd_data != m[rd_idx]) begin failures++; if (failures < 10) $display("FAIL data %0d", rd_idx); end
      end
      fill_en  = ($urandom % 10) == 0;
      fill_idx = 4'($urandom);
      for (int k = 0; k < BITS/32; k++) fill_data[32*k +: 32] = $urandom;
      rd_idx   = 4'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
