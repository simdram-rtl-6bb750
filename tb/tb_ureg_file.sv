// tb_ureg_file: random writes to and reads from the uRegister file
// (B22..B31), checked against a model; esize must always equal B22.
// Writes to indices below 22 must not change anything. A watchdog ends the
// run.
module tb_ureg_file;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] rd_idx = 5'd22, wr_idx = 5'd22;
  logic [31:0] rd_data, wr_data = '0, esize;
  logic we = 0;
  logic [31:0] m [32];
  int unsigned checks = 0, failures = 0;

  ureg_file dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    if (!rst_n) for (int k = 0; k < 32; k++) m[k] <= '0;
    else if (we && wr_idx >= 22) m[wr_idx] <= wr_data;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      checks++;
      if (rd_data != m[rd_idx]) begin failures++; if (failures < 10) $display("FAIL B%0d", rd_idx); end
      checks++;
      if (esize != m[22]) begin failures++; if (failures < 10) $display("FAIL esize"); end
      we      = ($urandom % 3) == 0;
      wr_idx  = 5'(16 + $urandom % 16);
      wr_data = $urandom;
      rd_idx  = 5'(22 + $urandom % 10);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
