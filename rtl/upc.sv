// upc: the uProgram counter of the SIMDRAM control unit.
//
// A register that, at the rising clock edge, goes to 0 (clear: a new
// uProgram or a new iteration), to a branch target (branch: a taken bnez),
// or up by one (inc: any other uOp that has finished), in that priority.
// Synchronous reset to 0.
module upc #(
  parameter int unsigned W = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         branch,
  input  logic [W-1:0] target,
  input  logic         inc,
  output logic [W-1:0] pc
);
  always_ff @(posedge clk) begin
    if (!rst_n || clear) pc <= '0;
    else if (branch)     pc <= target;
    else if (inc)        pc <= pc + 1'b1;
  end
endmodule
