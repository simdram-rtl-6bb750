// uop_memory: holds the uOps of the uProgram that is running.
//
// UOPS uOps of UOP_W bits (64 x 16 bits = 128 bytes, as in the paper). The
// whole uProgram is loaded in one cycle from the scratchpad's 1024-bit read
// port (load_en, load_data; uOp k is load_data[16k+15:16k]). The uOp at
// address pc is read combinationally on uop. uOps are not reset: the control
// unit always loads a uProgram before it reads one.
module uop_memory #(
  parameter int unsigned UOPS  = simdram_pkg::UPROG_UOPS,
  parameter int unsigned UOP_W = simdram_pkg::UOP_W
) (
  input  logic                    clk,
  input  logic                    load_en,
  input  logic [UOPS*UOP_W-1:0]   load_data,
  input  logic [$clog2(UOPS)-1:0] pc,
  output logic [UOP_W-1:0]        uop
);
  logic [UOP_W-1:0] mem [UOPS];

  always_ff @(posedge clk) begin
    if (load_en)
      for (int k = 0; k < UOPS; k++) mem[k] <= load_data[k*UOP_W +: UOP_W];
  end

  assign uop = mem[pc];
endmodule
