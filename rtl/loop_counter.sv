// loop_counter: number of row-sized chunks of a bbop still to be processed.
//
// load writes the iteration count when a bbop is decoded (number of elements
// divided by the elements in one DRAM row, rounded up). en_decrement, raised
// by the uOp Processing FSM on each done uOp, takes one off. is_zero is
// high when the count is 0, which tells the control unit to move on to the
// next bbop; last is high when the count is 1, i.e. the decrement now taking
// place ends the bbop. Decrementing at 0 keeps 0. Synchronous reset to 0.
module loop_counter #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] load_value,
  input  logic         en_decrement,
  output logic [W-1:0] count,
  output logic         is_zero,
  output logic         last
);
  always_ff @(posedge clk) begin
    if (!rst_n)                     count <= '0;
    else if (load)                  count <= load_value;
    else if (en_decrement && !is_zero) count <= count - 1'b1;
  end

  assign is_zero = (count == '0);
  assign last    = (count == W'(1));
endmodule
