// ureg_addressing_unit: turns the row-mapped uRegisters into DRAM row
// addresses for the uOp Processing FSM.
//
// B0..B15 name the sixteen addresses of the B-group row decoder (B0..B3 the
// rows T0..T3, B4/B5 the d- and n-wordline of DCC0, B6/B7 those of DCC1,
// B8..B15 the two- and three-row groups of the paper's table), B16/B17 the
// constant rows C0/C1. These are fixed rows of the subarray that holds the
// current bbop's data (the subarray of its destination array).
// B18..B20 (inputs) and B21 (output) hold base row addresses, loaded when a
// bbop is decoded. Their row address is base + (n - B22): uPrograms count B22
// down from n, one bit per pass of their loop, so each pass addresses the next
// bit row of every operand without extra uOps. This offset rule is this
// design's reading of the paper's full-addition uProgram, which uses B18,
// B19 and B21 inside a loop over B22 without ever changing them.
// shift adds n to all four bases (next row-sized chunk of the arrays).
// Arithmetic uOps may write B18..B21 (wr_*); raw_* reads their bases.
// Two combinational lookup ports (a, b) return the row and whether the
// uRegister is row-mapped at all (B22..B31 are not). Synchronous reset.
module ureg_addressing_unit
  import simdram_pkg::*;
#(
  parameter int unsigned RW = ROW_ADDR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // bbop decode
  input  logic              load,
  input  logic [RW-1:0]     ld_in0,
  input  logic [RW-1:0]     ld_in1,
  input  logic [RW-1:0]     ld_in2,
  input  logic [RW-1:0]     ld_out,
  input  logic [N_W-1:0]    ld_n,
  // next chunk
  input  logic              shift,
  // arithmetic uOps on B18..B21
  input  logic              we,
  input  logic [4:0]        wr_idx,
  input  logic [UREG_W-1:0] wr_data,
  input  logic [4:0]        raw_idx,
  output logic [UREG_W-1:0] raw_data,
  // B22 from the uRegister File
  input  logic [UREG_W-1:0] esize,
  // lookups
  input  logic [4:0]        a_idx,
  output logic [RW-1:0]     a_row,
  output logic              a_is_row,
  input  logic [4:0]        b_idx,
  output logic [RW-1:0]     b_row,
  output logic              b_is_row
);
  localparam int unsigned SAW = RW - SA_ROW_W;

  logic [RW-1:0]  base [4];     // B18..B21
  logic [N_W-1:0] n_q;
  logic [SAW-1:0] sa;           // subarray of the current bbop
  logic [RW-1:0]  offset;

  assign offset = RW'(n_q) - RW'(esize);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < 4; k++) base[k] <= '0;
      n_q <= '0;
      sa  <= '0;
    end else if (load) begin
      base[0] <= ld_in0;
      base[1] <= ld_in1;
      base[2] <= ld_in2;
      base[3] <= ld_out;
      n_q     <= ld_n;
      sa      <= ld_out[RW-1:SA_ROW_W];
    end else if (shift) begin
      for (int k = 0; k < 4; k++) base[k] <= base[k] + RW'(n_q);
    end else if (we && wr_idx >= 5'(UREG_IN0) && wr_idx <= 5'(UREG_OUT)) begin
      base[2'(wr_idx - 5'(UREG_IN0))] <= wr_data[RW-1:0];
    end
  end

  assign raw_data = (raw_idx >= 5'(UREG_IN0) && raw_idx <= 5'(UREG_OUT))
                    ? UREG_W'(base[2'(raw_idx - 5'(UREG_IN0))]) : '0;

  function automatic logic [RW:0] map(input logic [4:0] idx);
    logic [RW-1:0] row;
    logic          is_row;
    is_row = 1'b1;
    if (idx < 5'd16)
      row = {sa, SA_ROW_W'(ROW_B_BASE + 32'(idx))};
    else if (idx == 5'(UREG_C0))
      row = {sa, SA_ROW_W'(ROW_C0)};
    else if (idx == 5'(UREG_C1))
      row = {sa, SA_ROW_W'(ROW_C1)};
    else if (idx <= 5'(UREG_OUT))
      row = base[2'(idx - 5'(UREG_IN0))] + offset;
    else begin
      row    = '0;
      is_row = 1'b0;
    end
    return {is_row, row};
  endfunction

  assign {a_is_row, a_row} = map(a_idx);
  assign {b_is_row, b_row} = map(b_idx);
endmodule
