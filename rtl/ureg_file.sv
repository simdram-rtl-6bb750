// ureg_file: the uRegisters that do not stand for DRAM rows.
//
// Holds B22 (element size, used by uPrograms as their bit counter) and the
// general-purpose registers B23..B31, each UREG_W bits wide. One read port
// (rd_idx -> rd_data, combinational), one write port (we, wr_idx, wr_data,
// at the rising edge) and a direct view of B22 for the uRegister Addressing
// Unit. Indices are full uRegister numbers (22..31); other numbers read 0
// and are not written. In the paper this file also holds B18..B21; here the
// operand base addresses live in the Addressing Unit, which computes their
// row addresses and shifts them (see ureg_addressing_unit). Synchronous
// reset clears all registers.
module ureg_file #(
  parameter int unsigned UREG_W = simdram_pkg::UREG_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [4:0]        rd_idx,
  output logic [UREG_W-1:0] rd_data,
  input  logic              we,
  input  logic [4:0]        wr_idx,
  input  logic [UREG_W-1:0] wr_data,
  output logic [UREG_W-1:0] esize
);
  localparam int unsigned LO = simdram_pkg::UREG_ESIZE;  // 22
  localparam int unsigned NR = 32 - LO;                  // 10

  logic [UREG_W-1:0] r [NR];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < NR; k++) r[k] <= '0;
    end else if (we && wr_idx >= 5'(LO)) begin
      r[4'(wr_idx - 5'(LO))] <= wr_data;
    end
  end

  assign rd_data = (rd_idx >= 5'(LO)) ? r[4'(rd_idx - 5'(LO))] : '0;
  assign esize   = r[0];
endmodule
