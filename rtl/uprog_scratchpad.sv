// uprog_scratchpad: on-chip copy of the most used uPrograms.
//
// ENTRIES slots of one uProgram each (64 uOps x 16 bits = 1024 bits), indexed
// by the bbop opcode, as in the paper (16 uPrograms x 128 bytes = 2 kB).
// Each slot has a valid bit. A whole uProgram is written in one cycle through
// the fill port (fill_en, fill_idx, fill_data), the path from the uProgram
// Memory in DRAM; a whole uProgram is read in one cycle, combinationally,
// on rd_data for slot rd_idx, with rd_valid telling whether the slot holds a
// uProgram. The valid bits are this design's way of knowing when the
// uProgram must first be fetched from DRAM. Reset clears them all.
module uprog_scratchpad #(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned BITS    = simdram_pkg::UPROG_BITS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       fill_en,
  input  logic [$clog2(ENTRIES)-1:0] fill_idx,
  input  logic [BITS-1:0]            fill_data,
  input  logic [$clog2(ENTRIES)-1:0] rd_idx,
  output logic [BITS-1:0]            rd_data,
  output logic                       rd_valid
);
  logic [BITS-1:0]    mem [ENTRIES];
  logic [ENTRIES-1:0] valid;

  always_ff @(posedge clk) begin
    if (fill_en) mem[fill_idx] <= fill_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)       valid <= '0;
    else if (fill_en) valid[fill_idx] <= 1'b1;
  end

  assign rd_data  = mem[rd_idx];
  assign rd_valid = valid[rd_idx];
endmodule
