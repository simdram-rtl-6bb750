// object_tracker: the Object Tracker (OT) of the data transposition unit.
//
// A small fully associative table of the SIMDRAM objects in memory. Each of
// ENTRIES entries holds what the paper lists: the base physical address
// (19 bits), the total size of the object in bytes (32 bits) and the size of
// each element (6 bits). A bbop_trsp_init (ins_*) writes the next entry,
// round robin, overwriting the oldest once the table is full. Two lookup
// ports, one for LLC writebacks (wb_*) and one for LLC reads (rd_*), compare
// an address against every entry at once and report, combinationally,
// whether it falls inside an object (base <= addr < base + size) and that
// object's base and element size; the lowest matching entry wins.
// Paper values: 1024 entries, 19/32/6-bit fields. This design's choices: the
// 19-bit base is the row number (address bits 31:13), so objects start on an
// 8 kB row boundary, which the vertical layout needs anyway; the 6-bit field
// stores n-1, so n = 1..64; the replacement order. Synchronous reset
// invalidates all entries.
module object_tracker
  import simdram_pkg::*;
#(
  parameter int unsigned ENTRIES = 1024
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ins_valid,
  input  logic [PA_W-1:0] ins_base,
  input  logic [31:0]     ins_size,
  input  logic [N_W-1:0]  ins_n,
  input  logic [PA_W-1:0] wb_addr,
  output logic            wb_hit,
  output logic [PA_W-1:0] wb_base,
  output logic [N_W-1:0]  wb_n,
  input  logic [PA_W-1:0] rd_addr,
  output logic            rd_hit,
  output logic [PA_W-1:0] rd_base,
  output logic [N_W-1:0]  rd_n
);
  localparam int unsigned BASE_W = ROW_ADDR_W;        // 19
  localparam int unsigned LOW_W  = PA_W - BASE_W;     // 13
  localparam int unsigned IW     = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    logic              valid;
    logic [BASE_W-1:0] base;
    logic [31:0]       size;
    logic [5:0]        nm1;
  } ot_entry_t;

  ot_entry_t     tab [ENTRIES];
  logic [IW-1:0] wp;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < ENTRIES; k++) tab[k].valid <= 1'b0;
      wp <= '0;
    end else if (ins_valid) begin
      tab[wp] <= '{valid: 1'b1, base: ins_base[PA_W-1:LOW_W], size: ins_size,
                   nm1: 6'(ins_n - 1'b1)};
      wp <= (wp == IW'(ENTRIES - 1)) ? '0 : wp + 1'b1;
    end
  end

  function automatic logic [PA_W+N_W:0] lookup(input logic [PA_W-1:0] a);
    logic            hit;
    logic [PA_W-1:0] b;
    logic [N_W-1:0]  n;
    logic [PA_W:0]   lo, hi;
    hit = 1'b0;
    b   = '0;
    n   = '0;
    for (int k = ENTRIES - 1; k >= 0; k--) begin
      lo = {1'b0, tab[k].base, LOW_W'(0)};
      hi = lo + (PA_W+1)'(tab[k].size);
      if (tab[k].valid && {1'b0, a} >= lo && {1'b0, a} < hi) begin
        hit = 1'b1;
        b   = lo[PA_W-1:0];
        n   = N_W'(tab[k].nm1) + 1'b1;
      end
    end
    return {hit, b, n};
  endfunction

  assign {wb_hit, wb_base, wb_n} = lookup(wb_addr);
  assign {rd_hit, rd_base, rd_n} = lookup(rd_addr);
endmodule
