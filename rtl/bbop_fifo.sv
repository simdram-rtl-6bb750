// bbop_fifo: the queue in which the control unit receives bbop
// instructions from the CPU.
//
// A circular buffer of DEPTH entries with a write pointer, a read pointer and
// an occupancy count. The paper sizes this FIFO to 1024 bbops; the entry
// width is that of the decoded bbop (opcode, four array addresses, element
// count and element size), which is this design's choice. The head entry is
// visible combinationally on rd_data whenever empty is low, so the control
// unit can decode it in the cycle it pops it (rd_en).
// Timing: a push (wr_en & !full) and a pop (rd_en & !empty) each take effect
// at the next rising clock edge; both may happen in the same cycle.
// Reset (rst_n low, synchronous) empties the FIFO.
module bbop_fifo #(
  parameter int unsigned W     = simdram_pkg::BBOP_W,
  parameter int unsigned DEPTH = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  logic do_wr, do_rd;
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rp];

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= nxt(wp);
      if (do_rd) rp <= nxt(rp);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full && !rd_en))
    else $error("bbop_fifo: push while full");
endmodule
