// h2v_transpose_buffer: horizontal-to-vertical transpose buffer of the data
// transposition unit.
//
// Collects the n horizontally laid out cache lines of one SIMDRAM object
// slice and holds them as n vertically laid out lines: vertical line i holds
// bit i of all LINE_BITS elements of the slice. Horizontal line j carries
// elements j*(LINE_BITS/n) .. (j+1)*(LINE_BITS/n)-1, element e in bits
// e*n+n-1 .. e*n (bit 0 is the least significant). Writing line j places
// bit i of its element e at column j*(LINE_BITS/n)+e of vertical line i,
// all bits in the cycle of the write, as the paper asks (one cache line
// transposed per cycle). Which columns a line fills follows from its index
// j in the slice, i.e. from its physical address.
// n must be a power of two from 1 to MAX_N (8/16/32/64 in the paper); this
// restriction is this design's, so that every line holds whole elements.
// clear starts a new slice of n_in-bit elements (a write in the same cycle
// belongs to the new slice). received has bit j set once line j was written;
// all_received is high when lines 0..n-1 all are. rd_i selects the vertical
// line shown combinationally on rd_line. Storage is not reset; the mask is.
module h2v_transpose_buffer
  import simdram_pkg::*;
#(
  parameter int unsigned LINE_W = LINE_BITS,
  parameter int unsigned MAXN   = MAX_N
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic [N_W-1:0]          n_in,
  input  logic                    wr_valid,
  input  logic [$clog2(MAXN)-1:0] wr_j,
  input  logic [LINE_W-1:0]       wr_line,
  input  logic [$clog2(MAXN)-1:0] rd_i,
  output logic [LINE_W-1:0]       rd_line,
  output logic [MAXN-1:0]         received,
  output logic                    all_received
);
  localparam int unsigned LGL = $clog2(LINE_W);
  localparam int unsigned JW  = $clog2(MAXN);

  logic [LINE_W-1:0] vbuf [MAXN];
  logic [N_W-1:0]    n_q, n_eff;
  logic [2:0]        k;            // log2(n)
  logic [MAXN-1:0]   nmask;

  assign n_eff = clear ? n_in : n_q;
  assign k     = log2_n(n_eff);

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      for (int p = 0; p < LINE_W; p++) begin
        vbuf[JW'(p) & JW'(n_eff - 1'b1)][LGL'((32'(wr_j) << (LGL - 32'(k))) + (32'(p) >> k))]
          <= wr_line[p];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n_q      <= N_W'(1);
      received <= '0;
    end else begin
      if (clear) n_q <= n_in;
      received <= (clear ? '0 : received) | (wr_valid ? (MAXN'(1) << wr_j) : '0);
    end
  end

  assign nmask        = (n_q >= N_W'(MAXN)) ? '1 : ((MAXN'(1) << n_q) - 1'b1);
  assign all_received = ((received & nmask) == nmask);
  assign rd_line      = vbuf[rd_i];
endmodule
