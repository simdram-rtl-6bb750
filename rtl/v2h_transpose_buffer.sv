// v2h_transpose_buffer: vertical-to-horizontal transpose buffer of the data
// transposition unit.
//
// The inverse of h2v_transpose_buffer. It receives the n vertically laid out
// cache lines of one object slice (line i holds bit i of all LINE_BITS
// elements) and rebuilds the n horizontal lines: bit q of vertical line i,
// which belongs to element q, goes to horizontal line q/(LINE_BITS/n), bit
// (q mod (LINE_BITS/n))*n + i. A whole vertical line is transposed in the
// cycle it is written, as the paper asks. n is a power of two from 1 to
// MAX_N (this design's restriction). clear starts a new slice; received and
// all_received track which vertical lines have arrived; rd_j selects the
// horizontal line shown combinationally on rd_line. Storage is not reset.
module v2h_transpose_buffer
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
  input  logic [$clog2(MAXN)-1:0] wr_i,
  input  logic [LINE_W-1:0]       wr_line,
  input  logic [$clog2(MAXN)-1:0] rd_j,
  output logic [LINE_W-1:0]       rd_line,
  output logic [MAXN-1:0]         received,
  output logic                    all_received
);
  localparam int unsigned LGL = $clog2(LINE_W);
  localparam int unsigned JW  = $clog2(MAXN);

  logic [LINE_W-1:0] hbuf [MAXN];
  logic [N_W-1:0]    n_q, n_eff;
  logic [2:0]        k;
  logic [MAXN-1:0]   nmask;
  logic [31:0]       epl;          // elements per horizontal line

  assign n_eff = clear ? n_in : n_q;
  assign k     = log2_n(n_eff);
  assign epl   = 32'(LINE_W) >> k;

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      for (int q = 0; q < LINE_W; q++) begin
        hbuf[JW'(32'(q) >> (LGL - 32'(k)))][LGL'(((32'(q) & (epl - 1)) << k) + 32'(wr_i))]
          <= wr_line[q];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n_q      <= N_W'(1);
      received <= '0;
    end else begin
      if (clear) n_q <= n_in;
      received <= (clear ? '0 : received) | (wr_valid ? (MAXN'(1) << wr_i) : '0);
    end
  end

  assign nmask        = (n_q >= N_W'(MAXN)) ? '1 : ((MAXN'(1) << n_q) - 1'b1);
  assign all_received = ((received & nmask) == nmask);
  assign rd_line      = hbuf[rd_j];
endmodule
