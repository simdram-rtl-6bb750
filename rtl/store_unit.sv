// store_unit: writes a transposed object slice back to DRAM.
//
// Once the horizontal-to-vertical transpose buffer holds all n vertical
// lines of a slice, start (with the object base, the slice number and n)
// makes the Store Unit send one cache-line write per vertical line i =
// 0..n-1 to the memory controller, at the address of that line in the
// vertical layout (simdram_pkg::vline_addr). It drives buf_rd_i to read the
// line from the buffer and holds address and data stable while mc_valid
// waits for mc_ready. done pulses for one cycle after the last write is
// accepted. n writes take n accepted handshakes; start is ignored while busy.
module store_unit
  import simdram_pkg::*;
#(
  parameter int unsigned LINE_W = LINE_BITS,
  parameter int unsigned MAXN   = MAX_N
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [PA_W-1:0]         base,
  input  logic [PA_W-1:0]         slice,
  input  logic [N_W-1:0]          n,
  output logic [$clog2(MAXN)-1:0] buf_rd_i,
  input  logic [LINE_W-1:0]       buf_line,
  output logic                    mc_valid,
  input  logic                    mc_ready,
  output logic [PA_W-1:0]         mc_addr,
  output logic [LINE_W-1:0]       mc_data,
  output logic                    busy,
  output logic                    done
);
  logic [PA_W-1:0] base_q, slice_q;
  logic [N_W-1:0]  n_q, i_q;

  assign buf_rd_i = i_q[$clog2(MAXN)-1:0];
  assign mc_valid = busy;
  assign mc_addr  = vline_addr(base_q, slice_q, i_q, n_q);
  assign mc_data  = buf_line;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      base_q  <= '0;
      slice_q <= '0;
      n_q     <= '0;
      i_q     <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy    <= 1'b1;
          base_q  <= base;
          slice_q <= slice;
          n_q     <= n;
          i_q     <= '0;
        end
      end else if (mc_ready) begin
        if (i_q == n_q - 1'b1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        i_q <= i_q + 1'b1;
      end
    end
  end
endmodule
