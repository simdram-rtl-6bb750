// fetch_unit: reads a whole object slice from DRAM for the CPU.
//
// When an LLC read hits in the Object Tracker, start (object base, slice
// number, n) makes the Fetch Unit issue read requests for all n vertically
// laid out cache lines of that slice (vertical line i at
// simdram_pkg::vline_addr), tagged so that the transposition unit routes
// the responses back here. Each response is passed to the vertical-to-
// horizontal transpose buffer as line i. The memory controller is assumed
// to answer in request order (this design's choice; the paper does not say),
// so i is the number of responses received so far. done pulses one cycle
// after the n-th response; start is ignored while busy.
module fetch_unit
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
  output logic                    req_valid,
  input  logic                    req_ready,
  output logic [PA_W-1:0]         req_addr,
  input  logic                    resp_valid,
  input  logic [LINE_W-1:0]       resp_data,
  output logic                    buf_wr,
  output logic [$clog2(MAXN)-1:0] buf_wr_i,
  output logic [LINE_W-1:0]       buf_line,
  output logic                    busy,
  output logic                    done
);
  logic [PA_W-1:0] base_q, slice_q;
  logic [N_W-1:0]  n_q, sent, got;

  assign req_valid = busy && (sent != n_q);
  assign req_addr  = vline_addr(base_q, slice_q, sent, n_q);
  assign buf_wr    = busy && resp_valid;
  assign buf_wr_i  = got[$clog2(MAXN)-1:0];
  assign buf_line  = resp_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      base_q  <= '0;
      slice_q <= '0;
      n_q     <= '0;
      sent    <= '0;
      got     <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy    <= 1'b1;
          base_q  <= base;
          slice_q <= slice;
          n_q     <= n;
          sent    <= '0;
          got     <= '0;
        end
      end else begin
        if (req_valid && req_ready) sent <= sent + 1'b1;
        if (resp_valid) begin
          got <= got + 1'b1;
          if (got == n_q - 1'b1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  a_resp_after_req: assert property (@(posedge clk) disable iff (!rst_n)
    busy && resp_valid |-> got < sent)
    else $error("fetch_unit: response without request");
endmodule
