// transposition_unit: the data transposition unit between the last-level
// cache (LLC) and the memory controller.
//
// SIMDRAM computes on vertically laid out data (bit i of many elements in
// one DRAM row) while the CPU expects ordinary horizontal data. This unit
// keeps every SIMDRAM object horizontal while it is in the cache and
// vertical while it is in DRAM, working one object slice (n cache lines,
// 512 elements of n bits) at a time:
//  * bbop_trsp_init (init_*) registers an object in the Object Tracker.
//  * Writeback path. An LLC writeback that misses in the Object Tracker goes
//    straight to the memory controller. One that hits starts a slice: the
//    line goes into the horizontal-to-vertical transpose buffer and the
//    unit sends invalidation requests (inv_*) for the other n-1 lines of the
//    slice, which the LLC answers by writing them back, dirty or not. When
//    all n lines are in, the Store Unit writes the n vertical lines.
//    While a slice is being collected, writebacks of other slices of SIMDRAM
//    objects wait; writebacks of ordinary data still pass.
//  * Read path. An LLC read that misses goes to the memory controller and
//    its data returns to the LLC unchanged. One that hits makes the Fetch
//    Unit read the n vertical lines of the slice; the vertical-to-
//    horizontal transpose buffer rebuilds the n horizontal lines, which are
//    returned to the LLC one per cycle, the requested one with
//    llc_rdata_prefetch low and the other n-1 with it high (inserted like
//    prefetches).
// These steps and blocks follow the paper; the handshakes (valid/ready on
// every channel), the one-slice-at-a-time policy of each path, the tag that
// marks read responses for the Fetch Unit and the in-order responses of the
// memory controller are this design's choices. Addresses are physical byte
// addresses of cache lines; the vertical layout is simdram_pkg::vline_addr.
module transposition_unit
  import simdram_pkg::*;
#(
  parameter int unsigned OT_ENTRIES = 1024,
  parameter int unsigned LINE_W     = LINE_BITS,
  parameter int unsigned MAXN       = MAX_N
) (
  input  logic              clk,
  input  logic              rst_n,
  // bbop_trsp_init
  input  logic              init_valid,
  input  logic [PA_W-1:0]   init_base,
  input  logic [31:0]       init_size,
  input  logic [N_W-1:0]    init_n,
  // LLC writebacks
  input  logic              wb_valid,
  output logic              wb_ready,
  input  logic [PA_W-1:0]   wb_addr,
  input  logic [LINE_W-1:0] wb_data,
  // invalidations to the LLC
  output logic              inv_valid,
  input  logic              inv_ready,
  output logic [PA_W-1:0]   inv_addr,
  // LLC reads
  input  logic              rd_valid,
  output logic              rd_ready,
  input  logic [PA_W-1:0]   rd_addr,
  // read data to the LLC
  output logic              llc_rdata_valid,
  input  logic              llc_rdata_ready,
  output logic [PA_W-1:0]   llc_rdata_addr,
  output logic [LINE_W-1:0] llc_rdata,
  output logic              llc_rdata_prefetch,
  // memory controller: writes
  output logic              mcw_valid,
  input  logic              mcw_ready,
  output logic [PA_W-1:0]   mcw_addr,
  output logic [LINE_W-1:0] mcw_data,
  // memory controller: read requests (tag 1 = Fetch Unit)
  output logic              mcr_valid,
  input  logic              mcr_ready,
  output logic [PA_W-1:0]   mcr_addr,
  output logic              mcr_tag,
  // memory controller: read responses, in request order
  input  logic              mcresp_valid,
  output logic              mcresp_ready,
  input  logic [PA_W-1:0]   mcresp_addr,
  input  logic [LINE_W-1:0] mcresp_data,
  input  logic              mcresp_tag,
  // events (one-cycle pulses)
  output logic              ev_wb_hit,
  output logic              ev_wb_miss,
  output logic              ev_rd_hit,
  output logic              ev_rd_miss
);
  localparam int unsigned JW = $clog2(MAXN);

  // ------------------------------------------------------ Object Tracker
  logic            ot_wb_hit, ot_rd_hit;
  logic [PA_W-1:0] ot_wb_base, ot_rd_base;
  logic [N_W-1:0]  ot_wb_n, ot_rd_n;

  object_tracker #(.ENTRIES(OT_ENTRIES)) u_ot (
    .clk, .rst_n,
    .ins_valid(init_valid), .ins_base(init_base), .ins_size(init_size), .ins_n(init_n),
    .wb_addr(wb_addr), .wb_hit(ot_wb_hit), .wb_base(ot_wb_base), .wb_n(ot_wb_n),
    .rd_addr(rd_addr), .rd_hit(ot_rd_hit), .rd_base(ot_rd_base), .rd_n(ot_rd_n)
  );

  // slice number and line-in-slice of an address inside an object
  function automatic logic [PA_W+N_W-1:0] locate(input logic [PA_W-1:0] a,
                                                 input logic [PA_W-1:0] b,
                                                 input logic [N_W-1:0]  n);
    logic [PA_W-1:0] line;
    logic [2:0]      k;
    line = (a - b) >> $clog2(LINE_BYTES);
    k    = log2_n(n);
    return {line >> k, N_W'(line & PA_W'(n - 1'b1))};
  endfunction

  logic [PA_W-1:0] wb_slice, rd_slice;
  logic [N_W-1:0]  wb_j, rd_j;
  assign {wb_slice, wb_j} = locate(wb_addr, ot_wb_base, ot_wb_n);
  assign {rd_slice, rd_j} = locate(rd_addr, ot_rd_base, ot_rd_n);

  // ------------------------------------------------------ writeback path
  typedef enum logic [1:0] {WB_IDLE, WB_COLLECT, WB_STORE} wb_state_e;
  wb_state_e       wb_state;
  logic [PA_W-1:0] wbs_base, wbs_slice;
  logic [N_W-1:0]  wbs_n, wbs_j0, inv_k;

  logic            h2v_clear, h2v_wr, h2v_all;
  logic [JW-1:0]   h2v_rd_i;
  logic [LINE_W-1:0] h2v_line;
  logic [MAXN-1:0] h2v_recv;

  logic            su_start, su_busy, su_done, su_valid;
  logic [PA_W-1:0] su_addr;
  logic [LINE_W-1:0] su_data;

  logic same_slice, wb_fwd, wb_take;
  assign same_slice = ot_wb_hit && (ot_wb_base == wbs_base) && (wb_slice == wbs_slice);

  always_comb begin
    wb_fwd    = 1'b0;   // forward an ordinary writeback to the memory controller
    wb_take   = 1'b0;   // take a SIMDRAM line into the transpose buffer
    h2v_clear = 1'b0;
    unique case (wb_state)
      WB_IDLE: if (wb_valid) begin
        if (ot_wb_hit) begin
          wb_take   = 1'b1;
          h2v_clear = 1'b1;
        end else wb_fwd = 1'b1;
      end
      WB_COLLECT: if (wb_valid) begin
        if (same_slice)      wb_take = 1'b1;
        else if (!ot_wb_hit) wb_fwd  = 1'b1;
      end
      default: ;
    endcase
  end

  assign h2v_wr   = wb_take;
  assign wb_ready = wb_take || (wb_fwd && mcw_ready);

  assign inv_valid = (wb_state == WB_COLLECT) && (inv_k < wbs_n) && (inv_k != wbs_j0);
  assign inv_addr  = hline_addr(wbs_base, wbs_slice, inv_k, wbs_n);

  assign su_start  = (wb_state == WB_COLLECT) && h2v_all && (inv_k >= wbs_n);

  assign mcw_valid = (wb_state == WB_STORE) ? su_valid : wb_fwd;
  assign mcw_addr  = (wb_state == WB_STORE) ? su_addr  : wb_addr;
  assign mcw_data  = (wb_state == WB_STORE) ? su_data  : wb_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wb_state  <= WB_IDLE;
      wbs_base  <= '0;
      wbs_slice <= '0;
      wbs_n     <= N_W'(1);
      wbs_j0    <= '0;
      inv_k     <= '0;
    end else begin
      unique case (wb_state)
        WB_IDLE: if (wb_take) begin
          wbs_base  <= ot_wb_base;
          wbs_slice <= wb_slice;
          wbs_n     <= ot_wb_n;
          wbs_j0    <= wb_j;
          inv_k     <= '0;
          wb_state  <= WB_COLLECT;
        end
        WB_COLLECT: begin
          if (inv_k < wbs_n && (inv_k == wbs_j0 || inv_ready)) inv_k <= inv_k + 1'b1;
          if (su_start) wb_state <= WB_STORE;
        end
        WB_STORE: if (su_done) wb_state <= WB_IDLE;
        default: wb_state <= WB_IDLE;
      endcase
    end
  end

  h2v_transpose_buffer #(.LINE_W(LINE_W), .MAXN(MAXN)) u_h2v (
    .clk, .rst_n, .clear(h2v_clear), .n_in(ot_wb_n),
    .wr_valid(h2v_wr), .wr_j(wb_j[JW-1:0]), .wr_line(wb_data),
    .rd_i(h2v_rd_i), .rd_line(h2v_line), .received(h2v_recv), .all_received(h2v_all)
  );

  store_unit #(.LINE_W(LINE_W), .MAXN(MAXN)) u_su (
    .clk, .rst_n, .start(su_start), .base(wbs_base), .slice(wbs_slice), .n(wbs_n),
    .buf_rd_i(h2v_rd_i), .buf_line(h2v_line),
    .mc_valid(su_valid), .mc_ready(mcw_ready && wb_state == WB_STORE),
    .mc_addr(su_addr), .mc_data(su_data), .busy(su_busy), .done(su_done)
  );

  // ------------------------------------------------------------ read path
  typedef enum logic [1:0] {RD_IDLE, RD_FETCH, RD_SEND} rd_state_e;
  rd_state_e       rd_state;
  logic [PA_W-1:0] rds_base, rds_slice;
  logic [N_W-1:0]  rds_n, rds_j0, send_j;

  logic            fu_start, fu_req_valid, fu_buf_wr, fu_busy, fu_done;
  logic [PA_W-1:0] fu_req_addr;
  logic [JW-1:0]   fu_buf_i;
  logic [LINE_W-1:0] fu_buf_line, v2h_line;
  logic [MAXN-1:0] v2h_recv;
  logic            v2h_all;

  logic rd_fwd;
  assign fu_start = (rd_state == RD_IDLE) && rd_valid && ot_rd_hit;
  assign rd_fwd   = (rd_state == RD_IDLE) && rd_valid && !ot_rd_hit;
  assign rd_ready = fu_start || (rd_fwd && mcr_ready);

  assign mcr_valid = (rd_state == RD_FETCH) ? fu_req_valid : rd_fwd;
  assign mcr_addr  = (rd_state == RD_FETCH) ? fu_req_addr  : rd_addr;
  assign mcr_tag   = (rd_state == RD_FETCH);

  // responses: tag 1 always to the Fetch Unit; tag 0 to the LLC unless the
  // LLC port is busy returning a transposed slice
  logic direct_ok;
  assign direct_ok    = (rd_state != RD_SEND) && !mcresp_tag && llc_rdata_ready;
  assign mcresp_ready = mcresp_tag || direct_ok;

  assign llc_rdata_valid    = (rd_state == RD_SEND) || (mcresp_valid && !mcresp_tag && rd_state != RD_SEND);
  assign llc_rdata_addr     = (rd_state == RD_SEND) ? hline_addr(rds_base, rds_slice, send_j, rds_n) : mcresp_addr;
  assign llc_rdata          = (rd_state == RD_SEND) ? v2h_line : mcresp_data;
  assign llc_rdata_prefetch = (rd_state == RD_SEND) && (send_j != rds_j0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_state  <= RD_IDLE;
      rds_base  <= '0;
      rds_slice <= '0;
      rds_n     <= N_W'(1);
      rds_j0    <= '0;
      send_j    <= '0;
    end else begin
      unique case (rd_state)
        RD_IDLE: if (fu_start) begin
          rds_base  <= ot_rd_base;
          rds_slice <= rd_slice;
          rds_n     <= ot_rd_n;
          rds_j0    <= rd_j;
          rd_state  <= RD_FETCH;
        end
        RD_FETCH: if (fu_done) begin
          send_j   <= '0;
          rd_state <= RD_SEND;
        end
        RD_SEND: if (llc_rdata_ready) begin
          send_j <= send_j + 1'b1;
          if (send_j == rds_n - 1'b1) rd_state <= RD_IDLE;
        end
        default: rd_state <= RD_IDLE;
      endcase
    end
  end

  fetch_unit #(.LINE_W(LINE_W), .MAXN(MAXN)) u_fu (
    .clk, .rst_n, .start(fu_start), .base(ot_rd_base), .slice(rd_slice), .n(ot_rd_n),
    .req_valid(fu_req_valid), .req_ready(mcr_ready && rd_state == RD_FETCH), .req_addr(fu_req_addr),
    .resp_valid(mcresp_valid && mcresp_tag), .resp_data(mcresp_data),
    .buf_wr(fu_buf_wr), .buf_wr_i(fu_buf_i), .buf_line(fu_buf_line),
    .busy(fu_busy), .done(fu_done)
  );

  v2h_transpose_buffer #(.LINE_W(LINE_W), .MAXN(MAXN)) u_v2h (
    .clk, .rst_n, .clear(fu_start), .n_in(ot_rd_n),
    .wr_valid(fu_buf_wr), .wr_i(fu_buf_i), .wr_line(fu_buf_line),
    .rd_j(send_j[JW-1:0]), .rd_line(v2h_line), .received(v2h_recv), .all_received(v2h_all)
  );

  // ---------------------------------------------------------------- events
  assign ev_wb_hit  = wb_take;
  assign ev_wb_miss = wb_fwd && mcw_ready;
  assign ev_rd_hit  = fu_start;
  assign ev_rd_miss = rd_fwd && mcr_ready;

  a_store_complete: assert property (@(posedge clk) disable iff (!rst_n)
    su_start |-> h2v_all)
    else $error("transposition_unit: slice stored before all lines arrived");
  a_fetch_complete: assert property (@(posedge clk) disable iff (!rst_n)
    fu_done |=> v2h_all)
    else $error("transposition_unit: slice returned before all lines arrived");
endmodule
