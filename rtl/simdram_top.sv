// simdram_top: the memory-controller side of SIMDRAM.
//
// SIMDRAM computes on data where it lies in DRAM: a row activation of three
// rows at once makes every bitline of a subarray compute the majority of
// three bits, and a row of dual-contact cells gives their negation, so a
// 65536-column row becomes 65536 one-bit SIMD lanes. Data is kept vertically
// (bit i of many elements in one row), so an n-bit operation is a loop over
// n bit rows. This top holds the two pieces of logic the design adds to the
// memory controller:
//  * simdram_control_unit runs uPrograms: it takes bbop instructions from
//    the CPU, loads the matching uProgram and turns its AAP/AP uOps into
//    ACTIVATE/PRECHARGE commands for the memory controller;
//  * transposition_unit sits between the LLC and the memory controller and
//    converts SIMDRAM objects between the horizontal layout of the cache and
//    the vertical layout of DRAM.
// The DRAM itself (subarrays with the B-group row decoder), the memory
// controller that schedules commands, the LLC and the uProgram Memory region
// in DRAM are outside; their connections are the ports below.
// Ports: bbop_* (CPU), trsp_init_* (bbop_trsp_init), up_* (uProgram Memory),
// cmd_* (DRAM commands of the control unit), wb_*/inv_*/rd_*/llc_rdata_*
// (LLC), mcw_*/mcr_*/mcresp_* (cache-line traffic to the memory controller),
// status and events. All channels are valid/ready.
module simdram_top
  import simdram_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 1024,
  parameter int unsigned SP_ENTRIES = 16,
  parameter int unsigned LANES_P    = LANES,
  parameter int unsigned OT_ENTRIES = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // CPU: bbop instructions
  input  logic                  bbop_valid,
  output logic                  bbop_ready,
  input  bbop_t                 bbop,
  // CPU/OS: bbop_trsp_init
  input  logic                  trsp_init_valid,
  input  logic [PA_W-1:0]       trsp_init_base,
  input  logic [31:0]           trsp_init_size,
  input  logic [N_W-1:0]        trsp_init_n,
  // uProgram Memory
  input  logic                  up_fill_en,
  input  logic [BBOP_OP_W-1:0]  up_fill_idx,
  input  logic [UPROG_BITS-1:0] up_fill_data,
  output logic                  up_req_valid,
  input  logic                  up_req_ready,
  output logic [BBOP_OP_W-1:0]  up_req_idx,
  // DRAM commands
  output logic                  cmd_valid,
  input  logic                  cmd_ready,
  output dram_cmd_t             cmd,
  // LLC
  input  logic                  wb_valid,
  output logic                  wb_ready,
  input  logic [PA_W-1:0]       wb_addr,
  input  logic [LINE_BITS-1:0]  wb_data,
  output logic                  inv_valid,
  input  logic                  inv_ready,
  output logic [PA_W-1:0]       inv_addr,
  input  logic                  rd_valid,
  output logic                  rd_ready,
  input  logic [PA_W-1:0]       rd_addr,
  output logic                  llc_rdata_valid,
  input  logic                  llc_rdata_ready,
  output logic [PA_W-1:0]       llc_rdata_addr,
  output logic [LINE_BITS-1:0]  llc_rdata,
  output logic                  llc_rdata_prefetch,
  // memory controller, cache-line traffic
  output logic                  mcw_valid,
  input  logic                  mcw_ready,
  output logic [PA_W-1:0]       mcw_addr,
  output logic [LINE_BITS-1:0]  mcw_data,
  output logic                  mcr_valid,
  input  logic                  mcr_ready,
  output logic [PA_W-1:0]       mcr_addr,
  output logic                  mcr_tag,
  input  logic                  mcresp_valid,
  output logic                  mcresp_ready,
  input  logic [PA_W-1:0]       mcresp_addr,
  input  logic [LINE_BITS-1:0]  mcresp_data,
  input  logic                  mcresp_tag,
  // status and events
  output logic                  cu_busy,
  output logic                  bbop_done,
  output logic                  cu_err,
  output logic                  ev_wb_hit,
  output logic                  ev_wb_miss,
  output logic                  ev_rd_hit,
  output logic                  ev_rd_miss
);
  simdram_control_unit #(.FIFO_DEPTH(FIFO_DEPTH), .SP_ENTRIES(SP_ENTRIES), .LANES_P(LANES_P)) u_cu (
    .clk, .rst_n,
    .bbop_valid, .bbop_ready, .bbop,
    .up_fill_en, .up_fill_idx, .up_fill_data,
    .up_req_valid, .up_req_ready, .up_req_idx,
    .cmd_valid, .cmd_ready, .cmd,
    .busy(cu_busy), .bbop_done, .err(cu_err)
  );

  transposition_unit #(.OT_ENTRIES(OT_ENTRIES), .LINE_W(LINE_BITS), .MAXN(MAX_N)) u_tu (
    .clk, .rst_n,
    .init_valid(trsp_init_valid), .init_base(trsp_init_base),
    .init_size(trsp_init_size), .init_n(trsp_init_n),
    .wb_valid, .wb_ready, .wb_addr, .wb_data,
    .inv_valid, .inv_ready, .inv_addr,
    .rd_valid, .rd_ready, .rd_addr,
    .llc_rdata_valid, .llc_rdata_ready, .llc_rdata_addr, .llc_rdata, .llc_rdata_prefetch,
    .mcw_valid, .mcw_ready, .mcw_addr, .mcw_data,
    .mcr_valid, .mcr_ready, .mcr_addr, .mcr_tag,
    .mcresp_valid, .mcresp_ready, .mcresp_addr, .mcresp_data, .mcresp_tag,
    .ev_wb_hit, .ev_wb_miss, .ev_rd_hit, .ev_rd_miss
  );
endmodule
