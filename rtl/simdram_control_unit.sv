// simdram_control_unit: the SIMDRAM control unit, an extension of the memory
// controller that runs uPrograms.
//
// It wires together the nine parts of the paper's control unit: the bbop
// FIFO (bbops from the CPU), the uProgram Scratchpad (uPrograms by opcode,
// filled from the uProgram Memory in DRAM through the fill port), the uOp
// Memory, the uPC, the uRegister Addressing Unit, the uRegister File, the
// Loop Counter and the uOp Processing FSM, which issues the ACTIVATE and
// PRECHARGE commands of each AAP/AP to the memory controller's request queue.
//
// Interface:
//   bbop_valid/bbop_ready/bbop   bbops from the CPU (ready = FIFO not full)
//   up_fill_*                    writes one 1024-bit uProgram into the
//                                scratchpad (preloading or miss fill)
//   up_req_valid/ready/idx       asks the uProgram Memory for a uProgram that
//                                the scratchpad does not hold
//   cmd_valid/cmd_ready/cmd      DRAM commands, row = {subarray, row}
//   busy, bbop_done, err         status (see uop_fsm)
// Timing: one bbop is executed at a time; the next one is decoded in the
// cycle after the last done uOp of the previous one.
module simdram_control_unit
  import simdram_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 1024,
  parameter int unsigned SP_ENTRIES = 16,
  parameter int unsigned LANES_P    = LANES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 bbop_valid,
  output logic                 bbop_ready,
  input  bbop_t                bbop,
  input  logic                 up_fill_en,
  input  logic [BBOP_OP_W-1:0] up_fill_idx,
  input  logic [UPROG_BITS-1:0] up_fill_data,
  output logic                 up_req_valid,
  input  logic                 up_req_ready,
  output logic [BBOP_OP_W-1:0] up_req_idx,
  output logic                 cmd_valid,
  input  logic                 cmd_ready,
  output dram_cmd_t            cmd,
  output logic                 busy,
  output logic                 bbop_done,
  output logic                 err
);
  localparam int unsigned PC_W = $clog2(UPROG_UOPS);
  localparam int unsigned RW   = ROW_ADDR_W;

  // bbop FIFO
  logic  fifo_full, fifo_empty, fifo_pop;
  bbop_t fifo_head;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;

  bbop_fifo #(.W(BBOP_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(bbop_valid), .wr_data(bbop), .full(fifo_full),
    .rd_en(fifo_pop), .rd_data(fifo_head), .empty(fifo_empty), .count(fifo_count)
  );
  assign bbop_ready = !fifo_full;

  // uProgram Scratchpad and uOp Memory
  logic [BBOP_OP_W-1:0]  sp_idx;
  logic [UPROG_BITS-1:0] sp_data;
  logic                  sp_valid, um_load;
  uop_t                  uop;
  logic [PC_W-1:0]       pc;

  uprog_scratchpad #(.ENTRIES(SP_ENTRIES), .BITS(UPROG_BITS)) u_sp (
    .clk, .rst_n,
    .fill_en(up_fill_en), .fill_idx(up_fill_idx[$clog2(SP_ENTRIES)-1:0]), .fill_data(up_fill_data),
    .rd_idx(sp_idx[$clog2(SP_ENTRIES)-1:0]), .rd_data(sp_data), .rd_valid(sp_valid)
  );

  uop_memory #(.UOPS(UPROG_UOPS), .UOP_W(UOP_W)) u_um (
    .clk, .load_en(um_load), .load_data(sp_data), .pc(pc), .uop(uop)
  );

  // uPC
  logic pc_clear, pc_branch, pc_inc;
  logic [PC_W-1:0] pc_target;
  upc #(.W(PC_W)) u_upc (
    .clk, .rst_n, .clear(pc_clear), .branch(pc_branch), .target(pc_target),
    .inc(pc_inc), .pc(pc)
  );

  // Loop Counter
  logic        lc_load, lc_dec, lc_last, lc_zero;
  logic [31:0] lc_value, lc_count;
  loop_counter #(.W(32)) u_lc (
    .clk, .rst_n, .load(lc_load), .load_value(lc_value), .en_decrement(lc_dec),
    .count(lc_count), .is_zero(lc_zero), .last(lc_last)
  );

  // uRegister Addressing Unit and File
  logic              au_load, au_shift, a_is_row, b_is_row, wr_en;
  logic [RW-1:0]     au_in0, au_in1, au_in2, au_out, a_row, b_row;
  logic [N_W-1:0]    au_n;
  logic [4:0]        a_idx, b_idx, rd_idx, wr_idx;
  logic [UREG_W-1:0] au_raw, rf_data, wr_data, esize;

  ureg_addressing_unit #(.RW(RW)) u_au (
    .clk, .rst_n,
    .load(au_load), .ld_in0(au_in0), .ld_in1(au_in1), .ld_in2(au_in2), .ld_out(au_out), .ld_n(au_n),
    .shift(au_shift),
    .we(wr_en), .wr_idx(wr_idx), .wr_data(wr_data),
    .raw_idx(rd_idx), .raw_data(au_raw),
    .esize(esize),
    .a_idx(a_idx), .a_row(a_row), .a_is_row(a_is_row),
    .b_idx(b_idx), .b_row(b_row), .b_is_row(b_is_row)
  );

  ureg_file #(.UREG_W(UREG_W)) u_rf (
    .clk, .rst_n, .rd_idx(rd_idx), .rd_data(rf_data),
    .we(wr_en), .wr_idx(wr_idx), .wr_data(wr_data), .esize(esize)
  );

  // uOp Processing FSM
  uop_fsm #(.LANES_P(LANES_P), .RW(RW), .PC_W(PC_W)) u_fsm (
    .clk, .rst_n,
    .fifo_empty(fifo_empty), .fifo_head(fifo_head), .fifo_pop(fifo_pop),
    .sp_idx(sp_idx), .sp_valid(sp_valid),
    .up_req_valid(up_req_valid), .up_req_ready(up_req_ready), .up_req_idx(up_req_idx),
    .um_load(um_load), .uop(uop),
    .pc_clear(pc_clear), .pc_branch(pc_branch), .pc_target(pc_target), .pc_inc(pc_inc),
    .lc_load(lc_load), .lc_value(lc_value), .lc_dec(lc_dec), .lc_last(lc_last),
    .au_load(au_load), .au_in0(au_in0), .au_in1(au_in1), .au_in2(au_in2), .au_out(au_out),
    .au_n(au_n), .au_shift(au_shift),
    .a_idx(a_idx), .a_row(a_row), .a_is_row(a_is_row),
    .b_idx(b_idx), .b_row(b_row), .b_is_row(b_is_row),
    .rd_idx(rd_idx), .au_raw(au_raw), .rf_data(rf_data),
    .wr_en(wr_en), .wr_idx(wr_idx), .wr_data(wr_data),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
    .busy(busy), .bbop_done(bbop_done), .err(err)
  );

  // the FSM only decrements a loaded counter
  a_lc_dec: assert property (@(posedge clk) disable iff (!rst_n) lc_dec |-> !lc_zero)
    else $error("control unit: loop counter decremented at zero");
endmodule
