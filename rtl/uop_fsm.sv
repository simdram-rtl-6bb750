// uop_fsm: the uOp Processing FSM of the SIMDRAM control unit.
//
// Executes the queued bbops one at a time in the paper's four stages:
//  1. DECODE (in IDLE, the cycle the FIFO head is popped): point the
//     scratchpad at the bbop opcode, load the Loop Counter with
//     ceil(size / LANES), load the operand base rows and the element size
//     into the uRegister Addressing Unit and B22.
//  2. LOAD: copy the scratchpad's uProgram into the uOp Memory and clear the
//     uPC. If the scratchpad does not hold it, first ask the uProgram Memory
//     for it (REQ, WAIT_FILL) - this miss path is this design's own.
//  3. FETCH: read the uOp at the uPC and resolve its uRegisters to rows.
//  4. EXEC: AAP dst,src is sent to the memory controller as ACTIVATE src,
//     ACTIVATE dst, PRECHARGE; AP r as ACTIVATE r, PRECHARGE (a triple-row
//     activation when r names three rows). addi/subi/comp/module update one
//     uRegister; bnez branches to its immediate when the register is not 0;
//     done decrements the Loop Counter and, unless that was the last chunk,
//     moves the base rows on by n, sets B22 back to n and restarts the
//     uProgram at uOp 0. After the last chunk the FSM returns to IDLE and
//     pulses bbop_done.
// The paper gives the opcodes and field widths but not what comp and module
// compute, nor the fields of bnez; here comp sets the register to
// (reg < imm), module to reg % imm, and bnez uses the arithmetic format with
// the branch target in the immediate. Commands leave on a valid/ready port,
// one per accepted handshake; cmd stays stable while cmd_valid waits for
// cmd_ready. An AAP takes 3 command handshakes plus one FETCH cycle, an AP
// 2 plus one, every other uOp two cycles. A uOp that names a non-row
// uRegister as a row sets err and is skipped.
module uop_fsm
  import simdram_pkg::*;
#(
  parameter int unsigned LANES_P = LANES,
  parameter int unsigned RW      = ROW_ADDR_W,
  parameter int unsigned PC_W    = $clog2(UPROG_UOPS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // bbop FIFO
  input  logic                 fifo_empty,
  input  bbop_t                fifo_head,
  output logic                 fifo_pop,
  // uProgram Scratchpad and uProgram Memory
  output logic [BBOP_OP_W-1:0] sp_idx,
  input  logic                 sp_valid,
  output logic                 up_req_valid,
  input  logic                 up_req_ready,
  output logic [BBOP_OP_W-1:0] up_req_idx,
  // uOp Memory and uPC
  output logic                 um_load,
  input  uop_t                 uop,
  output logic                 pc_clear,
  output logic                 pc_branch,
  output logic [PC_W-1:0]      pc_target,
  output logic                 pc_inc,
  // Loop Counter
  output logic                 lc_load,
  output logic [31:0]          lc_value,
  output logic                 lc_dec,
  input  logic                 lc_last,
  // uRegister Addressing Unit
  output logic                 au_load,
  output logic [RW-1:0]        au_in0,
  output logic [RW-1:0]        au_in1,
  output logic [RW-1:0]        au_in2,
  output logic [RW-1:0]        au_out,
  output logic [N_W-1:0]       au_n,
  output logic                 au_shift,
  output logic [4:0]           a_idx,
  input  logic [RW-1:0]        a_row,
  input  logic                 a_is_row,
  output logic [4:0]           b_idx,
  input  logic [RW-1:0]        b_row,
  input  logic                 b_is_row,
  // uRegister read (value of B18..B31) and write
  output logic [4:0]           rd_idx,
  input  logic [UREG_W-1:0]    au_raw,
  input  logic [UREG_W-1:0]    rf_data,
  output logic                 wr_en,
  output logic [4:0]           wr_idx,
  output logic [UREG_W-1:0]    wr_data,
  // to the memory controller's request queue
  output logic                 cmd_valid,
  input  logic                 cmd_ready,
  output dram_cmd_t            cmd,
  // status
  output logic                 busy,
  output logic                 bbop_done,
  output logic                 err
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_REQ, S_WAIT_FILL, S_FETCH, S_EXEC} state_e;

  localparam int unsigned LG_LANES = $clog2(LANES_P);

  state_e               state;
  logic [BBOP_OP_W-1:0] op_q;
  logic [N_W-1:0]       n_q;
  uop_t                 uop_q;
  logic [RW-1:0]        dst_row_q, src_row_q;
  logic                 rows_ok_q;
  logic [1:0]           step;

  // value of the uRegister named by the current uOp
  logic [UREG_W-1:0] rval, result, imm;
  assign rd_idx = uop_q.r1;
  assign rval   = (uop_q.r1 >= 5'(UREG_ESIZE)) ? rf_data : au_raw;
  assign imm    = UREG_W'(uop_q.lo);

  always_comb begin
    unique case (uop_q.op)
      UOP_ADDI:   result = rval + imm;
      UOP_SUBI:   result = rval - imm;
      UOP_COMP:   result = (rval < imm) ? UREG_W'(1) : '0;
      UOP_MODULE: result = (imm == '0) ? rval : rval % imm;
      default:    result = rval;
    endcase
  end

  // decode of the FIFO head: number of row-sized chunks
  logic [31:0] iters;
  assign iters = (fifo_head.size >> LG_LANES) + 32'(|fifo_head.size[LG_LANES-1:0]);

  function automatic logic [RW-1:0] row_of(input logic [PA_W-1:0] pa);
    return pa[PA_W-1 -: RW];
  endfunction

  assign sp_idx     = op_q;
  assign up_req_idx = op_q;
  assign a_idx      = uop.r1;
  assign b_idx      = uop_src(uop);
  assign lc_value   = iters;
  assign au_in0     = row_of(fifo_head.src1);
  assign au_in1     = row_of(fifo_head.src2);
  assign au_in2     = row_of(fifo_head.src3);
  assign au_out     = row_of(fifo_head.dst);
  assign au_n       = fifo_head.n;
  assign busy       = (state != S_IDLE);
  assign pc_target  = uop_q.lo[PC_W-1:0];

  logic is_cmd_uop, last_step;
  assign is_cmd_uop = (uop_q.op == UOP_AAP || uop_q.op == UOP_AP) && rows_ok_q;
  assign last_step  = (uop_q.op == UOP_AAP) ? (step == 2'd2) : (step == 2'd1);

  always_comb begin
    fifo_pop     = 1'b0;
    up_req_valid = 1'b0;
    um_load      = 1'b0;
    pc_clear     = 1'b0;
    pc_branch    = 1'b0;
    pc_inc       = 1'b0;
    lc_load      = 1'b0;
    lc_dec       = 1'b0;
    au_load      = 1'b0;
    au_shift     = 1'b0;
    wr_en        = 1'b0;
    wr_idx       = 5'(UREG_ESIZE);
    wr_data      = UREG_W'(n_q);
    cmd_valid    = 1'b0;
    cmd          = '{kind: CMD_PRE, row: '0};
    unique case (state)
      S_IDLE: if (!fifo_empty) begin
        fifo_pop = 1'b1;
        if (iters != '0) begin
          lc_load = 1'b1;
          au_load = 1'b1;
          wr_en   = 1'b1;
          wr_data = UREG_W'(fifo_head.n);
        end
      end
      S_LOAD: if (sp_valid) begin
        um_load  = 1'b1;
        pc_clear = 1'b1;
      end
      S_REQ: up_req_valid = 1'b1;
      S_EXEC: begin
        if (is_cmd_uop) begin
          cmd_valid = 1'b1;
          if (uop_q.op == UOP_AAP)
            cmd = (step == 2'd0) ? '{kind: CMD_ACT, row: src_row_q} :
                  (step == 2'd1) ? '{kind: CMD_ACT, row: dst_row_q} :
                                   '{kind: CMD_PRE, row: dst_row_q};
          else
            cmd = (step == 2'd0) ? '{kind: CMD_ACT, row: dst_row_q} :
                                   '{kind: CMD_PRE, row: dst_row_q};
          pc_inc = cmd_ready && last_step;
        end else begin
          unique case (uop_q.op)
            UOP_ADDI, UOP_SUBI, UOP_COMP, UOP_MODULE: begin
              wr_en   = 1'b1;
              wr_idx  = uop_q.r1;
              wr_data = result;
              pc_inc  = 1'b1;
            end
            UOP_BNEZ: begin
              pc_branch = (rval != '0);
              pc_inc    = (rval == '0);
            end
            UOP_DONE: begin
              lc_dec = 1'b1;
              if (!lc_last) begin
                au_shift = 1'b1;
                wr_en    = 1'b1;      // B22 back to n
                pc_clear = 1'b1;
              end
            end
            default: pc_inc = 1'b1;   // row uOp naming a non-row register
          endcase
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      op_q      <= '0;
      n_q       <= '0;
      uop_q     <= '{op: UOP_DONE, r1: '0, lo: '0};
      dst_row_q <= '0;
      src_row_q <= '0;
      rows_ok_q <= 1'b0;
      step      <= '0;
      bbop_done <= 1'b0;
      err       <= 1'b0;
    end else begin
      bbop_done <= 1'b0;
      unique case (state)
        S_IDLE: if (!fifo_empty) begin
          op_q <= fifo_head.op;
          n_q  <= fifo_head.n;
          if (iters != '0) state <= S_LOAD;
          else             bbop_done <= 1'b1;
        end
        S_LOAD:      state <= sp_valid ? S_FETCH : S_REQ;
        S_REQ:       if (up_req_ready) state <= S_WAIT_FILL;
        S_WAIT_FILL: if (sp_valid) state <= S_LOAD;
        S_FETCH: begin
          uop_q     <= uop;
          dst_row_q <= a_row;
          src_row_q <= b_row;
          rows_ok_q <= a_is_row && (b_is_row || uop.op != UOP_AAP);
          if ((uop.op == UOP_AAP || uop.op == UOP_AP) &&
              !(a_is_row && (b_is_row || uop.op != UOP_AAP)))
            err <= 1'b1;
          step  <= '0;
          state <= S_EXEC;
        end
        S_EXEC: begin
          if (is_cmd_uop) begin
            if (cmd_ready) begin
              step <= step + 1'b1;
              if (last_step) state <= S_FETCH;
            end
          end else if (uop_q.op == UOP_DONE && lc_last) begin
            state     <= S_IDLE;
            bbop_done <= 1'b1;
          end else begin
            state <= S_FETCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a command must not change while it waits to be accepted
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd))
    else $error("uop_fsm: command changed while waiting");
endmodule
