// ambit_dram_model: behavioural model of one compute-capable DRAM subarray
// behind a memory controller, for simulation only.
//
// The subarray has 1024 rows of LANES bits: D-group rows 0..1005 hold data,
// rows 1006/1007 are the constant rows C0 (all 0) and C1 (all 1), and rows
// 1008..1023 are the sixteen addresses of the B-group row decoder, which
// reach the compute rows T0..T3 and the dual-contact rows DCC0/DCC1:
//   B0..B3 T0..T3, B4/B5 DCC0 true/negated, B6/B7 DCC1 true/negated,
//   B8 {~DCC0,T0}  B9 {~DCC1,T1}  B10 {T2,T3}  B11 {T0,T3}
//   B12 {T0,T1,T2} B13 {T0,T1,T3} B14 {DCC0,T1,T3} B15 {DCC1,T0,T2}
// ACTIVATE on a closed subarray senses the selected rows: one row gives its
// value (its complement through a negated wordline), three rows give their
// bitwise majority (triple-row activation); the sensed value is then
// restored into every selected cell (complemented through a negated
// wordline). ACTIVATE on an open subarray overwrites the newly selected
// rows with the row buffer (row copy). PRECHARGE closes the subarray.
// Cache-line writes and reads address row = addr[31:13], column line =
// addr[12:6] of subarray 0; reads are answered in request order, carrying
// back the request's address and tag. Command and read-request acceptance
// stall at random to exercise back-pressure. Counters of the activity are
// public for the testbenches.
module ambit_dram_model
  import simdram_pkg::*;
#(
  parameter int unsigned LANES_M = LANES,
  parameter int unsigned STALL   = 1      // 1: random back-pressure
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  dram_cmd_t            cmd,
  input  logic                 mcw_valid,
  output logic                 mcw_ready,
  input  logic [PA_W-1:0]      mcw_addr,
  input  logic [LINE_BITS-1:0] mcw_data,
  input  logic                 mcr_valid,
  output logic                 mcr_ready,
  input  logic [PA_W-1:0]      mcr_addr,
  input  logic                 mcr_tag,
  output logic                 mcresp_valid,
  input  logic                 mcresp_ready,
  output logic [PA_W-1:0]      mcresp_addr,
  output logic [LINE_BITS-1:0] mcresp_data,
  output logic                 mcresp_tag
);
  logic [LANES_M-1:0] mem [SA_ROWS];
  logic [LANES_M-1:0] rowbuf;
  bit                 open_q;

  int unsigned n_act, n_pre, n_tra, n_copy, n_neg, n_multi_dst, n_errors, n_stall;

  typedef struct { int unsigned row; bit neg; } wl_t;

  // wordlines raised by one row address (rows 1008.. name B-group rows;
  // T0..T3 are rows 1008..1011, DCC0 row 1012, DCC1 row 1013 of mem[])
  function automatic void decode(input int unsigned r, ref wl_t w[$]);
    localparam int unsigned T0 = 1008, T1 = 1009, T2 = 1010, T3 = 1011, D0 = 1012, D1 = 1013;
    w.delete();
    if (r < ROW_B_BASE) begin
      w.push_back('{r, 1'b0});
      return;
    end
    case (r - ROW_B_BASE)
      0:  w.push_back('{T0, 0});
      1:  w.push_back('{T1, 0});
      2:  w.push_back('{T2, 0});
      3:  w.push_back('{T3, 0});
      4:  w.push_back('{D0, 0});
      5:  w.push_back('{D0, 1});
      6:  w.push_back('{D1, 0});
      7:  w.push_back('{D1, 1});
      8:  begin w.push_back('{D0, 1}); w.push_back('{T0, 0}); end
      9:  begin w.push_back('{D1, 1}); w.push_back('{T1, 0}); end
      10: begin w.push_back('{T2, 0}); w.push_back('{T3, 0}); end
      11: begin w.push_back('{T0, 0}); w.push_back('{T3, 0}); end
      12: begin w.push_back('{T0, 0}); w.push_back('{T1, 0}); w.push_back('{T2, 0}); end
      13: begin w.push_back('{T0, 0}); w.push_back('{T1, 0}); w.push_back('{T3, 0}); end
      14: begin w.push_back('{D0, 0}); w.push_back('{T1, 0}); w.push_back('{T3, 0}); end
      default: begin w.push_back('{D1, 0}); w.push_back('{T0, 0}); w.push_back('{T2, 0}); end
    endcase
  endfunction

  function automatic logic [LANES_M-1:0] cellv(input wl_t w);
    return w.neg ? ~mem[w.row] : mem[w.row];
  endfunction

  typedef struct { logic [PA_W-1:0] addr; bit tag; } rdq_t;
  rdq_t rdq[$];

  always_ff @(posedge clk) begin
    cmd_ready <= (STALL == 0) || ($urandom % 4 != 0);
    mcr_ready <= (STALL == 0) || ($urandom % 3 != 0);
  end
  assign mcw_ready = 1'b1;

  assign mcresp_valid = (rdq.size() != 0);
  assign mcresp_addr  = (rdq.size() != 0) ? rdq[0].addr : '0;
  assign mcresp_tag   = (rdq.size() != 0) ? rdq[0].tag : 1'b0;
  assign mcresp_data  = (rdq.size() != 0) ? mem[rdq[0].addr[PA_W-1:13] % SA_ROWS][rdq[0].addr[12:6]*LINE_BITS +: LINE_BITS] : '0;

  initial begin
    for (int r = 0; r < SA_ROWS; r++) mem[r] = '0;
    mem[ROW_C1] = '1;
    open_q = 0;
    rowbuf = '0;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      open_q = 0;
      rdq.delete();
    end else begin
      if (cmd_valid && !cmd_ready) n_stall++;
      if (cmd_valid && cmd_ready) begin
        wl_t w[$];
        if (cmd.row >= ROW_ADDR_W'(SA_ROWS)) n_errors++;
        decode(int'(cmd.row) % SA_ROWS, w);
        if (cmd.kind == CMD_PRE) begin
          open_q = 0;
          n_pre++;
        end else if (!open_q) begin
          n_act++;
          if (w.size() == 3) begin
            rowbuf = (cellv(w[0]) & cellv(w[1])) | (cellv(w[0]) & cellv(w[2])) | (cellv(w[1]) & cellv(w[2]));
            n_tra++;
          end else begin
            rowbuf = cellv(w[0]);
          end
          foreach (w[k]) begin
            mem[w[k].row] = w[k].neg ? ~rowbuf : rowbuf;
            if (w[k].neg) n_neg++;
          end
          open_q = 1;
        end else begin
          n_act++;
          n_copy++;
          if (w.size() > 1) n_multi_dst++;
          foreach (w[k]) begin
            mem[w[k].row] = w[k].neg ? ~rowbuf : rowbuf;
            if (w[k].neg) n_neg++;
          end
        end
      end
      if (mcw_valid && mcw_ready) begin
        if (mcw_addr[PA_W-1:13] >= (PA_W-13)'(D_ROWS)) n_errors++;
        mem[mcw_addr[PA_W-1:13] % SA_ROWS][mcw_addr[12:6]*LINE_BITS +: LINE_BITS] = mcw_data;
      end
      if (mcresp_valid && mcresp_ready) void'(rdq.pop_front());
      if (mcr_valid && mcr_ready) rdq.push_back('{mcr_addr, mcr_tag});
    end
  end
endmodule
