// tb_simdram_top: end-to-end test of simdram_top at its default sizes.
//
// What it does: three 8-bit input arrays A, B and SEL of 131072 elements
// (two full 65536-lane chunks each, so every bbop loops twice) are
// registered with bbop_trsp_init, written into the model LLC and evicted
// through the transposition unit, which turns them into vertical bit rows of
// the Ambit subarray model (tb/ambit_dram_model.sv). Three bbops then run on
// the control unit: D = A + B (uProgram preloaded into the scratchpad),
// E = SEL ? A : B bitwise (uProgram fetched on a scratchpad miss), and D =
// A + B once more (a scratchpad hit, and a third bbop waiting in the FIFO).
// Every slice of both results is read back through the transposition unit
// (an Object Tracker read hit that returns all n lines, the requested one
// plain and the rest as prefetches) and compared with values computed here.
// Lines outside any object are written and read through the OT-miss path.
// How it checks: all data comparisons, the exact number of DRAM commands the
// uPrograms must issue (3 per AAP, 2 per AP), and counters proving that each
// mechanism happened at least once: OT hit/miss on writeback and read, LLC
// invalidations, prefetch-flagged lines, scratchpad hit and miss, the Loop
// Counter moving the bases on, bnez taken and falling through, triple-row
// activations, negated (DCC) wordlines, multi-row copy destinations,
// command back-pressure and several bbops queued in the FIFO.
// The LLC is modelled here: it answers an invalidation by writing the line
// back, with priority over ordinary evictions, and evicts one object slice
// at a time. A watchdog ends the run.
module tb_simdram_top;
  import simdram_pkg::*;

  localparam int unsigned NEL    = 131072;
  localparam int unsigned NB     = 8;
  localparam int unsigned SLICES = NEL / 512;
  localparam logic [PA_W-1:0] A_BASE = 32'd0   * 8192;
  localparam logic [PA_W-1:0] B_BASE = 32'd16  * 8192;
  localparam logic [PA_W-1:0] S_BASE = 32'd32  * 8192;
  localparam logic [PA_W-1:0] D_BASE = 32'd48  * 8192;
  localparam logic [PA_W-1:0] E_BASE = 32'd64  * 8192;
  localparam logic [PA_W-1:0] P_BASE = 32'd500 * 8192;  // plain memory

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  logic bbop_valid = 0, bbop_ready; bbop_t bbop;
  logic trsp_init_valid = 0; logic [PA_W-1:0] trsp_init_base; logic [31:0] trsp_init_size; logic [N_W-1:0] trsp_init_n;
  logic up_fill_en = 0; logic [BBOP_OP_W-1:0] up_fill_idx = '0; logic [UPROG_BITS-1:0] up_fill_data = '0;
  logic up_req_valid, up_req_ready = 0; logic [BBOP_OP_W-1:0] up_req_idx;
  logic cmd_valid, cmd_ready; dram_cmd_t cmd;
  logic wb_valid = 0, wb_ready; logic [PA_W-1:0] wb_addr = '0; logic [LINE_BITS-1:0] wb_data = '0;
  logic inv_valid, inv_ready; logic [PA_W-1:0] inv_addr;
  logic rd_valid = 0, rd_ready; logic [PA_W-1:0] rd_addr = '0;
  logic llc_rdata_valid, llc_rdata_ready = 0; logic [PA_W-1:0] llc_rdata_addr; logic [LINE_BITS-1:0] llc_rdata; logic llc_rdata_prefetch;
  logic mcw_valid, mcw_ready; logic [PA_W-1:0] mcw_addr; logic [LINE_BITS-1:0] mcw_data;
  logic mcr_valid, mcr_ready; logic [PA_W-1:0] mcr_addr; logic mcr_tag;
  logic mcresp_valid, mcresp_ready; logic [PA_W-1:0] mcresp_addr; logic [LINE_BITS-1:0] mcresp_data; logic mcresp_tag;
  logic cu_busy, bbop_done, cu_err, ev_wb_hit, ev_wb_miss, ev_rd_hit, ev_rd_miss;

  simdram_top dut (.*);

  ambit_dram_model dram (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .mcw_valid, .mcw_ready, .mcw_addr, .mcw_data,
    .mcr_valid, .mcr_ready, .mcr_addr, .mcr_tag,
    .mcresp_valid, .mcresp_ready, .mcresp_addr, .mcresp_data, .mcresp_tag
  );

  // ---------------- reference data ----------------
  logic [7:0] A [NEL];
  logic [7:0] B [NEL];
  logic [7:0] SEL [NEL];

  // horizontal cache line at addr: 8-bit elements, element e at byte e
  function automatic logic [LINE_BITS-1:0] hline(input logic [PA_W-1:0] addr);
    logic [LINE_BITS-1:0] l;
    logic [PA_W-1:0] obj;
    int unsigned e0;
    obj = addr & ~32'h1FFFF;        // objects are 16 rows = 128 kB apart
    e0  = int'(addr - obj);
    for (int b = 0; b < 64; b++) begin
      int unsigned e;
      e = e0 + b;
      case (obj)
        A_BASE:  l[8*b +: 8] = A[e];
        B_BASE:  l[8*b +: 8] = B[e];
        S_BASE:  l[8*b +: 8] = SEL[e];
        D_BASE:  l[8*b +: 8] = A[e] + B[e];
        default: l[8*b +: 8] = (SEL[e] & A[e]) | (~SEL[e] & B[e]);
      endcase
    end
    return l;
  endfunction

  function automatic logic [LINE_BITS-1:0] pline(input logic [PA_W-1:0] addr);
    return {16{addr ^ 32'h5A5A_0F0F}};
  endfunction

  // ---------------- uPrograms ----------------
  function automatic logic [UPROG_BITS-1:0] pack(input uop_t p[$]);
    logic [UPROG_BITS-1:0] d;
    d = '0;
    foreach (p[k]) d[k*UOP_W +: UOP_W] = p[k];
    return d;
  endfunction

  // full adder per bit, carry kept in DCC1; 7 AAP + 2 AP per bit
  function automatic logic [UPROG_BITS-1:0] prog_add();
    uop_t p[$];
    p.push_back(mk_aap(5'd6, 5'd16));   // DCC1 <- 0 (carry in)
    p.push_back(mk_aap(5'd8, 5'd18));   // T0 <- A, DCC0 <- ~A
    p.push_back(mk_aap(5'd1, 5'd19));   // T1 <- B
    p.push_back(mk_aap(5'd2, 5'd19));   // T2 <- B
    p.push_back(mk_aap(5'd3, 5'd6));    // T3 <- C
    p.push_back(mk_ap(5'd14));          // MAJ(~A,B,C)
    p.push_back(mk_ap(5'd15));          // DCC1 <- carry out MAJ(C,A,B)
    p.push_back(mk_aap(5'd0, 5'd7));    // T0 <- ~carry out
    p.push_back(mk_aap(5'd1, 5'd18));   // T1 <- A
    p.push_back(mk_aap(5'd21, 5'd13));  // S <- MAJ(~Cout, A, MAJ(~A,B,C))
    p.push_back(mk_ari(UOP_SUBI, 5'd22, 8'd1));
    p.push_back(mk_ari(UOP_BNEZ, 5'd22, 8'd1));
    p.push_back(mk_done());
    return pack(p);
  endfunction

  // bitwise select; 8 AAP + 2 AP per bit
  function automatic logic [UPROG_BITS-1:0] prog_sel();
    uop_t p[$];
    p.push_back(mk_aap(5'd5, 5'd20));   // DCC0 <- ~SEL
    p.push_back(mk_aap(5'd1, 5'd19));   // T1 <- B
    p.push_back(mk_aap(5'd3, 5'd16));   // T3 <- 0
    p.push_back(mk_ap(5'd14));          // ~SEL & B
    p.push_back(mk_aap(5'd6, 5'd20));   // DCC1 <- SEL
    p.push_back(mk_aap(5'd0, 5'd18));   // T0 <- A
    p.push_back(mk_aap(5'd2, 5'd16));   // T2 <- 0
    p.push_back(mk_ap(5'd15));          // SEL & A
    p.push_back(mk_aap(5'd3, 5'd17));   // T3 <- 1
    p.push_back(mk_aap(5'd21, 5'd13));  // OR of the two
    p.push_back(mk_ari(UOP_SUBI, 5'd22, 8'd1));
    p.push_back(mk_ari(UOP_BNEZ, 5'd22, 8'd0));
    p.push_back(mk_done());
    return pack(p);
  endfunction

  localparam int unsigned ADD_CMDS = 2 * (3 + NB * (7*3 + 2*2));
  localparam int unsigned SEL_CMDS = 2 * (NB * (8*3 + 2*2));
  localparam int unsigned EXP_CMDS = 2 * ADD_CMDS + SEL_CMDS;

  // ---------------- mechanism counters ----------------
  int unsigned m_wb_hit, m_wb_miss, m_rd_hit, m_rd_miss, m_inv, m_pref, m_sp_miss,
               m_shift, m_bnez_taken, m_bnez_fall, m_fifo_multi, n_cmds, n_done;
  always @(posedge clk) if (rst_n) begin
    m_wb_hit  += 32'(ev_wb_hit);
    m_wb_miss += 32'(ev_wb_miss);
    m_rd_hit  += 32'(ev_rd_hit);
    m_rd_miss += 32'(ev_rd_miss);
    if (inv_valid && inv_ready) m_inv++;
    if (llc_rdata_valid && llc_rdata_ready && llc_rdata_prefetch) m_pref++;
    if (up_req_valid && up_req_ready) m_sp_miss++;
    if (dut.u_cu.u_fsm.au_shift) m_shift++;
    if (cmd_valid && cmd_ready) n_cmds++;
    if (bbop_done) n_done++;
    if (dut.u_cu.u_fifo.count > 1) m_fifo_multi++;
    if (int'(dut.u_cu.u_fsm.state) == 5 && dut.u_cu.u_fsm.uop_q.op == UOP_BNEZ) begin
      if (dut.u_cu.u_fsm.pc_branch) m_bnez_taken++;
      else                          m_bnez_fall++;
    end
  end

  // ---------------- LLC model ----------------
  logic [LINE_BITS-1:0] llc [logic [PA_W-1:0]];
  logic [PA_W-1:0] evq[$], invq[$];
  assign inv_ready = 1'b1;
  always @(posedge clk) begin
    if (rst_n) begin
      if (wb_valid && wb_ready) wb_valid <= 1'b0;
      else if (!wb_valid) begin
        // lines already written back (queued twice) are dropped
        while (invq.size() != 0 && !llc.exists(invq[0])) void'(invq.pop_front());
        while (evq.size() != 0 && !llc.exists(evq[0])) void'(evq.pop_front());
        if (invq.size() != 0) begin
          wb_addr  <= invq[0];
          wb_data  <= llc[invq[0]];
          llc.delete(invq[0]);
          void'(invq.pop_front());
          wb_valid <= 1'b1;
        end else if (evq.size() != 0) begin
          wb_addr  <= evq[0];
          wb_data  <= llc[evq[0]];
          llc.delete(evq[0]);
          void'(evq.pop_front());
          wb_valid <= 1'b1;
        end
      end
      if (inv_valid && inv_ready && llc.exists(inv_addr)) invq.push_back(inv_addr);
    end
  end

  // read results
  logic [PA_W-1:0] rd_got[$];
  always @(posedge clk) llc_rdata_ready <= ($urandom % 4 != 0);
  always @(posedge clk) if (rst_n && llc_rdata_valid && llc_rdata_ready) begin
    logic [LINE_BITS-1:0] exp;
    exp = (llc_rdata_addr >= P_BASE) ? pline(llc_rdata_addr) : hline(llc_rdata_addr);
    checks++;
    if (llc_rdata != exp) begin
      failures++;
      if (failures < 10) $display("FAIL read data at %h", llc_rdata_addr);
    end
    checks++;
    if (llc_rdata_prefetch != (llc_rdata_addr != rd_addr)) begin
      failures++;
      if (failures < 10) $display("FAIL prefetch flag at %h (req %h)", llc_rdata_addr, rd_addr);
    end
    rd_got.push_back(llc_rdata_addr);
  end

  // uProgram Memory: preload of add, and the answer to a scratchpad miss
  bit preload = 0;
  always @(posedge clk) begin
    up_fill_en <= 1'b0;
    if (preload) begin
      up_fill_en   <= 1'b1;
      up_fill_idx  <= 4'd1;
      up_fill_data <= prog_add();
    end else if (rst_n && up_req_valid && !up_req_ready) begin
      up_req_ready <= 1'b1;
    end else if (up_req_ready) begin
      up_req_ready <= 1'b0;
      up_fill_en   <= 1'b1;
      up_fill_idx  <= up_req_idx;
      up_fill_data <= (up_req_idx == 4'd2) ? prog_sel() : prog_add();
    end
  end

  // ---------------- tasks ----------------
  task automatic trsp_init(input logic [PA_W-1:0] base);
    @(negedge clk);
    trsp_init_valid = 1; trsp_init_base = base; trsp_init_size = NEL; trsp_init_n = NB;
    @(negedge clk);
    trsp_init_valid = 0;
  endtask

  task automatic load_object(input logic [PA_W-1:0] base);
    for (int s = 0; s < SLICES; s++) begin
      for (int j = 0; j < NB; j++) llc[hline_addr(base, s, j, NB)] = hline(hline_addr(base, s, j, NB));
      if (s % 2 == 0) evq.push_back(hline_addr(base, s, $urandom % NB, NB));
      else for (int j = 0; j < NB; j++) evq.push_back(hline_addr(base, s, j, NB));
      forever begin
        int left;
        left = 0;
        @(posedge clk);
        for (int j = 0; j < NB; j++) if (llc.exists(hline_addr(base, s, j, NB))) left++;
        if (left == 0 && evq.size() == 0 && invq.size() == 0 && !wb_valid) break;
      end
    end
  endtask

  task automatic read_line(input logic [PA_W-1:0] addr, input int unsigned expect_lines);
    rd_got.delete();
    @(negedge clk);
    rd_valid = 1; rd_addr = addr;
    do @(posedge clk); while (!rd_ready);
    @(negedge clk);
    rd_valid = 0;
    while (rd_got.size() < expect_lines) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (rd_got.size() != expect_lines) begin
      failures++;
      $display("FAIL read %h returned %0d lines, expected %0d", addr, rd_got.size(), expect_lines);
    end
  endtask

  task automatic send_bbop(input logic [3:0] op, input logic [PA_W-1:0] dst, s1, s2, s3);
    @(negedge clk);
    bbop_valid = 1;
    bbop = '{op: op, dst: dst, src1: s1, src2: s2, src3: s3, size: NEL, n: 7'(NB)};
    do @(posedge clk); while (!bbop_ready);
    @(negedge clk);
    bbop_valid = 0;
  endtask

  task automatic need(input string what, input int unsigned cnt);
    checks++;
    $display("mechanism %-28s %0d", what, cnt);
    if (cnt == 0) begin
      failures++;
      $display("FAIL mechanism %s never happened", what);
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: wb_valid=%0d wb_ready=%0d evq=%0d invq=%0d done=%0d cmds=%0d",
             wb_valid, wb_ready, evq.size(), invq.size(), n_done, n_cmds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- main ----------------
  initial begin
    for (int e = 0; e < NEL; e++) begin
      A[e] = 8'($urandom); B[e] = 8'($urandom); SEL[e] = 8'($urandom);
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(negedge clk); preload = 1;
    @(negedge clk); preload = 0;

    trsp_init(A_BASE); trsp_init(B_BASE); trsp_init(S_BASE);
    trsp_init(D_BASE); trsp_init(E_BASE);

    for (int k = 0; k < 4; k++) begin
      llc[P_BASE + 64*k] = pline(P_BASE + 64*k);
      evq.push_back(P_BASE + 64*k);
    end
    load_object(A_BASE);
    load_object(B_BASE);
    load_object(S_BASE);
    $display("inputs transposed at cycle %0d", cyc);

    send_bbop(4'd1, D_BASE, A_BASE, B_BASE, 32'd0);
    send_bbop(4'd2, E_BASE, A_BASE, B_BASE, S_BASE);
    send_bbop(4'd1, D_BASE, A_BASE, B_BASE, 32'd0);
    while (n_done < 3) @(posedge clk);
    $display("bbops done at cycle %0d", cyc);
    checks++;
    if (cu_err) begin failures++; $display("FAIL control unit error"); end
    checks++;
    if (n_cmds != EXP_CMDS) begin
      failures++;
      $display("FAIL %0d DRAM commands, expected %0d", n_cmds, EXP_CMDS);
    end
    checks++;
    if (dram.n_errors != 0) begin failures++; $display("FAIL DRAM model saw bad addresses"); end

    for (int s = 0; s < SLICES; s++) read_line(hline_addr(D_BASE, s, $urandom % NB, NB), NB);
    for (int s = 0; s < SLICES; s++) read_line(hline_addr(E_BASE, s, $urandom % NB, NB), NB);
    for (int k = 0; k < 4; k++) read_line(P_BASE + 64*k, 1);
    $display("read back done at cycle %0d", cyc);

    need("OT hit on writeback", m_wb_hit);
    need("OT miss on writeback", m_wb_miss);
    need("OT hit on read", m_rd_hit);
    need("OT miss on read", m_rd_miss);
    need("LLC invalidation", m_inv);
    need("prefetch-flagged line", m_pref);
    need("scratchpad miss", m_sp_miss);
    need("scratchpad hit", (n_done == 3 && m_sp_miss == 1) ? 1 : 0);
    need("loop counter base shift", m_shift);
    need("bnez taken", m_bnez_taken);
    need("bnez fall-through", m_bnez_fall);
    need("triple-row activation", dram.n_tra);
    need("negated DCC wordline", dram.n_neg);
    need("multi-row copy destination", dram.n_multi_dst);
    need("command back-pressure", dram.n_stall);
    need("several bbops queued", m_fifo_multi);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
