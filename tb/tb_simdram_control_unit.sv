// tb_simdram_control_unit: runs bbops through the control unit into the
// Ambit subarray model, with 64-lane rows so that a short array needs
// several chunks. The 8-bit arrays A and B (256 elements = 4 chunks) are
// placed in vertical layout straight into the model's rows; then
// add (D = A + B, uProgram preloaded) and select (E = SEL ? A : B,
// uProgram fetched after a scratchpad miss) run, and a third bbop with
// size 0 must finish without commands. The result rows are compared with
// values computed here, and the number of DRAM commands must be exactly
// what the uPrograms imply (AAP = 3, AP = 2 commands). Also checks that
// the uProgram request names the missing opcode and that err stays low.
// A watchdog ends the run.
module tb_simdram_control_unit;
  import simdram_pkg::*;
  localparam int unsigned LN = 64, NB = 8, NEL = 256, CH = NEL / LN;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bbop_valid = 0, bbop_ready; bbop_t bbop;
  logic up_fill_en = 0; logic [BBOP_OP_W-1:0] up_fill_idx = '0; logic [UPROG_BITS-1:0] up_fill_data = '0;
  logic up_req_valid, up_req_ready = 0; logic [BBOP_OP_W-1:0] up_req_idx;
  logic cmd_valid, cmd_ready; dram_cmd_t cmd;
  logic busy, bbop_done, err;
  logic mcr_ready, mcresp_valid, mcw_ready, mcresp_tag;
  logic [PA_W-1:0] mcresp_addr; logic [LINE_BITS-1:0] mcresp_data;
  int unsigned checks = 0, failures = 0, n_cmds = 0, n_done = 0, n_req = 0;
  logic [7:0] A [NEL], B [NEL], S [NEL];

  simdram_control_unit #(.LANES_P(LN)) dut (.*);
  ambit_dram_model #(.LANES_M(LN)) dram (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .mcw_valid(1'b0), .mcw_ready, .mcw_addr('0), .mcw_data('0),
    .mcr_valid(1'b0), .mcr_ready, .mcr_addr('0), .mcr_tag(1'b0),
    .mcresp_valid, .mcresp_ready(1'b0), .mcresp_addr, .mcresp_data, .mcresp_tag
  );

  function automatic logic [UPROG_BITS-1:0] pack(input uop_t p[$]);
    logic [UPROG_BITS-1:0] d;
    d = '0;
    foreach (p[k]) d[k*UOP_W +: UOP_W] = p[k];
    return d;
  endfunction
  function automatic logic [UPROG_BITS-1:0] prog_add();
    uop_t p[$];
    p = '{mk_aap(6, 16), mk_aap(8, 18), mk_aap(1, 19), mk_aap(2, 19), mk_aap(3, 6),
          mk_ap(14), mk_ap(15), mk_aap(0, 7), mk_aap(1, 18), mk_aap(21, 13),
          mk_ari(UOP_SUBI, 22, 1), mk_ari(UOP_BNEZ, 22, 1), mk_done()};
    return pack(p);
  endfunction
  function automatic logic [UPROG_BITS-1:0] prog_sel();
    uop_t p[$];
    p = '{mk_aap(5, 20), mk_aap(1, 19), mk_aap(3, 16), mk_ap(14), mk_aap(6, 20),
          mk_aap(0, 18), mk_aap(2, 16), mk_ap(15), mk_aap(3, 17), mk_aap(21, 13),
          mk_ari(UOP_SUBI, 22, 1), mk_ari(UOP_BNEZ, 22, 0), mk_done()};
    return pack(p);
  endfunction
  localparam int unsigned EXP = CH * (3 + NB * 25) + CH * NB * 28;

  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && cmd_ready) n_cmds++;
    if (bbop_done) n_done++;
  end

  bit preload = 0;
  always @(posedge clk) begin
    up_fill_en <= 1'b0;
    if (preload) begin
      up_fill_en <= 1'b1; up_fill_idx <= 4'd1; up_fill_data <= prog_add();
    end else if (rst_n && up_req_valid && !up_req_ready) begin
      up_req_ready <= 1'b1;
      n_req++;
      checks++;
      if (up_req_idx != 4'd2) begin failures++; $display("FAIL request for uProgram %0d", up_req_idx); end
    end else if (up_req_ready) begin
      up_req_ready <= 1'b0;
      up_fill_en <= 1'b1; up_fill_idx <= up_req_idx; up_fill_data <= prog_sel();
    end
  end

  task automatic send(input logic [3:0] op, input int d, s1, s2, s3, input int size);
    @(negedge clk);
    bbop_valid = 1;
    bbop = '{op: op, dst: 32'(d) * 8192, src1: 32'(s1) * 8192, src2: 32'(s2) * 8192,
             src3: 32'(s3) * 8192, size: 32'(size), n: 7'(NB)};
    do @(posedge clk); while (!bbop_ready);
    @(negedge clk);
    bbop_valid = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < NEL; e++) begin A[e] = 8'($urandom); B[e] = 8'($urandom); S[e] = 8'($urandom); end
    // vertical layout: chunk c, bit i in row base + c*NB + i, lane e % LN
    for (int e = 0; e < NEL; e++)
      for (int i = 0; i < NB; i++) begin
        dram.mem[0  + (e / LN) * NB + i][e % LN] = A[e][i];
        dram.mem[40 + (e / LN) * NB + i][e % LN] = B[e][i];
        dram.mem[80 + (e / LN) * NB + i][e % LN] = S[e][i];
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); preload = 1;
    @(negedge clk); preload = 0;
    send(4'd1, 120, 0, 40, 0, NEL);
    send(4'd2, 160, 0, 40, 80, NEL);
    send(4'd1, 200, 0, 40, 0, 0);
    while (n_done < 3) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (n_cmds != EXP) begin failures++; $display("FAIL %0d commands, expected %0d", n_cmds, EXP); end
    checks++;
    if (err) begin failures++; $display("FAIL err"); end
    checks++;
    if (n_req != 1) begin failures++; $display("FAIL %0d uProgram requests", n_req); end
    for (int e = 0; e < NEL; e++) begin
      logic [7:0] d, x, ed, ex;
      for (int i = 0; i < NB; i++) begin
        d[i] = dram.mem[120 + (e / LN) * NB + i][e % LN];
        x[i] = dram.mem[160 + (e / LN) * NB + i][e % LN];
      end
      ed = A[e] + B[e];
      ex = (S[e] & A[e]) | (~S[e] & B[e]);
      checks += 2;
      if (d != ed) begin failures++; if (failures < 10) $display("FAIL add e=%0d got %0d exp %0d", e, d, ed); end
      if (x != ex) begin failures++; if (failures < 10) $display("FAIL sel e=%0d got %h exp %h", e, x, ex); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
