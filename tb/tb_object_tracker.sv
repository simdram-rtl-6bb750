// tb_object_tracker: inserts random objects (row-aligned base, size in
// bytes, n) into an 8-entry tracker, more than it holds so that round-robin
// replacement happens, and looks up random addresses on both ports - some
// inside, some just past and some before objects - against a model table
// where the lowest matching entry wins. A watchdog ends the run.
module tb_object_tracker;
  import simdram_pkg::*;
  localparam int unsigned E = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ins_valid = 0, wb_hit, rd_hit;
  logic [PA_W-1:0] ins_base = '0, wb_addr = '0, rd_addr = '0, wb_base, rd_base;
  logic [31:0] ins_size = '0;
  logic [N_W-1:0] ins_n = '0, wb_n, rd_n;
  typedef struct { bit v; logic [PA_W-1:0] base; logic [31:0] size; int n; } ent_t;
  ent_t m [E];
  int wp = 0;
  int unsigned checks = 0, failures = 0, hits = 0;

  object_tracker #(.ENTRIES(E)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [PA_W+N_W:0] look(input logic [PA_W-1:0] a);
    for (int k = 0; k < E; k++)
      if (m[k].v && 64'(a) >= 64'(m[k].base) && 64'(a) < 64'(m[k].base) + 64'(m[k].size))
        return {1'b1, m[k].base, N_W'(m[k].n)};
    return '0;
  endfunction

  function automatic logic [PA_W-1:0] pick();
    int k;
    k = $urandom % E;
    case ($urandom % 4)
      0: return $urandom;
      1: return m[k].base - 1;
      2: return m[k].base + m[k].size;
      default: return m[k].base + ($urandom % (m[k].size + 1));
    endcase
  endfunction

  initial begin
    foreach (m[k]) m[k].v = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      @(negedge clk);
      ins_valid = 1;
      ins_base  = {13'($urandom % 8), 19'd0} << 13 | (PA_W'($urandom % 64) << 13);
      ins_n     = 7'(1 << ($urandom % 7));
      ins_size  = (1 + $urandom % 4) * 8192 * ins_n;
      m[wp] = '{1, ins_base, ins_size, int'(ins_n)};
      wp = (wp + 1) % E;
      @(negedge clk);
      ins_valid = 0;
      for (int q = 0; q < 20; q++) begin
        logic [PA_W+N_W:0] ew, er;
        wb_addr = pick(); rd_addr = pick();
        #1;
        ew = look(wb_addr); er = look(rd_addr);
        check(wb_hit == ew[PA_W+N_W], "wb hit");
        if (ew[PA_W+N_W]) begin hits++; check({wb_base, wb_n} == ew[PA_W+N_W-1:0], "wb base/n"); end
        check(rd_hit == er[PA_W+N_W], "rd hit");
        if (er[PA_W+N_W]) check({rd_base, rd_n} == er[PA_W+N_W-1:0], "rd base/n");
      end
    end
    check(hits > 100, "too few hits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
