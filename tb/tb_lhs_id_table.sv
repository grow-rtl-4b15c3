// tb_lhs_id_table: fills the 64-entry LHS ID table with waiting nonzeros and
// drains it the way a returning row does: for a given LDN index the table must
// report the lowest matching entry with its output slot and value, until none
// is left. Allocation into the lowest free entry and the full flag are checked
// against a model. The three entries of the published example (rows 0, 2, 3
// waiting on LDN entries 0, 1, 1 with values x, y, z) are reproduced first.
module tb_lhs_id_table;
  import grow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc_en = 0, full, found, inv_en = 0;
  logic [3:0] alloc_rhs = 0, alloc_obuf = 0, search_rhs = 0, m_obuf;
  logic [63:0] alloc_val = 0, m_val;
  logic [5:0] m_idx, inv_idx = 0;
  int checks = 0, failures = 0;
  logic        mv [64];
  logic [3:0]  mrhs [64], mob [64];
  logic [63:0] mval [64];

  lhs_id_table dut (.clk, .rst_n, .alloc_en, .alloc_rhs, .alloc_obuf, .alloc_val, .full, .search_rhs,
                    .match_found(found), .match_idx(m_idx), .match_obuf(m_obuf), .match_val(m_val),
                    .inv_en, .inv_idx);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic alloc(input int rhs, input int ob, input logic [63:0] v);
    int f;
    f = -1;
    for (int i = 63; i >= 0; i--) if (!mv[i]) f = i;
    @(negedge clk);
    checks++;
    if (full != (f < 0)) begin failures++; $display("FAIL full flag"); end
    if (f < 0) return;
    alloc_en = 1; alloc_rhs = 4'(rhs); alloc_obuf = 4'(ob); alloc_val = v;
    @(posedge clk); #1 alloc_en = 0;
    mv[f] = 1; mrhs[f] = 4'(rhs); mob[f] = 4'(ob); mval[f] = v;
  endtask

  task automatic drain(input int rhs);
    forever begin
      int e;
      @(negedge clk);
      search_rhs = 4'(rhs);
      #1;
      e = -1;
      for (int i = 63; i >= 0; i--) if (mv[i] && mrhs[i] == 4'(rhs)) e = i;
      checks++;
      if (found != (e >= 0) || (e >= 0 && (m_idx != 6'(e) || m_obuf != mob[e] || m_val != mval[e]))) begin
        failures++; $display("FAIL drain rhs %0d: found %0d idx %0d exp %0d", rhs, found, m_idx, e);
      end
      if (e < 0) break;
      inv_en = 1; inv_idx = 6'(e);
      @(posedge clk); #1 inv_en = 0;
      mv[e] = 0;
    end
  endtask

  initial begin
    for (int i = 0; i < 64; i++) mv[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    alloc(0, 0, 64'h78);  // x
    alloc(1, 2, 64'h79);  // y
    alloc(1, 3, 64'h7a);  // z
    drain(1);
    drain(0);
    for (int round = 0; round < 6; round++) begin
      for (int k = 0; k < 70; k++) alloc($urandom % 16, $urandom % 16, {$urandom, $urandom});
      for (int r = 0; r < 16; r += 1 + round % 3) drain(r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
