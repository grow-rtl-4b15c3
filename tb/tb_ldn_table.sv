// tb_ldn_table: allocates, looks up and frees entries of the 16-entry LDN
// (missed-row) table in random order against a model: the lowest free entry
// is allocated, a lookup finds an in-flight row ID at its entry, full is set
// with all 16 entries in use, and a freed entry no longer matches.
module tb_ldn_table;
  import grow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] lookup_rid = 0, alloc_rid = 0;
  logic hit, alloc_en = 0, full, free_en = 0;
  logic [3:0] hit_idx, alloc_idx, free_idx = 0;
  logic [15:0] valid;
  int checks = 0, failures = 0, fulls = 0;
  logic        mv [16];
  logic [31:0] mr [16];

  ldn_table dut (.clk, .rst_n, .lookup_rid, .lookup_hit(hit), .lookup_idx(hit_idx), .alloc_en, .alloc_rid,
                 .alloc_idx, .full, .free_en, .free_idx, .valid);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin mv[i] = 0; mr[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int exp_free, exp_hit;
      @(negedge clk);
      exp_free = -1;
      for (int i = 15; i >= 0; i--) if (!mv[i]) exp_free = i;
      lookup_rid = (t % 2) ? mr[$urandom % 16] : $urandom % 64;
      #1;
      exp_hit = -1;
      for (int i = 15; i >= 0; i--) if (mv[i] && mr[i] == lookup_rid) exp_hit = i;
      checks++;
      if (full != (exp_free < 0) || (exp_free >= 0 && alloc_idx != 4'(exp_free)) ||
          hit != (exp_hit >= 0) || (exp_hit >= 0 && hit_idx != 4'(exp_hit))) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d full %0d alloc %0d hit %0d/%0d exp %0d/%0d", t, full, alloc_idx, hit, hit_idx, exp_free, exp_hit);
      end
      if (full) fulls++;
      alloc_en  = !full && ($urandom % 100 < ((t / 500) % 2 ? 70 : 30));
      alloc_rid = 1000 + t;
      free_idx  = 4'($urandom);
      free_en   = mv[free_idx] && ($urandom % 2 == 0);
      if (alloc_en && free_en && free_idx == alloc_idx) free_en = 0;
      @(posedge clk);
      if (alloc_en) begin mv[exp_free] = 1; mr[exp_free] = alloc_rid; end
      if (free_en) mv[free_idx] = 0;
      #1; alloc_en = 0; free_en = 0;
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL table never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
