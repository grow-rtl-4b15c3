// tb_hdn_id_list: loads the HDN ID list CAM (any size) with a
// permutation of node IDs in beats of 32, then checks that every listed ID
// hits at its own index in the same cycle, that unlisted IDs miss, that read-
// back returns the stored IDs, and that clear invalidates everything.
// A 512-entry instance keeps the build short; the 4096-entry default is
// exercised by the full accelerator test.
module tb_hdn_id_list;
  import grow_pkg::*;
  localparam int ENT = 512;
  localparam int AW  = $clog2(ENT);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, wr_en = 0, hit;
  logic [AW-1:0] wr_base = 0, idx, rd_idx = 0;
  logic [IDS_PER_BEAT-1:0][ID_W-1:0] wr_ids;
  logic [5:0] wr_count = 0;
  logic [ID_W-1:0] lookup_id = 0, rd_id;
  int checks = 0, failures = 0;
  int ids [ENT];

  hdn_id_list #(.ENTRIES(ENT)) dut (.clk, .rst_n, .clear, .wr_en, .wr_base, .wr_ids, .wr_count, .lookup_id,
                   .lookup_hit(hit), .lookup_idx(idx), .rd_idx, .rd_id);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    n = ENT - ENT / 4 - 5;   // list shorter than the CAM; last beat partly filled
    for (int i = 0; i < ENT; i++) ids[i] = i * 2654435 % 16777213 + 1;   // distinct
    wr_ids = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b * 32 < n; b++) begin
      @(negedge clk);
      wr_en = 1; wr_base = AW'(b * 32);
      wr_count = 6'((n - b * 32 > 32) ? 32 : n - b * 32);
      for (int j = 0; j < 32; j++) wr_ids[j] = ID_W'(ids[b * 32 + j]);
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 400; t++) begin
      int i;
      i = (t < 10) ? n - 1 - t : $urandom % ENT;
      lookup_id = ID_W'(ids[i]); rd_idx = AW'(i);
      #1;
      checks++;
      if (i < n) begin
        if (!hit || idx != AW'(i) || rd_id != ID_W'(ids[i])) begin
          failures++; $display("FAIL listed id at %0d: hit %0d idx %0d", i, hit, idx);
        end
      end else if (hit) begin
        failures++; $display("FAIL unlisted id at %0d hit", i);
      end
    end
    lookup_id = ID_W'(ids[0]);
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0; #1;
    checks++;
    if (hit) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
