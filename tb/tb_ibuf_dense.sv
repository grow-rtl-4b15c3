// tb_ibuf_dense: loads a small HDN ID list and fills the HDN cache through the
// DMA-side ports, then queries IDs: listed IDs must hit in the same cycle and
// return their own row one cycle later; other IDs, including IDs that only
// match in the low 24 bits, must miss. A 512-entry instance keeps the build
// short; the 4096-entry default is exercised by the full accelerator test.
module tb_ibuf_dense;
  import grow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic list_clear = 0, list_wr_en = 0, fill_we = 0, q_valid = 0, q_hit, rvalid;
  logic [8:0] list_wr_base = 0, list_rd_idx = 0, fill_slot = 0;
  logic [IDS_PER_BEAT-1:0][ID_W-1:0] list_wr_ids;
  logic [5:0] list_wr_count = 0;
  logic [ID_W-1:0] list_rd_id;
  row_t fill_row, rdata;
  logic [31:0] q_id = 0;
  int checks = 0, failures = 0;
  int   ids [40];
  row_t rows [40];

  ibuf_dense #(.ENTRIES(512)) dut (.clk, .rst_n, .list_clear, .list_wr_en, .list_wr_base, .list_wr_ids, .list_wr_count,
                  .list_rd_idx, .list_rd_id, .fill_we, .fill_slot, .fill_row, .q_valid, .q_id, .q_hit,
                  .rdata_valid(rvalid), .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    list_wr_ids = '0;
    for (int i = 0; i < 40; i++) begin
      ids[i] = 7 * i + 3;
      for (int l = 0; l < LANES; l++) rows[i][l] = {$urandom, $urandom};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++) begin
      @(negedge clk);
      list_wr_en = 1; list_wr_base = 9'(b * 32); list_wr_count = (b == 0) ? 6'd32 : 6'd8;
      for (int j = 0; j < 32; j++) list_wr_ids[j] = (b * 32 + j < 40) ? ID_W'(ids[b * 32 + j]) : '0;
    end
    @(negedge clk); list_wr_en = 0;
    for (int i = 0; i < 40; i++) begin   // fill, addressed through the read-back port
      @(negedge clk);
      list_rd_idx = 9'(i); #1;
      checks++;
      if (list_rd_id != ID_W'(ids[i])) begin failures++; $display("FAIL readback %0d", i); end
      fill_we = 1; fill_slot = 9'(i); fill_row = rows[i];
    end
    @(negedge clk); fill_we = 0;
    for (int t = 0; t < 300; t++) begin
      int i;
      logic listed;
      i = $urandom % 40;
      listed = ($urandom % 3) != 0;
      @(negedge clk);
      q_valid = 1;
      q_id = listed ? ids[i] : (t % 2 ? 7 * i + 4 : (32'(ids[i]) | 32'h0100_0000));
      #1;
      checks++;
      if (q_hit != listed) begin failures++; $display("FAIL hit for %h", q_id); end
      @(posedge clk); #1;
      q_valid = 0;
      if (listed) begin
        checks++;
        if (!rvalid || rdata !== rows[i]) begin failures++; $display("FAIL data for id %0d", ids[i]); end
      end
    end
    @(negedge clk); list_clear = 1;
    @(negedge clk); list_clear = 0; q_valid = 1; q_id = ids[0]; #1;
    checks++;
    if (q_hit) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
