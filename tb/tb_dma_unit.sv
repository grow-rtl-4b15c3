// tb_dma_unit: runs the DMA against the DRAM model through all its transfers:
// the HDN ID list load (40 IDs: one full and one partial beat), the HDN cache
// fill (one row per listed ID, fetched by ID), the sparse stream (21 records in
// beats of 8, 8 and 5, with the buffer credit limited to two beats), an LDN row
// fetch handed back whole and held until taken, and an output-row write-back.
// Every destination write is compared with the data placed in DRAM.
module tb_dma_unit;
  import grow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic list_start = 0, fill_start = 0, stream_start = 0, list_done, fill_done, stream_done;
  logic list_wr_en, fill_we, sp_push;
  logic [11:0] list_wr_base, list_rd_idx, fill_slot;
  logic [IDS_PER_BEAT-1:0][ID_W-1:0] list_wr_ids;
  logic [5:0] list_wr_count;
  logic [ID_W-1:0] list_rd_id;
  row_t fill_row, ldn_ret_row, wb_row;
  nz_t [NZ_PER_BEAT-1:0] sp_line;
  logic [3:0] sp_count, ldn_req_idx = 0, ldn_ret_idx;
  logic [7:0] sp_free_lines;
  logic ldn_req_valid = 0, ldn_req_ready, ldn_ret_valid, ldn_ret_ready = 0, wb_valid = 0, wb_ready;
  logic [31:0] ldn_req_rid = 0, wb_row_id = 0;
  logic rq_v, rq_r, rs_v, rs_r, wr_v, wr_r;
  logic [31:0] rq_a, wr_a;
  logic [MEM_W-1:0] rs_d, wr_d;
  int checks = 0, failures = 0;
  int list_ids [64];
  int sp_held = 0;

  localparam logic [31:0] LB = 32'h1000, XB = 32'h10_0000, SB = 32'h20_0000, OB = 32'h30_0000;

  dma_unit dut (
    .clk, .rst_n, .cfg_list_base_i(LB), .cfg_xw_base_i(XB), .cfg_sp_base_i(SB), .cfg_out_base_i(OB),
    .cfg_hdn_count_i(13'd40), .cfg_nnz_count_i(32'd21),
    .list_start, .fill_start, .stream_start, .list_done, .fill_done, .stream_done,
    .list_wr_en, .list_wr_base, .list_wr_ids, .list_wr_count, .list_rd_idx, .list_rd_id,
    .fill_we, .fill_slot, .fill_row, .sp_push, .sp_line, .sp_count, .sp_free_lines,
    .ldn_req_valid, .ldn_req_ready, .ldn_req_idx, .ldn_req_rid, .ldn_ret_valid, .ldn_ret_ready,
    .ldn_ret_idx, .ldn_ret_row, .wb_valid, .wb_ready, .wb_row_id, .wb_row,
    .mem_rd_req_valid(rq_v), .mem_rd_req_ready(rq_r), .mem_rd_req_addr(rq_a),
    .mem_rd_resp_valid(rs_v), .mem_rd_resp_ready(rs_r), .mem_rd_resp_data(rs_d),
    .mem_wr_valid(wr_v), .mem_wr_ready(wr_r), .mem_wr_addr(wr_a), .mem_wr_data(wr_d)
  );
  dram_model #(.LAT(20), .STALL_PCT(20)) u_dram (
    .clk, .rst_n, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_resp_valid(rs_v), .rd_resp_ready(rs_r), .rd_resp_data(rs_d),
    .wr_valid(wr_v), .wr_ready(wr_r), .wr_addr(wr_a), .wr_data(wr_d)
  );

  // the list as the DMA writes it (read back for the fill addresses)
  always @(posedge clk) if (rst_n && list_wr_en)
    for (int j = 0; j < int'(list_wr_count); j++) list_ids[int'(list_wr_base) + j] = int'(list_wr_ids[j]);
  assign list_rd_id = ID_W'(list_ids[list_rd_idx]);
  // sparse buffer: two lines of credit, drained slowly
  assign sp_free_lines = 8'(2 - sp_held);
  int sp_seen = 0, fill_seen = 0, list_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (sp_push) begin
      checks++;
      if (sp_held >= 2) begin failures++; $display("FAIL push beyond credit"); end
      for (int j = 0; j < int'(sp_count); j++) begin
        checks++;
        if (sp_line[j].val != 64'(1000 + sp_seen) || sp_line[j].col != 32'(sp_seen * 3) ||
            sp_line[j].last != (sp_seen % 4 == 3)) begin
          failures++; $display("FAIL record %0d", sp_seen);
        end
        sp_seen++;
      end
    end
    sp_held <= sp_held + (sp_push ? 1 : 0) - ((sp_held > 0 && $urandom % 4 == 0) ? 1 : 0);
    if (fill_we) begin
      checks++; fill_seen++;
      if (fill_row !== row_t'(u_dram.peek((XB >> 7) + list_ids[fill_slot]))) begin failures++; $display("FAIL fill slot %0d", fill_slot); end
    end
    if (list_wr_en) list_seen++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [MEM_W-1:0] beat;
    for (int i = 0; i < 64; i++) list_ids[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // DRAM contents
    for (int b = 0; b < 2; b++) begin
      beat = '0;
      for (int j = 0; j < 32; j++) beat[j*32 +: 32] = 32'((b * 32 + j) * 11 + 5);
      u_dram.mem[(LB >> 7) + b] = beat;
    end
    for (int r = 0; r < 600; r++) begin
      row_t row;
      for (int l = 0; l < LANES; l++) row[l] = {$urandom, $urandom};
      u_dram.mem[(XB >> 7) + r] = MEM_W'(row);
    end
    for (int i = 0; i < 21; i++) begin
      beat = u_dram.peek((SB >> 7) + i / 8);
      beat[(i % 8)*128 +: 128] = {1'b0, i % 4 == 3, 30'd0, 32'(i * 3), 64'(1000 + i)};
      u_dram.mem[(SB >> 7) + i / 8] = beat;
    end
    @(negedge clk); list_start = 1; @(negedge clk); list_start = 0;
    while (!list_done) @(negedge clk);
    checks++;
    for (int i = 0; i < 40; i++) if (list_ids[i] != i * 11 + 5) begin failures++; $display("FAIL id %0d", i); end
    if (list_seen != 2) begin failures++; $display("FAIL list beats %0d", list_seen); end
    fill_start = 1; @(negedge clk); fill_start = 0;
    while (!fill_done) @(negedge clk);
    checks++;
    if (fill_seen != 40) begin failures++; $display("FAIL fill count %0d", fill_seen); end
    stream_start = 1; @(negedge clk); stream_start = 0;
    // an LDN fetch while the stream runs
    ldn_req_valid = 1; ldn_req_idx = 4'd9; ldn_req_rid = 32'd123;
    while (!ldn_req_ready) @(negedge clk);
    @(negedge clk); ldn_req_valid = 0;
    while (!ldn_ret_valid) @(negedge clk);
    repeat (5) @(negedge clk);   // held until taken
    checks++;
    if (!ldn_ret_valid || ldn_ret_idx != 4'd9 || ldn_ret_row !== row_t'(u_dram.peek((XB >> 7) + 123))) begin
      failures++; $display("FAIL LDN return");
    end
    ldn_ret_ready = 1; @(negedge clk); ldn_ret_ready = 0;
    checks++;
    if (ldn_ret_valid) begin failures++; $display("FAIL LDN return not released"); end
    while (!stream_done) @(negedge clk);
    checks++;
    if (sp_seen != 21) begin failures++; $display("FAIL stream records %0d", sp_seen); end
    // write-back
    for (int l = 0; l < LANES; l++) wb_row[l] = {$urandom, $urandom};
    wb_valid = 1; wb_row_id = 32'd77;
    while (!wb_ready) @(negedge clk);
    @(negedge clk); wb_valid = 0;
    @(negedge clk);
    checks++;
    if (u_dram.peek((OB >> 7) + 77) !== MEM_W'(wb_row)) begin failures++; $display("FAIL write-back"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
