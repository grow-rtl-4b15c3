// tb_control_unit: drives the control unit alone, with the buffers, MAC array
// and DMA replaced by simple models, on the six-node example graph used to
// explain HDN caching: nodes 0, 3 and 4 are the high-degree nodes, and the
// adjacency matrix rows are
//   0: {0,2,3,4,5}  1: {1,3,4}  2: {0,2,5}  3: {0,1,3,4}  4: {0,1,3,4}  5: {0,2,5}
// which gives 13 HDN cache hits and 9 misses for the six output rows. Missed
// rows return from the DMA model after 60 cycles, so the controller must run
// ahead past rows with pending misses, and misses on a row already in flight
// must merge. Each written output row is compared with A x XW computed here.
module tb_control_unit;
  import grow_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic list_clear, sp_flush, list_start, fill_start, stream_start;
  logic head_valid, pop, q_valid, q_hit;
  nz_t head;
  logic [31:0] q_id, ldn_req_rid, wb_row_id;
  row_t cache_rdata, ldn_ret_row, mac_b;
  logic ldn_req_valid, ldn_req_ready, ldn_ret_valid, ldn_ret_ready;
  logic [3:0] ldn_req_idx, ldn_ret_idx, clr_slot, acc_slot, wb_slot;
  logic clr_en, acc_we, wb_valid, wb_ready;
  word_t mac_a;
  stats_t stats;
  int checks = 0, failures = 0;

  control_unit dut (
    .clk, .rst_n, .start, .busy, .done, .cfg_row_base_i(32'd0), .cfg_num_rows_i(32'd6),
    .list_clear, .sp_flush, .list_start, .fill_start, .stream_start, .list_done(1'b1), .fill_done(1'b1),
    .head_valid, .head, .pop, .q_valid, .q_id, .q_hit, .cache_rdata,
    .ldn_req_valid, .ldn_req_ready, .ldn_req_idx, .ldn_req_rid,
    .ldn_ret_valid, .ldn_ret_ready, .ldn_ret_idx, .ldn_ret_row,
    .clr_en, .clr_slot, .acc_we, .acc_slot, .mac_a, .mac_b,
    .wb_valid, .wb_ready, .wb_slot, .wb_row_id, .stats
  );

  // ---- data ----
  int   adj [6][$] = '{'{0,2,3,4,5}, '{1,3,4}, '{0,2,5}, '{0,1,3,4}, '{0,1,3,4}, '{0,2,5}};
  word_t aval [6][6];
  row_t XW [6];
  row_t obuf [16];
  row_t out [6];
  logic written [6];
  nz_t  stream [$];

  // ---- models ----
  assign head_valid = stream.size() > 0 && busy;
  assign head       = (stream.size() > 0) ? stream[0] : '0;
  assign q_hit      = q_valid && (q_id == 0 || q_id == 3 || q_id == 4);
  assign ldn_req_ready = 1'b1;
  assign wb_ready   = 1'b1;
  always @(posedge clk) begin
    if (pop) void'(stream.pop_front());
    if (q_hit) cache_rdata <= XW[q_id];
  end
  // DMA model: misses return in order, 60 cycles after the request
  int  rq_idx [$]; int rq_rid [$]; longint rq_t [$]; longint now = 0;
  always @(posedge clk) begin
    now++;
    if (ldn_req_valid) begin rq_idx.push_back(ldn_req_idx); rq_rid.push_back(ldn_req_rid); rq_t.push_back(now + 60); end
    if (ldn_ret_valid && ldn_ret_ready) ldn_ret_valid <= 1'b0;
    else if (!ldn_ret_valid && rq_t.size() > 0 && rq_t[0] <= now) begin
      ldn_ret_valid <= 1'b1;
      ldn_ret_idx   <= 4'(rq_idx[0]);
      ldn_ret_row   <= XW[rq_rid[0]];
      void'(rq_idx.pop_front()); void'(rq_rid.pop_front()); void'(rq_t.pop_front());
    end
  end
  // output buffer + MAC model, write-back capture
  always @(posedge clk) begin
    if (acc_we) for (int l = 0; l < LANES; l++) obuf[acc_slot][l] = obuf[acc_slot][l] + mac_a * mac_b[l];
    if (clr_en) obuf[clr_slot] = '0;
    if (wb_valid) begin out[wb_row_id] = obuf[wb_slot]; written[wb_row_id] = 1; end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_and_check(input string what);
    for (int r = 0; r < 6; r++) begin
      written[r] = 0;
      for (int j = 0; j < adj[r].size(); j++)
        stream.push_back('{empty: 1'b0, last: j == adj[r].size() - 1, col: adj[r][j], val: aval[r][j]});
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int r = 0; r < 6; r++) begin
      row_t ref_row;
      ref_row = '0;
      for (int j = 0; j < adj[r].size(); j++)
        for (int l = 0; l < LANES; l++) ref_row[l] += aval[r][j] * XW[adj[r][j]][l];
      checks++;
      if (!written[r] || out[r] !== ref_row) begin failures++; $display("FAIL %s row %0d", what, r); end
    end
    checks++;
    if (stats.hits != 13 || stats.misses + stats.merges != 9 || stats.ret_macs != 9 || stats.rows_done != 6) begin
      failures++; $display("FAIL %s counters: hits %0d misses %0d merges %0d", what, stats.hits, stats.misses, stats.merges);
    end
    $display("%s: %0d cycles, hits %0d misses %0d merges %0d runahead %0d", what, stats.cycles, stats.hits,
             stats.misses, stats.merges, stats.runahead);
  endtask

  initial begin
    ldn_ret_valid = 0;
    for (int r = 0; r < 6; r++) begin
      for (int l = 0; l < LANES; l++) XW[r][l] = {$urandom, $urandom};
      for (int j = 0; j < 6; j++) aval[r][j] = {$urandom, $urandom};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_and_check("example graph");
    checks++;
    if (stats.runahead == 0 || stats.merges == 0) begin failures++; $display("FAIL no runahead or no merge"); end
    // rows must be started while earlier ones wait: the whole job takes about
    // one miss latency, not one per row
    checks++;
    if (stats.cycles > 200) begin failures++; $display("FAIL misses not overlapped: %0d cycles", stats.cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
