// tb_grow_top: end-to-end test of the accelerator at its default size.
// It builds, inside the DRAM model, the data of a small GCN layer and runs it
// the way the host would:
//   * combination, OUT1 = X x W: X is sparse (some rows have no nonzeros), W is
//     dense and listed completely in the HDN ID list, so every lookup hits;
//   * aggregation, OUT2 = A x XW over several graph clusters: A has self loops
//     and power-law-like hubs, the hubs of each cluster are its HDN list, and
//     edges to other nodes miss and are fetched from DRAM.
// Every written output row is compared with a product computed here in plain
// 64-bit integer arithmetic. The event counters must show that each mechanism
// (hit, miss, merged miss, runahead, full runahead window, full miss tables,
// empty row) occurred, and the all-hit combination job must sustain close to
// one nonzero per cycle, the rate of one HDN lookup per clock.
module tb_grow_top;
  import grow_pkg::*;

  localparam int NX    = 40;    // rows of X
  localparam int KW    = 24;    // rows of W (input features)
  localparam int NA    = 192;   // graph nodes
  localparam int NCL   = 3;     // clusters
  localparam int CL    = NA / NCL;
  localparam int HUBS  = 6;     // HDNs per cluster
  localparam int MAXD  = 24;
  localparam int LAT   = 100;   // DRAM latency in cycles (about 100 ns at 1 GHz)

  localparam logic [31:0] W_BASE   = 32'h0010_0000;
  localparam logic [31:0] XW_BASE  = 32'h0020_0000;
  localparam logic [31:0] SP_BASE  = 32'h0030_0000;
  localparam logic [31:0] LST_BASE = 32'h0040_0000;
  localparam logic [31:0] OUT_BASE = 32'h0050_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [31:0] cfg_list_base, cfg_xw_base, cfg_sp_base, cfg_nnz_count, cfg_row_base, cfg_num_rows, cfg_out_base;
  logic [12:0] cfg_hdn_count;
  stats_t stats;
  logic rq_v, rq_r, rs_v, rs_r, wr_v, wr_r;
  logic [31:0] rq_a, wr_a;
  logic [MEM_W-1:0] rs_d, wr_d;

  grow_top dut (
    .clk, .rst_n, .start, .busy, .done,
    .cfg_list_base, .cfg_hdn_count, .cfg_xw_base, .cfg_sp_base, .cfg_nnz_count,
    .cfg_row_base, .cfg_num_rows, .cfg_out_base, .stats,
    .mem_rd_req_valid(rq_v), .mem_rd_req_ready(rq_r), .mem_rd_req_addr(rq_a),
    .mem_rd_resp_valid(rs_v), .mem_rd_resp_ready(rs_r), .mem_rd_resp_data(rs_d),
    .mem_wr_valid(wr_v), .mem_wr_ready(wr_r), .mem_wr_addr(wr_a), .mem_wr_data(wr_d)
  );

  dram_model #(.LAT(LAT), .STALL_PCT(10)) u_dram (
    .clk, .rst_n, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_resp_valid(rs_v), .rd_resp_ready(rs_r), .rd_resp_data(rs_d),
    .wr_valid(wr_v), .wr_ready(wr_r), .wr_addr(wr_a), .wr_data(wr_d)
  );

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // matrices
  row_t  W  [KW];
  row_t  XW [NA];
  int    xdeg [NX];  int xcol [NX][MAXD];  word_t xval [NX][MAXD];
  int    adeg [NA];  int acol [NA][MAXD];  word_t aval [NA][MAXD];
  row_t  ref_row;
  int    nrec;

  function automatic word_t rnd64();
    return {$urandom, $urandom};
  endfunction

  // write the CSR records of rows r0..r0+n-1 of a matrix at SP_BASE
  task automatic put_rec(input int idx, input logic empty, input logic last, input int col, input word_t val);
    logic [MEM_W-1:0] beat;
    int unsigned b;
    b = (SP_BASE >> 7) + idx / NZ_PER_BEAT;
    beat = u_dram.peek(b);
    beat[(idx % NZ_PER_BEAT)*128 +: 128] = {empty, last, 30'd0, col, val};
    u_dram.mem[b] = beat;
  endtask

  task automatic run_job(input logic [31:0] list_base, input int hcnt, input logic [31:0] rhs_base,
                         input int nnz, input int row0, input int nrows);
    cfg_list_base = list_base; cfg_hdn_count = 13'(hcnt); cfg_xw_base = rhs_base;
    cfg_sp_base = SP_BASE; cfg_nnz_count = nnz; cfg_row_base = row0; cfg_num_rows = nrows;
    cfg_out_base = OUT_BASE;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    while (!done) @(posedge clk);
  endtask

  task automatic check_row(input int r, input row_t expect_row, input string what);
    row_t got;
    got = row_t'(u_dram.peek((OUT_BASE >> 7) + r));
    checks++;
    if (got !== expect_row) begin
      failures++;
      if (failures < 10) $display("FAIL %s row %0d: got %h expected %h", what, r, got[0], expect_row[0]);
    end
  endtask

  int hubs_of [NCL][HUBS];
  int tot_hits = 0, tot_miss = 0, tot_merge = 0, tot_ra = 0, tot_sw = 0, tot_st = 0, tot_empty = 0, tot_ret = 0;

  initial begin
    int k, c, n, cyc_comb;
    start = 0;
    cfg_list_base = 0; cfg_hdn_count = 0; cfg_xw_base = 0; cfg_sp_base = 0;
    cfg_nnz_count = 0; cfg_row_base = 0; cfg_num_rows = 0; cfg_out_base = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;

    // ---------------- combination: OUT1 = X x W ----------------
    for (int i = 0; i < KW; i++) begin
      for (int l = 0; l < LANES; l++) W[i][l] = rnd64();
      u_dram.mem[(W_BASE >> 7) + i] = MEM_W'(W[i]);
    end
    for (int i = 0; i < KW; i++) begin   // list = W's own row IDs
      logic [MEM_W-1:0] beat;
      beat = u_dram.peek((LST_BASE >> 7) + i / 32);
      beat[(i % 32)*32 +: 32] = i;
      u_dram.mem[(LST_BASE >> 7) + i / 32] = beat;
    end
    nrec = 0;
    for (int r = 0; r < NX; r++) begin
      xdeg[r] = (r % 7 == 3) ? 0 : 1 + ($urandom % 8);
      for (int j = 0; j < xdeg[r]; j++) begin
        xcol[r][j] = (r * 5 + j * 3) % KW;
        xval[r][j] = rnd64();
        put_rec(nrec++, 1'b0, j == xdeg[r] - 1, xcol[r][j], xval[r][j]);
      end
      if (xdeg[r] == 0) put_rec(nrec++, 1'b1, 1'b1, 0, '0);
    end
    n = 0; for (int r = 0; r < NX; r++) n += xdeg[r];
    k = cyc;
    run_job(LST_BASE, KW, W_BASE, nrec, 0, NX);
    cyc_comb = stats.cycles;
    for (int r = 0; r < NX; r++) begin
      ref_row = '0;
      for (int j = 0; j < xdeg[r]; j++)
        for (int l = 0; l < LANES; l++) ref_row[l] += xval[r][j] * W[xcol[r][j]][l];
      check_row(r, ref_row, "X*W");
    end
    checks++;
    if (stats.misses != 0 || stats.hits != n) begin
      failures++; $display("FAIL combination: hits %0d misses %0d, expected %0d hits", stats.hits, stats.misses, n);
    end
    // rate: three DRAM round trips (list, fill, stream) plus, once data flow,
    // one cycle per record, one per row start and one per cache row filled
    checks++;
    if (stats.cycles > 32'(3 * (LAT + 8) + nrec + NX + KW + 40)) begin
      failures++; $display("FAIL combination rate: %0d cycles for %0d records", stats.cycles, nrec);
    end
    tot_hits += stats.hits; tot_empty += stats.rows_empty;
    $display("combination: %0d records, %0d cycles, empty rows %0d", nrec, cyc_comb, stats.rows_empty);

    // ---------------- aggregation: OUT2 = A x XW, one job per cluster ----------------
    for (int i = 0; i < NA; i++) begin
      for (int l = 0; l < LANES; l++) XW[i][l] = rnd64();
      u_dram.mem[(XW_BASE >> 7) + i] = MEM_W'(XW[i]);
    end
    for (c = 0; c < NCL; c++)
      for (int h = 0; h < HUBS; h++) hubs_of[c][h] = c * CL + h * 7 + 1;
    for (int r = 0; r < NA; r++) begin
      int cl;
      cl = r / CL;
      adeg[r] = 0;
      acol[r][adeg[r]] = r; aval[r][adeg[r]] = rnd64(); adeg[r]++;   // self loop
      n = 2 + ($urandom % 10);
      for (int j = 0; j < n; j++) begin
        int cc;
        if ($urandom % 100 < 55) cc = hubs_of[cl][$urandom % HUBS];          // hub
        else if ($urandom % 100 < 85) cc = cl * CL + ($urandom % CL);         // same cluster
        else cc = $urandom % NA;                                              // elsewhere
        acol[r][adeg[r]] = cc; aval[r][adeg[r]] = rnd64(); adeg[r]++;
      end
    end
    for (c = 0; c < NCL; c++) begin
      logic [MEM_W-1:0] beat;
      beat = '0;
      for (int h = 0; h < HUBS; h++) beat[h*32 +: 32] = hubs_of[c][h];
      u_dram.mem[(LST_BASE >> 7) + 8 + c] = beat;
      nrec = 0;
      for (int r = c * CL; r < (c + 1) * CL; r++)
        for (int j = 0; j < adeg[r]; j++) put_rec(nrec++, 1'b0, j == adeg[r] - 1, acol[r][j], aval[r][j]);
      run_job(LST_BASE + 32'((8 + c) * 128), HUBS, XW_BASE, nrec, c * CL, CL);
      $display("cluster %0d: %0d nonzeros, %0d cycles, hits %0d misses %0d merges %0d runahead %0d stall_win %0d stall_tab %0d",
               c, nrec, stats.cycles, stats.hits, stats.misses, stats.merges, stats.runahead,
               stats.stall_window, stats.stall_table);
      checks++;
      if (stats.rows_done != CL || stats.hits + stats.misses + stats.merges != nrec || stats.ret_macs != stats.misses + stats.merges) begin
        failures++; $display("FAIL cluster %0d counters", c);
      end
      tot_hits += stats.hits; tot_miss += stats.misses; tot_merge += stats.merges; tot_ra += stats.runahead;
      tot_sw += stats.stall_window; tot_st += stats.stall_table; tot_ret += stats.ret_macs;
    end
    for (int r = 0; r < NA; r++) begin
      ref_row = '0;
      for (int j = 0; j < adeg[r]; j++)
        for (int l = 0; l < LANES; l++) ref_row[l] += aval[r][j] * XW[acol[r][j]][l];
      check_row(r, ref_row, "A*XW");
    end

    // ---------------- a job whose rows all wait on one shared missed row ----------------
    // Every row has two hub nonzeros and one nonzero on node NA-1, which is in no
    // HDN list: the misses merge into one LDN entry, so the runahead window
    // (not the tables) is what fills up.
    nrec = 0;
    for (int r = 0; r < 48; r++) begin
      adeg[r] = 3;
      acol[r][0] = hubs_of[0][r % HUBS];       aval[r][0] = rnd64();
      acol[r][1] = NA - 1;                     aval[r][1] = rnd64();
      acol[r][2] = hubs_of[0][(r + 1) % HUBS]; aval[r][2] = rnd64();
      for (int j = 0; j < 3; j++) put_rec(nrec++, 1'b0, j == 2, acol[r][j], aval[r][j]);
    end
    run_job(LST_BASE + 32'(8 * 128), HUBS, XW_BASE, nrec, NA, 48);
    $display("shared-miss job: %0d cycles, misses %0d merges %0d stall_win %0d", stats.cycles, stats.misses, stats.merges, stats.stall_window);
    tot_hits += stats.hits; tot_miss += stats.misses; tot_merge += stats.merges; tot_ra += stats.runahead;
    tot_sw += stats.stall_window; tot_st += stats.stall_table; tot_ret += stats.ret_macs;
    for (int r = 0; r < 48; r++) begin
      ref_row = '0;
      for (int j = 0; j < 3; j++)
        for (int l = 0; l < LANES; l++) ref_row[l] += aval[r][j] * XW[acol[r][j]][l];
      check_row(NA + r, ref_row, "shared miss");
    end

    // every mechanism must have occurred
    begin
      string nm [8] = '{"HDN hit", "HDN miss", "merged miss", "miss return", "runahead", "window full", "table full", "empty row"};
      int    ct [8];
      ct = '{tot_hits, tot_miss, tot_merge, tot_ret, tot_ra, tot_sw, tot_st, tot_empty};
      for (int i = 0; i < 8; i++) begin
        checks++;
        $display("mechanism %-12s : %0d", nm[i], ct[i]);
        if (ct[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
