// control_unit: GROW's main controller. One job computes one graph cluster:
// the output rows cfg_row_base .. cfg_row_base+cfg_num_rows-1 of LHS x RHS,
// where the LHS (A, or X in the combination phase) streams in as CSR nonzeros
// and the RHS (XW, or W) is dense.
//
// Phases:  LIST  clear and load the cluster's HDN ID list (DMA)
//          FILL  copy the listed nodes' RHS rows into the HDN cache (DMA)
//          RUN   row-wise product with multi-row runahead, until every row of
//                the cluster has been written back.
// In the combination phase the host lists W's own row IDs as "HDNs", so W is
// held wholly on chip and every lookup hits.
//
// RUN, per cycle:
//  * Issue (one nonzero): a row is first given a free output-buffer slot
//    (cleared). Each of its nonzeros looks up its column in the HDN ID list.
//    A hit reads the cached row (one cycle) and the MAC array adds val*row into
//    the slot in the next cycle (stage S1). A miss allocates an LHS ID table
//    entry {LDN index, slot, value}; the LDN index is that of a fetch already in
//    flight for the same row, or a new LDN table entry whose fetch is sent to
//    the DMA. The issuer does not wait: after the row's last nonzero it moves to
//    the next row (runahead). It stalls only when all RDEG slots are in use or
//    a table is full.
//  * Return: a missed row handed back by the DMA is matched against the LHS ID
//    table; one waiting nonzero per cycle is multiplied into its slot, its entry
//    freed; when none remain the LDN entry is freed. The MAC array is shared;
//    S1 has priority. A miss to the row being drained waits until it is freed.
//  * Retire: a slot whose row has issued all nonzeros and has nothing pending
//    is written to DRAM and freed. Rows may retire out of order.
// The published design gives the tables, their sizes and the runahead policy;
// the cycle-level pipeline, the arbitration and the stall rules are this
// design's choices.
//
// Lint notes: rst_n is reported as used both synchronously and asynchronously
// because the interface assertions below are disabled during reset; no flop
// uses it synchronously. The LDN table's per-entry valid vector is left
// unconnected on purpose: only its hit/full outputs are needed here.
module control_unit
  import grow_pkg::*;
#(
  parameter int RDEG = 16,
  parameter int M    = 16,
  parameter int N    = 64,
  parameter int SW   = $clog2(RDEG),
  parameter int MIW  = $clog2(M)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic [RID_W-1:0]  cfg_row_base_i,
  input  logic [31:0]       cfg_num_rows_i,
  // DMA phase control
  output logic              list_clear,
  output logic              sp_flush,
  output logic              list_start,
  output logic              fill_start,
  output logic              stream_start,
  input  logic              list_done,
  input  logic              fill_done,
  // I-BUF_sparse
  input  logic              head_valid,
  input  nz_t               head,
  output logic              pop,
  // I-BUF_dense
  output logic              q_valid,
  output logic [RID_W-1:0]  q_id,
  input  logic              q_hit,
  input  row_t              cache_rdata,
  // LDN fetch through the DMA
  output logic              ldn_req_valid,
  input  logic              ldn_req_ready,
  output logic [MIW-1:0]    ldn_req_idx,
  output logic [RID_W-1:0]  ldn_req_rid,
  input  logic              ldn_ret_valid,
  output logic              ldn_ret_ready,
  input  logic [MIW-1:0]    ldn_ret_idx,
  input  row_t              ldn_ret_row,
  // O-BUF_dense and MAC array
  output logic              clr_en,
  output logic [SW-1:0]     clr_slot,
  output logic              acc_we,
  output logic [SW-1:0]     acc_slot,
  output word_t             mac_a,
  output row_t              mac_b,
  // write-back
  output logic              wb_valid,
  input  logic              wb_ready,
  output logic [SW-1:0]     wb_slot,
  output logic [RID_W-1:0]  wb_row_id,
  output stats_t            stats
);
  typedef enum logic [2:0] {S_IDLE, S_LIST, S_FILL, S_RUN} phase_t;
  typedef enum logic [1:0] {SL_FREE, SL_ACTIVE, SL_ISSUED} slot_st_t;

  phase_t            phase;
  logic [RID_W-1:0]  cfg_row_base;   // descriptor latched at start
  logic [31:0]       cfg_num_rows;
  slot_st_t          st   [RDEG];
  logic [RID_W-1:0]  srow [RDEG];
  logic [7:0]        pend [RDEG];
  logic              cur_active;
  logic [SW-1:0]     cur_slot;
  logic [31:0]       rows_started, rows_retired;
  logic              s1_valid;
  logic [SW-1:0]     s1_slot;
  word_t             s1_val;

  // ---------------- tables ----------------
  logic            ldn_hit, ldn_full, ldn_alloc, ldn_free;
  logic [MIW-1:0]  ldn_hit_idx, ldn_alloc_idx;
  logic            lhs_alloc, lhs_full, lhs_found, lhs_inv;
  logic [MIW-1:0]  lhs_alloc_rhs;
  logic [$clog2(N)-1:0] lhs_idx;
  logic [SW-1:0]   lhs_obuf;
  word_t           lhs_val;

  ldn_table #(.M(M)) u_ldn (
    .clk, .rst_n, .lookup_rid(head.col), .lookup_hit(ldn_hit), .lookup_idx(ldn_hit_idx),
    .alloc_en(ldn_alloc), .alloc_rid(head.col), .alloc_idx(ldn_alloc_idx), .full(ldn_full),
    .free_en(ldn_free), .free_idx(ldn_ret_idx), .valid()
  );

  lhs_id_table #(.N(N), .TW(MIW), .OW(SW)) u_lhs (
    .clk, .rst_n, .alloc_en(lhs_alloc), .alloc_rhs(lhs_alloc_rhs), .alloc_obuf(cur_slot),
    .alloc_val(head.val), .full(lhs_full), .search_rhs(ldn_ret_idx), .match_found(lhs_found),
    .match_idx(lhs_idx), .match_obuf(lhs_obuf), .match_val(lhs_val),
    .inv_en(lhs_inv), .inv_idx(lhs_idx)
  );

  // ---------------- slot search ----------------
  logic          have_free, any_pending, have_ret;
  logic [SW-1:0] free_slot, ret_slot;
  always_comb begin
    have_free = 1'b0; free_slot = '0; any_pending = 1'b0;
    have_ret  = 1'b0; ret_slot  = '0;
    for (int i = RDEG - 1; i >= 0; i--) begin
      if (st[i] == SL_FREE) begin
        have_free = 1'b1; free_slot = SW'(i);
      end
      if (st[i] == SL_ISSUED && pend[i] == '0 && !(s1_valid && s1_slot == SW'(i))) begin
        have_ret = 1'b1; ret_slot = SW'(i);
      end
      if (st[i] != SL_FREE && pend[i] != '0) any_pending = 1'b1;
    end
  end

  // ---------------- issue ----------------
  logic run, finish_row, hit_issue, miss_issue, merge_issue, stall_win, stall_tab, ra_event;
  logic drain_conflict;
  assign run            = (phase == S_RUN);
  assign drain_conflict = ldn_ret_valid && ldn_hit_idx == ldn_ret_idx;

  always_comb begin
    pop = 1'b0; q_valid = 1'b0; clr_en = 1'b0; finish_row = 1'b0;
    hit_issue = 1'b0; miss_issue = 1'b0; merge_issue = 1'b0;
    stall_win = 1'b0; stall_tab = 1'b0; ra_event = 1'b0;
    ldn_alloc = 1'b0; lhs_alloc = 1'b0; lhs_alloc_rhs = ldn_alloc_idx; ldn_req_valid = 1'b0;
    if (run && head_valid) begin
      if (!cur_active) begin
        if (rows_started != cfg_num_rows) begin
          if (have_free) begin
            clr_en   = 1'b1;
            ra_event = any_pending;
          end else begin
            stall_win = 1'b1;
          end
        end
      end else if (head.empty) begin
        pop = 1'b1; finish_row = 1'b1;
      end else begin
        q_valid = 1'b1;
        if (q_hit) begin
          pop = 1'b1; hit_issue = 1'b1; finish_row = head.last;
        end else if (ldn_hit) begin
          if (drain_conflict || lhs_full) stall_tab = 1'b1;
          else begin
            lhs_alloc = 1'b1; lhs_alloc_rhs = ldn_hit_idx; merge_issue = 1'b1;
            pop = 1'b1; finish_row = head.last;
          end
        end else begin
          if (ldn_full || lhs_full || !ldn_req_ready) stall_tab = 1'b1;
          else begin
            ldn_alloc = 1'b1; ldn_req_valid = 1'b1; lhs_alloc = 1'b1; miss_issue = 1'b1;
            pop = 1'b1; finish_row = head.last;
          end
        end
      end
    end
  end
  assign q_id        = head.col;
  assign clr_slot    = free_slot;
  assign ldn_req_idx = ldn_alloc_idx;
  assign ldn_req_rid = head.col;

  // ---------------- return drain and MAC arbitration ----------------
  logic ret_mac;
  always_comb begin
    ret_mac       = ldn_ret_valid && !s1_valid && lhs_found;
    lhs_inv       = ret_mac;
    ldn_free      = ldn_ret_valid && !s1_valid && !lhs_found;
    ldn_ret_ready = ldn_free;
    acc_we        = s1_valid || ret_mac;
    acc_slot      = s1_valid ? s1_slot : lhs_obuf;
    mac_a         = s1_valid ? s1_val  : lhs_val;
    mac_b         = s1_valid ? cache_rdata : ldn_ret_row;
  end

  // ---------------- write-back ----------------
  assign wb_valid  = run && have_ret;
  assign wb_slot   = ret_slot;
  assign wb_row_id = srow[ret_slot];
  logic retire;
  assign retire = wb_valid && wb_ready;

  // ---------------- phase sequencing ----------------
  always_comb begin
    list_clear = 1'b0; sp_flush = 1'b0; list_start = 1'b0; fill_start = 1'b0; stream_start = 1'b0;
    if (phase == S_IDLE && start) begin
      list_clear = 1'b1; sp_flush = 1'b1; list_start = 1'b1;
    end
    if (phase == S_LIST && list_done) fill_start = 1'b1;
    if (phase == S_FILL && fill_done) stream_start = 1'b1;
  end
  assign busy = (phase != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= S_IDLE; done <= 1'b0; cur_active <= 1'b0; cur_slot <= '0;
      rows_started <= '0; rows_retired <= '0; s1_valid <= 1'b0; s1_slot <= '0; s1_val <= '0;
      stats <= '0; cfg_row_base <= '0; cfg_num_rows <= '0;
      for (int i = 0; i < RDEG; i++) begin
        st[i] <= SL_FREE; pend[i] <= '0; srow[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (phase)
        S_IDLE: if (start) begin
          phase <= S_LIST; stats <= '0;
          cfg_row_base <= cfg_row_base_i; cfg_num_rows <= cfg_num_rows_i; rows_started <= '0; rows_retired <= '0;
        end
        S_LIST: if (list_done) phase <= S_FILL;
        S_FILL: if (fill_done) phase <= S_RUN;
        S_RUN:  if (rows_retired == cfg_num_rows && rows_started == cfg_num_rows) begin
          phase <= S_IDLE; done <= 1'b1;
        end
        default: phase <= S_IDLE;
      endcase
      if (busy) stats.cycles <= stats.cycles + 1;

      // issue side
      if (clr_en) begin
        st[free_slot]   <= SL_ACTIVE;
        srow[free_slot] <= cfg_row_base + rows_started;
        cur_active      <= 1'b1;
        cur_slot        <= free_slot;
        rows_started    <= rows_started + 1;
      end
      if (finish_row) begin
        st[cur_slot] <= SL_ISSUED;
        cur_active   <= 1'b0;
        if (head.empty) stats.rows_empty <= stats.rows_empty + 1;
      end
      s1_valid <= hit_issue;
      s1_slot  <= cur_slot;
      s1_val   <= head.val;

      // pending misses per slot
      for (int i = 0; i < RDEG; i++) begin
        pend[i] <= pend[i] + 8'((lhs_alloc && cur_slot == SW'(i)) ? 1 : 0)
                           - 8'((ret_mac && lhs_obuf == SW'(i)) ? 1 : 0);
      end

      if (retire) begin
        st[ret_slot] <= SL_FREE;
        rows_retired <= rows_retired + 1;
        stats.rows_done <= stats.rows_done + 1;
      end

      if (hit_issue)   stats.hits         <= stats.hits + 1;
      if (miss_issue)  stats.misses       <= stats.misses + 1;
      if (merge_issue) stats.merges       <= stats.merges + 1;
      if (ret_mac)     stats.ret_macs     <= stats.ret_macs + 1;
      if (ra_event)    stats.runahead     <= stats.runahead + 1;
      if (stall_win)   stats.stall_window <= stats.stall_window + 1;
      if (stall_tab)   stats.stall_table  <= stats.stall_table + 1;
    end
  end

  // The request to the DMA is only raised when it can be taken.
  a_req_taken: assert property (@(posedge clk) disable iff (!rst_n) ldn_req_valid |-> ldn_req_ready)
    else $error("control_unit: LDN request dropped");
  a_miss_in_row: assert property (@(posedge clk) disable iff (!rst_n) lhs_alloc |-> cur_active)
    else $error("control_unit: miss outside a row");
endmodule
