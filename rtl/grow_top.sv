// grow_top: the GROW accelerator, a row-stationary sparse x dense GEMM engine
// for graph convolutional networks. It computes OUT = LHS x RHS one output row
// at a time (Gustavson's row-wise product): each nonzero LHS[r][c] scales the
// dense row RHS[c] and adds it into output row r. A GCN layer is run as two
// such products: X x W (combination) and A x (XW) (aggregation).
//
// Blocks (as in the published block diagram):
//   control_unit  phase sequencing, runahead issue, LDN/LHS ID tables
//   dma_unit      DRAM reads/writes and the return demultiplexer
//   ibuf_sparse   CSR nonzeros of the LHS           (12 KB)
//   ibuf_dense    HDN ID list CAM (12 KB) + HDN cache of pinned dense rows (512 KB)
//   obuf_dense    output rows being built, one per runahead way (2 KB)
//   mac_array     16 x 64-bit MACs
// DRAM sits outside; its port uses 1024-bit beats (one dense row per beat)
// with valid/ready handshakes and in-order read data.
//
// Use: set cfg_* to describe one graph cluster and pulse start; done pulses
// after the last output row of the cluster has been written to DRAM.
// stats holds the event counters of the last job.
//
// Lint notes: rst_n is reported as used both synchronously and asynchronously
// only because the assertion below is disabled during reset; every flop uses
// the asynchronous reset. stream_done from the DMA is not needed: the
// controller ends a job when its last row has been written back, which
// implies that the sparse stream has finished.
module grow_top
  import grow_pkg::*;
#(
  parameter int RDEG        = 16,
  parameter int LDN_M       = 16,
  parameter int LHS_N       = 64,
  parameter int HDN_ENTRIES = 4096,
  parameter int IBUF_LINES  = 128,
  parameter int TAGQ        = 32,
  parameter int HAW         = $clog2(HDN_ENTRIES)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  input  logic [ADDR_W-1:0]   cfg_list_base,
  input  logic [HAW:0]        cfg_hdn_count,
  input  logic [ADDR_W-1:0]   cfg_xw_base,
  input  logic [ADDR_W-1:0]   cfg_sp_base,
  input  logic [31:0]         cfg_nnz_count,
  input  logic [RID_W-1:0]    cfg_row_base,
  input  logic [31:0]         cfg_num_rows,
  input  logic [ADDR_W-1:0]   cfg_out_base,
  output stats_t              stats,
  output logic                mem_rd_req_valid,
  input  logic                mem_rd_req_ready,
  output logic [ADDR_W-1:0]   mem_rd_req_addr,
  input  logic                mem_rd_resp_valid,
  output logic                mem_rd_resp_ready,
  input  logic [MEM_W-1:0]    mem_rd_resp_data,
  output logic                mem_wr_valid,
  input  logic                mem_wr_ready,
  output logic [ADDR_W-1:0]   mem_wr_addr,
  output logic [MEM_W-1:0]    mem_wr_data
);
  localparam int SW  = $clog2(RDEG);
  localparam int MIW = $clog2(LDN_M);
  localparam int LW  = $clog2(IBUF_LINES);

  logic list_clear, sp_flush, list_start, fill_start, stream_start;
  logic list_done, fill_done, stream_done;
  logic list_wr_en; logic [HAW-1:0] list_wr_base; logic [IDS_PER_BEAT-1:0][ID_W-1:0] list_wr_ids;
  logic [$clog2(IDS_PER_BEAT):0] list_wr_count;
  logic [HAW-1:0] list_rd_idx; logic [ID_W-1:0] list_rd_id;
  logic fill_we; logic [HAW-1:0] fill_slot; row_t fill_row;
  logic sp_push; nz_t [NZ_PER_BEAT-1:0] sp_line; logic [$clog2(NZ_PER_BEAT):0] sp_count;
  logic [LW:0] sp_free_lines;
  logic head_valid, pop; nz_t head;
  logic q_valid, q_hit, cache_rvalid; logic [RID_W-1:0] q_id; row_t cache_rdata;
  logic ldn_req_valid, ldn_req_ready, ldn_ret_valid, ldn_ret_ready;
  logic [MIW-1:0] ldn_req_idx, ldn_ret_idx; logic [RID_W-1:0] ldn_req_rid; row_t ldn_ret_row;
  logic clr_en, acc_we; logic [SW-1:0] clr_slot, acc_slot, wb_slot;
  word_t mac_a; row_t mac_b, obuf_rd_row, mac_out, wb_row;
  logic wb_valid, wb_ready; logic [RID_W-1:0] wb_row_id;

  control_unit #(.RDEG(RDEG), .M(LDN_M), .N(LHS_N)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .cfg_row_base_i(cfg_row_base), .cfg_num_rows_i(cfg_num_rows),
    .list_clear, .sp_flush, .list_start, .fill_start, .stream_start, .list_done, .fill_done,
    .head_valid, .head, .pop, .q_valid, .q_id, .q_hit, .cache_rdata,
    .ldn_req_valid, .ldn_req_ready, .ldn_req_idx, .ldn_req_rid,
    .ldn_ret_valid, .ldn_ret_ready, .ldn_ret_idx, .ldn_ret_row,
    .clr_en, .clr_slot, .acc_we, .acc_slot, .mac_a, .mac_b,
    .wb_valid, .wb_ready, .wb_slot, .wb_row_id, .stats
  );

  dma_unit #(.HDN_ENTRIES(HDN_ENTRIES), .IBUF_LINES(IBUF_LINES), .TAGQ(TAGQ), .LDN_M(LDN_M)) u_dma (
    .clk, .rst_n, .cfg_list_base_i(cfg_list_base), .cfg_xw_base_i(cfg_xw_base), .cfg_sp_base_i(cfg_sp_base),
    .cfg_out_base_i(cfg_out_base), .cfg_hdn_count_i(cfg_hdn_count), .cfg_nnz_count_i(cfg_nnz_count),
    .list_start, .fill_start, .stream_start, .list_done, .fill_done, .stream_done,
    .list_wr_en, .list_wr_base, .list_wr_ids, .list_wr_count, .list_rd_idx, .list_rd_id,
    .fill_we, .fill_slot, .fill_row, .sp_push, .sp_line, .sp_count, .sp_free_lines,
    .ldn_req_valid, .ldn_req_ready, .ldn_req_idx, .ldn_req_rid,
    .ldn_ret_valid, .ldn_ret_ready, .ldn_ret_idx, .ldn_ret_row,
    .wb_valid, .wb_ready, .wb_row_id, .wb_row,
    .mem_rd_req_valid, .mem_rd_req_ready, .mem_rd_req_addr,
    .mem_rd_resp_valid, .mem_rd_resp_ready, .mem_rd_resp_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data
  );

  ibuf_sparse #(.LINES(IBUF_LINES)) u_ibuf_sparse (
    .clk, .rst_n, .flush(sp_flush), .push_valid(sp_push), .push_line(sp_line), .push_count(sp_count),
    .free_lines(sp_free_lines), .head_valid, .head, .pop
  );

  ibuf_dense #(.ENTRIES(HDN_ENTRIES)) u_ibuf_dense (
    .clk, .rst_n, .list_clear, .list_wr_en, .list_wr_base, .list_wr_ids, .list_wr_count,
    .list_rd_idx, .list_rd_id, .fill_we, .fill_slot, .fill_row,
    .q_valid, .q_id, .q_hit, .rdata_valid(cache_rvalid), .rdata(cache_rdata)
  );

  obuf_dense #(.SLOTS(RDEG)) u_obuf (
    .clk, .clr_en, .clr_slot, .acc_we, .acc_slot, .acc_row(mac_out),
    .rd_slot(acc_slot), .rd_row(obuf_rd_row), .wb_slot, .wb_row
  );

  mac_array u_mac (.a(mac_a), .b(mac_b), .acc_in(obuf_rd_row), .acc_out(mac_out));

  // A cache row is consumed exactly when it arrives.
  a_cache_used: assert property (@(posedge clk) disable iff (!rst_n) acc_we && cache_rvalid |-> u_ctrl.s1_valid)
    else $error("grow_top: cache data unused");
endmodule
