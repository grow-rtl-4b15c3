// dma_unit: moves all data between DRAM and GROW's on-chip buffers.
// Read side, in priority order:
//   1. LDN row fetch: a row that missed in the HDN cache (ldn_req_*), read from
//      xw_base + rid*128 and handed back whole on ldn_ret_* (held until taken).
//   2. HDN ID list load (list_start): ceil(hdn_count/32) beats from list_base,
//      written into the HDN ID list 32 IDs at a time.
//   3. HDN cache fill (fill_start): for each list entry i, the dense row of
//      node list[i] is read and written into cache slot i.
//   4. Sparse stream (stream_start): the CSR nonzero records from sp_base,
//      eight per beat, pushed into I-BUF_sparse. A beat is requested only when
//      the buffer has a free line for it and every beat already in flight.
// Reads are issued one per cycle, up to TAGQ outstanding; DRAM answers in
// order, and a FIFO of tags (kind, index, count) steers each returning beat to
// its destination -- the return demultiplexer of the published block diagram.
// Write side: a finished output row (wb_*) is written to out_base + row*128.
// list_done/fill_done/stream_done rise once every beat of that phase returned.
// The descriptor (cfg_*_i) is latched on list_start. The address layout, the priorities and the tag depth are this design's
// choices; the published text only assigns these data movements to the DMA.
//
// Lint note: rst_n is reported as used both synchronously and asynchronously
// only because the interface assertion is disabled during reset; every flop
// uses the asynchronous reset.
module dma_unit
  import grow_pkg::*;
#(
  parameter int HDN_ENTRIES = 4096,
  parameter int IBUF_LINES  = 128,
  parameter int TAGQ        = 32,
  parameter int LDN_M       = 16,
  parameter int HAW         = $clog2(HDN_ENTRIES),
  parameter int LW          = $clog2(IBUF_LINES),
  parameter int LIW         = $clog2(LDN_M)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // cluster descriptor
  input  logic [ADDR_W-1:0]    cfg_list_base_i,
  input  logic [ADDR_W-1:0]    cfg_xw_base_i,
  input  logic [ADDR_W-1:0]    cfg_sp_base_i,
  input  logic [ADDR_W-1:0]    cfg_out_base_i,
  input  logic [HAW:0]         cfg_hdn_count_i,
  input  logic [31:0]          cfg_nnz_count_i,
  // phase control
  input  logic                 list_start,
  input  logic                 fill_start,
  input  logic                 stream_start,
  output logic                 list_done,
  output logic                 fill_done,
  output logic                 stream_done,
  // I-BUF_dense
  output logic                               list_wr_en,
  output logic [HAW-1:0]                     list_wr_base,
  output logic [IDS_PER_BEAT-1:0][ID_W-1:0]  list_wr_ids,
  output logic [$clog2(IDS_PER_BEAT):0]      list_wr_count,
  output logic [HAW-1:0]                     list_rd_idx,
  input  logic [ID_W-1:0]                    list_rd_id,
  output logic                               fill_we,
  output logic [HAW-1:0]                     fill_slot,
  output row_t                               fill_row,
  // I-BUF_sparse
  output logic                               sp_push,
  output nz_t [NZ_PER_BEAT-1:0]              sp_line,
  output logic [$clog2(NZ_PER_BEAT):0]       sp_count,
  input  logic [LW:0]                        sp_free_lines,
  // LDN row fetch
  input  logic                 ldn_req_valid,
  output logic                 ldn_req_ready,
  input  logic [LIW-1:0]       ldn_req_idx,
  input  logic [RID_W-1:0]     ldn_req_rid,
  output logic                 ldn_ret_valid,
  input  logic                 ldn_ret_ready,
  output logic [LIW-1:0]       ldn_ret_idx,
  output row_t                 ldn_ret_row,
  // output row write-back
  input  logic                 wb_valid,
  output logic                 wb_ready,
  input  logic [RID_W-1:0]     wb_row_id,
  input  row_t                 wb_row,
  // DRAM
  output logic                 mem_rd_req_valid,
  input  logic                 mem_rd_req_ready,
  output logic [ADDR_W-1:0]    mem_rd_req_addr,
  input  logic                 mem_rd_resp_valid,
  output logic                 mem_rd_resp_ready,
  input  logic [MEM_W-1:0]     mem_rd_resp_data,
  output logic                 mem_wr_valid,
  input  logic                 mem_wr_ready,
  output logic [ADDR_W-1:0]    mem_wr_addr,
  output logic [MEM_W-1:0]     mem_wr_data
);
  localparam int RB = $clog2(ROW_BYTES);  // 7: bytes per beat = 128
  localparam int TQW = $clog2(TAGQ);

  typedef enum logic [1:0] {K_LIST, K_ROW, K_SPARSE, K_LDN} kind_t;
  typedef struct packed {
    kind_t       kind;
    logic [15:0] idx;
    logic [6:0]  cnt;
  } tag_t;

  // ---------------- cluster descriptor, latched at list_start ----------------
  logic [ADDR_W-1:0] cfg_list_base, cfg_xw_base, cfg_sp_base, cfg_out_base;
  logic [HAW:0]      cfg_hdn_count;
  logic [31:0]       cfg_nnz_count;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_list_base <= '0; cfg_xw_base <= '0; cfg_sp_base <= '0; cfg_out_base <= '0;
      cfg_hdn_count <= '0; cfg_nnz_count <= '0;
    end else if (list_start) begin
      cfg_list_base <= cfg_list_base_i; cfg_xw_base <= cfg_xw_base_i;
      cfg_sp_base   <= cfg_sp_base_i;   cfg_out_base <= cfg_out_base_i;
      cfg_hdn_count <= cfg_hdn_count_i; cfg_nnz_count <= cfg_nnz_count_i;
    end
  end

  // ---------------- phase bookkeeping ----------------
  logic          list_act, fill_act, stream_act;
  logic [HAW:0]  list_req, list_ret, list_beats;
  logic [HAW:0]  fill_req, fill_ret;
  logic [31:0]   sp_req, sp_ret, sp_beats;

  assign list_beats = (cfg_hdn_count + (HAW+1)'(IDS_PER_BEAT - 1)) >> $clog2(IDS_PER_BEAT);
  assign sp_beats   = (cfg_nnz_count + 32'(NZ_PER_BEAT - 1)) >> $clog2(NZ_PER_BEAT);
  assign list_done   = list_act   && (list_ret == list_beats);
  assign fill_done   = fill_act   && (fill_ret == cfg_hdn_count);
  assign stream_done = stream_act && (sp_ret   == sp_beats);

  // ---------------- tag FIFO ----------------
  tag_t           tagq [TAGQ];
  logic [TQW-1:0] tq_wr, tq_rd;
  logic [TQW:0]   tq_cnt;
  logic           tq_full;
  tag_t           head, new_tag;
  assign tq_full = (tq_cnt == (TQW+1)'(TAGQ));
  assign head    = tagq[tq_rd];

  // ---------------- read request selection ----------------
  logic sel_ldn, sel_list, sel_fill, sel_sp, rd_fire;
  logic [31:0] sp_inflight, sp_rem;
  logic [HAW:0] list_rem;

  assign sp_inflight = sp_req - sp_ret;
  assign sp_rem      = cfg_nnz_count - (sp_req << $clog2(NZ_PER_BEAT));
  assign list_rem    = cfg_hdn_count - (list_req << $clog2(IDS_PER_BEAT));
  assign list_rd_idx = fill_req[HAW-1:0];

  always_comb begin
    sel_ldn  = ldn_req_valid;
    sel_list = !sel_ldn && list_act && (list_req < list_beats);
    sel_fill = !sel_ldn && !sel_list && fill_act && (fill_req < cfg_hdn_count);
    sel_sp   = !sel_ldn && !sel_list && !sel_fill && stream_act && (sp_req < sp_beats)
               && (32'(sp_free_lines) > sp_inflight);
    mem_rd_req_valid = !tq_full && (sel_ldn || sel_list || sel_fill || sel_sp);
    mem_rd_req_addr  = '0;
    new_tag          = '{kind: K_SPARSE, idx: '0, cnt: '0};
    if (sel_ldn) begin
      mem_rd_req_addr = cfg_xw_base + (ADDR_W'(ldn_req_rid) << RB);
      new_tag         = '{kind: K_LDN, idx: 16'(ldn_req_idx), cnt: '0};
    end else if (sel_list) begin
      mem_rd_req_addr = cfg_list_base + (ADDR_W'(list_req) << RB);
      new_tag         = '{kind: K_LIST, idx: 16'(list_req),
                          cnt: (list_rem > (HAW+1)'(IDS_PER_BEAT)) ? 7'(IDS_PER_BEAT) : 7'(list_rem)};
    end else if (sel_fill) begin
      mem_rd_req_addr = cfg_xw_base + (ADDR_W'(list_rd_id) << RB);
      new_tag         = '{kind: K_ROW, idx: 16'(fill_req), cnt: '0};
    end else if (sel_sp) begin
      mem_rd_req_addr = cfg_sp_base + (ADDR_W'(sp_req) << RB);
      new_tag         = '{kind: K_SPARSE, idx: '0,
                          cnt: (sp_rem > 32'(NZ_PER_BEAT)) ? 7'(NZ_PER_BEAT) : 7'(sp_rem)};
    end
  end
  assign rd_fire       = mem_rd_req_valid && mem_rd_req_ready;
  assign ldn_req_ready = !tq_full && mem_rd_req_ready;

  // ---------------- return demultiplexer ----------------
  logic resp_fire;
  assign mem_rd_resp_ready = (tq_cnt != '0) && !(head.kind == K_LDN && ldn_ret_valid);
  assign resp_fire         = mem_rd_resp_valid && mem_rd_resp_ready;

  always_comb begin
    list_wr_en    = resp_fire && head.kind == K_LIST;
    list_wr_base  = HAW'(head.idx) << $clog2(IDS_PER_BEAT);
    list_wr_count = ($clog2(IDS_PER_BEAT)+1)'(head.cnt);
    for (int j = 0; j < IDS_PER_BEAT; j++) list_wr_ids[j] = mem_rd_resp_data[j*32 +: ID_W];
    fill_we   = resp_fire && head.kind == K_ROW;
    fill_slot = HAW'(head.idx);
    fill_row  = row_t'(mem_rd_resp_data);
    sp_push   = resp_fire && head.kind == K_SPARSE;
    sp_count  = ($clog2(NZ_PER_BEAT)+1)'(head.cnt);
    for (int j = 0; j < NZ_PER_BEAT; j++) sp_line[j] = unpack_nz(mem_rd_resp_data[j*128 +: 128]);
  end

  // ---------------- write-back ----------------
  assign mem_wr_valid = wb_valid;
  assign wb_ready     = mem_wr_ready;
  assign mem_wr_addr  = cfg_out_base + (ADDR_W'(wb_row_id) << RB);
  assign mem_wr_data  = MEM_W'(wb_row);

  // ---------------- state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      list_act <= 1'b0; fill_act <= 1'b0; stream_act <= 1'b0;
      list_req <= '0; list_ret <= '0; fill_req <= '0; fill_ret <= '0;
      sp_req <= '0; sp_ret <= '0;
      tq_wr <= '0; tq_rd <= '0; tq_cnt <= '0;
      ldn_ret_valid <= 1'b0; ldn_ret_idx <= '0;
    end else begin
      if (list_start) begin
        list_act <= 1'b1; fill_act <= 1'b0; stream_act <= 1'b0;
        list_req <= '0; list_ret <= '0; fill_req <= '0; fill_ret <= '0;
        sp_req <= '0; sp_ret <= '0;
      end else begin
        if (fill_start)   fill_act   <= 1'b1;
        if (stream_start) stream_act <= 1'b1;
        if (rd_fire && sel_list) list_req <= list_req + 1'b1;
        if (rd_fire && sel_fill) fill_req <= fill_req + 1'b1;
        if (rd_fire && sel_sp)   sp_req   <= sp_req + 1'b1;
        if (list_wr_en) list_ret <= list_ret + 1'b1;
        if (fill_we)    fill_ret <= fill_ret + 1'b1;
        if (sp_push)    sp_ret   <= sp_ret + 1'b1;
      end
      if (rd_fire)   tq_wr <= tq_wr + 1'b1;
      if (resp_fire) tq_rd <= tq_rd + 1'b1;
      tq_cnt <= tq_cnt + (TQW+1)'(rd_fire) - (TQW+1)'(resp_fire);
      if (resp_fire && head.kind == K_LDN) begin
        ldn_ret_valid <= 1'b1;
        ldn_ret_idx   <= LIW'(head.idx);
      end else if (ldn_ret_valid && ldn_ret_ready) begin
        ldn_ret_valid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_fire) tagq[tq_wr] <= new_tag;
    if (resp_fire && head.kind == K_LDN) ldn_ret_row <= row_t'(mem_rd_resp_data);
  end

  // A read response needs an outstanding request; a held LDN row may not be
  // overwritten.
  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n) mem_rd_resp_valid |-> tq_cnt != '0)
    else $error("dma_unit: response without request");
endmodule
