// ibuf_dense: GROW's dense input buffer and its controller. It pairs the HDN ID
// list (a CAM of the current cluster's high-degree node IDs) with the HDN cache
// (the pinned dense rows of those nodes, slot = list position).
// Query: q_valid/q_id in cycle t; q_hit answers combinationally in cycle t and,
// on a hit, the cached row appears on rdata with rdata_valid in cycle t+1.
// Row IDs wider than the 24-bit list entries always miss.
// Load path (driven by the DMA): list_wr_* writes IDs into the list,
// list_rd_idx/list_rd_id read one back for address generation, fill_* writes
// a fetched row into a cache slot. A fill write takes the single cache port;
// the controller never queries during the fill phase.
module ibuf_dense
  import grow_pkg::*;
#(
  parameter int ENTRIES = 4096,
  parameter int AW      = $clog2(ENTRIES)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           list_clear,
  input  logic                           list_wr_en,
  input  logic [AW-1:0]                  list_wr_base,
  input  logic [IDS_PER_BEAT-1:0][ID_W-1:0] list_wr_ids,
  input  logic [$clog2(IDS_PER_BEAT):0]  list_wr_count,
  input  logic [AW-1:0]                  list_rd_idx,
  output logic [ID_W-1:0]                list_rd_id,
  input  logic                           fill_we,
  input  logic [AW-1:0]                  fill_slot,
  input  row_t                           fill_row,
  input  logic                           q_valid,
  input  logic [RID_W-1:0]               q_id,
  output logic                           q_hit,
  output logic                           rdata_valid,
  output row_t                           rdata
);
  logic          cam_hit;
  logic [AW-1:0] cam_idx;

  hdn_id_list #(.ENTRIES(ENTRIES)) u_list (
    .clk, .rst_n, .clear(list_clear),
    .wr_en(list_wr_en), .wr_base(list_wr_base), .wr_ids(list_wr_ids), .wr_count(list_wr_count),
    .lookup_id(q_id[ID_W-1:0]), .lookup_hit(cam_hit), .lookup_idx(cam_idx),
    .rd_idx(list_rd_idx), .rd_id(list_rd_id)
  );

  assign q_hit = q_valid && cam_hit && (q_id[RID_W-1:ID_W] == '0);

  hdn_cache #(.ENTRIES(ENTRIES)) u_cache (
    .clk, .en(fill_we || q_hit), .we(fill_we),
    .addr(fill_we ? fill_slot : cam_idx), .wdata(fill_row), .rdata(rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rdata_valid <= 1'b0;
    else        rdata_valid <= q_hit && !fill_we;
  end
endmodule
