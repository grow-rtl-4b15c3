// hdn_id_list: fully associative list of the top-N high-degree node IDs of the
// current graph cluster, built as a content-addressable memory of flip-flops so
// that one lookup completes every cycle (as the published design does).
// Lookup (combinational): lookup_hit is set when a valid entry holds
// lookup_id; lookup_idx is that entry's index, which is also the node's slot in
// the HDN cache. IDs within a cluster's list are unique, so the index is formed
// by OR-ing the indices of matching entries (no priority encoder needed),
// one comparator and one OR tree per index bit.
// Load: the DMA writes up to WPB IDs per cycle at indices wr_base.. wr_base+
// wr_count-1; clear invalidates every entry (start of a new cluster).
// rd_idx/rd_id read an entry back, so the cache fill knows which row to fetch.
// Default 4096 entries x 24 bits = 12 KB, as published.
module hdn_id_list
  import grow_pkg::*;
#(
  parameter int ENTRIES = 4096,
  parameter int IDW     = ID_W,
  parameter int WPB     = IDS_PER_BEAT,
  parameter int AW      = $clog2(ENTRIES)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      wr_en,
  input  logic [AW-1:0]             wr_base,
  input  logic [WPB-1:0][IDW-1:0]   wr_ids,
  input  logic [$clog2(WPB):0]      wr_count,
  input  logic [IDW-1:0]            lookup_id,
  output logic                      lookup_hit,
  output logic [AW-1:0]             lookup_idx,
  input  logic [AW-1:0]             rd_idx,
  output logic [IDW-1:0]            rd_id
);
  logic [IDW-1:0]     ids   [ENTRIES];
  logic [ENTRIES-1:0] valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else if (clear) valid <= '0;
    else if (wr_en) begin
      for (int j = 0; j < WPB; j++)
        if (j < int'(wr_count)) valid[wr_base + AW'(j)] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int j = 0; j < WPB; j++)
        if (j < int'(wr_count)) ids[wr_base + AW'(j)] <= wr_ids[j];
    end
  end

  // Comparators, one per entry; the index is the OR of the indices of the
  // matching entries, built bit by bit.
  logic [ENTRIES-1:0]         match;
  logic [AW-1:0][ENTRIES-1:0] idx_bit;
  for (genvar i = 0; i < ENTRIES; i++) begin : g_cmp
    assign match[i] = valid[i] && (ids[i] == lookup_id);
    for (genvar b = 0; b < AW; b++) begin : g_bit
      assign idx_bit[b][i] = match[i] && ((i >> b) & 1) == 1;
    end
  end
  for (genvar b = 0; b < AW; b++) begin : g_idx
    assign lookup_idx[b] = |idx_bit[b];
  end
  assign lookup_hit = |match;

  assign rd_id = ids[rd_idx];

endmodule
