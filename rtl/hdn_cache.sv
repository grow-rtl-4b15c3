// hdn_cache: the high-degree-node (HDN) cache of GROW's dense input buffer. It
// is a scratchpad of ENTRIES dense rows (RHS rows of XW, or of W in the
// combination phase), one row per pinned high-degree node; the slot of a node
// is its position in the HDN ID list. Nothing is ever evicted during a cluster.
// The published design uses 16 single-ported SRAM banks; here bank i holds
// element i of every row, so a whole 16-word row is read or written in one
// access. Read data appear one cycle after the request.
// Default: 4096 rows x 128 B = 512 KB, as in the published configuration.
module hdn_cache
  import grow_pkg::*;
#(
  parameter int ENTRIES = 4096,
  parameter int BANKS   = LANES,
  parameter int W       = DATA_W,
  parameter int AW      = $clog2(ENTRIES)
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [AW-1:0]            addr,
  input  logic [BANKS-1:0][W-1:0]  wdata,
  output logic [BANKS-1:0][W-1:0]  rdata
);
  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    sram_sp #(.DEPTH(ENTRIES), .W(W)) u_bank (
      .clk, .en, .we, .addr, .wdata(wdata[b]), .rdata(rdata[b])
    );
  end
endmodule
