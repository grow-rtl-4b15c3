// ldn_table: the miss-status table of GROW's runahead execution. Each of the M
// entries (valid bit + 32-bit RHS row ID, as published) tracks one low-degree
// node row that missed in the HDN cache and is being fetched from DRAM.
// lookup_rid is compared with every valid entry (combinational); a hit means
// the row is already in flight and a new miss to it can wait on the same entry.
// alloc_idx is the lowest free entry (full when none); alloc_en claims it for
// alloc_rid on the clock edge. free_en releases an entry once every waiting
// nonzero has been served. Default M = 16 (64 bytes of row IDs).
//
// Lint note: rst_n is reported as used both synchronously and asynchronously
// only because the usage assertions are disabled during reset.
module ldn_table
  import grow_pkg::*;
#(
  parameter int M    = 16,
  parameter int RIDW = RID_W,
  parameter int IW   = $clog2(M)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [RIDW-1:0] lookup_rid,
  output logic            lookup_hit,
  output logic [IW-1:0]   lookup_idx,
  input  logic            alloc_en,
  input  logic [RIDW-1:0] alloc_rid,
  output logic [IW-1:0]   alloc_idx,
  output logic            full,
  input  logic            free_en,
  input  logic [IW-1:0]   free_idx,
  output logic [M-1:0]    valid
);
  logic [RIDW-1:0] rid [M];

  always_comb begin
    lookup_hit = 1'b0;
    lookup_idx = '0;
    for (int i = M - 1; i >= 0; i--) begin
      if (valid[i] && rid[i] == lookup_rid) begin
        lookup_hit = 1'b1;
        lookup_idx = IW'(i);
      end
    end
  end

  always_comb begin
    full      = 1'b1;
    alloc_idx = '0;
    for (int i = M - 1; i >= 0; i--) begin
      if (!valid[i]) begin
        full      = 1'b0;
        alloc_idx = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else begin
      if (free_en)  valid[free_idx]  <= 1'b0;
      if (alloc_en) valid[alloc_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (alloc_en) rid[alloc_idx] <= alloc_rid;
  end

  a_alloc_room: assert property (@(posedge clk) disable iff (!rst_n) alloc_en |-> !full)
    else $error("ldn_table: allocation while full");
  a_free_valid: assert property (@(posedge clk) disable iff (!rst_n) free_en |-> valid[free_idx])
    else $error("ldn_table: freeing an idle entry");
endmodule
