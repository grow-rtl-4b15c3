// lhs_id_table: the second table of GROW's runahead execution. Each of the N
// entries records one LHS nonzero that is waiting for a missed RHS row: valid,
// the LDN table index of that row (4 bits), the output-buffer row it adds into
// (4 bits) and the LHS value (64 bits), the published layout.
// alloc_en writes an entry into the lowest free slot (full when none).
// When a missed row comes back, search_rhs holds its LDN index; the table is
// searched associatively and reports the lowest matching entry (match_*),
// which the control unit consumes and invalidates with inv_en/inv_idx, one per
// cycle. Default N = 64 (64 x 68 bits = 544 bytes).
//
// Lint note: rst_n is reported as used both synchronously and asynchronously
// only because the usage assertion is disabled during reset.
module lhs_id_table
  import grow_pkg::*;
#(
  parameter int N  = 64,
  parameter int TW = 4,
  parameter int OW = 4,
  parameter int W  = DATA_W,
  parameter int IW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          alloc_en,
  input  logic [TW-1:0] alloc_rhs,
  input  logic [OW-1:0] alloc_obuf,
  input  logic [W-1:0]  alloc_val,
  output logic          full,
  input  logic [TW-1:0] search_rhs,
  output logic          match_found,
  output logic [IW-1:0] match_idx,
  output logic [OW-1:0] match_obuf,
  output logic [W-1:0]  match_val,
  input  logic          inv_en,
  input  logic [IW-1:0] inv_idx
);
  typedef struct packed {
    logic [TW-1:0] rhs;
    logic [OW-1:0] obuf;
    logic [W-1:0]  val;
  } entry_t;

  entry_t         ent [N];
  logic [N-1:0]   valid;
  logic [IW-1:0]  free_idx;

  always_comb begin
    full     = 1'b1;
    free_idx = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (!valid[i]) begin
        full     = 1'b0;
        free_idx = IW'(i);
      end
    end
  end

  always_comb begin
    match_found = 1'b0;
    match_idx   = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (valid[i] && ent[i].rhs == search_rhs) begin
        match_found = 1'b1;
        match_idx   = IW'(i);
      end
    end
  end
  assign match_obuf = ent[match_idx].obuf;
  assign match_val  = ent[match_idx].val;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else begin
      if (inv_en)   valid[inv_idx]  <= 1'b0;
      if (alloc_en) valid[free_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (alloc_en) ent[free_idx] <= '{rhs: alloc_rhs, obuf: alloc_obuf, val: alloc_val};
  end

  a_alloc_room: assert property (@(posedge clk) disable iff (!rst_n) alloc_en |-> !full)
    else $error("lhs_id_table: allocation while full");
endmodule
