// obuf_dense: GROW's dense output buffer. It holds one output row (LANES words)
// for each row the control unit is working on at once, i.e. one slot per way of
// the multi-row runahead window. A slot is zeroed when a row is assigned to it
// (clr), accumulated by the MAC array (rd_row is read combinationally, the sum
// is written back through acc_* on the next edge), and read through wb_* when
// the finished row is written to DRAM. Built from flip-flops as in the
// published design: 16 slots x 128 B = 2 KB.
module obuf_dense
  import grow_pkg::*;
#(
  parameter int SLOTS = 16,
  parameter int SW    = $clog2(SLOTS)
) (
  input  logic          clk,
  input  logic          clr_en,
  input  logic [SW-1:0] clr_slot,
  input  logic          acc_we,
  input  logic [SW-1:0] acc_slot,
  input  row_t          acc_row,
  input  logic [SW-1:0] rd_slot,
  output row_t          rd_row,
  input  logic [SW-1:0] wb_slot,
  output row_t          wb_row
);
  row_t rows [SLOTS];

  always_ff @(posedge clk) begin
    if (acc_we) rows[acc_slot] <= acc_row;
    if (clr_en) rows[clr_slot] <= '0;
  end

  assign rd_row = rows[rd_slot];
  assign wb_row = rows[wb_slot];
endmodule
