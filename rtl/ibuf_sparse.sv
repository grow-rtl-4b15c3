// ibuf_sparse: GROW's sparse input buffer, a FIFO of the CSR nonzeros of the
// LHS matrix (A in aggregation, X in combination). The DMA pushes one DRAM beat
// per cycle (up to NPB nonzeros, push_count of them valid); the control unit
// reads the oldest nonzero on head (combinational, first-word fall-through) and
// pops one per cycle. free_lines tells the DMA how many beats still fit, so it
// only requests what can be stored. Default 128 lines x 8 nonzeros x 12 bytes
// (32-bit column + 64-bit value) = 12 KB, the published capacity; the FIFO
// organisation and the fall-through read are this design's choices.
//
// Lint note: rst_n is reported as used both synchronously and asynchronously
// only because the interface assertions are disabled during reset.
module ibuf_sparse
  import grow_pkg::*;
#(
  parameter int LINES = 128,
  parameter int NPB   = NZ_PER_BEAT,
  parameter int LW    = $clog2(LINES),
  parameter int SW    = $clog2(NPB)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 flush,
  input  logic                 push_valid,
  input  nz_t [NPB-1:0]        push_line,
  input  logic [SW:0]          push_count,
  output logic [LW:0]          free_lines,
  output logic                 head_valid,
  output nz_t                  head,
  input  logic                 pop
);
  nz_t [NPB-1:0] mem [LINES];
  logic [SW:0]   cnt [LINES];
  logic [LW-1:0] wr_ptr, rd_ptr;
  logic [SW-1:0] rd_sub;
  logic [LW:0]   used;
  logic          line_done;

  assign head_valid = (used != '0);
  assign head       = mem[rd_ptr][rd_sub];
  assign free_lines = (LW+1)'(LINES) - used;
  assign line_done  = pop && head_valid && ({1'b0, rd_sub} == cnt[rd_ptr] - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0; rd_ptr <= '0; rd_sub <= '0; used <= '0;
    end else if (flush) begin
      wr_ptr <= '0; rd_ptr <= '0; rd_sub <= '0; used <= '0;
    end else begin
      if (push_valid) wr_ptr <= wr_ptr + 1'b1;
      if (pop && head_valid) begin
        if (line_done) begin
          rd_ptr <= rd_ptr + 1'b1;
          rd_sub <= '0;
        end else begin
          rd_sub <= rd_sub + 1'b1;
        end
      end
      used <= used + (LW+1)'(push_valid) - (LW+1)'(line_done);
    end
  end

  always_ff @(posedge clk) begin
    if (push_valid) begin
      mem[wr_ptr] <= push_line;
      cnt[wr_ptr] <= push_count;
    end
  end

  // Rules of the interface: no push into a full buffer, no empty beats.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push_valid |-> free_lines != '0)
    else $error("ibuf_sparse: push while full");
  a_no_empty_beat: assert property (@(posedge clk) disable iff (!rst_n) push_valid |-> push_count != '0)
    else $error("ibuf_sparse: empty beat pushed");
endmodule
