// dram_model: behavioural model of the off-chip DRAM seen by the accelerator
// (not synthesizable, testbench use only). It stores 1024-bit beats in a
// sparse associative array indexed by byte address / 128. Reads are accepted
// when rd_req_ready is high (randomly withheld STALL_PCT percent of cycles) and
// answered in order, LAT to LAT+7 cycles later; a read of an address never
// written returns zeros. Writes are accepted when wr_ready is high and stored.
// Testbenches fill and inspect the array through the mem variable directly.
module dram_model
  import grow_pkg::*;
#(
  parameter int LAT       = 30,
  parameter int STALL_PCT = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [ADDR_W-1:0] rd_req_addr,
  output logic              rd_resp_valid,
  input  logic              rd_resp_ready,
  output logic [MEM_W-1:0]  rd_resp_data,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [MEM_W-1:0]  wr_data
);
  logic [MEM_W-1:0] mem [int unsigned];
  int unsigned      qa [$];
  longint           qt [$];
  longint           now = 0;
  int               reads = 0, writes = 0;

  function automatic logic [MEM_W-1:0] peek(input int unsigned beat);
    if (mem.exists(beat)) return mem[beat];
    return '0;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      rd_req_ready  <= 1'b0;
      rd_resp_valid <= 1'b0;
      wr_ready      <= 1'b0;
      rd_resp_data  <= '0;
      qa.delete(); qt.delete();
    end else begin
      if (rd_resp_valid && rd_resp_ready) begin
        void'(qa.pop_front()); void'(qt.pop_front());
      end
      if (rd_req_valid && rd_req_ready) begin
        qa.push_back(rd_req_addr >> 7);
        qt.push_back(now + LAT + longint'($urandom % 8));
        reads++;
      end
      if (wr_valid && wr_ready) begin
        mem[wr_addr >> 7] = wr_data;
        writes++;
      end
      now++;
      if (qa.size() > 0 && qt[0] <= now) begin
        rd_resp_valid <= 1'b1;
        rd_resp_data  <= peek(qa[0]);
      end else begin
        rd_resp_valid <= 1'b0;
      end
      rd_req_ready <= ($urandom % 100) >= STALL_PCT;
      wr_ready     <= ($urandom % 100) >= STALL_PCT;
    end
  end
endmodule
