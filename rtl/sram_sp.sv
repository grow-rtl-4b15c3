// sram_sp: single-ported synchronous RAM, one access per cycle. A read returns
// its word on the clock edge after the request (rdata holds until the next
// read). Used for each bank of the HDN cache, which the published design builds
// from single-ported compiled SRAM macros; here it is an inferable array.
module sram_sp #(
  parameter int DEPTH = 4096,
  parameter int W     = 64,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
