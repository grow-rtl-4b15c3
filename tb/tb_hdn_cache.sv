// tb_hdn_cache: writes random 16-word rows into random slots of the banked HDN
// cache (default 4096 x 128 B) and reads them back, checking the data and the
// one-cycle read latency of the single-ported banks.
module tb_hdn_cache;
  import grow_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0, we = 0;
  logic [11:0] addr = 0;
  row_t wdata, rdata;
  row_t model [int];
  int checks = 0, failures = 0;

  hdn_cache dut (.clk, .en, .we, .addr, .wdata, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int slots [64];
    for (int i = 0; i < 64; i++) slots[i] = (i == 0) ? 0 : (i == 1) ? 4095 : $urandom % 4096;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 12'(slots[i]);
      for (int l = 0; l < LANES; l++) wdata[l] = {$urandom, $urandom};
      model[slots[i]] = wdata;
    end
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      en = 1; we = 0; addr = 12'(slots[i]);
      @(posedge clk); #1;
      en = 0;
      checks++;
      if (rdata !== model[slots[i]]) begin failures++; $display("FAIL slot %0d", slots[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
