// tb_obuf_dense: clears, accumulates into and reads back the 16 output-row
// slots, checking both read ports against a model and that a clear zeroes only
// its own slot.
module tb_obuf_dense;
  import grow_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic clr_en = 0, acc_we = 0;
  logic [3:0] clr_slot = 0, acc_slot = 0, rd_slot = 0, wb_slot = 0;
  row_t acc_row, rd_row, wb_row;
  row_t model [16];
  int checks = 0, failures = 0;

  obuf_dense dut (.clk, .clr_en, .clr_slot, .acc_we, .acc_slot, .acc_row, .rd_slot, .rd_row, .wb_slot, .wb_row);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 16; s++) begin
      @(negedge clk); clr_en = 1; clr_slot = 4'(s); model[s] = '0;
    end
    @(negedge clk); clr_en = 0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      rd_slot = 4'($urandom); wb_slot = 4'($urandom);
      #1;
      checks++;
      if (rd_row !== model[rd_slot] || wb_row !== model[wb_slot]) begin failures++; $display("FAIL read t=%0d", t); end
      acc_we = ($urandom % 2) == 0; acc_slot = 4'($urandom);
      for (int l = 0; l < LANES; l++) acc_row[l] = {$urandom, $urandom};
      clr_en = ($urandom % 8) == 0; clr_slot = 4'($urandom);
      if (clr_en && acc_we && clr_slot == acc_slot) clr_en = 0;
      @(posedge clk);
      if (acc_we) model[acc_slot] = acc_row;
      if (clr_en) model[clr_slot] = '0;
      #1; acc_we = 0; clr_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
