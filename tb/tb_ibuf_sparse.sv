// tb_ibuf_sparse: pushes beats of 1..8 nonzeros into the sparse input buffer
// (a small 4-line instance) while popping at random, and checks that the
// nonzeros come out in order, that head_valid and free_lines track the fill
// level, and that flush empties the buffer.
module tb_ibuf_sparse;
  import grow_pkg::*;
  localparam int LINES = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush = 0, push_valid = 0, head_valid, pop = 0;
  nz_t [NZ_PER_BEAT-1:0] push_line;
  logic [3:0] push_count;
  logic [2:0] free_lines;
  nz_t head;
  int checks = 0, failures = 0;
  nz_t model [$];
  int  lines_used = 0;
  int  cnts [$];
  int  sub = 0;

  ibuf_sparse #(.LINES(LINES)) dut (.clk, .rst_n, .flush, .push_valid, .push_line, .push_count,
                                    .free_lines, .head_valid, .head, .pop);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pushed = 0, popped = 0;
    push_line = '0; push_count = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      // compare state with the model
      checks++;
      if (head_valid !== (model.size() > 0) || int'(free_lines) != LINES - lines_used) begin
        failures++; $display("FAIL cyc %0d: head_valid %0d free %0d model %0d/%0d", cyc, head_valid, free_lines, model.size(), lines_used);
      end
      if (model.size() > 0) begin
        checks++;
        if (head !== model[0]) begin failures++; $display("FAIL cyc %0d: head mismatch", cyc); end
      end
      push_valid = (lines_used < LINES) && ($urandom % 3 != 0) && (cyc < 1800);
      push_count = 4'(1 + $urandom % NZ_PER_BEAT);
      for (int j = 0; j < NZ_PER_BEAT; j++)
        push_line[j] = '{empty: 1'b0, last: j == int'(push_count) - 1, col: pushed + j, val: {$urandom, $urandom}};
      pop = (model.size() > 0) && ($urandom % 2 == 0);
      @(posedge clk);
      if (pop) begin
        void'(model.pop_front());
        sub++;
        if (sub == cnts[0]) begin void'(cnts.pop_front()); sub = 0; lines_used--; end
        popped++;
      end
      if (push_valid) begin
        for (int j = 0; j < int'(push_count); j++) model.push_back(push_line[j]);
        cnts.push_back(int'(push_count));
        lines_used++;
        pushed += int'(push_count);
      end
    end
    @(negedge clk); push_valid = 0; pop = 0; flush = 1;
    @(negedge clk); flush = 0;
    checks++;
    if (head_valid || free_lines != LINES) begin failures++; $display("FAIL flush"); end
    $display("pushed %0d popped %0d", pushed, popped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
