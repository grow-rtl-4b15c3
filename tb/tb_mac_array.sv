// tb_mac_array: drives random scalars, rows and partial sums into the 16-lane
// MAC array and compares every lane with acc + a*b computed here, including
// products that overflow 64 bits (results wrap modulo 2^64).
module tb_mac_array;
  import grow_pkg::*;
  word_t a;
  row_t  b, acc_in, acc_out;
  int checks = 0, failures = 0;

  mac_array dut (.a, .b, .acc_in, .acc_out);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      a = (t < 5) ? word_t'(t) - 2 : {$urandom, $urandom};
      for (int l = 0; l < LANES; l++) begin
        b[l]      = (t % 3 == 0) ? word_t'(l) : {$urandom, $urandom};
        acc_in[l] = {$urandom, $urandom};
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        longint unsigned expv;
        expv = longint'(acc_in[l]) + longint'(a) * longint'(b[l]);
        checks++;
        if (acc_out[l] !== word_t'(expv)) begin
          failures++;
          if (failures < 5) $display("FAIL t=%0d lane %0d: %h vs %h", t, l, acc_out[l], expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
