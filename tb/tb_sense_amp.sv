// tb_sense_amp: random current pairs; positive output is I_SL > I_ref and
// the negative output its complement.
module tb_sense_amp;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  cur_t a, b;
  logic p, n;
  sense_amp dut (.i_sl(a), .i_ref(b), .vout_p(p), .vout_n(n));

  initial begin
    #100000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    for (int k = 0; k < 400; k++) begin
      a = cur_t'($urandom_range(0, 20000));
      b = (k % 4 == 0) ? a + 16'd1 : cur_t'($urandom_range(0, 20000));
      #1;
      checks += 2;
      if (p !== (int'(a) > int'(b))) begin failures++; $display("FAIL p a=%0d b=%0d", a, b); end
      if (n !== !(int'(a) > int'(b))) begin failures++; $display("FAIL n a=%0d b=%0d", a, b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
