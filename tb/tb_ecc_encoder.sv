// tb_ecc_encoder: for random and corner data words, the codeword must keep the
// data in bits 18..49, have syndromes S1 = S3 = S5 = 0 (computed here with
// independent GF tables) and even overall parity; and, as the paper's
// codeword-retention argument needs, enc(a) xor enc(b) = enc(a xor b).
module tb_ecc_encoder;
  import tb_gf_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] d1, d2, d3;
  logic [50:0] c1, c2, c3;
  ecc_encoder u1 (.data(d1), .cw(c1));
  ecc_encoder u2 (.data(d2), .cw(c2));
  ecc_encoder u3 (.data(d3), .cw(c3));

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #100000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    build();
    for (int k = 0; k < 300; k++) begin
      d1 = (k == 0) ? 32'h0 : (k == 1) ? 32'hFFFF_FFFF : (k < 34) ? (32'd1 << (k - 2)) : $urandom;
      d2 = $urandom;
      d3 = d1 ^ d2;
      #1;
      chk(c1[49:18] == d1, $sformatf("data placement %h", d1));
      chk(syn(c1, 1) == 0 && syn(c1, 3) == 0 && syn(c1, 5) == 0, $sformatf("syndromes of %h", d1));
      chk(^c1 == 1'b0, $sformatf("overall parity of %h", d1));
      chk((c1 ^ c2) == c3, $sformatf("linearity %h %h", d1, d2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
