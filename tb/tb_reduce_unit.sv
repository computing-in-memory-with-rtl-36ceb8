// tb_reduce_unit: random vectors and valid masks (full length 8, half length
// 4, single word); summation modulo 2^32 and zero-compare bit k = (k-th valid word != 0)
// computed here and compared.
module tb_reduce_unit;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  localparam int N = 8;
  logic [31:0] in [N];
  logic [N-1:0] valid;
  ru_op_e op;
  logic [31:0] out;
  reduce_unit #(.N_WORDS(N)) dut (.in(in), .valid(valid), .op(op), .out(out));

  initial begin
    #100000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    for (int k = 0; k < 300; k++) begin
      logic [31:0] s, z;
      for (int i = 0; i < N; i++) in[i] = ($urandom_range(0, 3) == 0) ? 32'd0 : $urandom;
      case (k % 3)
        0: valid = 8'hFF;
        1: valid = (k % 2) ? 8'hF0 : 8'h0F;
        default: valid = 8'd1 << (k % 8);
      endcase
      s = 0; z = 0;
      begin
        int j;
        j = 0;
        for (int i = 0; i < N; i++) if (valid[i]) begin s += in[i]; z[j] = (in[i] != 0); j++; end
      end
      op = RU_SUM;  #1; checks++; if (out !== s) begin failures++; $display("FAIL sum %h want %h", out, s); end
      op = RU_ZCMP; #1; checks++; if (out !== z) begin failures++; $display("FAIL zcmp %h want %h", out, z); end
      op = RU_NONE; #1; checks++; if (out !== 0) begin failures++; $display("FAIL none"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
