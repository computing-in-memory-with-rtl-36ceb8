// tb_nm_compute: all eight operations on random word vectors.
module tb_nm_compute;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  localparam int N = 4;
  cim_type_e op;
  logic [31:0] a [N], b [N], y [N];
  nm_compute #(.N_WORDS(N)) dut (.op(op), .a(a), .b(b), .y(y));

  initial begin
    #100000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    for (int k = 0; k < 400; k++) begin
      op = cim_type_e'(k % 8);
      for (int i = 0; i < N; i++) begin a[i] = $urandom; b[i] = $urandom; end
      #1;
      for (int i = 0; i < N; i++) begin
        logic [31:0] e;
        case (k % 8)
          0: e = a[i];          1: e = ~a[i];
          2: e = a[i] & b[i];   3: e = a[i] | b[i];
          4: e = ~(a[i] & b[i]); 5: e = ~(a[i] | b[i]);
          6: e = a[i] ^ b[i];   default: e = a[i] + b[i];
        endcase
        checks++;
        if (y[i] !== e) begin failures++; $display("FAIL op %0d", k % 8); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
