// tb_column_mux: every select value 0..N picks the matching word, N the RU output.
module tb_column_mux;
  int checks = 0, failures = 0;
  localparam int N = 8;
  logic [31:0] w [N];
  logic [31:0] ru, d;
  logic [3:0] sel;
  column_mux #(.N_WORDS(N)) dut (.words(w), .ru_out(ru), .sel(sel), .dout(d));

  initial begin
    #100000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    for (int k = 0; k < 200; k++) begin
      for (int i = 0; i < N; i++) w[i] = $urandom;
      ru = $urandom;
      sel = 4'(k % (N + 1));
      #1;
      checks++;
      if (d !== ((int'(sel) == N) ? ru : w[sel])) begin failures++; $display("FAIL sel=%0d", sel); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
