// tb_addr_decoder: random address pairs and enables; the wordline vector must
// be the OR of the two one-hot decodes.
module tb_addr_decoder;
  int checks = 0, failures = 0;
  localparam int ROWS = 64;
  logic [5:0] ai, aj;
  logic ei, ej;
  logic [ROWS-1:0] wl, exp_wl;
  addr_decoder #(.ROWS(ROWS)) dut (.addr_i(ai), .en_i(ei), .addr_j(aj), .en_j(ej), .wl(wl));

  initial begin
    #100000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      ai = 6'($urandom); aj = 6'($urandom); ei = 1'($urandom); ej = 1'($urandom);
      #1;
      exp_wl = '0;
      if (ei) exp_wl |= (64'd1 << ai);
      if (ej) exp_wl |= (64'd1 << aj);
      checks++;
      if (wl !== exp_wl) begin
        failures++;
        $display("FAIL ai=%0d ei=%0d aj=%0d ej=%0d wl=%h", ai, ei, aj, ej, wl);
      end
      checks++;
      if ($countones(wl) != ((ei && ej && ai != aj) ? 2 : (ei || ej) ? 1 : 0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
