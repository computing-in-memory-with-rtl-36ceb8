// tb_edc_unit: random words are encoded, 0 to 4 bit errors are injected at
// distinct random positions (all 51 bits eligible), and each word's decoder
// must report: no error for 0; error, corrected data and no uncorrectable
// flag for 1 to 3; uncorrectable for 4.  It also replays the paper's example
// of a decision failure during a CiM XOR: the XOR of two stored codewords
// with one flipped bit is corrected to word1 xor word2.
module tb_edc_unit;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  localparam int N = 2;
  logic [31:0] din [N];
  logic [50:0] cwv [N];
  logic [N*51-1:0] cw_in;
  logic [31:0] dout [N];
  logic [N-1:0] err, unc;
  for (genvar w = 0; w < N; w++) begin : g_enc
    ecc_encoder u_enc (.data(din[w]), .cw(cwv[w]));
  end
  edc_unit #(.N_WORDS(N)) dut (.cw(cw_in), .data(dout), .err(err), .uncorr(unc));

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [50:0] err_pattern(int n);
    logic [50:0] m;
    m = '0;
    while ($countones(m) < n) m[$urandom_range(0, 50)] = 1'b1;
    return m;
  endfunction

  initial begin
    #1000000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    for (int k = 0; k < 600; k++) begin
      int ne [N];
      for (int w = 0; w < N; w++) begin
        din[w] = $urandom;
        ne[w]  = (k + w) % 5;
      end
      #1;
      for (int w = 0; w < N; w++) cw_in[w*51 +: 51] = cwv[w] ^ err_pattern(ne[w]);
      #1;
      for (int w = 0; w < N; w++) begin
        if (ne[w] == 0) chk(!err[w] && !unc[w] && dout[w] == din[w], "clean word");
        else if (ne[w] <= 3)
          chk(err[w] && !unc[w] && dout[w] == din[w],
              $sformatf("%0d errors: err=%0d unc=%0d %h vs %h", ne[w], err[w], unc[w], dout[w], din[w]));
        else chk(err[w] && unc[w], $sformatf("4 errors not flagged, word %h", din[w]));
      end
    end
    // CiM XOR with a decision failure on data bit 1
    begin
      logic [50:0] x;
      din[0] = 32'hB; din[1] = 32'h6;
      #1;
      x = cwv[0] ^ cwv[1];
      x[18 + 1] = ~x[18 + 1];
      cw_in = {51'd0, x};
      #1;
      chk(err[0] && !unc[0] && dout[0] == 32'hD, "paper example: XOR corrected to 1101");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
