// tb_cim_ci_unit: custom instructions with random function codes and
// operand registers; a slave model answers after a random delay.  Checks
// that the bus request carries address = dataa, CIMType = n[2:0],
// writedata = {n[4:3], n[5], datab[28:0]}, that only reads are issued, that
// done pulses once per instruction with the slave's data as result, that the
// error output follows the response, and the cycle count (slave delay + 3 with this slave model).
module tb_cim_ci_unit;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  avalon_cim_if #(.ADDR_W(32)) bus (.clk(clk), .rst_n(rst_n));
  logic start = 0, done, err;
  logic [7:0] n;
  logic [31:0] dataa, datab, result;
  cim_ci_unit dut (.clk(clk), .rst_n(rst_n), .start(start), .n(n), .dataa(dataa), .datab(datab),
                   .done(done), .result(result), .err(err), .bus(bus));

  int delay = 0, cnt = 0;
  logic busy = 0;
  logic [1:0] resp = 0;
  always_comb begin
    bus.waitrequest = !(busy && cnt == 0);
    bus.readdata    = bus.address ^ {bus.cimtype, 29'd0} ^ 32'h5A5A_0000;
    bus.response    = resp;
  end
  always_ff @(posedge clk) begin
    if (!busy && bus.read) begin busy <= 1; cnt <= delay; end
    else if (busy && cnt > 0) cnt <= cnt - 1;
    else if (busy) busy <= 0;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #200000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    n = 0; dataa = 0; datab = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 100; i++) begin
      int cyc, ndone;
      delay = $urandom_range(0, 4);
      resp = (i % 10 == 9) ? 2'b10 : 2'b00;
      n = 8'($urandom); dataa = $urandom; datab = $urandom;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      chk(bus.read && !bus.write, "read issued");
      chk(bus.address == dataa && bus.cimtype == n[2:0] &&
          bus.writedata == {n[4:3], n[5], datab[28:0]}, "request fields");
      cyc = 1; ndone = 0;
      while (!done) begin @(negedge clk); cyc++; end
      chk(result == (dataa ^ {n[2:0], 29'd0} ^ 32'h5A5A_0000), "result");
      chk(err == (resp != 0), "error flag");
      chk(cyc == delay + 3, $sformatf("latency %0d for delay %0d", cyc, delay));
      @(negedge clk);
      chk(!done && !bus.read, "done is a single pulse and the bus is released");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
