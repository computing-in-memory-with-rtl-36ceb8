// tb_avalon_cim_bus: two masters issue random reads, writes and CiM requests
// at random moments into the bus; a slave model answers after a random
// number of cycles with data computed from the request it sees (address,
// writedata and CIMType).  Each master checks that its answer belongs to its
// own request, so a mixed-up grant or a request changed mid-transaction
// shows; the interface assertions check the request is held.  Contention
// (both masters requesting in the same cycle) must occur and, when it does,
// the two masters must be served in turn.
module tb_avalon_cim_bus;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  avalon_cim_if #(.ADDR_W(32)) m0 (.clk(clk), .rst_n(rst_n));
  avalon_cim_if #(.ADDR_W(32)) m1 (.clk(clk), .rst_n(rst_n));
  avalon_cim_if #(.ADDR_W(20)) s  (.clk(clk), .rst_n(rst_n));
  avalon_cim_bus #(.SADDR_W(20)) dut (.clk(clk), .rst_n(rst_n), .m0(m0), .m1(m1), .s(s));

  // slave model
  logic busy = 0;
  int cnt = 0;
  int contention = 0, last_served = -1, alternations = 0;
  int served [$];
  always_comb begin
    s.waitrequest = !(busy && cnt == 0);
    s.readdata    = {12'd0, s.address} ^ s.writedata ^ {s.cimtype, 29'd0} ^ {31'd0, s.write};
    s.response    = 2'b00;
  end
  always_ff @(posedge clk) begin
    if (!busy && (s.read || s.write)) begin
      busy <= 1'b1;
      cnt  <= $urandom_range(0, 3);
    end else if (busy && cnt > 0) cnt <= cnt - 1;
    else if (busy) busy <= 1'b0;
    if ((m0.read || m0.write) && (m1.read || m1.write)) contention++;
  end

  function automatic logic [31:0] expect_of(logic [31:0] a, logic [31:0] wd, logic [2:0] ct, logic wr);
    return {12'd0, a[19:0]} ^ wd ^ {ct, 29'd0} ^ {31'd0, wr};
  endfunction

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // A transfer completes at the rising edge after waitrequest is seen low,
  // so the request is held until the following falling edge.
  task automatic run_m0(int n);
    for (int i = 0; i < n; i++) begin
      logic [31:0] a, wd; logic [2:0] ct; logic wr;
      repeat ($urandom_range(0, 2)) @(negedge clk);
      a = $urandom; wd = $urandom; ct = 3'($urandom); wr = 1'($urandom);
      m0.address = a; m0.writedata = wd; m0.cimtype = ct; m0.read = !wr; m0.write = wr;
      do @(negedge clk); while (m0.waitrequest);
      chk(m0.readdata == expect_of(a, wd, ct, wr), "master 0 answer");
      served.push_back(0);
      @(negedge clk);
      m0.read = 0; m0.write = 0;
    end
  endtask

  task automatic run_m1(int n);
    for (int i = 0; i < n; i++) begin
      logic [31:0] a, wd; logic [2:0] ct;
      repeat ($urandom_range(0, 2)) @(negedge clk);
      a = $urandom; wd = $urandom; ct = 3'($urandom);
      m1.address = a; m1.writedata = wd; m1.cimtype = ct; m1.read = 1; m1.write = 0;
      do @(negedge clk); while (m1.waitrequest);
      chk(m1.readdata == expect_of(a, wd, ct, 1'b0), "master 1 answer");
      served.push_back(1);
      @(negedge clk);
      m1.read = 0;
    end
  endtask

  initial begin
    #200000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    m0.read = 0; m0.write = 0; m1.read = 0; m1.write = 0;
    m0.address = 0; m0.writedata = 0; m0.cimtype = 0;
    m1.address = 0; m1.writedata = 0; m1.cimtype = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    fork
      run_m0(150);
      run_m1(150);
    join
    chk(served.size() == 300, "all transactions served");
    chk(contention > 20, $sformatf("contention cycles %0d", contention));
    // both masters continuously busy in the middle: grants alternate
    for (int i = 1; i < served.size(); i++) if (served[i] != served[i-1]) alternations++;
    chk(alternations > 50, $sformatf("alternations %0d", alternations));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
