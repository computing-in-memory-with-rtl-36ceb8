// avalon_cim_bus: extended Avalon-MM interconnect between the processor side
// and the STT-CiM memory.
//
// Two masters share the memory slave: m0 is the processor's data master
// (ordinary loads and stores, and the special writes of the data-mapping
// techniques), m1 the CiM custom-instruction unit.  Besides the usual Avalon
// signals the bus carries the 3-bit CIMType, as the paper proposes; the
// second operand address of a CiM operation rides on writedata.  Arbitration
// is round-robin; a grant is held until the slave drops waitrequest, so a
// transaction is never split.  A master not granted sees waitrequest high.
// Arbitration scheme and single-slave address decoding (the slave sees the
// low SADDR_W address bits) are this design's choices.
//
// Timing: the granted master's request reaches the slave in the same cycle
// (combinational path); the grant is registered once the slave has accepted.
//
// Interface: clk, rst_n; m0, m1 (slave modports of avalon_cim_if: the bus
// answers the masters); s (master modport: the bus drives the memory).
module avalon_cim_bus #(
  parameter int SADDR_W = 20
) (
  input  logic         clk,
  input  logic         rst_n,
  avalon_cim_if.slave  m0,
  avalon_cim_if.slave  m1,
  avalon_cim_if.master s
);

  logic req0, req1, busy, owner, last, gnt;

  assign req0 = m0.read || m0.write;
  assign req1 = m1.read || m1.write;

  always_comb begin
    if (busy) gnt = owner;
    else      gnt = req1 && (!req0 || !last);
  end

  always_comb begin
    if (gnt) begin
      s.address   = m1.address[SADDR_W-1:0];
      s.read      = m1.read;
      s.write     = m1.write;
      s.writedata = m1.writedata;
      s.cimtype   = m1.cimtype;
    end else begin
      s.address   = m0.address[SADDR_W-1:0];
      s.read      = m0.read;
      s.write     = m0.write;
      s.writedata = m0.writedata;
      s.cimtype   = m0.cimtype;
    end
    m0.readdata    = s.readdata;
    m1.readdata    = s.readdata;
    m0.response    = s.response;
    m1.response    = s.response;
    m0.waitrequest = gnt  || s.waitrequest;
    m1.waitrequest = !gnt || s.waitrequest;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      owner <= 1'b0;
      last  <= 1'b1;
    end else begin
      if ((s.read || s.write) && !s.waitrequest) begin
        busy <= 1'b0;
        last <= gnt;
      end else if ((s.read || s.write) && !busy) begin
        busy  <= 1'b1;
        owner <= gnt;
      end
    end
  end

endmodule
