// cim_ci_unit: CiM custom-instruction unit (the processor's ISA extension).
//
// The paper adds instructions CiMXOR, CiMAND, CiMADD, ... of the form
//   Opcode R_ADDR1 R_ADDR2 R_DEST
// that replace "load, load, ALU op" by one memory operation.  This unit is the
// hardware behind them, attached to the processor as a multi-cycle custom
// instruction: on start it issues one bus read to address dataa with
// CIMType = n[2:0] and the second address datab on writedata, waits for the
// memory, and returns the memory's answer as the instruction result.
// Function code n (this design's encoding): n[2:0] CIMType, n[4:3] Reduce
// Unit operation (0 none, 1 sum, 2 zero-compare), n[5] half vector length.
// The register-to-register form and the two addresses on one transaction are
// the paper's; the custom-instruction handshake (start/done) is assumed.
//
// Timing: done pulses for one cycle with result, one cycle after the memory
// drops waitrequest; a new start is accepted when idle.
//
// Interface: clk, rst_n; start, n, dataa, datab in; done, result, err out;
// bus (master modport of avalon_cim_if).
module cim_ci_unit (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [7:0]   n,
  input  logic [31:0]  dataa,
  input  logic [31:0]  datab,
  output logic         done,
  output logic [31:0]  result,
  output logic         err,
  avalon_cim_if.master bus
);

  logic        busy;
  logic [31:0] addr_q, wd_q;
  logic [2:0]  type_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      result <= '0;
      err    <= 1'b0;
      addr_q <= '0;
      wd_q   <= '0;
      type_q <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          addr_q <= dataa;
          wd_q   <= {n[4:3], n[5], datab[28:0]};
          type_q <= n[2:0];
        end
      end else if (!bus.waitrequest) begin
        busy   <= 1'b0;
        done   <= 1'b1;
        result <= bus.readdata;
        err    <= (bus.response != 2'b00);
      end
    end
  end

  assign bus.address   = addr_q;
  assign bus.read      = busy;
  assign bus.write     = 1'b0;
  assign bus.writedata = wd_q;
  assign bus.cimtype   = type_q;

endmodule
