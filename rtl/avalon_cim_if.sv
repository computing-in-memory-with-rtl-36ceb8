// avalon_cim_if: Avalon-MM bundle extended with CIMType.
//
// The signals of one Avalon memory-mapped link (waitrequest flow control,
// read data returned in the cycle waitrequest is low) plus the 3-bit CIMType
// the paper adds to the bus so that a master can request a compute-in-memory
// operation.  During a CiM operation (a read with a CIMType other than READ)
// writedata carries the second operand address.  The assertions state the
// rules both sides rely on: a master does not read and write at once, and
// keeps a request and its attributes steady while waitrequest is high.
//
// Modports: master (drives the request), slave (answers it).
interface avalon_cim_if #(
  parameter int ADDR_W = 32
) (
  input logic clk,
  input logic rst_n
);
  logic [ADDR_W-1:0] address;
  logic              read;
  logic              write;
  logic [31:0]       writedata;
  logic [2:0]        cimtype;
  logic [31:0]       readdata;
  logic              waitrequest;
  logic [1:0]        response;

  modport master (output address, read, write, writedata, cimtype,
                  input  readdata, waitrequest, response);
  modport slave  (input  address, read, write, writedata, cimtype,
                  output readdata, waitrequest, response);

  a_no_rd_wr: assert property (@(posedge clk) disable iff (!rst_n) !(read && write))
    else $error("avalon_cim_if: read and write asserted together");
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           ((read || write) && waitrequest) |=>
                           ((read || write) && $stable(address) && $stable(cimtype) &&
                            $stable(writedata) && $stable(read)))
    else $error("avalon_cim_if: request changed while waitrequest was high");
endinterface
