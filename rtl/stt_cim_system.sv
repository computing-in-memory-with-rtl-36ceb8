// stt_cim_system: STT-CiM used as the data scratchpad of a processor system.
//
// The system the paper evaluates: a processor whose instruction set is
// extended with CiM instructions, an on-chip Avalon-MM bus extended with a
// 3-bit CIMType, and the STT-CiM data memory as a bus slave.  The processor
// core and its instruction memory are not part of this RTL; their
// connections are ports of this module:
//   * dm_*  : the processor's data master (loads, stores, special writes),
//             with its CIMType bits;
//   * ci_*  : the custom-instruction port that executes CiM instructions
//             (cim_ci_unit turns each into one bus transaction).
// Both masters reach the memory through avalon_cim_bus.  fail_mask injects
// sensing decision failures into the memory's CiM accesses (test input);
// events reports what the memory did, one pulse per completed transaction.
//
// Parameters default to the configuration the paper presents as its main
// one: 1 MB of data, vector length 8.
module stt_cim_system
  import cim_pkg::*;
#(
  parameter int N_WORDS      = 8,
  parameter int BANKS        = 4,
  parameter int ROWS         = 8192,
  parameter int SENSE_CYCLES = 1,
  parameter int MADDR_W      = 2 + $clog2(N_WORDS) + $clog2(BANKS) + $clog2(ROWS),
  parameter int COLS         = N_WORDS * CW_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // processor data master
  input  logic [31:0]       dm_address,
  input  logic              dm_read,
  input  logic              dm_write,
  input  logic [31:0]       dm_writedata,
  input  logic [2:0]        dm_cimtype,
  output logic [31:0]       dm_readdata,
  output logic              dm_waitrequest,
  output logic [1:0]        dm_response,
  // CiM custom instruction
  input  logic              ci_start,
  input  logic [7:0]        ci_n,
  input  logic [31:0]       ci_dataa,
  input  logic [31:0]       ci_datab,
  output logic              ci_done,
  output logic [31:0]       ci_result,
  output logic              ci_err,
  // test and monitoring
  input  logic [COLS-1:0]   fail_mask,
  output cim_events_t       events
);

  avalon_cim_if #(.ADDR_W(32))      if_dm  (.clk(clk), .rst_n(rst_n));
  avalon_cim_if #(.ADDR_W(32))      if_ci  (.clk(clk), .rst_n(rst_n));
  avalon_cim_if #(.ADDR_W(MADDR_W)) if_mem (.clk(clk), .rst_n(rst_n));

  assign if_dm.address   = dm_address;
  assign if_dm.read      = dm_read;
  assign if_dm.write     = dm_write;
  assign if_dm.writedata = dm_writedata;
  assign if_dm.cimtype   = dm_cimtype;
  assign dm_readdata     = if_dm.readdata;
  assign dm_waitrequest  = if_dm.waitrequest;
  assign dm_response     = if_dm.response;

  cim_ci_unit u_ci (
    .clk(clk), .rst_n(rst_n), .start(ci_start), .n(ci_n), .dataa(ci_dataa),
    .datab(ci_datab), .done(ci_done), .result(ci_result), .err(ci_err), .bus(if_ci)
  );

  avalon_cim_bus #(.SADDR_W(MADDR_W)) u_bus (
    .clk(clk), .rst_n(rst_n), .m0(if_dm), .m1(if_ci), .s(if_mem)
  );

  stt_cim_memory #(
    .N_WORDS(N_WORDS), .BANKS(BANKS), .ROWS(ROWS), .SENSE_CYCLES(SENSE_CYCLES),
    .ADDR_W(MADDR_W)
  ) u_mem (
    .clk(clk), .rst_n(rst_n),
    .address(if_mem.address), .read(if_mem.read), .write(if_mem.write),
    .writedata(if_mem.writedata), .cimtype(if_mem.cimtype),
    .readdata(if_mem.readdata), .waitrequest(if_mem.waitrequest),
    .response(if_mem.response), .fail_mask(fail_mask), .events(events)
  );

endmodule
