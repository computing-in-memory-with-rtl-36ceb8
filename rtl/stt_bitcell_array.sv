// stt_bitcell_array: behavioural model of the core STT-MRAM data array.
//
// Analog block.  ROWS x COLS one-transistor/one-MTJ bit-cells.  A cell in the
// parallel state (low resistance R_P) stores 1, anti-parallel (R_AP) stores 0.
// Reading applies V_read between bit-line and source line of every column;
// each cell whose wordline is on adds its current, I_P or I_AP, to the
// column's source-line current i_sl[c].  With one wordline on that is a
// normal read current, with two it is one of I_AP-AP, I_AP-P, I_P-P: the sum
// the CiM sensing circuits classify.  The array itself is an unmodified
// STT-MRAM array, as in the paper.
//
// Writes are synchronous: when we is high, the row whose wordline is on takes
// wdata in the columns where col_en is set (column write drivers).
//
// The model is driven by the two wordline-driver inputs of the enhanced
// address decoder (row_a/en_a, row_b/en_b) rather than a one-hot vector of
// ROWS wordlines: at 8192 rows a one-hot vector would have to be re-encoded
// to index the storage, which only costs simulation and synthesis time.
// addr_decoder models the one-hot wordline drive itself.  Enabling the same
// row twice is one row on.  A write uses row_a (row_b if only it is on).
//
// fail_mask models read decision failures under process variation, which the
// paper's ECC is there to catch.  When two wordlines are on and
// fail_mask[c] is set, the current of column c is shifted by one cell step
// (I_P - I_AP): down if any enabled cell is parallel, up otherwise, so the
// sensing circuit mistakes e.g. I_P-P for I_AP-P.  Single-row reads are not
// disturbed (the paper finds their failure rate orders of magnitude lower).
// The injection port is this model's addition for testing.
//
// Interface: clk; row_a/en_a, row_b/en_b; we, col_en, wdata; fail_mask in; i_sl[COLS] out
// (combinational from the enabled rows and the stored bits).
module stt_bitcell_array
  import cim_pkg::*;
#(
  parameter int ROWS = 8192,
  parameter int COLS = 408,
  parameter int RA_W = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  input  logic [RA_W-1:0] row_a,
  input  logic            en_a,
  input  logic [RA_W-1:0] row_b,
  input  logic            en_b,
  input  logic            we,
  input  logic [COLS-1:0] col_en,
  input  logic [COLS-1:0] wdata,
  input  logic [COLS-1:0] fail_mask,
  output cur_t            i_sl [COLS]
);

  logic [COLS-1:0] mem [ROWS];
  logic [RA_W-1:0] idx1, idx2;
  logic            on1, on2;
  logic [COLS-1:0] row1, row2;

  // the (at most two) rows whose wordlines are on
  assign on1  = en_a | en_b;
  assign idx1 = en_a ? row_a : row_b;
  assign on2  = en_a & en_b & (row_a != row_b);
  assign idx2 = row_b;

  assign row1 = mem[idx1];
  assign row2 = mem[idx2];

  always_ff @(posedge clk) begin
    if (we && on1) mem[idx1] <= (row1 & ~col_en) | (wdata & col_en);
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      int acc;
      acc = 0;
      if (on1) acc += row1[c] ? I_P_NA : I_AP_NA;
      if (on2) acc += row2[c] ? I_P_NA : I_AP_NA;
      if (on2 && fail_mask[c]) begin
        if ((row1[c] | row2[c])) acc -= (I_P_NA - I_AP_NA);
        else                     acc += (I_P_NA - I_AP_NA);
      end
      i_sl[c] = cur_t'(acc);
    end
  end

endmodule
