// stt_cim_bank: one STT-CiM array (behavioural model of the mixed-signal bank).
//
// Puts together what the paper draws for one array: the enhanced address
// decoder's two row inputs (row_i/en_i, row_j/en_j, passed to the array's
// wordline drivers; see stt_bitcell_array), the unmodified bit-cell
// array, the global reference generation with its two stacks, and one modified
// sensing circuit per column (two sense amplifiers plus the digital gates of
// cim_sense_logic).  The same control signals (from the CiM decoder) go to
// every column.
//
// Column layout (this design's choice): a row holds N_WORDS words, each a
// 51-bit 3EC4ED codeword (cim_pkg); word w occupies columns
// w*CW_W .. w*CW_W+CW_W-1 and codeword bit b sits in column w*CW_W+b.  The ADD
// carry ripples only through the 32 data columns of a word, entering the
// data LSB as 0; check-bit columns take a carry-in of 0.
//
// Timing: writes take effect at the clock edge; out/xor_o follow the enabled
// rows, the control word and the stored data combinationally (the controller
// waits a configurable number of cycles before using them).
//
// Interface: clk; row_i/en_i, row_j/en_j; ctrl; we, col_en, wdata;
// fail_mask in; out[COLS] (selected operation), xor_o[COLS] (XOR tap) out.
module stt_cim_bank
  import cim_pkg::*;
#(
  parameter int N_WORDS = 8,
  parameter int ROWS    = 8192,
  parameter int COLS    = N_WORDS * CW_W,
  parameter int RA_W    = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  input  logic [RA_W-1:0] row_i,
  input  logic            en_i,
  input  logic [RA_W-1:0] row_j,
  input  logic            en_j,
  input  cim_ctrl_t       ctrl,
  input  logic            we,
  input  logic [COLS-1:0] col_en,
  input  logic [COLS-1:0] wdata,
  input  logic [COLS-1:0] fail_mask,
  output logic [COLS-1:0] out,
  output logic [COLS-1:0] xor_o
);

  cur_t            i_sl [COLS];
  cur_t            i_refl, i_refr;
  logic [COLS-1:0] lp, ln, rp, rn, cout;
  logic [COLS-1:0] carry;

  stt_bitcell_array #(.ROWS(ROWS), .COLS(COLS), .RA_W(RA_W)) u_array (
    .clk(clk), .row_a(row_i), .en_a(en_i), .row_b(row_j), .en_b(en_j), .we(we), .col_en(col_en), .wdata(wdata),
    .fail_mask(fail_mask), .i_sl(i_sl)
  );

  ref_gen u_ref (
    .rwl(ctrl.rwl), .rwr(ctrl.rwr), .i_refl(i_refl), .i_refr(i_refr)
  );

  for (genvar c = 0; c < COLS; c++) begin : g_col
    localparam int B = c % CW_W;
    sense_amp u_sa_l (.i_sl(i_sl[c]), .i_ref(i_refl), .vout_p(lp[c]), .vout_n(ln[c]));
    sense_amp u_sa_r (.i_sl(i_sl[c]), .i_ref(i_refr), .vout_p(rp[c]), .vout_n(rn[c]));
    // carry enters column c from column c-1 only inside a word's data bits
    if (B > DATA_LSB && B < DATA_LSB + WORD_W) begin : g_cin
      assign carry[c] = cout[c-1];
    end else begin : g_c0
      assign carry[c] = 1'b0;
    end
    cim_sense_logic u_logic (
      .lp(lp[c]), .ln(ln[c]), .rp(rp[c]), .rn(rn[c]), .sel(ctrl.sel),
      .cin(carry[c]), .out(out[c]), .o_xor(xor_o[c]), .cout(cout[c])
    );
  end

endmodule
