// cim_pkg: types, constants and arithmetic shared by the STT-CiM blocks.
//
// The STT-CiM memory computes bitwise logic and addition of two stored words
// in a single array access by enabling two wordlines and comparing the summed
// source-line current of each column against reference currents.  This package
// holds the encodings used between the blocks:
//   * cim_type_e : the 3-bit CIMType carried on the bus (READ, NOT, AND, OR,
//                  NAND, NOR, XOR, ADD).  The eight operations and the width of
//                  three bits follow the paper; the numeric code of each
//                  operation is this design's choice (table order).
//   * ru_op_e    : reduction performed by the Reduce Unit (summation and
//                  zero-compare are the two the paper lists).
//   * wr_mode_e  : CIMType reinterpreted on a write: normal word write, row
//                  fill (column replication) or row fill in every bank (the
//                  "special write" of the spare-row technique).  Encoding is
//                  this design's choice.
//   * cim_ctrl_t : the nine control signals of the CiM decoder (rwl0-2,
//                  rwr0-2, sel0-2).
//   * current constants: the read currents of the bit-cells and reference
//     cells in nA, used by the behavioural models of the analog parts.  R_P
//     follows from the paper's RA product (18 ohm-um^2) and 40 nm x 40 nm MTJ;
//     R_AP from its TMR of 124 %.  V_read, the access transistor resistance
//     and R_REF are not given and are assumed here (R_REF is the mean of R_P
//     and R_AP, which lies between them as the paper requires).
//   * the 3EC4ED code: a BCH(63,45) code over GF(2^6), shortened to 32 data
//     bits, plus one overall parity bit: 51-bit codewords.  The paper names
//     the code strength (3EC4ED) but not the code; BCH is this design's choice.
//     Codeword bit i (0..49) is the coefficient of x^i: bits 0..17 are the
//     check bits, bits 18..49 the data bits d0..d31, bit 50 the overall
//     parity.
package cim_pkg;

  localparam int WORD_W  = 32;             // processor word (paper: 32-bit I/O)
  localparam int BCH_R   = 18;             // BCH check bits for t = 3 over GF(64)
  localparam int CW_W    = WORD_W + BCH_R + 1;  // 51-bit stored codeword
  localparam int DATA_LSB = BCH_R;         // column of d0 inside a codeword
  localparam int PAR_BIT  = CW_W - 1;      // overall parity column
  // generator polynomial g(x) = m1(x) m3(x) m5(x), primitive poly x^6+x+1
  localparam logic [BCH_R:0] BCH_G = 19'h782CF;

  typedef enum logic [2:0] {
    CIM_READ = 3'd0,
    CIM_NOT  = 3'd1,
    CIM_AND  = 3'd2,
    CIM_OR   = 3'd3,
    CIM_NAND = 3'd4,
    CIM_NOR  = 3'd5,
    CIM_XOR  = 3'd6,
    CIM_ADD  = 3'd7
  } cim_type_e;

  typedef enum logic [1:0] {
    RU_NONE = 2'd0,
    RU_SUM  = 2'd1,
    RU_ZCMP = 2'd2
  } ru_op_e;

  typedef enum logic [2:0] {
    WR_WORD      = 3'd0,
    WR_ROW       = 3'd1,
    WR_ALL_BANKS = 3'd2
  } wr_mode_e;

  typedef struct packed {
    logic [2:0] rwl;   // left reference stack: [0]=R_REF, [1]=R_AP, [2]=R_P
    logic [2:0] rwr;   // right reference stack: same order
    logic [2:0] sel;   // sense-path multiplexer selects sel0..sel2
  } cim_ctrl_t;

  // source of the EDC input
  typedef enum logic [1:0] {
    EDC_OUT = 2'd0,   // column outputs (normal read)
    EDC_NOT = 2'd1,   // inverted column outputs (NOT)
    EDC_XOR = 2'd2    // XOR tap (CiM operations)
  } edc_src_e;

  // one-cycle event pulses reported by the controller
  typedef struct packed {
    logic rd;            // normal read served
    logic wr;            // normal word write
    logic special_wr;    // row fill / all-bank row fill
    logic cim;           // CiM operation served from one array access
    logic vec;           // vector operation (Reduce Unit used)
    logic ecc_fix_read;  // read data corrected by the EDC
    logic ecc_direct;    // CiM XOR corrected directly
    logic nm_correct;    // error on CiM op -> near-memory recomputation
    logic nm_misalign;   // operands not CiM-compatible -> near-memory
    logic uncorrectable; // error beyond correction reported on the bus
  } cim_events_t;

  // Avalon response codes
  localparam logic [1:0] RESP_OKAY     = 2'b00;
  localparam logic [1:0] RESP_SLVERROR = 2'b10;

  // ---- currents (nA) ------------------------------------------------------
  typedef logic [15:0] cur_t;
  localparam int V_READ_MV = 100;     // assumed read bias
  localparam int R_T_OHM   = 2000;    // assumed access transistor on-resistance
  localparam int R_P_OHM   = 11250;   // 18 ohm-um^2 / (0.04 um x 0.04 um)
  localparam int R_AP_OHM  = 25200;   // R_P * (1 + 1.24)
  localparam int R_REF_OHM = (R_P_OHM + R_AP_OHM) / 2;
  localparam int I_P_NA    = V_READ_MV * 1000000 / (R_T_OHM + R_P_OHM);
  localparam int I_AP_NA   = V_READ_MV * 1000000 / (R_T_OHM + R_AP_OHM);
  localparam int I_REF_NA  = V_READ_MV * 1000000 / (R_T_OHM + R_REF_OHM);

  // ---- GF(2^6) arithmetic, primitive polynomial x^6 + x + 1 ---------------
  typedef logic [5:0] gf_t;

  function automatic gf_t gf_mul(gf_t a, gf_t b);
    logic [10:0] p;
    // carry-less product, written out without loops
    p = ({5'd0, {6{b[0]}} & a}      ) ^ ({4'd0, {6{b[1]}} & a, 1'b0}) ^
        ({3'd0, {6{b[2]}} & a, 2'b0}) ^ ({2'd0, {6{b[3]}} & a, 3'b0}) ^
        ({1'd0, {6{b[4]}} & a, 4'b0}) ^ ({{6{b[5]}} & a, 5'b0});
    // reduce with x^k = x^(k-5) + x^(k-6) (from x^6 = x + 1), highest first
    if (p[10]) p ^= 11'b100_0011_0000;
    if (p[9])  p ^= 11'b010_0001_1000;
    if (p[8])  p ^= 11'b001_0000_1100;
    if (p[7])  p ^= 11'b000_1000_0110;
    if (p[6])  p ^= 11'b000_0100_0011;
    return p[5:0];
  endfunction

  // alpha^i for i = 0..62 (alpha = x, a root of x^6 + x + 1)
  localparam gf_t GF_EXP [63] = '{6'd1, 6'd2, 6'd4, 6'd8, 6'd16, 6'd32, 6'd3, 6'd6, 6'd12, 6'd24, 6'd48, 6'd35, 6'd5, 6'd10, 6'd20, 6'd40, 6'd19, 6'd38, 6'd15, 6'd30, 6'd60, 6'd59, 6'd53, 6'd41, 6'd17, 6'd34, 6'd7, 6'd14, 6'd28, 6'd56, 6'd51, 6'd37, 6'd9, 6'd18, 6'd36, 6'd11, 6'd22, 6'd44, 6'd27, 6'd54, 6'd47, 6'd29, 6'd58, 6'd55, 6'd45, 6'd25, 6'd50, 6'd39, 6'd13, 6'd26, 6'd52, 6'd43, 6'd21, 6'd42, 6'd23, 6'd46, 6'd31, 6'd62, 6'd63, 6'd61, 6'd57, 6'd49, 6'd33};

  // alpha^e for e >= 0 (table lookup; e is a constant wherever it is used)
  function automatic gf_t gf_alpha_pow(int e);
    return GF_EXP[e % 63];
  endfunction

  // multiplicative inverse: a^62
  function automatic gf_t gf_inv(gf_t a);
    gf_t r, sq;
    r  = 6'd1;
    sq = a;
    for (int i = 0; i < 6; i++) begin       // 62 = 0b111110
      if (i != 0) r = gf_mul(r, sq);
      sq = gf_mul(sq, sq);
    end
    return r;
  endfunction

endpackage
