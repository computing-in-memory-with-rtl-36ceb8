// cim_controller: controller and Avalon-MM slave of the STT-CiM memory.
//
// Receives bus transactions and runs the array, the EDC and the near-memory
// path to answer them.  The bus is Avalon-MM with waitrequest, extended as the
// paper proposes with a 3-bit CIMType and with the second operand address
// carried on writedata during a CiM operation (a CiM operation travels as a
// read, whose writedata is otherwise unused).
//
// Transactions (encodings other than the CIMType list are this design's):
//   write, cimtype=WR_WORD      : store writedata at address (ECC-encoded).
//   write, cimtype=WR_ROW       : store writedata in every word of the row
//                                 (column replication).
//   write, cimtype=WR_ALL_BANKS : same row of every bank, every word
//                                 (special write for the spare-row technique).
//   read, cimtype=READ          : normal read, corrected by the EDC.
//   read, cimtype=NOT           : one-operand CiM.
//   read, cimtype=AND..ADD      : two-operand CiM; writedata[19:0] = address 2.
//   writedata[31:30] = ru_op (RU_NONE, RU_SUM, RU_ZCMP): vector operation on
//   the words of the row, reduced by the RU; writedata[29] = 1 selects vector
//   length N_WORDS/2 instead of N_WORDS (the group holding the addressed word).
//
// Address map (byte address; this design's choice): [1:0] byte, then word slot
// within the row, then bank, then row.  Consecutive rows of the address space
// therefore alternate between banks (row-interleaved placement).
//
// Operation flow:
//   * Two operands CiM-compatible (same bank, same word slot, different rows):
//     one array access with both wordlines on; after SENSE_CYCLES the EDC
//     checks the XOR tap of the words involved.  No error -> done.  XOR with a
//     correctable error -> the corrected XOR is returned directly.  ADD with
//     an error, or any uncorrectable XOR -> two conventional reads of the
//     operand rows, each corrected by the EDC, and near-memory recomputation.
//   * Operands not CiM-compatible -> the same near-memory path at once.
//   * AND, OR, NAND, NOR enable a single reference stack (paper's control
//     table), so their XOR tap is not meaningful and they are returned
//     unchecked.  The paper says every CiM operation also evaluates XOR; its
//     control table contradicts that for these four; this design follows the
//     table.
// Timing: waitrequest stays high from the request until the cycle the
// answer is ready (state DONE); readdata/response are valid in that cycle.
// A normal read or CiM op with no error takes SENSE_CYCLES + 2 cycles, a write
// 2 cycles, a near-memory recomputation 2*(SENSE_CYCLES+1) more.
//
// Interface: Avalon slave (address, read, write, writedata, cimtype,
// waitrequest, response); bank control outputs; sensed row and EDC results in;
// result words, RU controls and column-mux select out; events out.
module cim_controller
  import cim_pkg::*;
#(
  parameter int N_WORDS      = 8,
  parameter int BANKS        = 4,
  parameter int ROWS         = 8192,
  parameter int SENSE_CYCLES = 1,
  parameter int SLOT_W       = (N_WORDS > 1) ? $clog2(N_WORDS) : 1,
  parameter int BANK_W       = (BANKS > 1) ? $clog2(BANKS) : 1,
  parameter int RA_W         = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int ADDR_W       = 2 + $clog2(N_WORDS) + $clog2(BANKS) + $clog2(ROWS),
  parameter int SEL_W        = $clog2(N_WORDS + 1),
  parameter int COLS         = N_WORDS * CW_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // Avalon-MM slave, extended with CIMType
  input  logic [ADDR_W-1:0]  address,
  input  logic               read,
  input  logic               write,
  input  logic [WORD_W-1:0]  writedata,
  input  logic [2:0]         cimtype,
  output logic               waitrequest,
  output logic [1:0]         response,
  // to the banks
  output logic [BANK_W-1:0]  acc_bank,
  output logic [RA_W-1:0]    row_i,
  output logic               en_i,
  output logic [RA_W-1:0]    row_j,
  output logic               en_j,
  output cim_type_e          acc_type,
  output logic               we,
  output logic [BANKS-1:0]   wr_bank_mask,
  output logic [COLS-1:0]    col_en,
  output logic [WORD_W-1:0]  wr_word,
  output edc_src_e           edc_src,
  // from the sensing circuits (selected bank) and the EDC
  input  logic [WORD_W-1:0]  sensed  [N_WORDS],
  input  logic [WORD_W-1:0]  dec_data [N_WORDS],
  input  logic [N_WORDS-1:0] dec_err,
  input  logic [N_WORDS-1:0] dec_unc,
  // to the Reduce Unit and column multiplexer
  output logic [WORD_W-1:0]  res    [N_WORDS],
  output ru_op_e             ru_op,
  output logic [N_WORDS-1:0] ru_valid,
  output logic [SEL_W-1:0]   mux_sel,
  output cim_events_t        events
);

  typedef enum logic [2:0] {S_IDLE, S_WRITE, S_SENSE, S_CHECK, S_CALC, S_DONE} state_e;
  typedef enum logic [1:0] {PH_CIM, PH_NM_A, PH_NM_B} phase_e;

  localparam int SENSE_CNT_W = (SENSE_CYCLES > 1) ? $clog2(SENSE_CYCLES + 1) : 1;

  state_e   state;
  phase_e   phase;
  logic [SENSE_CNT_W-1:0] cnt;

  // latched request
  cim_type_e         op_q;
  wr_mode_e          wmode_q;
  ru_op_e            ru_q;
  logic              half_q;
  logic [WORD_W-1:0] wdata_q;
  logic [SLOT_W-1:0] slot1_q, slot2_q;
  logic [BANK_W-1:0] bank1_q, bank2_q;
  logic [RA_W-1:0]   row1_q, row2_q;
  logic [1:0]        resp_q;
  logic [WORD_W-1:0] res_q [N_WORDS];
  logic [WORD_W-1:0] a_q   [N_WORDS];
  logic [WORD_W-1:0] b_q   [N_WORDS];
  logic [WORD_W-1:0] b_rot [N_WORDS];
  logic [WORD_W-1:0] nm_y  [N_WORDS];
  logic [N_WORDS-1:0] gm;

  // address fields of the incoming request
  logic [SLOT_W-1:0] a1_slot, a2_slot;
  logic [BANK_W-1:0] a1_bank, a2_bank;
  logic [RA_W-1:0]   a1_row,  a2_row;
  logic [ADDR_W-1:0] addr2;
  assign addr2   = writedata[ADDR_W-1:0];
  if (N_WORDS > 1) begin : g_slot
    assign a1_slot = address[2 +: SLOT_W];
    assign a2_slot = addr2[2 +: SLOT_W];
  end else begin : g_noslot
    assign a1_slot = '0;
    assign a2_slot = '0;
  end
  if (BANKS > 1) begin : g_bank
    assign a1_bank = address[2 + $clog2(N_WORDS) +: BANK_W];
    assign a2_bank = addr2[2 + $clog2(N_WORDS) +: BANK_W];
  end else begin : g_nobank
    assign a1_bank = '0;
    assign a2_bank = '0;
  end
  assign a1_row = address[ADDR_W-1 -: RA_W];
  assign a2_row = addr2[ADDR_W-1 -: RA_W];

  function automatic logic two_operand(cim_type_e t);
    return !(t == CIM_READ || t == CIM_NOT);
  endfunction

  // words taking part: the addressed word, or the vector group holding it
  always_comb begin
    int vlen, base;
    vlen = half_q ? ((N_WORDS > 1) ? N_WORDS / 2 : 1) : N_WORDS;
    base = (int'(slot1_q) / vlen) * vlen;
    gm   = '0;
    for (int k = 0; k < N_WORDS; k++) begin
      if (ru_q == RU_NONE) gm[k] = (k == int'(slot1_q));
      else                 gm[k] = (k >= base) && (k < base + vlen);
    end
  end

  // operand B re-aligned so its addressed word lines up with operand A's
  always_comb begin
    for (int k = 0; k < N_WORDS; k++) begin
      b_rot[k] = b_q[(k + N_WORDS + int'(slot2_q) - int'(slot1_q)) % N_WORDS];
    end
  end

  nm_compute #(.N_WORDS(N_WORDS)) u_nm (.op(op_q), .a(a_q), .b(b_rot), .y(nm_y));

  // bank controls, from the state and the latched request
  always_comb begin
    acc_bank     = bank1_q;
    row_i        = row1_q;
    row_j        = row2_q;
    en_i         = 1'b0;
    en_j         = 1'b0;
    acc_type     = op_q;
    edc_src      = EDC_OUT;
    we           = 1'b0;
    wr_bank_mask = '0;
    col_en       = '0;
    wr_word      = wdata_q;
    if (state == S_SENSE || state == S_CHECK) begin
      en_i = 1'b1;
      unique case (phase)
        PH_CIM: begin
          en_j = two_operand(op_q);
          unique case (op_q)
            CIM_NOT:          edc_src = EDC_NOT;
            CIM_XOR, CIM_ADD: edc_src = EDC_XOR;
            default:          edc_src = EDC_OUT;
          endcase
        end
        PH_NM_A: acc_type = CIM_READ;
        PH_NM_B: begin
          acc_type = CIM_READ;
          acc_bank = bank2_q;
          row_i    = row2_q;
        end
        default: ;
      endcase
    end
    if (state == S_WRITE) begin
      en_i = 1'b1;
      we   = 1'b1;
      wr_bank_mask[bank1_q] = 1'b1;
      if (wmode_q == WR_ALL_BANKS) wr_bank_mask = '1;
      for (int k = 0; k < N_WORDS; k++) begin
        if (wmode_q != WR_WORD || k == int'(slot1_q)) col_en[k*CW_W +: CW_W] = '1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      phase   <= PH_CIM;
      cnt     <= '0;
      op_q    <= CIM_READ;
      wmode_q <= WR_WORD;
      ru_q    <= RU_NONE;
      half_q  <= 1'b0;
      wdata_q <= '0;
      slot1_q <= '0; slot2_q <= '0;
      bank1_q <= '0; bank2_q <= '0;
      row1_q  <= '0; row2_q  <= '0;
      resp_q  <= RESP_OKAY;
      events  <= '0;
      for (int k = 0; k < N_WORDS; k++) begin
        res_q[k] <= '0;
        a_q[k]   <= '0;
        b_q[k]   <= '0;
      end
    end else begin
      events <= '0;
      unique case (state)
        S_IDLE: begin
          if (write || read) begin
            op_q    <= cim_type_e'(cimtype);
            wmode_q <= wr_mode_e'(cimtype);
            ru_q    <= write ? RU_NONE : ru_op_e'(writedata[31:30]);
            half_q  <= writedata[29];
            wdata_q <= writedata;
            slot1_q <= a1_slot; slot2_q <= a2_slot;
            bank1_q <= a1_bank; bank2_q <= a2_bank;
            row1_q  <= a1_row;  row2_q  <= a2_row;
            resp_q  <= RESP_OKAY;
            cnt     <= SENSE_CNT_W'(SENSE_CYCLES - 1);
            if (write) begin
              state <= S_WRITE;
            end else if (two_operand(cim_type_e'(cimtype)) &&
                         (a1_bank != a2_bank || a1_slot != a2_slot || a1_row == a2_row)) begin
              phase <= PH_NM_A;
              state <= S_SENSE;
            end else begin
              phase <= PH_CIM;
              state <= S_SENSE;
            end
          end
        end

        S_WRITE: begin
          events.wr         <= (wmode_q == WR_WORD);
          events.special_wr <= (wmode_q != WR_WORD);
          state <= S_DONE;
        end

        S_SENSE: begin
          if (cnt == '0) state <= S_CHECK;
          else           cnt   <= cnt - 1'b1;
        end

        S_CHECK: begin
          cnt <= SENSE_CNT_W'(SENSE_CYCLES - 1);
          unique case (phase)
            PH_CIM: begin
              state    <= S_DONE;
              events.vec <= (ru_q != RU_NONE);
              unique case (op_q)
                CIM_READ, CIM_NOT: begin
                  for (int k = 0; k < N_WORDS; k++)
                    res_q[k] <= (op_q == CIM_NOT) ? ~dec_data[k] : dec_data[k];
                  if (|(dec_unc & gm)) begin
                    resp_q <= RESP_SLVERROR;
                    events.uncorrectable <= 1'b1;
                  end else if (|(dec_err & gm)) begin
                    events.ecc_fix_read <= 1'b1;
                  end
                  events.rd  <= (op_q == CIM_READ);
                  events.cim <= (op_q == CIM_NOT);
                end
                CIM_XOR: begin
                  if (|(dec_unc & gm)) begin
                    phase <= PH_NM_A;
                    state <= S_SENSE;
                    events.nm_correct <= 1'b1;
                  end else begin
                    res_q <= dec_data;
                    events.cim        <= 1'b1;
                    events.ecc_direct <= |(dec_err & gm);
                  end
                end
                CIM_ADD: begin
                  if (|(dec_err & gm)) begin
                    phase <= PH_NM_A;
                    state <= S_SENSE;
                    events.nm_correct <= 1'b1;
                  end else begin
                    res_q <= sensed;
                    events.cim <= 1'b1;
                  end
                end
                default: begin
                  res_q <= sensed;
                  events.cim <= 1'b1;
                end
              endcase
            end
            PH_NM_A: begin
              a_q   <= dec_data;
              phase <= PH_NM_B;
              state <= S_SENSE;
              if (|(dec_unc & gm)) resp_q <= RESP_SLVERROR;
            end
            default: begin  // PH_NM_B
              b_q   <= dec_data;
              state <= S_CALC;
              if (|(dec_unc & gm)) resp_q <= RESP_SLVERROR;
            end
          endcase
        end

        S_CALC: begin
          res_q <= nm_y;
          events.vec <= (ru_q != RU_NONE);
          events.nm_misalign <= (two_operand(op_q) &&
                                 (bank1_q != bank2_q || slot1_q != slot2_q || row1_q == row2_q));
          events.uncorrectable <= (resp_q != RESP_OKAY);
          state <= S_DONE;
        end

        S_DONE: begin
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  assign waitrequest = (state != S_DONE);
  assign response    = resp_q;
  assign res         = res_q;
  assign ru_op       = ru_q;
  assign ru_valid    = gm;
  assign mux_sel     = (ru_q != RU_NONE) ? SEL_W'(N_WORDS) : SEL_W'(slot1_q);

endmodule
