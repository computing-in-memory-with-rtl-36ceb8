// stt_cim_memory: the STT-CiM scratchpad (data memory) with its Avalon slave.
//
// STT-CiM is an STT-MRAM that, besides reading and writing, returns a bitwise
// logic function or the sum of two stored words from a single array access,
// by enabling two wordlines and sensing the combined source-line current.
// This module is the whole memory as drawn in the paper's vector-operation
// figure: BANKS arrays (stt_cim_bank), a CiM decoder that turns CIMType into
// reference and multiplexer controls, an ECC encoder on the write path, the
// EDC unit on the sensed row, the Reduce Unit, the (N+1)-to-1 column
// multiplexer and the controller.
//
// Default size: 4 banks x 8192 rows x 8 words of 32 bits = 1 MB of data, the
// scratchpad size the paper evaluates, with rows of 8 words for vector
// operations of length 8 (and 4).  Each word is stored as a 51-bit 3EC4ED
// codeword, so a row is 408 columns.  The bank count and the address map are
// this design's choices.
//
// Data path of a read or CiM access: selected bank -> column outputs and XOR
// tap -> EDC (input chosen by the controller) -> result register in the
// controller -> Reduce Unit and column multiplexer -> readdata.  Writes:
// writedata -> encoder -> same codeword on every word's columns, column
// enables pick which words and bank masks which banks are written.
//
// Interface: clock, active-low asynchronous reset, Avalon-MM slave with the
// 3-bit cimtype extension, a decision-failure injection mask (test input, see
// stt_bitcell_array) and event pulses for monitoring.  Timing: see
// cim_controller.
module stt_cim_memory
  import cim_pkg::*;
#(
  parameter int N_WORDS      = 8,
  parameter int BANKS        = 4,
  parameter int ROWS         = 8192,
  parameter int SENSE_CYCLES = 1,
  parameter int ADDR_W       = 2 + $clog2(N_WORDS) + $clog2(BANKS) + $clog2(ROWS),
  parameter int COLS         = N_WORDS * CW_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] address,
  input  logic              read,
  input  logic              write,
  input  logic [WORD_W-1:0] writedata,
  input  logic [2:0]        cimtype,
  output logic [WORD_W-1:0] readdata,
  output logic              waitrequest,
  output logic [1:0]        response,
  input  logic [COLS-1:0]   fail_mask,
  output cim_events_t       events
);

  localparam int BANK_W = (BANKS > 1) ? $clog2(BANKS) : 1;
  localparam int RA_W   = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int SEL_W  = $clog2(N_WORDS + 1);

  logic [BANK_W-1:0]  acc_bank;
  logic [RA_W-1:0]    row_i, row_j;
  logic               en_i, en_j, we;
  cim_type_e          acc_type;
  cim_ctrl_t          ctrl;
  logic [BANKS-1:0]   wr_bank_mask;
  logic [COLS-1:0]    col_en, wdata_row;
  logic [WORD_W-1:0]  wr_word;
  logic [CW_W-1:0]    wr_cw;
  edc_src_e           edc_src;
  logic [COLS-1:0]    bank_out [BANKS];
  logic [COLS-1:0]    bank_xor [BANKS];
  logic [COLS-1:0]    sel_out, sel_xor, edc_in;
  logic [WORD_W-1:0]  sensed   [N_WORDS];
  logic [WORD_W-1:0]  dec_data [N_WORDS];
  logic [N_WORDS-1:0] dec_err, dec_unc, ru_valid;
  logic [WORD_W-1:0]  res      [N_WORDS];
  logic [WORD_W-1:0]  ru_out;
  ru_op_e             ru_op;
  logic [SEL_W-1:0]   mux_sel;

  cim_decoder u_cim_dec (.cim_type(acc_type), .ctrl(ctrl));

  ecc_encoder u_enc (.data(wr_word), .cw(wr_cw));
  assign wdata_row = {N_WORDS{wr_cw}};

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic sel_b;
    assign sel_b = we ? wr_bank_mask[b] : (int'(acc_bank) == b);
    stt_cim_bank #(.N_WORDS(N_WORDS), .ROWS(ROWS), .RA_W(RA_W)) u_bank (
      .clk(clk),
      .row_i(row_i), .en_i(en_i && sel_b),
      .row_j(row_j), .en_j(en_j && sel_b),
      .ctrl(ctrl),
      .we(we && sel_b), .col_en(col_en), .wdata(wdata_row),
      .fail_mask(fail_mask),
      .out(bank_out[b]), .xor_o(bank_xor[b])
    );
  end

  assign sel_out = bank_out[acc_bank];
  assign sel_xor = bank_xor[acc_bank];

  always_comb begin
    unique case (edc_src)
      EDC_NOT: edc_in = ~sel_out;
      EDC_XOR: edc_in = sel_xor;
      default: edc_in = sel_out;
    endcase
    for (int k = 0; k < N_WORDS; k++) sensed[k] = sel_out[k*CW_W + DATA_LSB +: WORD_W];
  end

  edc_unit #(.N_WORDS(N_WORDS)) u_edc (
    .cw(edc_in), .data(dec_data), .err(dec_err), .uncorr(dec_unc)
  );

  cim_controller #(
    .N_WORDS(N_WORDS), .BANKS(BANKS), .ROWS(ROWS), .SENSE_CYCLES(SENSE_CYCLES),
    .ADDR_W(ADDR_W)
  ) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .address(address), .read(read), .write(write), .writedata(writedata),
    .cimtype(cimtype), .waitrequest(waitrequest), .response(response),
    .acc_bank(acc_bank), .row_i(row_i), .en_i(en_i), .row_j(row_j), .en_j(en_j),
    .acc_type(acc_type), .we(we), .wr_bank_mask(wr_bank_mask), .col_en(col_en),
    .wr_word(wr_word), .edc_src(edc_src),
    .sensed(sensed), .dec_data(dec_data), .dec_err(dec_err), .dec_unc(dec_unc),
    .res(res), .ru_op(ru_op), .ru_valid(ru_valid), .mux_sel(mux_sel),
    .events(events)
  );

  reduce_unit #(.N_WORDS(N_WORDS)) u_ru (
    .in(res), .valid(ru_valid), .op(ru_op), .out(ru_out)
  );

  column_mux #(.N_WORDS(N_WORDS)) u_cmux (
    .words(res), .ru_out(ru_out), .sel(mux_sel), .dout(readdata)
  );

endmodule
