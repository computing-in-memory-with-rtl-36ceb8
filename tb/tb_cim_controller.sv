// tb_cim_controller: the controller against a behavioural stand-in for the
// banks and EDC written here (word-level memory, operation results, XOR tap
// and injected EDC error/uncorrectable flags on CiM accesses).  Drives Avalon
// transactions and checks the returned data (through a reference column mux
// and reduce step), the response code, the event pulses and the cycle count
// of every kind of transaction (latency constants LAT_*, S = sense cycles).
module tb_cim_controller;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  localparam int N = 8, BANKS = 2, ROWS = 16, S = 2;
  localparam int AW = 2 + 3 + 1 + 4;
  localparam int LAT_WR = 2, LAT_RD = S + 2, LAT_NM_FIX = 3 * S + 5, LAT_NM_DIRECT = 2 * S + 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] address;
  logic read = 0, write = 0;
  logic [31:0] writedata;
  logic [2:0] cimtype;
  logic waitrequest;
  logic [1:0] response;
  logic [0:0] acc_bank;
  logic [3:0] row_i, row_j;
  logic en_i, en_j, we;
  cim_type_e acc_type;
  logic [BANKS-1:0] wr_bank_mask;
  logic [N*CW_W-1:0] col_en;
  logic [31:0] wr_word;
  edc_src_e edc_src;
  logic [31:0] sensed [N], dec_data [N], res [N];
  logic [N-1:0] dec_err, dec_unc, ru_valid, inj_err, inj_unc;
  ru_op_e ru_op;
  logic [3:0] mux_sel;
  cim_events_t ev;
  int ev_count [10];

  cim_controller #(.N_WORDS(N), .BANKS(BANKS), .ROWS(ROWS), .SENSE_CYCLES(S)) dut (
    .clk(clk), .rst_n(rst_n), .address(address), .read(read), .write(write),
    .writedata(writedata), .cimtype(cimtype), .waitrequest(waitrequest), .response(response),
    .acc_bank(acc_bank), .row_i(row_i), .en_i(en_i), .row_j(row_j), .en_j(en_j),
    .acc_type(acc_type), .we(we), .wr_bank_mask(wr_bank_mask), .col_en(col_en),
    .wr_word(wr_word), .edc_src(edc_src), .sensed(sensed), .dec_data(dec_data),
    .dec_err(dec_err), .dec_unc(dec_unc), .res(res), .ru_op(ru_op), .ru_valid(ru_valid),
    .mux_sel(mux_sel), .events(ev));

  // ---- behavioural banks + EDC -------------------------------------------
  logic [31:0] mem [BANKS][ROWS][N];

  function automatic logic [31:0] apply(int op, logic [31:0] a, logic [31:0] b);
    case (op)
      0: return a;          1: return ~a;
      2: return a & b;      3: return a | b;
      4: return ~(a & b);   5: return ~(a | b);
      6: return a ^ b;      default: return a + b;
    endcase
  endfunction

  always_comb begin
    for (int k = 0; k < N; k++) begin
      logic [31:0] a, b;
      a = mem[acc_bank][row_i][k];
      b = mem[acc_bank][row_j][k];
      sensed[k]   = en_j ? apply(int'(acc_type), a, b) : apply(int'(acc_type), a, a);
      dec_data[k] = (edc_src == EDC_XOR) ? (a ^ b) : a;
      dec_err[k]  = en_i && en_j && inj_err[k];
      dec_unc[k]  = en_i && en_j && inj_unc[k];
      if (en_j && inj_err[k]) sensed[k] ^= 32'h10;
      if (en_j && inj_unc[k]) dec_data[k] ^= 32'h10;
    end
  end

  always_ff @(posedge clk) begin
    if (we) for (int bk = 0; bk < BANKS; bk++) if (wr_bank_mask[bk])
      for (int k = 0; k < N; k++) if (col_en[k*CW_W]) mem[bk][row_i][k] <= wr_word;
    if (rst_n) for (int i = 0; i < 10; i++) ev_count[i] += int'(ev[i]);
  end

  // reference readdata from the controller's result/RU/mux outputs
  function automatic logic [31:0] rd_view();
    logic [31:0] s, z;
    if (int'(mux_sel) < N) return res[mux_sel];
    s = 0; z = 0;
    begin
      int j;
      j = 0;
      for (int k = 0; k < N; k++) if (ru_valid[k]) begin s += res[k]; z[j] = (res[k] != 0); j++; end
    end
    return (ru_op == RU_SUM) ? s : (ru_op == RU_ZCMP) ? z : 32'd0;
  endfunction

  logic [31:0] ref_mem [BANKS][ROWS][N];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic bus(input bit rd, input logic [AW-1:0] a, input logic [31:0] wd,
                     input logic [2:0] ct, output logic [31:0] q, output logic [1:0] rsp,
                     output int cyc);
    @(negedge clk);
    address = a; writedata = wd; cimtype = ct; read = rd; write = !rd;
    cyc = 0;
    do begin
      @(negedge clk);
      cyc++;
    end while (waitrequest);
    q = rd_view(); rsp = response;
    read = 0; write = 0;
  endtask

  function automatic logic [AW-1:0] mk(int bank, int row, int slot);
    return AW'((row << 6) | (bank << 5) | (slot << 2));
  endfunction

  initial begin
    #2000000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    logic [31:0] q;
    logic [1:0] rsp;
    int cyc;
    inj_err = '0; inj_unc = '0;
    for (int i = 0; i < 10; i++) ev_count[i] = 0;
    address = '0; writedata = '0; cimtype = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill memory with normal word writes
    for (int bk = 0; bk < BANKS; bk++) for (int r = 0; r < ROWS; r++) for (int k = 0; k < N; k++) begin
      logic [31:0] d;
      d = ((r + k) % 5 == 0) ? 32'd0 : $urandom;
      bus(0, mk(bk, r, k), d, WR_WORD, q, rsp, cyc);
      ref_mem[bk][r][k] = d;
      if (r == 0 && k == 0) chk(cyc == LAT_WR, $sformatf("write latency %0d", cyc));
    end
    // normal reads
    for (int n = 0; n < 40; n++) begin
      int bk, r, k;
      bk = $urandom_range(0, BANKS - 1); r = $urandom_range(0, ROWS - 1); k = $urandom_range(0, N - 1);
      bus(1, mk(bk, r, k), 0, CIM_READ, q, rsp, cyc);
      chk(q == ref_mem[bk][r][k] && rsp == RESP_OKAY, "read data");
      chk(cyc == LAT_RD, $sformatf("read latency %0d", cyc));
    end
    // scalar and vector CiM operations on aligned operands
    for (int n = 0; n < 200; n++) begin
      int bk, r1, r2, k, op, ru, half, vlen, base;
      logic [31:0] e, s, z;
      bk = $urandom_range(0, BANKS - 1); r1 = $urandom_range(0, ROWS - 1);
      r2 = (r1 + $urandom_range(1, ROWS - 1)) % ROWS; k = $urandom_range(0, N - 1);
      op = $urandom_range(1, 7); ru = $urandom_range(0, 2); half = $urandom_range(0, 1);
      bus(1, mk(bk, r1, k), {2'(ru), 1'(half), 19'd0, mk(bk, r2, k)}, 3'(op), q, rsp, cyc);
      if (ru == 0) e = apply(op, ref_mem[bk][r1][k], ref_mem[bk][r2][k]);
      else begin
        vlen = half ? N / 2 : N; base = (k / vlen) * vlen; s = 0; z = 0;
        for (int i = 0; i < vlen; i++) begin
          logic [31:0] y;
          y = apply(op, ref_mem[bk][r1][base + i], ref_mem[bk][r2][base + i]);
          s += y; z[i] = (y != 0);
        end
        e = (ru == 1) ? s : z;
      end
      chk(q == e, $sformatf("CiM op %0d ru %0d half %0d: %h want %h", op, ru, half, q, e));
      chk(cyc == ((op == 1) ? LAT_RD : LAT_RD), $sformatf("CiM latency %0d", cyc));
    end
    // XOR with a correctable error: corrected directly, no extra access
    inj_err = 8'h04;
    bus(1, mk(1, 3, 2), {12'd0, 10'(mk(1, 7, 2))}, CIM_XOR, q, rsp, cyc);
    chk(q == (ref_mem[1][3][2] ^ ref_mem[1][7][2]) && cyc == LAT_RD, "XOR corrected directly");
    // ADD with an error: near-memory recomputation
    bus(1, mk(1, 3, 2), {12'd0, 10'(mk(1, 7, 2))}, CIM_ADD, q, rsp, cyc);
    chk(q == (ref_mem[1][3][2] + ref_mem[1][7][2]), "ADD recomputed near memory");
    chk(cyc == LAT_NM_FIX, $sformatf("near-memory fix latency %0d", cyc));
    // error in a word outside the addressed one is ignored
    inj_err = 8'h01;
    bus(1, mk(1, 3, 2), {12'd0, 10'(mk(1, 7, 2))}, CIM_ADD, q, rsp, cyc);
    chk(q == (ref_mem[1][3][2] + ref_mem[1][7][2]) && cyc == LAT_RD, "error in other word ignored");
    // XOR with an uncorrectable error: near-memory recomputation
    inj_err = 8'h04; inj_unc = 8'h04;
    bus(1, mk(1, 3, 2), {12'd0, 10'(mk(1, 7, 2))}, CIM_XOR, q, rsp, cyc);
    chk(q == (ref_mem[1][3][2] ^ ref_mem[1][7][2]) && cyc == LAT_NM_FIX, "XOR uncorrectable -> near memory");
    // vector sum with an error -> recomputed for the whole group
    inj_err = 8'h20; inj_unc = 8'h00;
    bus(1, mk(0, 5, 1), {2'(RU_SUM), 20'd0, 10'(mk(0, 9, 1))}, CIM_ADD, q, rsp, cyc);
    begin
      logic [31:0] s;
      s = 0;
      for (int i = 0; i < N; i++) s += ref_mem[0][5][i] + ref_mem[0][9][i];
      chk(q == s && cyc == LAT_NM_FIX, "vector ADD+SUM recomputed");
    end
    inj_err = '0; inj_unc = '0;
    // misaligned operands: other bank / other word slot / same row
    bus(1, mk(0, 2, 3), {12'd0, 10'(mk(1, 4, 3))}, CIM_AND, q, rsp, cyc);
    chk(q == (ref_mem[0][2][3] & ref_mem[1][4][3]) && cyc == LAT_NM_DIRECT, "different banks");
    bus(1, mk(0, 2, 3), {12'd0, 10'(mk(0, 4, 6))}, CIM_OR, q, rsp, cyc);
    chk(q == (ref_mem[0][2][3] | ref_mem[0][4][6]) && cyc == LAT_NM_DIRECT, "different slots");
    bus(1, mk(1, 6, 5), {12'd0, 10'(mk(1, 6, 1))}, CIM_ADD, q, rsp, cyc);
    chk(q == (ref_mem[1][6][5] + ref_mem[1][6][1]) && cyc == LAT_NM_DIRECT, "same row");
    // special writes
    bus(0, mk(1, 11, 4), 32'hCAFE_0001, WR_ROW, q, rsp, cyc);
    for (int k = 0; k < N; k++) ref_mem[1][11][k] = 32'hCAFE_0001;
    bus(0, mk(0, 15, 0), 32'hBEEF_0002, WR_ALL_BANKS, q, rsp, cyc);
    for (int bk = 0; bk < BANKS; bk++) for (int k = 0; k < N; k++) ref_mem[bk][15][k] = 32'hBEEF_0002;
    for (int bk = 0; bk < BANKS; bk++) for (int k = 0; k < N; k++) begin
      bus(1, mk(bk, 15, k), 0, CIM_READ, q, rsp, cyc);
      chk(q == 32'hBEEF_0002, "all-bank row fill");
      bus(1, mk(bk, 11, k), 0, CIM_READ, q, rsp, cyc);
      chk(q == ref_mem[bk][11][k], "row fill");
    end
    // event counters
    // packed struct: field rd is bit 9 ... uncorrectable bit 0
    chk(ev_count[9] > 0 && ev_count[8] > 0 && ev_count[7] == 2 && ev_count[6] > 0, "rd/wr/special/cim events");
    chk(ev_count[5] > 0 && ev_count[3] == 1 && ev_count[2] == 3 && ev_count[1] == 3, "vec/direct/nm events");
    $display("events rd=%0d wr=%0d spw=%0d cim=%0d vec=%0d direct=%0d nmfix=%0d misalign=%0d",
             ev_count[9], ev_count[8], ev_count[7], ev_count[6], ev_count[5], ev_count[3], ev_count[2], ev_count[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
