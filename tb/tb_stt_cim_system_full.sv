// tb_stt_cim_system_full: the end-to-end test of tb_stt_cim_system run on
// the system at its default (paper-sized) configuration: 8-word rows, 4 banks
// of 8192 rows, 1 MB.  The same 16 rows are used in each bank, spread over
// the whole row range (rows 0, 512, 1024, ...), so the full address decode
// is used.  Stimulus, reference model, workloads and mechanism counting are
// as in tb_stt_cim_system.
module tb_stt_cim_system_full;
  localparam int N = 8, BANKS = 4, ROWS = 8192, S = 1;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  localparam int SLOT_W = $clog2(N), BANK_W = (BANKS > 1) ? $clog2(BANKS) : 1;
  localparam int COLS = N * CW_W, NR = 16;      // NR rows of each bank are used
  localparam int LAT_RD = S + 2, LAT_NM_FIX = 3 * S + 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] dm_address, dm_writedata, dm_readdata;
  logic dm_read = 0, dm_write = 0, dm_waitrequest;
  logic [2:0] dm_cimtype;
  logic [1:0] dm_response;
  logic ci_start = 0, ci_done, ci_err;
  logic [7:0] ci_n;
  logic [31:0] ci_dataa, ci_datab, ci_result;
  logic [COLS-1:0] fail_mask;
  cim_events_t ev;

  stt_cim_system dut (
    .clk(clk), .rst_n(rst_n),
    .dm_address(dm_address), .dm_read(dm_read), .dm_write(dm_write), .dm_writedata(dm_writedata),
    .dm_cimtype(dm_cimtype), .dm_readdata(dm_readdata), .dm_waitrequest(dm_waitrequest),
    .dm_response(dm_response),
    .ci_start(ci_start), .ci_n(ci_n), .ci_dataa(ci_dataa), .ci_datab(ci_datab),
    .ci_done(ci_done), .ci_result(ci_result), .ci_err(ci_err),
    .fail_mask(fail_mask), .events(ev));

  // ---- mechanism counters ---------------------------------------------------
  // index: 0 word write, 1 row fill, 2 all-bank row fill, 3 read,
  // 4..11 CiM READ..ADD through the custom instruction, 12 reduce SUM,
  // 13 reduce zero-compare, 14 half vector length, 15 direct ECC correction,
  // 16 near-memory correction, 17 near-memory misaligned operands,
  // 18 both masters waiting on the bus at once, 19 Type I workload,
  // 20 Type II workload, 21 Type III workload
  localparam int NMECH = 22;
  int mech [NMECH];
  string mech_name [NMECH] = '{"word write", "row fill", "all-bank row fill", "read",
    "cim READ", "cim NOT", "cim AND", "cim OR", "cim NAND", "cim NOR", "cim XOR", "cim ADD",
    "reduce SUM", "reduce ZCMP", "half vector", "ecc direct", "near-memory fix",
    "near-memory misaligned", "bus contention", "workload type I", "workload type II",
    "workload type III"};
  int ev_wr = 0, ev_spw = 0, ev_rd = 0, ev_cim = 0, ev_vec = 0;
  always @(posedge clk) if (rst_n) begin
    ev_wr  += int'(ev.wr);
    ev_spw += int'(ev.special_wr);
    ev_rd  += int'(ev.rd);
    ev_cim += int'(ev.cim);
    ev_vec += int'(ev.vec);
    mech[15] += int'(ev.ecc_direct);
    mech[16] += int'(ev.nm_correct);
    mech[17] += int'(ev.nm_misalign);
    if ((dm_read || dm_write) && dm_waitrequest && ci_start) mech[18]++;
  end

  logic [31:0] ref_mem [BANKS][NR][N];
  function automatic int row_of(int i);        // i-th used row of a bank
    return i * (ROWS / NR);
  endfunction
  function automatic logic [31:0] mk(int bank, int i, int slot);
    return 32'((row_of(i) << (2 + SLOT_W + BANK_W)) | (bank << (2 + SLOT_W)) | (slot << 2));
  endfunction
  function automatic logic [31:0] apply(int op, logic [31:0] a, logic [31:0] b);
    case (op)
      0: return a;          1: return ~a;
      2: return a & b;      3: return a | b;
      4: return ~(a & b);   5: return ~(a | b);
      6: return a ^ b;      default: return a + b;
    endcase
  endfunction
  function automatic logic [COLS-1:0] bad_cols(int k, int nbad);
    logic [COLS-1:0] m;
    m = '0;
    while ($countones(m) < nbad) m[k * CW_W + DATA_LSB + $urandom_range(0, 31)] = 1'b1;
    return m;
  endfunction

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // processor data master: one Avalon transfer.  The answer is sampled when
  // waitrequest is low; the request is held over the completing clock edge.
  task automatic dm(input bit rd, input logic [31:0] a, input logic [31:0] wd,
                    input logic [2:0] ct, output logic [31:0] q);
    @(negedge clk);
    dm_address = a; dm_writedata = wd; dm_cimtype = ct; dm_read = rd; dm_write = !rd;
    do @(negedge clk); while (dm_waitrequest);
    q = dm_readdata;
    @(negedge clk);
    dm_read = 0; dm_write = 0;
  endtask

  // custom instruction: n = {2'b0, half, ru_op, cimtype}
  task automatic ci(input int op, input int ru, input int half, input logic [31:0] a1,
                    input logic [31:0] a2, output logic [31:0] q, output int cyc);
    @(negedge clk);
    ci_n = {2'b00, 1'(half), 2'(ru), 3'(op)}; ci_dataa = a1; ci_datab = a2; ci_start = 1;
    @(negedge clk);
    ci_start = 0;
    cyc = 1;
    while (!ci_done) begin @(negedge clk); cyc++; end
    q = ci_result;
  endtask

  // expected value of a CiM request on the reference memory
  function automatic logic [31:0] expect_cim(int op, int ru, int half, int bk, int i1, int i2, int k);
    logic [31:0] s, z;
    int vlen, base;
    if (ru == 0) return apply(op, ref_mem[bk][i1][k], ref_mem[bk][i2][k]);
    vlen = half ? N / 2 : N; base = (k / vlen) * vlen; s = 0; z = 0;
    for (int i = 0; i < vlen; i++) begin
      logic [31:0] y;
      y = apply(op, ref_mem[bk][i1][base + i], ref_mem[bk][i2][base + i]);
      s += y; z[i] = (y != 0);
    end
    return (ru == 1) ? s : z;
  endfunction

  initial begin
    #10000000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    logic [31:0] q;
    int cyc;
    fail_mask = '0; dm_address = 0; dm_writedata = 0; dm_cimtype = 0;
    ci_n = 0; ci_dataa = 0; ci_datab = 0;
    foreach (mech[m]) mech[m] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- fill the used rows through the data master -------------------------
    for (int bk = 0; bk < BANKS; bk++) for (int i = 0; i < NR; i++) for (int k = 0; k < N; k++) begin
      logic [31:0] d;
      d = ((i * 3 + k) % 7 == 0) ? 32'd0 : $urandom;
      dm(0, mk(bk, i, k), d, WR_WORD, q);
      ref_mem[bk][i][k] = d;
    end
    mech[0] = ev_wr;
    for (int n = 0; n < 20; n++) begin
      int bk, i, k;
      bk = $urandom_range(0, BANKS - 1); i = $urandom_range(0, NR - 1); k = $urandom_range(0, N - 1);
      dm(1, mk(bk, i, k), 0, CIM_READ, q);
      chk(q == ref_mem[bk][i][k], $sformatf("read %h want %h", q, ref_mem[bk][i][k]));
    end
    mech[3] = ev_rd;

    // ---- both masters at once -----------------------------------------------
    // the data master reads and writes rows 12..15, the custom instruction
    // runs random CiM requests on rows 0..11 of the same banks
    fork
      for (int n = 0; n < 60; n++) begin
        int bk, i, k;
        logic [31:0] d;
        bk = $urandom_range(0, BANKS - 1); i = $urandom_range(12, NR - 1); k = $urandom_range(0, N - 1);
        if (n % 2 == 0) begin
          d = $urandom;
          dm(0, mk(bk, i, k), d, WR_WORD, q);
          ref_mem[bk][i][k] = d;
        end else begin
          dm(1, mk(bk, i, k), 0, CIM_READ, q);
          chk(q == ref_mem[bk][i][k], "read during CiM traffic");
        end
      end
      for (int n = 0; n < 160; n++) begin
        int bk, i1, i2, k, op, ru, half;
        logic [31:0] e, q2;
        int c2;
        bk = $urandom_range(0, BANKS - 1); i1 = $urandom_range(0, 11);
        i2 = (i1 + $urandom_range(1, 11)) % 12; k = $urandom_range(0, N - 1);
        op = n % 8; ru = (n / 8) % 3; half = (n / 24) % 2;
        ci(op, ru, half, mk(bk, i1, k), mk(bk, i2, k), q2, c2);
        e = expect_cim(op, ru, half, bk, i1, i2, k);
        chk(q2 == e && !ci_err, $sformatf("ci op %0d ru %0d half %0d: %h want %h", op, ru, half, q2, e));
        if (q2 == e) begin
          mech[4 + op]++;
          if (ru == 1) mech[12]++;
          if (ru == 2) mech[13]++;
          if (ru != 0 && half == 1) mech[14]++;
        end
      end
    join

    // ---- decision failures --------------------------------------------------
    for (int nb = 1; nb <= 4; nb++) begin
      fail_mask = bad_cols(2, nb);
      ci(CIM_XOR, 0, 0, mk(1 % BANKS, 3, 2), mk(1 % BANKS, 9, 2), q, cyc);
      chk(q == (ref_mem[1 % BANKS][3][2] ^ ref_mem[1 % BANKS][9][2]),
          $sformatf("XOR with %0d failures", nb));
    end
    fail_mask = bad_cols(5, 1);
    ci(CIM_ADD, 1, 1, mk(0, 4, 5), mk(0, 10, 5), q, cyc);
    chk(q == expect_cim(CIM_ADD, 1, 1, 0, 4, 10, 5), "half vector ADD+SUM with a failure");
    fail_mask = '0;
    // operands the array cannot combine (different word slots)
    ci(CIM_OR, 0, 0, mk(0, 1, 1), mk(0, 2, 6), q, cyc);
    chk(q == (ref_mem[0][1][1] | ref_mem[0][2][6]), "misaligned OR");

    // ---- Type I workload: sum of A[i] + B[i] over whole rows -----------------
    // A in rows 0..3, B in rows 4..7 of bank 0; one ADD + SUM per row pair
    begin
      logic [31:0] acc, want;
      acc = 0; want = 0;
      for (int i = 0; i < 4; i++) begin
        ci(CIM_ADD, RU_SUM, 0, mk(0, i, 0), mk(0, i + 4, 0), q, cyc);
        acc += q;
        for (int k = 0; k < N; k++) want += ref_mem[0][i][k] + ref_mem[0][i + 4][k];
      end
      chk(acc == want, "Type I: vector sum");
      if (acc == want) mech[19]++;
    end

    // ---- Type II workload: constant row shared by all banks ------------------
    // a threshold row is written once to every bank (row fill to all banks),
    // then each bank compares its data against it with XOR + zero-compare
    begin
      logic [31:0] thr;
      bit ok;
      thr = ref_mem[0][5][3];
      dm(0, mk(0, 14, 0), thr, WR_ALL_BANKS, q);
      for (int bk = 0; bk < BANKS; bk++) for (int k = 0; k < N; k++) ref_mem[bk][14][k] = thr;
      ok = 1;
      for (int bk = 0; bk < BANKS; bk++) for (int i = 0; i < 4; i++) begin
        logic [31:0] z;
        ci(CIM_XOR, RU_ZCMP, 0, mk(bk, i, 0), mk(bk, 14, 0), q, cyc);
        z = expect_cim(CIM_XOR, RU_ZCMP, 0, bk, i, 14, 0);
        chk(q == z, "Type II: compare against the shared row");
        ok &= (q == z);
      end
      if (ok) begin mech[2]++; mech[20]++; end
    end

    // ---- Type III workload: string search ------------------------------------
    // a 4-byte key is replicated across a row (row fill), text words sit in
    // rows 0..11 of bank 0; XOR + zero-compare marks the matching words
    begin
      logic [31:0] key;
      int found, want;
      key = 32'h6B65_7921;
      ref_mem[0][7][3] = key; dm(0, mk(0, 7, 3), key, WR_WORD, q);
      ref_mem[0][2][6] = key; dm(0, mk(0, 2, 6), key, WR_WORD, q);
      dm(0, mk(0, 15, 0), key, WR_ROW, q);
      for (int k = 0; k < N; k++) ref_mem[0][15][k] = key;
      dm(1, mk(0, 15, N - 1), 0, CIM_READ, q);
      chk(q == key, "row fill reaches the last word");
      if (q == key) mech[1]++;
      found = 0; want = 0;
      for (int i = 0; i < 12; i++) begin
        ci(CIM_XOR, RU_ZCMP, 0, mk(0, i, 0), mk(0, 15, 0), q, cyc);
        chk(q == expect_cim(CIM_XOR, RU_ZCMP, 0, 0, i, 15, 0), "Type III: match vector");
        for (int k = 0; k < N; k++) begin
          found += int'(!q[k]);
          want  += int'(ref_mem[0][i][k] == key);
        end
      end
      chk(found == want && want >= 2, $sformatf("Type III: %0d matches, want %0d", found, want));
      if (found == want && want >= 2) mech[21]++;
    end

    // ---- events seen by the memory --------------------------------------------
    chk(ev_spw == 2, $sformatf("special writes %0d", ev_spw));
    chk(ev_cim > 0 && ev_vec > 0, "CiM and vector events");
    for (int m = 0; m < NMECH; m++) begin
      checks++;
      if (mech[m] == 0) begin
        failures++;
        $display("FAIL mechanism never exercised: %s", mech_name[m]);
      end else $display("mechanism %-24s %0d", mech_name[m], mech[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
