// tb_stt_cim_memory: the whole STT-CiM memory (2 banks x 16 rows x 8 words)
// driven over its Avalon slave.  A reference model of the stored words gives
// the expected answer of every transaction.  Covered: word writes, reads,
// all CiM operations scalar and vector (RU sum and zero-compare, lengths 8
// and 4), decision failures injected through the array's failure mask
// (XOR corrected directly for 1..3 bad columns, recomputed near memory for 4;
// ADD recomputed near memory), operands that cannot be combined in the array,
// row fill and all-bank row fill.  Latencies checked: write 2 cycles, read or
// CiM access SENSE_CYCLES+2, near-memory fix 3*SENSE_CYCLES+5.
module tb_stt_cim_memory;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  localparam int N = 8, BANKS = 2, ROWS = 16, S = 1, AW = 10, COLS = N * CW_W;
  localparam int LAT_WR = 2, LAT_RD = S + 2, LAT_NM_FIX = 3 * S + 5, LAT_NM_DIRECT = 2 * S + 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] address;
  logic read = 0, write = 0;
  logic [31:0] writedata, readdata;
  logic [2:0] cimtype;
  logic waitrequest;
  logic [1:0] response;
  logic [COLS-1:0] fail_mask;
  cim_events_t ev;
  int n_direct = 0, n_nmfix = 0, n_misalign = 0;

  stt_cim_memory #(.N_WORDS(N), .BANKS(BANKS), .ROWS(ROWS), .SENSE_CYCLES(S)) dut (
    .clk(clk), .rst_n(rst_n), .address(address), .read(read), .write(write),
    .writedata(writedata), .cimtype(cimtype), .readdata(readdata),
    .waitrequest(waitrequest), .response(response), .fail_mask(fail_mask), .events(ev));

  always @(posedge clk) if (rst_n) begin
    n_direct   += int'(ev.ecc_direct);
    n_nmfix    += int'(ev.nm_correct);
    n_misalign += int'(ev.nm_misalign);
  end

  logic [31:0] ref_mem [BANKS][ROWS][N];

  function automatic logic [31:0] apply(int op, logic [31:0] a, logic [31:0] b);
    case (op)
      0: return a;          1: return ~a;
      2: return a & b;      3: return a | b;
      4: return ~(a & b);   5: return ~(a | b);
      6: return a ^ b;      default: return a + b;
    endcase
  endfunction

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
    q = readdata; rsp = response;
    read = 0; write = 0;
  endtask

  function automatic logic [AW-1:0] mk(int bank, int row, int slot);
    return AW'((row << 6) | (bank << 5) | (slot << 2));
  endfunction

  // mask of nbad distinct data columns of word slot k
  function automatic logic [COLS-1:0] bad_cols(int k, int nbad);
    logic [COLS-1:0] m;
    m = '0;
    while ($countones(m) < nbad) m[k * CW_W + DATA_LSB + $urandom_range(0, 31)] = 1'b1;
    return m;
  endfunction

  initial begin
    #5000000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    logic [31:0] q;
    logic [1:0] rsp;
    int cyc;
    fail_mask = '0; address = '0; writedata = '0; cimtype = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int bk = 0; bk < BANKS; bk++) for (int r = 0; r < ROWS; r++) for (int k = 0; k < N; k++) begin
      logic [31:0] d;
      d = ((r * 3 + k) % 7 == 0) ? 32'd0 : $urandom;
      bus(0, mk(bk, r, k), d, WR_WORD, q, rsp, cyc);
      ref_mem[bk][r][k] = d;
      if (r == 0 && k == 0) chk(cyc == LAT_WR, $sformatf("write latency %0d", cyc));
    end
    for (int n = 0; n < 40; n++) begin
      int bk, r, k;
      bk = $urandom_range(0, BANKS - 1); r = $urandom_range(0, ROWS - 1); k = $urandom_range(0, N - 1);
      bus(1, mk(bk, r, k), 0, CIM_READ, q, rsp, cyc);
      chk(q == ref_mem[bk][r][k] && rsp == RESP_OKAY && cyc == LAT_RD,
          $sformatf("read %h want %h cyc %0d", q, ref_mem[bk][r][k], cyc));
    end
    for (int n = 0; n < 300; n++) begin
      int bk, r1, r2, k, op, ru, half, vlen, base;
      logic [31:0] e, s, z;
      bk = $urandom_range(0, BANKS - 1); r1 = $urandom_range(0, ROWS - 1);
      r2 = (r1 + $urandom_range(1, ROWS - 1)) % ROWS; k = $urandom_range(0, N - 1);
      op = n % 8; ru = $urandom_range(0, 2); half = $urandom_range(0, 1);
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
      chk(q == e && cyc == LAT_RD, $sformatf("op %0d ru %0d half %0d: %h want %h (cyc %0d)", op, ru, half, q, e, cyc));
    end
    // decision failures on CiM XOR: 1..3 bad columns corrected directly
    for (int nb = 1; nb <= 3; nb++) begin
      fail_mask = bad_cols(2, nb);
      bus(1, mk(1, 3, 2), {12'd0, 10'(mk(1, 9, 2))}, CIM_XOR, q, rsp, cyc);
      chk(q == (ref_mem[1][3][2] ^ ref_mem[1][9][2]) && cyc == LAT_RD, $sformatf("XOR, %0d failures, direct", nb));
    end
    // 4 bad columns: uncorrectable on the XOR tap -> near-memory recomputation
    fail_mask = bad_cols(2, 4);
    bus(1, mk(1, 3, 2), {12'd0, 10'(mk(1, 9, 2))}, CIM_XOR, q, rsp, cyc);
    chk(q == (ref_mem[1][3][2] ^ ref_mem[1][9][2]) && cyc == LAT_NM_FIX && rsp == RESP_OKAY, "XOR, 4 failures, near memory");
    // ADD with one failure -> near memory
    fail_mask = bad_cols(5, 1);
    bus(1, mk(0, 4, 5), {12'd0, 10'(mk(0, 12, 5))}, CIM_ADD, q, rsp, cyc);
    chk(q == (ref_mem[0][4][5] + ref_mem[0][12][5]) && cyc == LAT_NM_FIX, "ADD with failure recomputed");
    // vector ADD + SUM with a failure in one word of the group
    fail_mask = bad_cols(6, 2);
    bus(1, mk(0, 4, 0), {2'(RU_SUM), 20'd0, 10'(mk(0, 12, 0))}, CIM_ADD, q, rsp, cyc);
    begin
      logic [31:0] s;
      s = 0;
      for (int i = 0; i < N; i++) s += ref_mem[0][4][i] + ref_mem[0][12][i];
      chk(q == s && cyc == LAT_NM_FIX, "vector ADD+SUM with failure recomputed");
    end
    fail_mask = '0;
    // operands the array cannot combine
    bus(1, mk(0, 2, 3), {12'd0, 10'(mk(1, 4, 3))}, CIM_NAND, q, rsp, cyc);
    chk(q == ~(ref_mem[0][2][3] & ref_mem[1][4][3]) && cyc == LAT_NM_DIRECT, "different banks");
    bus(1, mk(1, 2, 3), {12'd0, 10'(mk(1, 4, 7))}, CIM_XOR, q, rsp, cyc);
    chk(q == (ref_mem[1][2][3] ^ ref_mem[1][4][7]) && cyc == LAT_NM_DIRECT, "different word slots");
    // row fill and all-bank row fill
    bus(0, mk(1, 11, 4), 32'hCAFE_0001, WR_ROW, q, rsp, cyc);
    for (int k = 0; k < N; k++) ref_mem[1][11][k] = 32'hCAFE_0001;
    bus(0, mk(0, 15, 0), 32'hBEEF_0002, WR_ALL_BANKS, q, rsp, cyc);
    for (int bk = 0; bk < BANKS; bk++) for (int k = 0; k < N; k++) ref_mem[bk][15][k] = 32'hBEEF_0002;
    for (int bk = 0; bk < BANKS; bk++) for (int k = 0; k < N; k++) begin
      bus(1, mk(bk, 15, k), 0, CIM_READ, q, rsp, cyc);
      chk(q == ref_mem[bk][15][k], "all-bank row fill");
      bus(1, mk(bk, 11, k), 0, CIM_READ, q, rsp, cyc);
      chk(q == ref_mem[bk][11][k], "row fill");
    end
    chk(n_direct == 3 && n_nmfix == 3 && n_misalign == 2,
        $sformatf("events direct=%0d nmfix=%0d misalign=%0d", n_direct, n_nmfix, n_misalign));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
