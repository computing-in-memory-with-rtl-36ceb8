// tb_stt_bitcell_array: writes random rows (with partial column enables),
// then enables zero, one or two rows (also the same row twice, and the
// second input alone) through the two row inputs and compares every column's
// source-line current with the sum of I_P / I_AP of the enabled cells,
// including the decision-failure shift on two-row accesses.
module tb_stt_bitcell_array;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  localparam int ROWS = 16, COLS = 24;
  logic clk = 0;
  logic [ROWS-1:0] wl;          // reference: which wordlines are on
  logic [3:0] ra, rb;
  logic ea, eb;
  logic we;
  logic [COLS-1:0] col_en, wdata, fm;
  cur_t isl [COLS];
  logic [COLS-1:0] ref_mem [ROWS];
  stt_bitcell_array #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk(clk), .row_a(ra), .en_a(ea), .row_b(rb), .en_b(eb), .we(we), .col_en(col_en), .wdata(wdata), .fail_mask(fm), .i_sl(isl));
  always #5 clk = ~clk;

  initial begin
    #200000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    we = 0; wl = '0; ra = 0; rb = 0; ea = 0; eb = 0; col_en = '0; wdata = '0; fm = '0;
    // fill every row completely, then overwrite random columns of random rows
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      ra = 4'(r); ea = 1; eb = 0; we = 1; col_en = '1; wdata = COLS'($urandom);
      ref_mem[r] = wdata;
    end
    for (int k = 0; k < 20; k++) begin
      int r;
      @(negedge clk);
      r = $urandom_range(0, ROWS - 1);
      ra = 4'(r); ea = 1; eb = 0; we = 1; col_en = COLS'($urandom); wdata = COLS'($urandom);
      ref_mem[r] = (ref_mem[r] & ~col_en) | (wdata & col_en);
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 100; k++) begin
      int r1, r2, n;
      r1 = $urandom_range(0, ROWS - 1);
      r2 = $urandom_range(0, ROWS - 1);
      n  = $urandom_range(0, 3);
      if (n == 2 && (k % 7 == 0)) r2 = r1;
      ra = 4'(r1); rb = 4'(r2);
      ea = (n == 1 || n == 2); eb = (n >= 2);
      wl = '0;
      if (ea) wl[r1] = 1;
      if (eb) wl[r2] = 1;
      fm = (k % 3 == 0) ? COLS'($urandom) : '0;
      #1;
      for (int c = 0; c < COLS; c++) begin
        int e, non;
        logic anyp;
        e = 0; non = 0; anyp = 0;
        for (int r = 0; r < ROWS; r++) if (wl[r]) begin
          non++;
          e += ref_mem[r][c] ? I_P_NA : I_AP_NA;
          anyp |= ref_mem[r][c];
        end
        if (non >= 2 && fm[c]) e += anyp ? -(I_P_NA - I_AP_NA) : (I_P_NA - I_AP_NA);
        checks++;
        if (int'(isl[c]) != e) begin
          failures++;
          $display("FAIL col %0d rows %0d/%0d: %0d want %0d", c, r1, r2, isl[c], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
