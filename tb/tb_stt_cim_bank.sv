// tb_stt_cim_bank: a small bank (2 words per row, 8 rows) is written with
// encoded random words through its write port; then every operation is run
// on random row pairs (one row for READ and NOT) with the control word from
// the CiM decoder, and the column outputs are compared with the operation
// applied to the stored codewords: whole codeword for READ/NOT/XOR, data bits
// for AND/OR/NAND/NOR and the 32-bit sum per word for ADD (carry rippling
// through the columns).  Injected decision failures must flip exactly the
// masked columns of the XOR tap.
module tb_stt_cim_bank;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  localparam int N = 2, ROWS = 8, COLS = N * CW_W;
  logic clk = 0;
  logic [2:0] ri, rj;
  logic ei, ej, we;
  cim_type_e t;
  cim_ctrl_t ctrl;
  logic [COLS-1:0] col_en, wdata, fm, out, xo;
  logic [31:0] wd;
  logic [50:0] wcw;
  logic [31:0] data_ref [ROWS][N];
  logic [50:0] cw_ref   [ROWS][N];

  always #5 clk = ~clk;
  cim_decoder u_d (.cim_type(t), .ctrl(ctrl));
  ecc_encoder u_e (.data(wd), .cw(wcw));
  assign wdata = {N{wcw}};
  stt_cim_bank #(.N_WORDS(N), .ROWS(ROWS)) dut (
    .clk(clk), .row_i(ri), .en_i(ei), .row_j(rj), .en_j(ej), .ctrl(ctrl),
    .we(we), .col_en(col_en), .wdata(wdata), .fail_mask(fm), .out(out), .xor_o(xo));

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #1000000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    ei = 0; ej = 0; we = 0; fm = '0; t = CIM_READ; ri = 0; rj = 0; col_en = '0; wd = 0;
    for (int r = 0; r < ROWS; r++) for (int w = 0; w < N; w++) begin
      @(negedge clk);
      ri = 3'(r); ei = 1; we = 1; wd = (r == 0) ? 32'hFFFF_FFFF : $urandom;
      col_en = '0; col_en[w*CW_W +: CW_W] = '1;
      #1;
      data_ref[r][w] = wd; cw_ref[r][w] = wcw;
    end
    @(negedge clk); we = 0; ei = 0;
    for (int k = 0; k < 400; k++) begin
      int a, b;
      a = $urandom_range(0, ROWS - 1);
      b = (a + $urandom_range(1, ROWS - 1)) % ROWS;
      t = cim_type_e'(k % 8);
      ri = 3'(a); rj = 3'(b); ei = 1; ej = !(t == CIM_READ || t == CIM_NOT);
      fm = '0;
      #1;
      for (int w = 0; w < N; w++) begin
        logic [50:0] ca, cb, o;
        logic [31:0] da, db, od, e;
        ca = cw_ref[a][w]; cb = cw_ref[b][w]; da = data_ref[a][w]; db = data_ref[b][w];
        o = out[w*CW_W +: CW_W]; od = o[18 +: 32];
        case (t)
          CIM_READ: chk(o == ca, "READ codeword");
          CIM_NOT : chk(o == ~ca, "NOT codeword");
          CIM_XOR : chk(o == (ca ^ cb), "XOR codeword");
          default: begin
            case (t)
              CIM_AND:  e = da & db;
              CIM_OR:   e = da | db;
              CIM_NAND: e = ~(da & db);
              CIM_NOR:  e = ~(da | db);
              default:  e = da + db;
            endcase
            chk(od == e, $sformatf("%s word %0d: %h want %h (a=%h b=%h)", t.name(), w, od, e, da, db));
          end
        endcase
        if (t == CIM_XOR || t == CIM_ADD) chk(xo[w*CW_W +: CW_W] == (ca ^ cb), "XOR tap");
      end
      if (t == CIM_XOR) begin
        logic [COLS-1:0] x0;
        x0 = xo;
        fm = COLS'($urandom) & COLS'($urandom) & COLS'($urandom);
        #1;
        chk((xo ^ x0) == fm, "decision failures flip the masked XOR columns");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
