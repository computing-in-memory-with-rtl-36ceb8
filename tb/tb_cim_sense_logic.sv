// tb_cim_sense_logic: for every operation of the control table and every
// pair of stored bits (and carry-in), models the two sense amplifiers with
// small integer currents (P cell 3, AP cell 1; reference cells R_REF 2,
// R_AP 1, R_P 3), applies the table's rwl/rwr/sel values, and compares the
// column output with the truth table of the operation (OR/NOR/AND/NAND/XOR
// as in the paper's sensing table, full-adder sum for ADD), the XOR tap and
// the carry-out.
module tb_cim_sense_logic;
  int checks = 0, failures = 0;
  logic lp, ln, rp, rn, cin, out, ox, cout;
  logic [2:0] sel;
  cim_sense_logic dut (.lp(lp), .ln(ln), .rp(rp), .rn(rn), .sel(sel), .cin(cin),
                       .out(out), .o_xor(ox), .cout(cout));

  // rwl(3) rwr(3) sel(3), bit order [0],[1],[2]
  int tbl [8][9] = '{
    '{1,0,0, 0,0,0, 1,1,0}, '{0,0,0, 1,0,0, 0,1,0}, '{1,0,1, 0,0,0, 1,1,0},
    '{1,1,0, 0,0,0, 1,1,0}, '{0,0,0, 1,0,1, 0,1,0}, '{0,0,0, 1,1,0, 0,1,0},
    '{1,1,0, 1,0,1, 0,0,1}, '{1,1,0, 1,0,1, 0,0,0}};

  function automatic int refc(int e0, int e1, int e2);
    return e0 * 2 + e1 * 1 + e2 * 3;
  endfunction

  initial begin
    #100000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    for (int op = 0; op < 8; op++) begin
      for (int v = 0; v < 8; v++) begin
        int a, b, c, isl, il, ir, expv;
        a = v & 1; b = (v >> 1) & 1; c = (v >> 2) & 1;
        // READ and NOT enable one row, the others two
        isl = (a ? 3 : 1) + ((op < 2) ? 0 : (b ? 3 : 1));
        il  = refc(tbl[op][0], tbl[op][1], tbl[op][2]);
        ir  = refc(tbl[op][3], tbl[op][4], tbl[op][5]);
        lp = (isl > il); ln = !lp;
        rp = (isl > ir); rn = !rp;
        sel = {1'(tbl[op][8]), 1'(tbl[op][7]), 1'(tbl[op][6])};
        cin = 1'(c);
        #1;
        case (op)
          0: expv = a;
          1: expv = 1 - a;
          2: expv = a & b;
          3: expv = a | b;
          4: expv = 1 - (a & b);
          5: expv = 1 - (a | b);
          6: expv = a ^ b;
          default: expv = a ^ b ^ c;
        endcase
        checks++;
        if (int'(out) != expv) begin
          failures++;
          $display("FAIL op %0d a=%0d b=%0d c=%0d out=%0d want %0d", op, a, b, c, out, expv);
        end
        if (op >= 6) begin
          checks += 2;
          if (int'(ox) != (a ^ b)) begin failures++; $display("FAIL xor tap op %0d", op); end
          if (int'(cout) != ((a & b) | (c & (a ^ b)))) begin failures++; $display("FAIL carry a=%0d b=%0d c=%0d", a, b, c); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
