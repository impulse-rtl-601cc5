// tb_col_periph: random stimulus on one column peripheral, compared with a reference built
// from integer addition of the two operand bits.
module tb_col_periph;
  import impulse_pkg::*;
  logic   rbl, rblb, cin, ext_en, wsign, wr_en, cond, no_cs_wr, spike, d_ext;
  cmode_e mode;
  wdsel_e wdsel;
  logic   d, c_next, sum, sgn_ext, wen, wbl;
  int checks = 0, failures = 0;

  col_periph dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%0b exp=%0b mode=%0d ext=%0b", what, got, exp, mode, ext_en);
    end
  endtask

  initial begin
    logic a, b, ci, co, s;
    int t;
    for (int n = 0; n < 2000; n++) begin
      a        = 1'($urandom);
      b        = 1'($urandom);
      ext_en   = 1'($urandom);
      wsign    = 1'($urandom);
      cin      = 1'($urandom);
      mode     = cmode_e'($urandom_range(0, 3));
      wdsel    = wdsel_e'($urandom_range(0, 2));
      wr_en    = 1'($urandom);
      cond     = 1'($urandom);
      no_cs_wr = 1'($urandom);
      spike    = 1'($urandom);
      d_ext    = 1'($urandom);
      if (ext_en) begin
        // only the V cell is on the bitlines; the second operand is Wsign
        rbl  = ~a;
        rblb = ~a;
        b    = wsign;
      end else begin
        rbl  = ~(a | b);
        rblb = ~(a & b);
      end
      #1;
      ci = (mode == M_LSB) ? 1'b0 : cin;
      t  = int'(a) + int'(b) + int'(ci);
      s  = t[0];
      co = t[1];
      chk("d", d, a | (ext_en ? 1'b0 : b) ? 1'b1 : 1'b0);
      chk("sum", sum, s);
      chk("c_next", c_next, (mode == M_CS) ? ci : co);
      chk("sgn_ext", sgn_ext, a ^ b ^ co);
      chk("wbl", wbl, (wdsel == WD_EXT) ? d_ext : (wdsel == WD_D) ? (ext_en ? a : (a | b)) : s);
      chk("wen", wen, wr_en & (~cond | spike) & ~(no_cs_wr & (mode == M_CS)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
