// tb_col_periph_bank: the 72 column peripherals against integer arithmetic.
// For random odd/even cycles and instructions the testbench builds a weight row and V rows
// in the staggered layout, computes the wired NOR/NAND bitlines the array would produce,
// and checks the write data and write enables of every V word (AccW2V with sign-extended
// weights, AccV2V, conditional AccV2V, ResetV, plain write) and the SpikeCheck decision of
// every adder, including the even-cycle adder that wraps from column 71 to column 0.
module tb_col_periph_bank;
  import impulse_pkg::*;
  import impulse_tb_pkg::*;

  logic [71:0] rbl, rblb, din, d, wen, wbl;
  logic        par_even;
  ctrl_t       ctrl;
  logic [11:0] spike;
  logic [5:0]  spike_new;
  int checks = 0, failures = 0;
  int n_wrap = 0, n_negw = 0, n_ovf = 0;

  col_periph_bank dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp, int n);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL n=%0d %s got=%0d exp=%0d", n, what, got, exp);
    end
  endtask

  function automatic int rand_v();
    case ($urandom_range(0, 3))
      0:       return rand_range(-1024, -900);
      1:       return rand_range(900, 1023);
      default: return rand_range(-1024, 1023);
    endcase
  endfunction

  initial begin
    row_t wr, va, vb, on1, on0, exp_row;
    int   wv [12], a [12], b [12];
    instr_e ins;
    bit   two_rows, w_row;
    for (int n = 0; n < 3000; n++) begin
      par_even = 1'($urandom);
      ins      = instr_e'($urandom_range(1, 7));
      spike    = 12'($urandom);
      din      = 72'({$urandom, $urandom, $urandom});
      wr = '0; va = '0; vb = '0;
      for (int j = 0; j < 12; j++) begin
        wv[j] = rand_range(-32, 31);
        a[j]  = rand_v();
        b[j]  = rand_v();
        put_w(wr, j, wv[j]);
      end
      for (int j = 0; j < 12; j++) if (j % 2 == int'(par_even)) begin
        put_v(va, j, a[j]);
        put_v(vb, j, b[j]);
      end
      ctrl = '0;
      ctrl.wdsel = WD_SUM;
      two_rows = 0; w_row = 0;
      case (ins)
        I_WRITE:    begin ctrl.wr_en = 1; ctrl.wdsel = WD_EXT; end
        I_ACCW2V:   begin ctrl.wr_en = 1; ctrl.wsign_ext = 1; ctrl.no_cs_wr = 1; w_row = 1; end
        I_ACCV2V:   begin ctrl.wr_en = 1; ctrl.no_cs_wr = 1; two_rows = 1; end
        I_ACCV2V_C: begin ctrl.wr_en = 1; ctrl.no_cs_wr = 1; ctrl.cond = 1; two_rows = 1; end
        I_SPIKECHK: begin ctrl.spk_upd = 1; two_rows = 1; end
        I_RESETV:   begin ctrl.wr_en = 1; ctrl.no_cs_wr = 1; ctrl.cond = 1; ctrl.wdsel = WD_D; end
        default:    ctrl.dout_upd = 1;
      endcase
      // bitlines as the array produces them
      on1 = '0; on0 = '0;
      if (ins != I_WRITE) begin
        on1 |= (ins == I_RESETV) ? vb : va;
        on0 |= (ins == I_RESETV) ? ~vb : ~va;
      end
      if (two_rows) begin on1 |= vb; on0 |= ~vb; end
      for (int c = 0; c < 72; c++) if (w_row && ((c / 6) % 2 == int'(par_even))) begin
        on1[c] = on1[c] | wr[c];
        on0[c] = on0[c] | ~wr[c];
      end
      rbl  = ~on1;
      rblb = on0 | ~on1;
      #1;
      checks++;
      if (d !== on1) failures++;
      for (int j = int'(par_even); j < 12; j += 2) begin
        int e;
        bit we;
        if (j == 11) n_wrap++;
        case (ins)
          I_ACCW2V:   begin e = wrap_v(a[j] + wv[j]); we = 1; if (wv[j] < 0) n_negw++;
                        if (a[j] + wv[j] != e) n_ovf++; end
          I_ACCV2V:   begin e = wrap_v(a[j] + b[j]); we = 1; end
          I_ACCV2V_C: begin e = wrap_v(a[j] + b[j]); we = spike[j]; end
          I_RESETV:   begin e = b[j]; we = spike[j]; end
          default:    begin e = 0; we = 0; end
        endcase
        if (ins inside {I_ACCW2V, I_ACCV2V, I_ACCV2V_C, I_RESETV}) begin
          if (we) chk($sformatf("word j=%0d ins=%0d", j, ins), get_v(wbl, j), e, n);
          for (int k = 0; k < 11; k++) chk($sformatf("wen j=%0d", j), int'(wen[v_col(j, k)]), int'(we), n);
          chk($sformatf("wen zero col j=%0d", j), int'(wen[zero_col(j)]), 0, n);
        end
        if (ins == I_SPIKECHK)
          chk($sformatf("spike j=%0d", j), int'(spike_new[j / 2]), int'(a[j] + b[j] >= 0), n);
      end
      if (ins == I_WRITE) begin
        checks += 2;
        if (wen !== '1) failures++;
        if (wbl !== din) failures++;
      end
      if (ins inside {I_SPIKECHK, I_READ}) begin
        checks++;
        if (wen !== '0) failures++;
      end
    end
    checks++;
    if (n_wrap == 0 || n_negw == 0 || n_ovf == 0) begin
      failures++;
      $display("FAIL coverage wrap=%0d negw=%0d ovf=%0d", n_wrap, n_negw, n_ovf);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
