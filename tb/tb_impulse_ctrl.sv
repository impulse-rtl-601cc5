// tb_impulse_ctrl: every instruction's decoded controls against the instruction table.
module tb_impulse_ctrl;
  import impulse_pkg::*;
  instr_e instr;
  ctrl_t  ctrl;
  int checks = 0, failures = 0;

  impulse_ctrl dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected: {wsign_ext, wr_en, cond, no_cs_wr, wdsel, spk_upd, dout_upd}
  function automatic logic [7:0] expect_of(instr_e i);
    case (i)
      I_READ:     return {1'b0, 1'b0, 1'b0, 1'b0, WD_SUM, 1'b0, 1'b1};
      I_WRITE:    return {1'b0, 1'b1, 1'b0, 1'b0, WD_EXT, 1'b0, 1'b0};
      I_ACCW2V:   return {1'b1, 1'b1, 1'b0, 1'b1, WD_SUM, 1'b0, 1'b0};
      I_ACCV2V:   return {1'b0, 1'b1, 1'b0, 1'b1, WD_SUM, 1'b0, 1'b0};
      I_ACCV2V_C: return {1'b0, 1'b1, 1'b1, 1'b1, WD_SUM, 1'b0, 1'b0};
      I_SPIKECHK: return {1'b0, 1'b0, 1'b0, 1'b0, WD_SUM, 1'b1, 1'b0};
      I_RESETV:   return {1'b0, 1'b1, 1'b1, 1'b1, WD_D,   1'b0, 1'b0};
      default:    return {1'b0, 1'b0, 1'b0, 1'b0, WD_SUM, 1'b0, 1'b0};
    endcase
  endfunction

  initial begin
    for (int i = 0; i < 8; i++) begin
      instr = instr_e'(i);
      #1;
      checks++;
      if (ctrl !== expect_of(instr)) begin
        failures++;
        $display("FAIL instr=%0d got=%b exp=%b", i, ctrl, expect_of(instr));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
