// impulse_ctrl: instruction decoder (the CTRL block next to the row decoder).
//
// Maps the 3-bit instruction to the controls of the column peripherals and the output
// register. Purely combinational; the macro takes a new instruction every clock cycle.
//   READ      sense a whole row, load DOUT
//   WRITE     write DIN into a row, all columns
//   ACCW2V    sum with Wsign extension, write every neuron (CS columns kept)
//   ACCV2V    sum of two V rows, write every neuron
//   ACCV2V_C  as ACCV2V, only neurons whose spike buffer bit is set (RMP soft reset)
//   SPIKECHK  no write, load the spike buffer from the MSB columns
//   RESETV    adder bypassed, sensed reset value written to neurons that spiked
// The instruction list is the paper's (Sec. II-B); the encoding and the conditional AccV2V
// variant are this design's choices.
module impulse_ctrl
  import impulse_pkg::*;
(
  input  instr_e instr,
  output ctrl_t  ctrl
);

  always_comb begin
    ctrl = '0;
    ctrl.wdsel = WD_SUM;
    unique case (instr)
      I_READ:     ctrl.dout_upd = 1'b1;
      I_WRITE:    begin ctrl.wr_en = 1'b1; ctrl.wdsel = WD_EXT; end
      I_ACCW2V:   begin ctrl.wr_en = 1'b1; ctrl.wsign_ext = 1'b1; ctrl.no_cs_wr = 1'b1; end
      I_ACCV2V:   begin ctrl.wr_en = 1'b1; ctrl.no_cs_wr = 1'b1; end
      I_ACCV2V_C: begin ctrl.wr_en = 1'b1; ctrl.no_cs_wr = 1'b1; ctrl.cond = 1'b1; end
      I_SPIKECHK: ctrl.spk_upd = 1'b1;
      I_RESETV:   begin
        ctrl.wr_en = 1'b1; ctrl.no_cs_wr = 1'b1; ctrl.cond = 1'b1; ctrl.wdsel = WD_D;
      end
      default:    ;
    endcase
  end

endmodule
