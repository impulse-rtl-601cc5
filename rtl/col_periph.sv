// col_periph: one reconfigurable column peripheral (SINV, BLFA, CMUX and CWD).
//
// SINV: the sensing inverters turn the read bitlines into the bitwise signals of the two
// enabled cells: D/OR = ~RBL, NOR = RBL, NAND = RBLB, AND = ~RBLB. With one enabled cell,
// D/OR is simply the stored bit D.
// Sign extension: in AccW2V only the lower six columns of an adder see a weight cell; the
// upper six see only the V cell. There the second operand is the weight sign Wsign forwarded
// from the adder's CS column, so the column adds D + Wsign instead of two sensed bits.
// BLFA: full adder on the two operand bits (see blfa).
// CMUX / mode: LSB forces C_IN to 0; CS passes C_IN on as C_NEXT (the '0' column of a V word
// that lines up with the weight sign); CF and MSB pass C_OUT. The MSB column also reports the
// sign of the sum extended by one bit (A ^ B ^ C_OUT) so that SpikeCheck is a correct signed
// compare; a spike is V + T >= 0 with T the stored (negated) threshold.
// CWD: selects external data, the sensed data D (adder bypassed, ResetV) or SUM, and drives
// the write bitlines only when the write is enabled, when the spike buffer bit of the column's
// neuron is set for conditional writes, and never in a CS column during a compute
// instruction, so the '0' column of each V word is kept.
// Purely combinational; the macro evaluates one instruction per clock cycle.
//
// The signal names, the four modes and the SINV/BLFA/CWD split are the paper's (Fig. 4). How
// Wsign enters the upper columns, the extended-sign spike decision and the CS write
// suppression are this design's reading of the text where the paper gives no circuit.
module col_periph
  import impulse_pkg::*;
(
  input  logic   rbl,
  input  logic   rblb,
  input  logic   cin,
  input  cmode_e mode,
  input  logic   ext_en,    // this column adds D + Wsign (upper half in AccW2V)
  input  logic   wsign,     // Wsign from the adder's CS column
  input  wdsel_e wdsel,
  input  logic   wr_en,
  input  logic   cond,
  input  logic   no_cs_wr,
  input  logic   spike,     // spike buffer bit of this column's neuron
  input  logic   d_ext,     // external write data
  output logic   d,         // sensed data (D/OR)
  output logic   c_next,    // carry to the next column
  output logic   sum,
  output logic   sgn_ext,   // sign of the one-bit-extended sum (used in MSB mode)
  output logic   wen,       // write-driver enable (WBL/WBLB driven)
  output logic   wbl        // write data (WBLB is its complement)
);

  logic op_nor, op_and, cin_eff, xr, cout;

  // SINV and operand selection
  always_comb begin
    d = ~rbl;
    if (ext_en) begin
      op_nor = ~(d | wsign);
      op_and = d & wsign;
    end else begin
      op_nor = rbl;
      op_and = ~rblb;
    end
  end

  // CMUX, LSB side
  assign cin_eff = (mode == M_LSB) ? 1'b0 : cin;

  blfa u_blfa (
    .nor_i (op_nor),
    .and_i (op_and),
    .cin   (cin_eff),
    .xor_o (xr),
    .sum   (sum),
    .cout  (cout)
  );

  // CMUX, output side
  assign c_next  = (mode == M_CS) ? cin_eff : cout;
  assign sgn_ext = xr ^ cout;

  // CWD
  always_comb begin
    unique case (wdsel)
      WD_EXT:  wbl = d_ext;
      WD_D:    wbl = d;
      default: wbl = sum;
    endcase
    wen = wr_en && (!cond || spike) && !(no_cs_wr && mode == M_CS);
  end

endmodule
