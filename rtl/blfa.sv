// blfa: bitwise-logic full adder of one column peripheral.
//
// The array already delivers two bitwise functions of the two operand bits A and B of a
// column: NOR (from RBL) and AND (from RBLB, inverted). The BLFA forms XOR = NOR(NOR, AND),
// then SUM = XOR ^ CIN (CIN selects XOR or its inverse) and COUT = XOR ? CIN : AND, the
// propagate/generate form of a full adder. Purely combinational.
// The structure follows the paper's BLFA drawing (Fig. 4): an inverter and a mux for SUM, a
// mux steered by XOR for COUT, and a gate fed by NOR and AND for XOR.
module blfa (
  input  logic nor_i,  // ~(A | B)
  input  logic and_i,  //   A & B
  input  logic cin,
  output logic xor_o,  //   A ^ B
  output logic sum,
  output logic cout
);

  always_comb begin
    xor_o = ~(nor_i | and_i);
    sum   = cin ? ~xor_o : xor_o;
    cout  = xor_o ? cin : and_i;
  end

endmodule
