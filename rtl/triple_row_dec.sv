// triple_row_dec: the triple row decoder of the macro.
//
// It takes three row addresses each cycle and turns on at most two read wordlines (RWL) and
// one write wordline (WWL), as the in-memory instructions need. Which address drives which
// line depends on the instruction:
//   READ        ADDR2 -> RWL (weight row: RWLo and RWLe together, whole row)
//   WRITE       ADDR3 -> WWL
//   ACCW2V      ADDR1 -> RWLo (odd cycle) or RWLe (even cycle), ADDR2 -> RWL, ADDR3 -> WWL
//   ACCV2V(_C)  ADDR1 -> RWL, ADDR2 -> RWL, ADDR3 -> WWL
//   SPIKECHK    ADDR2 -> RWL (membrane potential), ADDR3 -> RWL (threshold)
//   RESETV      ADDR2 -> RWL (reset value), ADDR3 -> WWL (destination)
// Addresses 0..WROWS-1 select weight rows, the next VROWS the V rows; anything above
// selects nothing. The decoder is purely combinational.
//
// The three addresses and the use of ADDR1/2/3 in AccW2V, SpikeCheck and ResetV follow the
// timing diagram of the paper (Fig. 5); the roles of the addresses in AccV2V, READ and WRITE
// are this design's choice.
module triple_row_dec
  import impulse_pkg::*;
#(
  parameter int unsigned WROWS = impulse_pkg::N_WROWS,
  parameter int unsigned VROWS = impulse_pkg::N_VROWS,
  parameter int unsigned AW      = $clog2(WROWS + VROWS)
) (
  input  instr_e                     instr,
  input  logic                       par_even,  // 0: odd cycle, 1: even cycle
  input  logic [AW-1:0]              addr1,
  input  logic [AW-1:0]              addr2,
  input  logic [AW-1:0]              addr3,
  output logic [WROWS-1:0]         rwl_o,
  output logic [WROWS-1:0]         rwl_e,
  output logic [VROWS-1:0]         rwl_v,
  output logic [WROWS+VROWS-1:0] wwl
);

  localparam int unsigned NR = WROWS + VROWS;

  logic rd1, rd2, rd3, wr3, both;

  always_comb begin
    rd1  = 1'b0;
    rd2  = 1'b0;
    rd3  = 1'b0;
    wr3  = 1'b0;
    both = 1'b0;
    unique case (instr)
      I_READ:              begin rd2 = 1'b1; both = 1'b1; end
      I_WRITE:             wr3 = 1'b1;
      I_ACCW2V,
      I_ACCV2V,
      I_ACCV2V_C:          begin rd1 = 1'b1; rd2 = 1'b1; wr3 = 1'b1; end
      I_SPIKECHK:          begin rd2 = 1'b1; rd3 = 1'b1; end
      I_RESETV:            begin rd2 = 1'b1; wr3 = 1'b1; end
      default:             ;
    endcase
  end

  // One comparator per row and address port.
  always_comb begin
    logic hit;
    rwl_o = '0;
    rwl_e = '0;
    rwl_v = '0;
    wwl   = '0;
    for (int unsigned r = 0; r < NR; r++) begin
      hit = (rd1 && int'(addr1) == r) || (rd2 && int'(addr2) == r) ||
            (rd3 && int'(addr3) == r);
      if (r < WROWS) begin
        rwl_o[r] = hit && (both || !par_even);
        rwl_e[r] = hit && (both ||  par_even);
      end else begin
        rwl_v[r - WROWS] = hit;
      end
      wwl[r] = wr3 && int'(addr3) == r;
    end
  end

endmodule
