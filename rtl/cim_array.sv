// cim_array: the fused W_MEM / V_MEM 10T-SRAM array, modelled at bitline level.
//
// Rows 0..WROWS-1 are weight rows, rows WROWS..WROWS+VROWS-1 are membrane-potential
// rows; both share the same COLS read bitline pairs (RBL, RBLB) and write bitlines, which is
// what makes the two memories "fused". Each cell has a decoupled read port. In a weight row
// the cells of columns 0-5, 12-17, .. ("odd" columns) hang on RWLo and the cells of columns
// 6-11, 18-23, .. ("even" columns) on RWLe; a V row has a single RWL for all its cells.
// When several read wordlines are on, a column's precharged RBL is pulled low by any enabled
// cell storing '1' (RBL = NOR of the enabled bits) and RBLB by any enabled cell storing '0'
// (RBLB = NAND). With nothing enabled both stay precharged at '1'.
//
// Timing: reads are combinational from the wordlines (one evaluate phase); a write happens at
// the rising clock edge into the row whose WWL is on, in every column whose write driver is
// enabled. A row may be read and written in the same cycle: the read sees the old data.
// The array is not reset, like an SRAM.
//
// The geometry and the RWLo/RWLe split follow the paper (Fig. 3); treating the bitlines as
// ideal wired NOR/NAND and the single-edge write are this model's simplifications.
module cim_array
  import impulse_pkg::*;
#(
  parameter int unsigned WROWS = impulse_pkg::N_WROWS,
  parameter int unsigned VROWS = impulse_pkg::N_VROWS,
  parameter int unsigned COLS  = impulse_pkg::N_COLS
) (
  input  logic                       clk,
  input  logic [WROWS-1:0]         rwl_o,  // weight-row read wordlines, odd columns
  input  logic [WROWS-1:0]         rwl_e,  // weight-row read wordlines, even columns
  input  logic [VROWS-1:0]         rwl_v,  // V-row read wordlines
  input  logic [WROWS+VROWS-1:0] wwl,    // write wordlines, all rows
  input  logic [COLS-1:0]          wen,    // per-column write-driver enable
  input  logic [COLS-1:0]          wbl,    // per-column write data (WBLB is its complement)
  output logic [COLS-1:0]          rbl,    // NOR of enabled cells
  output logic [COLS-1:0]          rblb    // NAND of enabled cells
);

  localparam int unsigned NR = WROWS + VROWS;

  logic [COLS-1:0] mem [NR];

  // Columns whose weight cells hang on RWLo (0-5, 12-17, ..); the others use RWLe.
  function automatic logic [COLS-1:0] odd_cols();
    logic [COLS-1:0] m;
    for (int unsigned c = 0; c < COLS; c++) m[c] = ((c / W_BITS) % 2 == 0);
    return m;
  endfunction

  localparam logic [COLS-1:0] ODD_MASK = odd_cols();

  // Bitlines: a column sees '1' (discharges RBL) or '0' (discharges RBLB) from any cell
  // whose read port is on.
  always_comb begin
    logic [COLS-1:0] en, any1, any0;
    any1 = '0;
    any0 = '0;
    for (int unsigned r = 0; r < NR; r++) begin
      if (r < WROWS) en = ({COLS{rwl_o[r]}} & ODD_MASK) | ({COLS{rwl_e[r]}} & ~ODD_MASK);
      else           en = {COLS{rwl_v[r - WROWS]}};
      any1 |= en &  mem[r];
      any0 |= en & ~mem[r];
    end
    rbl  = ~any1;
    rblb = any0 | ~any1;  // low only if some cell is enabled and all enabled hold '1'
  end

  for (genvar r = 0; r < NR; r++) begin : g_row
    always_ff @(posedge clk) begin
      if (wwl[r]) mem[r] <= (mem[r] & ~wen) | (wbl & wen);
    end
  end

endmodule
