// impulse_pkg: constants and types shared by the fused weight / membrane-potential
// compute-in-memory macro.
//
// Array geometry: 128 weight rows and 32 membrane-potential rows, 72 columns each.
// A weight row holds twelve 6-bit signed weights; weight k sits in columns 6k..6k+5
// (LSB first). A membrane-potential (V) word occupies a 12-column slot: bits 0..4 in the
// slot's first five columns, a column that must hold '0' (it lines up with the weight sign
// bit), and bits 5..10 in the last six columns, giving an 11-bit signed value.
// Odd cycles serve weights 0,2,..,10 (read wordline RWLo); even cycles serve weights
// 1,3,..,11 (RWLe) and shift every adder, and the V word slots of even V rows, by 6 columns.
// The geometry numbers and precisions follow the paper; the instruction encoding is this
// design's own choice.
package impulse_pkg;

  localparam int unsigned N_WROWS   = 128;  // weight rows, one per input neuron
  localparam int unsigned N_VROWS   = 32;   // membrane-potential rows
  localparam int unsigned N_ROWS    = N_WROWS + N_VROWS;
  localparam int unsigned N_COLS    = 72;   // bitline columns
  localparam int unsigned W_BITS    = 6;    // signed weight precision
  localparam int unsigned V_BITS    = 11;   // signed membrane-potential precision
  localparam int unsigned SLOT      = 2 * W_BITS;        // columns per adder / V word
  localparam int unsigned N_NEURONS = N_COLS / W_BITS;   // 12 weights per row
  localparam int unsigned N_ADDERS  = N_COLS / SLOT;     // 6 adders per cycle
  localparam int unsigned ADDR_W    = $clog2(N_ROWS);    // 8-bit row address

  // Instruction set. READ and WRITE are plain SRAM accesses; the rest are the in-memory
  // SNN instructions. ACCV2V_C is AccV2V with the write gated by the spike buffer, as
  // the soft reset of the RMP neuron needs.
  typedef enum logic [2:0] {
    I_NOP      = 3'd0,
    I_READ     = 3'd1,  // ADDR2 -> DOUT
    I_WRITE    = 3'd2,  // DIN  -> row ADDR3
    I_ACCW2V   = 3'd3,  // row ADDR3 <= W(ADDR1, parity) + V(ADDR2)
    I_ACCV2V   = 3'd4,  // row ADDR3 <= V(ADDR1) + V(ADDR2)
    I_ACCV2V_C = 3'd5,  // as I_ACCV2V, only neurons whose spike buffer is set
    I_SPIKECHK = 3'd6,  // spike <= V(ADDR2) + V(ADDR3) >= 0
    I_RESETV   = 3'd7   // row ADDR3 <= V(ADDR2), only neurons whose spike buffer is set
  } instr_e;

  // Column peripheral modes (Fig. 4 of the paper's naming).
  typedef enum logic [1:0] {
    M_CF  = 2'd0,  // carry forward: C_NEXT = C_OUT
    M_CS  = 2'd1,  // carry skip:    C_NEXT = C_IN, generates Wsign
    M_LSB = 2'd2,  // C_IN = 0
    M_MSB = 2'd3   // C_OUT decides the spike buffer
  } cmode_e;

  // Source of the write-driver data.
  typedef enum logic [1:0] {
    WD_EXT = 2'd0,  // external data (plain write)
    WD_D   = 2'd1,  // sensed data, adder bypassed (ResetV)
    WD_SUM = 2'd2   // adder sum (AccW2V, AccV2V)
  } wdsel_e;

  // Controls from the instruction decoder to the column peripherals.
  typedef struct packed {
    logic   wsign_ext; // upper six columns add Wsign instead of a second row
    logic   wr_en;     // drive the write bitlines
    logic   cond;      // gate the write with the spike buffer
    logic   no_cs_wr;  // CS columns keep their '0' (compute instructions)
    wdsel_e wdsel;
    logic   spk_upd;   // SpikeCheck: load the spike buffer
    logic   dout_upd;  // Read: load the output register
  } ctrl_t;

  // Offset of column c inside the adder chain of the given parity (0 = odd cycle).
  function automatic int unsigned col_offset(int unsigned c, logic par_even);
    return (c + N_COLS - (par_even ? W_BITS : 0)) % N_COLS;
  endfunction

  // Peripheral mode of column c in the given cycle parity.
  function automatic cmode_e col_mode(int unsigned c, logic par_even);
    int unsigned pos;
    pos = col_offset(c, par_even) % SLOT;
    if (pos == 0)               return M_LSB;
    else if (pos == W_BITS - 1) return M_CS;
    else if (pos == SLOT - 1)   return M_MSB;
    else                        return M_CF;
  endfunction

  // Output neuron whose adder column c belongs to in the given parity.
  function automatic int unsigned col_neuron(int unsigned c, logic par_even);
    return 2 * (col_offset(c, par_even) / SLOT) + (par_even ? 1 : 0);
  endfunction

endpackage
