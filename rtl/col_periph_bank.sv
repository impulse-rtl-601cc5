// col_periph_bank: the row of COLS reconfigurable column peripherals under the array.
//
// The peripherals form one carry ring: column c takes its C_IN from column c-1 (column 0
// from the last column). Each column's mode cuts the ring into six 12-column adders:
//   odd cycle  (par_even = 0): adders on columns 0-11, 12-23, .., 60-71
//   even cycle (par_even = 1): adders on columns 6-17, 18-29, .., 54-65 and 66-71 + 0-5
// Within an adder the first column is LSB (C_IN = 0), the sixth is CS (its V bit is the
// '0' column aligned with the weight sign; the carry skips it), the last is MSB. Hence the
// ring never closes on itself: every path around it passes an LSB column, whose C_IN is cut
// to 0. Tools still report the structural loop; it is the real topology of the ripple chain
// and is left in place on purpose.
// In AccW2V the CS column's sensed bit is the weight sign Wsign; it is forwarded to the six
// upper columns of the same adder, which add it to their V bits (sign extension of the
// 6-bit weight to the 11-bit membrane potential).
// The MSB column of each adder delivers the SpikeCheck decision (sum >= 0) for its neuron.
// The write-driver enable of a column uses the spike buffer bit of the neuron owning it.
// Purely combinational: one instruction evaluates within one clock cycle.
//
// The odd/even adder boundaries, the modes and the Wsign forwarding are the paper's (Fig. 4,
// Sec. II-A). The wrap of the last even-cycle adder from column 71 to column 0 is this
// design's reading of "each row storing six signed values" with the 6-column stagger.
module col_periph_bank
  import impulse_pkg::*;
#(
  parameter int unsigned COLS = impulse_pkg::N_COLS
) (
  input  logic [COLS-1:0]          rbl,
  input  logic [COLS-1:0]          rblb,
  input  logic                       par_even,
  input  ctrl_t                      ctrl,
  input  logic [COLS-1:0]          din,        // external write data
  input  logic [COLS/W_BITS-1:0]   spike,      // spike buffer
  output logic [COLS-1:0]          d,          // sensed data of every column
  output logic [COLS-1:0]          wen,
  output logic [COLS-1:0]          wbl,
  output logic [COLS/SLOT-1:0]     spike_new   // SpikeCheck decision per adder
);

  localparam int unsigned NADD = COLS / SLOT;

  cmode_e            mode   [COLS];
  logic [COLS-1:0] ext_en;
  logic [COLS-1:0] wsign;
  logic [COLS-1:0] spk_col;
  logic [COLS-1:0] cin, c_next, sgn_ext;

  // Configuration of every column for this cycle's parity.
  always_comb begin
    int unsigned off, base, cs_col;
    for (int unsigned c = 0; c < COLS; c++) begin
      off     = (c + COLS - (par_even ? W_BITS : 0)) % COLS;
      base    = (c + COLS - off % SLOT) % COLS;      // LSB column of c's adder
      cs_col  = (base + W_BITS - 1) % COLS;
      mode[c] = col_mode(c, par_even);
      ext_en[c]  = ctrl.wsign_ext && (off % SLOT >= W_BITS);
      wsign[c]   = d[cs_col];
      spk_col[c] = spike[col_neuron(c, par_even)];
    end
  end

  // Carry ring.
  always_comb begin
    for (int unsigned c = 0; c < COLS; c++) cin[c] = c_next[(c + COLS - 1) % COLS];
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    col_periph u_col (
      .rbl      (rbl[c]),
      .rblb     (rblb[c]),
      .cin      (cin[c]),
      .mode     (mode[c]),
      .ext_en   (ext_en[c]),
      .wsign    (wsign[c]),
      .wdsel    (ctrl.wdsel),
      .wr_en    (ctrl.wr_en),
      .cond     (ctrl.cond),
      .no_cs_wr (ctrl.no_cs_wr),
      .spike    (spk_col[c]),
      .d_ext    (din[c]),
      .d        (d[c]),
      .c_next   (c_next[c]),
      .sum      (),
      .sgn_ext  (sgn_ext[c]),
      .wen      (wen[c]),
      .wbl      (wbl[c])
    );
  end

  // SpikeCheck decision of each adder: its MSB column's extended sign is '0'.
  always_comb begin
    for (int unsigned g = 0; g < NADD; g++)
      spike_new[g] = ~sgn_ext[((par_even ? W_BITS : 0) + g * SLOT + SLOT - 1) % COLS];
  end

endmodule
