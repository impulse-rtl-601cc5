// impulse_macro: fused weight / membrane-potential compute-in-memory macro for SNN inference.
//
// One instruction per clock cycle. In that cycle the triple row decoder turns on up to two
// read wordlines and one write wordline, the array puts the wired NOR / NAND of the enabled
// cells on every column's bitlines, the column peripherals add (or bypass, or compare) and
// the result is written back into the write row at the rising edge. The spike buffer and the
// read-out register DOUT are loaded at the same edge, so results are visible one cycle after
// the instruction is presented.
// Interface: instr/par_even/addr1..3/din are sampled at the rising edge of clk; rst_n
// (asynchronous, active low) clears the spike buffer and DOUT, not the array.
// par_even selects the odd (0) or even (1) half of a cycle pair: it chooses RWLo/RWLe of the
// weight row and the 6-column alignment of the adders, and so serves neurons 0,2,..,10 or
// 1,3,..,11. The V rows used with each parity must hold that parity's word alignment.
// Structure, sizes and instructions follow the paper; the port list, the instruction encoding,
// the conditional AccV2V and the address roles not shown in the paper are this design's.
module impulse_macro
  import impulse_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  instr_e               instr,
  input  logic                 par_even,
  input  logic [ADDR_W-1:0]    addr1,
  input  logic [ADDR_W-1:0]    addr2,
  input  logic [ADDR_W-1:0]    addr3,
  input  logic [N_COLS-1:0]    din,
  output logic [N_COLS-1:0]    dout,
  output logic [N_NEURONS-1:0] spike
);

  logic [N_WROWS-1:0]  rwl_o, rwl_e;
  logic [N_VROWS-1:0]  rwl_v;
  logic [N_ROWS-1:0]   wwl;
  logic [N_COLS-1:0]   rbl, rblb, d, wen, wbl;
  logic [N_ADDERS-1:0] spike_new;
  ctrl_t               ctrl;

  impulse_ctrl u_ctrl (
    .instr (instr),
    .ctrl  (ctrl)
  );

  triple_row_dec u_dec (
    .instr    (instr),
    .par_even (par_even),
    .addr1    (addr1),
    .addr2    (addr2),
    .addr3    (addr3),
    .rwl_o    (rwl_o),
    .rwl_e    (rwl_e),
    .rwl_v    (rwl_v),
    .wwl      (wwl)
  );

  cim_array u_array (
    .clk   (clk),
    .rwl_o (rwl_o),
    .rwl_e (rwl_e),
    .rwl_v (rwl_v),
    .wwl   (wwl),
    .wen   (wen),
    .wbl   (wbl),
    .rbl   (rbl),
    .rblb  (rblb)
  );

  col_periph_bank u_periph (
    .rbl       (rbl),
    .rblb      (rblb),
    .par_even  (par_even),
    .ctrl      (ctrl),
    .din       (din),
    .spike     (spike),
    .d         (d),
    .wen       (wen),
    .wbl       (wbl),
    .spike_new (spike_new)
  );

  spike_buffer u_spk (
    .clk       (clk),
    .rst_n     (rst_n),
    .upd       (ctrl.spk_upd),
    .par_even  (par_even),
    .spike_new (spike_new),
    .spike     (spike)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             dout <= '0;
    else if (ctrl.dout_upd) dout <= d;
  end

endmodule
