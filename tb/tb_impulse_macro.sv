// tb_impulse_macro: end-to-end test of the macro at its full size (128 weight rows,
// 32 V rows, 72 columns, 12 output neurons), no parameters overridden.
//
// It loads a 128 x 12 weight matrix and the neuron constants through plain writes, then runs
// one fully connected layer for NT timesteps in each neuron mode, issuing the instruction
// stream a host would: for every input that spikes, AccW2V in the odd and in the even cycle
// (inputs that do not spike cost nothing), then per parity
//   IF : SpikeCheck, ResetV
//   LIF: AccV2V (leak), SpikeCheck, ResetV
//   RMP: SpikeCheck, conditional AccV2V (threshold subtracted from neurons that spiked)
// The membrane potentials ping-pong between two V rows per parity during accumulation, as in
// the paper's timing diagram. After every timestep the spikes and both V rows are compared
// with an integer model of the neurons. The RMP run uses 100 inputs, the input size of the
// sentiment-classification network's first layer. One instruction is issued per clock cycle
// with no gaps, and the cycle count of every timestep is checked against the instruction
// count. Each mechanism is counted; one that never happened counts as a failure.
//
// V row use (addresses 128 + k): k = 0/1 membrane potential (odd/even), 2/3 its ping-pong
// partner, 4/5 negated threshold, 6/7 reset value, 8/9 negated leak.
module tb_impulse_macro;
  import impulse_pkg::*;
  import impulse_tb_pkg::*;

  localparam int NT = 10;  // timesteps per word in the paper's sentiment task

  logic        clk = 0, rst_n;
  instr_e      instr;
  logic        par_even;
  logic [7:0]  addr1, addr2, addr3;
  logic [71:0] din, dout;
  logic [11:0] spike;

  impulse_macro dut (.*);

  always #2.5 clk = ~clk;  // 200 MHz

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_acc_odd, n_acc_even, n_skip, n_negw, n_ovf, n_leak, n_rmp_sub, n_rmp_keep;
  int n_spk, n_nospk, n_reset, n_reset_masked, n_wrap_spk, n_read, n_write, n_inplace;

  // reference model
  int w [128][12];
  int v [12], th [12], rst_val [12], leak [12];
  logic [11:0] ref_spk;
  int cur [2];  // V row (0..31) now holding the membrane potentials of each parity

  task automatic issue(instr_e i, bit p, int a1, int a2, int a3, row_t data = '0);
    @(negedge clk);
    instr = i; par_even = p; addr1 = 8'(a1); addr2 = 8'(a2); addr3 = 8'(a3); din = data;
    @(posedge clk);
    if (i == I_READ) n_read++;
    if (i == I_WRITE) n_write++;
    @(negedge clk);
    instr = I_NOP;
  endtask

  // back-to-back issue without returning to NOP (used inside a timestep); called at a
  // falling edge, returns at the next one, so one instruction occupies one clock cycle
  task automatic issue_b2b(instr_e i, bit p, int a1, int a2, int a3);
    instr = i; par_even = p; addr1 = 8'(a1); addr2 = 8'(a2); addr3 = 8'(a3);
    @(negedge clk);
  endtask

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  task automatic write_const(int k, int vals [12]);
    row_t r = '0;
    for (int j = 0; j < 12; j++) if (j % 2 == k % 2) put_v(r, j, vals[j]);
    issue(I_WRITE, 0, 0, 0, 128 + k, r);
  endtask

  task automatic load_v();
    write_const(0, v);
    write_const(1, v);
    // the ping-pong rows too: every V word's '0' column must really hold '0'
    write_const(2, v);
    write_const(3, v);
    cur[0] = 0;
    cur[1] = 1;
  endtask

  task automatic load_weights(int n_in, int wlo, int whi);
    row_t r;
    for (int i = 0; i < 128; i++) begin
      r = '0;
      for (int j = 0; j < 12; j++) begin
        w[i][j] = (i < n_in) ? rand_range(wlo, whi) : 0;
        put_w(r, j, w[i][j]);
      end
      issue(I_WRITE, 0, 0, 0, i, r);
    end
  endtask

  // mode: 0 IF, 1 LIF, 2 RMP
  task automatic run_timestep(int mode, int n_in, int density_pct, int t);
    logic [127:0] in_spk;
    int n_instr = 0, nxt;
    longint c0;
    int neg_th [12], neg_leak [12], tmp;
    for (int i = 0; i < 128; i++) in_spk[i] = (i < n_in) && ($urandom_range(0, 99) < density_pct);
    @(negedge clk);
    c0 = cyc;
    for (int i = 0; i < 128; i++) begin
      if (!in_spk[i]) begin n_skip++; continue; end
      for (int p = 0; p < 2; p++) begin
        nxt = cur[p] ^ 2;
        issue_b2b(I_ACCW2V, p[0], i, 128 + cur[p], 128 + nxt);
        cur[p] = nxt;
        n_instr++;
        if (p == 0) n_acc_odd++; else n_acc_even++;
      end
      for (int j = 0; j < 12; j++) begin
        tmp = v[j] + w[i][j];
        if (w[i][j] < 0) n_negw++;
        if (wrap_v(tmp) != tmp) n_ovf++;
        v[j] = wrap_v(tmp);
      end
    end
    for (int p = 0; p < 2; p++) begin
      if (mode == 1) begin
        nxt = cur[p] ^ 2;
        issue_b2b(I_ACCV2V, p[0], 128 + 8 + p, 128 + cur[p], 128 + nxt);
        cur[p] = nxt;
        n_instr++;
        for (int j = p; j < 12; j += 2) begin v[j] = wrap_v(v[j] - leak[j]); n_leak++; end
      end
      issue_b2b(I_SPIKECHK, p[0], 0, 128 + cur[p], 128 + 4 + p);
      n_instr++;
      for (int j = p; j < 12; j += 2) begin
        ref_spk[j] = (v[j] - th[j] >= 0);
        if (ref_spk[j]) begin n_spk++; if (j == 11) n_wrap_spk++; end else n_nospk++;
      end
      if (mode == 2) begin
        issue_b2b(I_ACCV2V_C, p[0], 128 + 4 + p, 128 + cur[p], 128 + cur[p]);
        n_inplace++;
        for (int j = p; j < 12; j += 2)
          if (ref_spk[j]) begin v[j] = wrap_v(v[j] - th[j]); n_rmp_sub++; end else n_rmp_keep++;
      end else begin
        issue_b2b(I_RESETV, p[0], 0, 128 + 6 + p, 128 + cur[p]);
        for (int j = p; j < 12; j += 2)
          if (ref_spk[j]) begin v[j] = rst_val[j]; n_reset++; end else n_reset_masked++;
      end
      n_instr++;
    end
    instr = I_NOP;
    // one instruction per cycle, no stalls
    chk($sformatf("cycles mode=%0d t=%0d", mode, t), int'(cyc - c0), n_instr);
    chk($sformatf("spikes mode=%0d t=%0d", mode, t), int'(spike), int'(ref_spk));
    for (int p = 0; p < 2; p++) begin
      issue(I_READ, 0, 0, 128 + cur[p], 0);
      for (int j = p; j < 12; j += 2) chk($sformatf("v[%0d] mode=%0d t=%0d", j, mode, t), get_v(dout, j), v[j]);
    end
  endtask

  task automatic run_layer(int mode, int n_in, int density_pct, int wlo, int whi);
    load_weights(n_in, wlo, whi);
    for (int j = 0; j < 12; j++) begin
      v[j]       = rand_range(-50, 50);
      th[j]      = rand_range(60, 300);
      rst_val[j] = (mode == 0) ? 0 : rand_range(-20, 20);
      leak[j]    = rand_range(1, 20);
    end
    // neuron 0 gets an unreachable threshold and large weights in IF mode: its potential
    // runs past +1023 and wraps, as the 11-bit arithmetic does
    if (mode == 0) begin
      th[0] = 1023;
      for (int i = 0; i < n_in; i++) w[i][0] = 31;
      load_weights_col0();
    end
    load_v();
    begin
      int neg [12];
      for (int j = 0; j < 12; j++) neg[j] = -th[j];
      write_const(4, neg); write_const(5, neg);
      write_const(6, rst_val); write_const(7, rst_val);
      for (int j = 0; j < 12; j++) neg[j] = -leak[j];
      write_const(8, neg); write_const(9, neg);
    end
    for (int t = 0; t < NT; t++) run_timestep(mode, n_in, density_pct, t);
  endtask

  // rewrite weight rows after changing column 0 of the model
  task automatic load_weights_col0();
    row_t r;
    for (int i = 0; i < 128; i++) begin
      r = '0;
      for (int j = 0; j < 12; j++) put_w(r, j, w[i][j]);
      issue(I_WRITE, 0, 0, 0, i, r);
    end
  endtask

  initial begin
    rst_n = 0; instr = I_NOP; par_even = 0; addr1 = 0; addr2 = 0; addr3 = 0; din = '0;
    ref_spk = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    chk("spike after reset", int'(spike), 0);
    chk("dout after reset", int'(dout != 0), 0);
    run_layer(0, 128, 15, -12, 31);   // IF, 85% sparsity
    run_layer(1, 128, 15, -12, 31);   // LIF
    run_layer(2, 100, 15, -20, 31);   // RMP, 100 inputs
    // mechanism coverage
    chk("AccW2V odd happened",        int'(n_acc_odd > 0), 1);
    chk("AccW2V even happened",       int'(n_acc_even > 0), 1);
    chk("silent inputs skipped",      int'(n_skip > 0), 1);
    chk("negative weight added",      int'(n_negw > 0), 1);
    chk("11-bit wrap happened",       int'(n_ovf > 0), 1);
    chk("leak applied",               int'(n_leak > 0), 1);
    chk("RMP soft reset applied",     int'(n_rmp_sub > 0), 1);
    chk("RMP non-spiking kept",       int'(n_rmp_keep > 0), 1);
    chk("spike generated",            int'(n_spk > 0), 1);
    chk("no-spike decided",           int'(n_nospk > 0), 1);
    chk("ResetV wrote",               int'(n_reset > 0), 1);
    chk("ResetV masked",              int'(n_reset_masked > 0), 1);
    chk("wrapped adder spiked",       int'(n_wrap_spk > 0), 1);
    chk("in-place read/write",        int'(n_inplace > 0), 1);
    chk("reads",                      int'(n_read > 0), 1);
    chk("writes",                     int'(n_write > 0), 1);
    $display("acc odd=%0d even=%0d skipped=%0d negw=%0d wrap=%0d leak=%0d rmp_sub=%0d rmp_keep=%0d",
             n_acc_odd, n_acc_even, n_skip, n_negw, n_ovf, n_leak, n_rmp_sub, n_rmp_keep);
    $display("spk=%0d nospk=%0d reset=%0d masked=%0d wrap_spk=%0d reads=%0d writes=%0d cycles=%0d",
             n_spk, n_nospk, n_reset, n_reset_masked, n_wrap_spk, n_read, n_write, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
