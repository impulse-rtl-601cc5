// impulse_tb_pkg: helpers shared by the testbenches of the macro: where each weight and each
// membrane-potential word lives in a 72-bit row, and packing/unpacking of signed values.
// Layout: weight j, bit k -> column 6j+k. V word of neuron j (parity P = j%2, adder g = j/2),
// bit k -> slot position k (k<5) or k+1 (k>=5), column (6P + 12g + position) mod 72; slot
// position 5 is the column that must stay '0'.
package impulse_tb_pkg;
  import impulse_pkg::*;

  typedef logic [N_COLS-1:0] row_t;

  function automatic int unsigned v_col(int unsigned j, int unsigned k);
    int unsigned pos;
    pos = (k < 5) ? k : k + 1;
    return (W_BITS * (j % 2) + SLOT * (j / 2) + pos) % N_COLS;
  endfunction

  function automatic int unsigned zero_col(int unsigned j);
    return (W_BITS * (j % 2) + SLOT * (j / 2) + 5) % N_COLS;
  endfunction

  function automatic void put_v(ref row_t r, input int unsigned j, input int v);
    for (int unsigned k = 0; k < V_BITS; k++) r[v_col(j, k)] = v[k];
    r[zero_col(j)] = 1'b0;
  endfunction

  function automatic int get_v(row_t r, int unsigned j);
    logic [V_BITS-1:0] x;
    for (int unsigned k = 0; k < V_BITS; k++) x[k] = r[v_col(j, k)];
    return int'($signed(x));
  endfunction

  function automatic void put_w(ref row_t r, input int unsigned j, input int w);
    for (int unsigned k = 0; k < W_BITS; k++) r[W_BITS * j + k] = w[k];
  endfunction

  // Wrap an integer to the signed V_BITS range (two's complement, no saturation).
  function automatic int wrap_v(int x);
    logic [V_BITS-1:0] t;
    t = x[V_BITS-1:0];
    return int'($signed(t));
  endfunction

  function automatic int rand_range(int lo, int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction
endpackage
