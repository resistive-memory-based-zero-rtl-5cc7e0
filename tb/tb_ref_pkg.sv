// tb_ref_pkg: reference model used by the testbenches. It is written apart
// from the RTL and recomputes everything from the model equations:
//  - the conductance code of every crossbar cell, from the same
//    (SEED, row, column) hash the array model uses for its random draw;
//  - the differential weight of row r on neuron c: G(r,2c) - G(r,2c+1);
//  - one LSM time step: per-group ADC codes summed into the current, an
//    Euler LIF step with floor division by powers of two, reset to rest on a
//    spike, and spike counting.
package tb_ref_pkg;

  localparam int ROWS = 512;
  localparam int NCP  = 256;   // column pairs
  localparam int NH   = 200;

  int wtab [ROWS][NCP];        // differential weights

  function automatic int unsigned mix32(input int unsigned x);
    int unsigned y;
    y = x ^ (x >> 16);
    y = y * 32'h7feb352d;
    y = y ^ (y >> 15);
    y = y * 32'h846ca68b;
    y = y ^ (y >> 16);
    return y;
  endfunction

  function automatic int g_code(input int unsigned seed, input int r, input int c);
    int unsigned h;
    h = mix32((seed * 32'h9e3779b9) ^ ((r << 16) | c));
    return 74 + int'(h & 31) + int'((h >> 8) & 31) + int'((h >> 16) & 31) + int'((h >> 24) & 31);
  endfunction

  function automatic void build_weights(input int unsigned seed);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NCP; c++)
        wtab[r][c] = g_code(seed, r, 2 * c) - g_code(seed, r, 2 * c + 1);
  endfunction

  function automatic int floor_div_pow2(input int x, input int s);
    int d;
    d = 1 << s;
    if (x >= 0) return x / d;
    return -(((-x) + d - 1) / d);
  endfunction

  function automatic int clip(input int v, input int lo, input int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  // one LIF step: returns the spike, updates u
  function automatic bit lif_step(inout int u, input int i_syn, input int th, input int rest,
                                  input int ls, input int is);
    int v;
    v = u + floor_div_pow2(rest - u, ls) + floor_div_pow2(i_syn, is);
    v = clip(v, -32768, 32767);
    if (v >= th) begin u = rest; return 1'b1; end
    u = v;
    return 1'b0;
  endfunction

  // current of neuron c for the given row vector over groups gf..gl
  function automatic int current(input bit rows [ROWS], input int c, input int gf, input int gl);
    int tot, s;
    tot = 0;
    for (int g = gf; g <= gl; g++) begin
      s = 0;
      for (int r = g * 64; r < g * 64 + 64; r++) if (rows[r]) s += wtab[r][c];
      tot += clip(s, -8192, 8191);
    end
    return tot;
  endfunction

  class lsm_model;
    int u   [NH];
    bit spk [NH];
    int cnt [NH];
    int th, rest, ls, is;

    function void start(input int th_i, input int rest_i, input int ls_i, input int is_i);
      th = th_i; rest = rest_i; ls = ls_i; is = is_i;
      for (int i = 0; i < NH; i++) begin u[i] = rest; spk[i] = 0; cnt[i] = 0; end
    endfunction

    // ev: event bits 0..ucnt-1 placed at rows base..; recurrent rows 256..455
    function void step(input bit ev [256], input int ucnt, input int base, input int gf, input int gl);
      bit rows [ROWS];
      bit nspk [NH];
      for (int r = 0; r < ROWS; r++) rows[r] = 0;
      for (int k = 0; k < ucnt; k++) rows[base + k] = ev[k];
      for (int i = 0; i < NH; i++) rows[256 + i] = spk[i];
      for (int i = 0; i < NH; i++) begin
        nspk[i] = lif_step(u[i], current(rows, i, gf, gl), th, rest, ls, is);
        if (nspk[i]) cnt[i]++;
      end
      spk = nspk;
    endfunction
  endclass

endpackage
