// tb_workload_paper_sizes: runs the published workload sizes through the
// whole design at its default parameters and checks every result against an
// independent reference (LSM, readout layer, floating-point cosine).
//   - N-MNIST-sized classification: 256 vision inputs, 50 time steps,
//     10 classes (label = arg-max of the first 10 outputs);
//   - N-TIDIGITS-sized classification: 64 audio inputs, 129 time steps,
//     11 classes;
//   - zero-shot retrieval: 9 vision embeddings (one per digit class) are
//     enrolled, then an audio query (129 steps) must return the slot of
//     highest cosine similarity, and a vision query repeating enrolled sample
//     4 must return slot 4.
// The event data are random with the given sizes; the window lengths and
// class counts follow the published experiments. The spike vector of every
// time step is checked, and each mechanism (both modalities, each command,
// spikes, skipped row groups, clipped outputs, event stalls) must occur.
module tb_workload_paper_sizes;
  import lsm_pkg::*;
  import tb_ref_pkg::*;

  localparam int TV = 50, TA = 129, NENR = 9, NCLS_V = 10, NCLS_A = 11, MAXT = 129;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready;
  op_e cmd_op = OP_CLASSIFY;
  modality_e cmd_mod = MOD_VISION;
  logic [4:0] cmd_slot = 0;
  lif_cfg_t cfg_lif [NMOD];
  logic [7:0] cfg_t_steps [NMOD];
  logic [6:0] cfg_n_class = NCLS_V;
  logic [5:0] cfg_n_gal = NENR;
  logic [4:0] cfg_z_shift = 2;
  logic ev_valid = 0, ev_ready;
  logic [U_MAX-1:0] ev_vec = 0;
  logic w_we = 0, w_mod = 0, b_we = 0, b_mod = 0;
  logic [5:0] w_row = 0, b_row = 0;
  logic [7:0] w_col = 0;
  logic signed [W_W-1:0] w_data = 0;
  logic signed [B_W-1:0] b_data = 0;
  logic res_valid;
  op_e res_op;
  logic [5:0] res_idx;
  logic signed [Z_W-1:0] res_score;
  logic signed [ACC_W-1:0] res_dot;
  logic [ACC_W-1:0] res_ng, res_nq;
  logic busy, st_step, st_spike, st_skip, st_zsat;
  logic [H-1:0] st_spikes;

  lsm_zeroshot_top dut (.*);

  int W [2][P][H];
  int Bv [2][P];
  int checks = 0, failures = 0;
  int n_vis = 0, n_aud = 0, n_switch = 0, n_cls = 0, n_enr = 0, n_qry = 0;
  int n_spike = 0, n_skip = 0, n_zsat = 0, n_stall = 0;
  int gal [NGAL][P];
  bit  enr_ev [NENR][MAXT][256];

  // expected spike vectors of the running command
  bit exp_spk [MAXT][H];
  int t_chk;
  always @(negedge clk) begin
    if (st_step) begin
      for (int i = 0; i < H; i++) begin
        checks++;
        if (st_spikes[i] !== exp_spk[t_chk][i]) begin
          failures++;
          if (failures < 10) $display("FAIL step %0d neuron %0d", t_chk, i);
        end
      end
      t_chk++;
    end
    if (st_spike) n_spike++;
    if (st_skip) n_skip++;
    if (st_zsat) n_zsat++;
    if (ev_valid && !ev_ready) n_stall++;
  end

  function automatic void lif_of(input modality_e m, output int th, output int rest, output int ls, output int is);
    th = int'(cfg_lif[m].u_th); rest = int'(cfg_lif[m].u_rest);
    ls = int'(cfg_lif[m].leak_shift); is = int'(cfg_lif[m].in_shift);
  endfunction

  // reference: LSM counts then projection with weight set m, nout outputs
  task automatic reference(input modality_e m, input bit ev [MAXT][256], output int z [P]);
    lsm_model lm;
    int th, rest, ls, is, T, ucnt, base, gf;
    lm = new();
    lif_of(m, th, rest, ls, is);
    lm.start(th, rest, ls, is);
    T    = int'(cfg_t_steps[m]);
    ucnt = (m == MOD_AUDIO) ? U_AUD : U_VIS;
    base = (m == MOD_AUDIO) ? AUD_IN_BASE : VIS_IN_BASE;
    gf   = base / 64;
    for (int t = 0; t < T; t++) begin
      lm.step(ev[t], ucnt, base, gf, 7);
      for (int i = 0; i < H; i++) exp_spk[t][i] = lm.spk[i];
    end
    for (int j = 0; j < P; j++) begin
      longint a;
      a = Bv[m][j];
      for (int i = 0; i < H; i++) a += longint'(W[m][j][i]) * lm.cnt[i];
      a = a >>> cfg_z_shift;
      z[j] = int'((a > 32767) ? 32767 : (a < -32768) ? -32768 : a);
    end
  endtask

  task automatic gen_events(input modality_e m, output bit ev [MAXT][256]);
    int dens;
    dens = (m == MOD_AUDIO) ? 20 : 10;
    for (int t = 0; t < MAXT; t++)
      for (int k = 0; k < 256; k++) ev[t][k] = ($urandom_range(0, 99) < dens);
  endtask

  modality_e last_mod = MOD_VISION;

  // issue one command and feed its events; returns when res_valid
  task automatic run_cmd(input op_e op, input modality_e m, input int slot, input bit ev [MAXT][256]);
    int T, cyc;
    T = int'(cfg_t_steps[m]);
    if (m != last_mod) n_switch++;
    last_mod = m;
    if (m == MOD_AUDIO) n_aud++; else n_vis++;
    t_chk = 0;
    while (!cmd_ready) @(negedge clk);
    cmd_op = op; cmd_mod = m; cmd_slot = 5'(slot); cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    for (int t = 0; t < T; t++) begin
      for (int k = 0; k < 256; k++) ev_vec[k] = ev[t][k];
      // bits above the audio width are noise that must be ignored
      if (m == MOD_AUDIO) for (int k = U_AUD; k < 256; k++) ev_vec[k] = 1'($urandom_range(0, 1));
      ev_valid = 1;
      while (!ev_ready) @(negedge clk);
      @(negedge clk);
    end
    ev_valid = 0;
    cyc = 0;
    while (!res_valid && cyc < 4000000) begin @(negedge clk); cyc++; end
    checks++;
    if (!res_valid || res_op != op) begin failures++; $display("FAIL no result for op %0d", op); end
    checks++;
    if (t_chk != T) begin failures++; $display("FAIL %0d steps seen exp %0d", t_chk, T); end
  endtask

  initial begin
    bit ev [MAXT][256];
    int z [P];
    cfg_lif[MOD_VISION] = '{u_th: 16'sd40, u_rest: 16'sd0,  leak_shift: 4'd2, in_shift: 4'd2};
    cfg_lif[MOD_AUDIO]  = '{u_th: 16'sd30, u_rest: -16'sd4, leak_shift: 4'd3, in_shift: 4'd1};
    cfg_t_steps[MOD_VISION] = 8'(TV);
    cfg_t_steps[MOD_AUDIO]  = 8'(TA);
    build_weights(1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // load weights; row 63 of the vision set has a huge bias so it clips
    for (int m = 0; m < 2; m++) for (int j = 0; j < P; j++) begin
      for (int i = 0; i < H; i++) begin
        W[m][j][i] = $urandom_range(0, 255) - 128;
        w_we = 1; w_mod = 1'(m); w_row = 6'(j); w_col = 8'(i); w_data = 8'(W[m][j][i]);
        @(negedge clk);
      end
      w_we = 0;
      Bv[m][j] = (m == 0 && j == 63) ? 4000000 : $urandom_range(0, 2000) - 1000;
      b_we = 1; b_mod = 1'(m); b_row = 6'(j); b_data = 24'(Bv[m][j]);
      @(negedge clk);
      b_we = 0;
    end

    // CLASSIFY, vision then audio
    for (int m = 0; m < 2; m++) begin
      int best, bidx, ncls;
      ncls = (m == 0) ? NCLS_V : NCLS_A;
      cfg_n_class = 7'(ncls);
      gen_events(modality_e'(m), ev);
      reference(modality_e'(m), ev, z);
      run_cmd(OP_CLASSIFY, modality_e'(m), 0, ev);
      n_cls++;
      best = z[0]; bidx = 0;
      for (int j = 1; j < ncls; j++) if (z[j] > best) begin best = z[j]; bidx = j; end
      checks++;
      if (int'(res_idx) != bidx || int'(res_score) != best) begin
        failures++; $display("FAIL classify mod %0d: %0d/%0d exp %0d/%0d", m, res_idx, res_score, bidx, best);
      end
      $display("classify mod %0d -> label %0d", m, res_idx);
    end

    // ENROLL vision samples
    for (int s = 0; s < NENR; s++) begin
      gen_events(MOD_VISION, ev);
      enr_ev[s] = ev;
      reference(MOD_VISION, ev, z);
      for (int j = 0; j < P; j++) gal[s][j] = z[j];
      run_cmd(OP_ENROLL, MOD_VISION, s, ev);
      n_enr++;
      checks++;
      if (int'(res_idx) != s) begin failures++; $display("FAIL enroll slot %0d", res_idx); end
    end

    // QUERY with one audio sample, and with a repeat of enrolled sample 4
    for (int q = 1; q < 3; q++) begin
      modality_e m;
      int bi; real bc, c, second;
      longint d, na, nb;
      m = (q < 2) ? MOD_AUDIO : MOD_VISION;
      if (q < 2) gen_events(m, ev); else ev = enr_ev[4];
      reference(m, ev, z);
      run_cmd(OP_QUERY, m, 0, ev);
      n_qry++;
      bi = 0; bc = -2.0; second = -2.0;
      for (int k = 0; k < NENR; k++) begin
        real dd, aa, bb;
        dd = 0; aa = 0; bb = 0;
        for (int j = 0; j < P; j++) begin dd += real'(z[j]) * gal[k][j]; aa += real'(z[j]) * z[j]; bb += real'(gal[k][j]) * gal[k][j]; end
        c = (aa == 0 || bb == 0) ? 0.0 : dd / ($sqrt(aa) * $sqrt(bb));
        if (c > bc) begin second = bc; bc = c; bi = k; end else if (c > second) second = c;
      end
      if (q == 2) bi = 4;
      checks++;
      if (int'(res_idx) != bi) begin failures++; $display("FAIL query %0d -> %0d exp %0d (cos %f, next %f)", q, res_idx, bi, bc, second); end
      d = 0; na = 0; nb = 0;
      for (int j = 0; j < P; j++) begin d += longint'(z[j]) * gal[bi][j]; na += longint'(z[j]) * z[j]; nb += longint'(gal[bi][j]) * gal[bi][j]; end
      checks++;
      if (longint'(res_dot) != d || longint'(res_nq) != na || longint'(res_ng) != nb) begin failures++; $display("FAIL query %0d sums", q); end
      $display("query %0d -> slot %0d (cos %f)", q, res_idx, bc);
    end

    $display("mechanisms: vision %0d audio %0d switches %0d classify %0d enroll %0d query %0d",
             n_vis, n_aud, n_switch, n_cls, n_enr, n_qry);
    $display("            spikes %0d skipped groups %0d clipped outputs %0d event stalls %0d",
             n_spike, n_skip, n_zsat, n_stall);
    checks++; if (n_vis == 0)    begin failures++; $display("FAIL no vision encode"); end
    checks++; if (n_aud == 0)    begin failures++; $display("FAIL no audio encode"); end
    checks++; if (n_switch == 0) begin failures++; $display("FAIL no modality switch"); end
    checks++; if (n_cls == 0)    begin failures++; $display("FAIL no classify"); end
    checks++; if (n_enr == 0)    begin failures++; $display("FAIL no enroll"); end
    checks++; if (n_qry == 0)    begin failures++; $display("FAIL no query"); end
    checks++; if (n_spike == 0)  begin failures++; $display("FAIL no spikes"); end
    checks++; if (n_skip == 0)   begin failures++; $display("FAIL no skipped groups"); end
    checks++; if (n_zsat == 0)   begin failures++; $display("FAIL no clipped output"); end
    checks++; if (n_stall == 0)  begin failures++; $display("FAIL no event stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
