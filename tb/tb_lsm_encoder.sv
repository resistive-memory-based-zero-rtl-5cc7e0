// tb_lsm_encoder: runs the LSM encoder with the crossbar model on random
// sparse event streams, first with the vision row partition (256 inputs at
// row 0, groups 0..7), then with the audio one (64 inputs at row 192, groups
// 3..7). After every time step the spike vector is compared with the
// reference LSM; after the window every spike count is. Also checks that
// events are refused while a step is being computed, and that spikes fire
// and row groups are skipped at least once.
module tb_lsm_encoder;
  import lsm_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, ev_valid = 0, ev_ready, step_done, spike_pulse, skip_pulse;
  logic [8:0] in_base = 0, u_cnt = 0;
  logic [2:0] g_first = 0, g_last = 7;
  lif_cfg_t lif;
  logic [7:0] t_steps = 1;
  logic [U_MAX-1:0] ev_vec = 0;
  logic [H-1:0] spk_vec;
  logic [7:0] cnt_raddr = 0;
  logic [CNT_W-1:0] cnt_rdata;
  logic m_conv_start, m_conv_done;
  logic [2:0] m_grp;
  logic [63:0] m_row_drive;
  logic [7:0] m_col;
  logic signed [ADC_W-1:0] m_adc_code;
  int checks = 0, failures = 0, nspike = 0, nskip = 0, nstall = 0;

  rram_macro u_macro (.clk, .rst_n, .conv_start(m_conv_start), .grp(m_grp), .row_drive(m_row_drive),
                      .col(m_col), .conv_done(m_conv_done), .adc_code(m_adc_code));
  lsm_encoder dut (.clk, .rst_n, .start, .busy, .done, .in_base, .u_cnt, .g_first, .g_last, .lif, .t_steps,
    .ev_valid, .ev_ready, .ev_vec, .step_done, .spk_vec, .spike_pulse, .skip_pulse, .cnt_raddr, .cnt_rdata,
    .m_conv_start, .m_grp, .m_row_drive, .m_col, .m_conv_done, .m_adc_code);

  always @(negedge clk) begin
    if (spike_pulse) nspike++;
    if (skip_pulse) nskip++;
    if (ev_valid && !ev_ready) nstall++;
  end

  bit exp_spk [64][H];
  int t_chk;

  // compares the spike vector of every finished step with the reference
  always @(negedge clk) begin
    if (step_done) begin
      for (int i = 0; i < H; i++) begin
        checks++;
        if (spk_vec[i] !== exp_spk[t_chk][i]) begin
          failures++;
          if (failures < 10) $display("FAIL step %0d neuron %0d spike %0b exp %0b", t_chk, i, spk_vec[i], exp_spk[t_chk][i]);
        end
      end
      t_chk++;
    end
  end

  task automatic run_sample(input int base, input int ucnt, input int gf, input int T, input int density);
    lsm_model m;
    bit ev [64][256];
    logic [U_MAX-1:0] evv [64];
    m = new();
    in_base = 9'(base); u_cnt = 9'(ucnt); g_first = 3'(gf); g_last = 3'd7; t_steps = 8'(T);
    m.start(int'(lif.u_th), int'(lif.u_rest), int'(lif.leak_shift), int'(lif.in_shift));
    for (int t = 0; t < T; t++) begin
      for (int k = 0; k < 256; k++) begin
        ev[t][k] = ($urandom_range(0, 99) < density);
        evv[t][k] = ev[t][k];
      end
      // bits beyond the modality's width must be ignored
      for (int k = ucnt; k < 256; k++) begin evv[t][k] = 1'($urandom_range(0, 1)); ev[t][k] = 0; end
      m.step(ev[t], ucnt, base, gf, 7);
      for (int i = 0; i < H; i++) exp_spk[t][i] = m.spk[i];
    end
    t_chk = 0;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    @(negedge clk);
    // offer each step's events as soon as the previous ones are taken
    for (int t = 0; t < T; t++) begin
      ev_vec = evv[t];
      ev_valid = 1;
      while (!ev_ready) @(negedge clk);
      @(negedge clk);   // taken at the rising edge in between
    end
    ev_valid = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    checks++;
    if (t_chk != T) begin failures++; $display("FAIL %0d steps seen, exp %0d", t_chk, T); end
    for (int i = 0; i < H; i++) begin
      cnt_raddr = 8'(i); #1;
      checks++;
      if (int'(cnt_rdata) != m.cnt[i]) begin
        failures++;
        if (failures < 20) $display("FAIL count %0d = %0d exp %0d", i, cnt_rdata, m.cnt[i]);
      end
    end
  endtask

  initial begin
    build_weights(1);
    lif = '{u_th: 16'sd40, u_rest: 16'sd0, leak_shift: 4'd2, in_shift: 4'd2};
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_sample(0, 256, 0, 6, 10);        // vision partition
    $display("vision: spikes %0d skips %0d", nspike, nskip);
    lif = '{u_th: 16'sd30, u_rest: -16'sd4, leak_shift: 4'd3, in_shift: 4'd1};
    run_sample(192, 64, 3, 6, 20);       // audio partition
    $display("total: spikes %0d skips %0d stalls %0d", nspike, nskip, nstall);
    checks++; if (nspike == 0) begin failures++; $display("FAIL no spikes"); end
    checks++; if (nskip == 0)  begin failures++; $display("FAIL no skipped groups"); end
    checks++; if (nstall == 0) begin failures++; $display("FAIL no event stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
