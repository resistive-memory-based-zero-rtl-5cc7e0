// tb_projection_layer: loads random weights and biases into both modality
// sets, serves random spike counts on the count read port, and compares
// every output with z = clip((b + W o) >>> z_shift). Checks the output order,
// z_last, the latency n_out*(H+1) from start to done, saturation and that
// the two weight sets are kept apart.
module tb_projection_layer;
  import lsm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, z_valid, z_last, sat_pulse;
  logic [0:0] mod = 0, w_mod = 0, b_mod = 0;
  logic [6:0] n_out = 64;
  logic [4:0] z_shift = 0;
  logic [7:0] cnt_raddr, w_col = 0;
  logic [CNT_W-1:0] cnt_rdata;
  logic w_we = 0, b_we = 0;
  logic [5:0] w_row = 0, b_row = 0, z_idx;
  logic signed [W_W-1:0] w_data = 0;
  logic signed [B_W-1:0] b_data = 0;
  logic signed [Z_W-1:0] z_data;
  int W [2][P][H];
  int Bv [2][P];
  int cnt [H];
  int checks = 0, failures = 0, nsat = 0, seen = 0;

  assign cnt_rdata = CNT_W'(cnt[cnt_raddr]);

  projection_layer dut (.clk, .rst_n, .start, .mod, .n_out, .z_shift, .busy, .done, .cnt_raddr, .cnt_rdata,
    .w_we, .w_mod, .w_row, .w_col, .w_data, .b_we, .b_mod, .b_row, .b_data,
    .z_valid, .z_idx, .z_data, .z_last, .sat_pulse);

  function automatic int expect_z(input int m, input int j, input int sh);
    longint a;
    a = Bv[m][j];
    for (int i = 0; i < H; i++) a += longint'(W[m][j][i]) * cnt[i];
    a = a >>> sh;
    if (a > 32767) a = 32767;
    if (a < -32768) a = -32768;
    return int'(a);
  endfunction

  task automatic run(input int m, input int no, input int sh);
    int cyc;
    mod = 1'(m); n_out = 7'(no); z_shift = 5'(sh);
    seen = 0;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 20000) begin
      if (z_valid) begin
        checks++;
        if (int'(z_idx) != seen || int'(z_data) != expect_z(m, seen, sh) || z_last != (seen == no - 1)) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d idx %0d z=%0d exp %0d", seen, z_idx, z_data, expect_z(m, seen, sh));
        end
        if (expect_z(m, seen, sh) == 32767 || expect_z(m, seen, sh) == -32768) nsat++;
        seen++;
      end
      @(negedge clk);
      cyc++;
    end
    // the last output comes with done; cyc counts negedges from the one after
    // the start edge, so done shows n_out*(H+1) edges after start
    checks++;
    if (!(z_valid && z_last && int'(z_data) == expect_z(m, no - 1, sh))) begin failures++; $display("FAIL last output"); end
    seen++;
    checks++;
    if (seen != no) begin failures++; $display("FAIL %0d outputs exp %0d", seen, no); end
    checks++;
    if (cyc != no * (H + 1) + 1) begin failures++; $display("FAIL latency %0d exp %0d", cyc, no * (H + 1) + 1); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // load both weight sets
    for (int m = 0; m < 2; m++) for (int j = 0; j < P; j++) begin
      for (int i = 0; i < H; i++) begin
        W[m][j][i] = $urandom_range(0, 255) - 128;
        w_we = 1; w_mod = 1'(m); w_row = 6'(j); w_col = 8'(i); w_data = 8'(W[m][j][i]);
        @(negedge clk);
      end
      Bv[m][j] = $urandom_range(0, 20000) - 10000;
      w_we = 0; b_we = 1; b_mod = 1'(m); b_row = 6'(j); b_data = 24'(Bv[m][j]);
      @(negedge clk);
      b_we = 0;
    end
    for (int i = 0; i < H; i++) cnt[i] = $urandom_range(0, 40);
    run(0, 64, 4);
    run(1, 64, 4);
    run(1, 10, 2);     // classification-head size
    for (int i = 0; i < H; i++) cnt[i] = 255;
    run(0, 11, 0);     // large counts: outputs clip
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation not exercised"); end
    $display("saturated outputs: %0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
