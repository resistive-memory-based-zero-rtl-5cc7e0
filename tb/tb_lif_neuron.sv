// tb_lif_neuron: random and directed checks of one LIF update against the
// reference Euler step (floor division by powers of two, saturation, reset
// to rest on a spike), including the firing boundary u == u_th.
module tb_lif_neuron;
  import lsm_pkg::*;
  import tb_ref_pkg::*;

  logic signed [U_W-1:0]   u_in, u_out;
  logic signed [CUR_W-1:0] i_syn;
  lif_cfg_t                cfg;
  logic                    spike;
  int checks = 0, failures = 0, nspk = 0, nsat = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  lif_neuron dut (.u_in, .i_syn, .cfg, .u_out, .spike);

  task automatic check_one();
    int u, exp_u; bit exp_s;
    #1;
    u = int'(u_in);
    exp_s = lif_step(u, int'(i_syn), int'(cfg.u_th), int'(cfg.u_rest), int'(cfg.leak_shift), int'(cfg.in_shift));
    exp_u = u;
    checks++;
    if (spike !== exp_s || int'(u_out) != exp_u) begin
      failures++;
      if (failures < 10) $display("FAIL u=%0d i=%0d th=%0d rest=%0d ls=%0d is=%0d: got %0d/%0b exp %0d/%0b",
        u_in, i_syn, cfg.u_th, cfg.u_rest, cfg.leak_shift, cfg.in_shift, u_out, spike, exp_u, exp_s);
    end
    if (exp_s) nspk++;
  endtask

  initial begin
    // directed: exactly at threshold fires, one below does not
    cfg = '{u_th: 16'sd100, u_rest: 16'sd90, leak_shift: 4'd3, in_shift: 4'd0};
    u_in = 16'sd90; i_syn = 18'sd10; check_one();
    if (spike !== 1'b1 || u_out != 16'sd90) begin failures++; $display("FAIL threshold equality"); end
    checks++;
    u_in = 16'sd90; i_syn = 18'sd9; check_one();
    if (spike !== 1'b0) begin failures++; $display("FAIL below threshold"); end
    checks++;
    // directed: positive saturation reaches the maximal threshold, negative saturation
    cfg = '{u_th: 16'sd32767, u_rest: 16'sd0, leak_shift: 4'd15, in_shift: 4'd0};
    u_in = 16'sd32000; i_syn = 18'sd100000; check_one();
    if (u_out != 16'sd0 || spike !== 1'b1) begin failures++; $display("FAIL pos sat"); end
    checks++;
    u_in = -16'sd32000; i_syn = -18'sd100000; check_one();
    if (u_out != -16'sd32768) begin failures++; $display("FAIL neg sat"); end
    checks++;
    // directed: full leak (shift 0) returns to rest with no input
    cfg = '{u_th: 16'sd1000, u_rest: 16'sd7, leak_shift: 4'd0, in_shift: 4'd0};
    u_in = -16'sd300; i_syn = '0; check_one();
    if (u_out != 16'sd7) begin failures++; $display("FAIL full leak"); end
    checks++;
    // random
    for (int n = 0; n < 20000; n++) begin
      cfg.u_th       = 16'($urandom_range(0, 600)) - 16'sd100;
      cfg.u_rest     = 16'($urandom_range(0, 200)) - 16'sd100;
      cfg.leak_shift = 4'($urandom_range(0, 8));
      cfg.in_shift   = 4'($urandom_range(0, 6));
      u_in           = 16'($urandom);
      if (n % 2 == 0) u_in = 16'($urandom_range(0, 1000)) - 16'sd500;
      i_syn          = 18'($urandom);
      if (n % 3 == 0) i_syn = 18'($urandom_range(0, 4000)) - 18'sd2000;
      check_one();
    end
    if (nspk == 0) begin failures++; $display("FAIL no spikes exercised"); end
    $display("spiking cases: %0d", nspk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
