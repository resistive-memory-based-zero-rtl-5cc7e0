// tb_xbar_interface: drives xbar_interface against a stand-in macro whose ADC
// code is a simple known function of (group, drive pattern, column) and whose
// latency varies from read to read. It checks the summed current, that
// all-zero groups are skipped without a conversion, that exactly the
// non-zero groups in g_first..g_last are converted, and the cycle count.
module tb_xbar_interface;
  import lsm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, req_ready, resp_valid, skip_pulse;
  logic [7:0] req_col = 0;
  logic [511:0] row_vec = 0;
  logic [2:0] g_first = 0, g_last = 7;
  logic signed [CUR_W-1:0] resp_current;
  logic m_conv_start, m_conv_done = 0;
  logic [2:0] m_grp;
  logic [63:0] m_row_drive;
  logic [7:0] m_col;
  logic signed [ADC_W-1:0] m_adc_code = 0;
  int checks = 0, failures = 0, nconv = 0, nskip = 0;

  xbar_interface dut (.clk, .rst_n, .req_valid, .req_ready, .req_col, .row_vec, .g_first, .g_last,
    .resp_valid, .resp_current, .skip_pulse, .m_conv_start, .m_grp, .m_row_drive, .m_col,
    .m_conv_done, .m_adc_code);

  function automatic int code_of(input int g, input logic [63:0] d, input int c);
    return $countones(d) * (g + 1) * 7 - c * 3 - 100;
  endfunction

  // stand-in macro: random latency 1..4
  initial begin
    forever begin
      @(posedge clk);
      if (m_conv_start) begin
        int v, l;
        v = code_of(int'(m_grp), m_row_drive, int'(m_col));
        l = $urandom_range(1, 4);
        nconv++;
        repeat (l - 1) @(posedge clk);
        #1 m_conv_done = 1; m_adc_code = ADC_W'(v);
        @(posedge clk);
        #1 m_conv_done = 0;
      end
    end
  end
  always @(posedge clk) if (skip_pulse) nskip++;

  initial begin
    int exp, exp_conv, exp_skip, cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      g_first = 3'($urandom_range(0, 7));
      g_last  = 3'($urandom_range(g_first, 7));
      req_col = 8'($urandom);
      for (int g = 0; g < 8; g++) row_vec[g*64 +: 64] = ($urandom_range(0, 2) == 0) ? 64'h0 : {$urandom, $urandom};
      exp = 0; exp_conv = 0; exp_skip = 0;
      for (int g = g_first; g <= g_last; g++) begin
        if (row_vec[g*64 +: 64] != 0) begin exp += code_of(g, row_vec[g*64 +: 64], req_col); exp_conv++; end
        else exp_skip++;
      end
      nconv = 0; nskip = 0;
      checks++;
      if (!req_ready) begin failures++; $display("FAIL not ready"); end
      req_valid = 1;
      @(negedge clk);
      req_valid = 0;
      cyc = 0;
      while (!resp_valid && cyc < 200) begin @(negedge clk); cyc++; end
      checks++;
      if (int'(resp_current) != exp) begin failures++; if (failures < 10) $display("FAIL current %0d exp %0d", resp_current, exp); end
      checks++;
      if (nconv != exp_conv || nskip != exp_skip) begin failures++; $display("FAIL conv %0d/%0d skip %0d/%0d", nconv, exp_conv, nskip, exp_skip); end
      checks++;
      // at least 1 cycle per group, at most 5 per converted group
      if (cyc < (g_last - g_first + 1) || cyc > exp_skip + 5 * exp_conv + 1) begin failures++; $display("FAIL cycles %0d", cyc); end
    end
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
