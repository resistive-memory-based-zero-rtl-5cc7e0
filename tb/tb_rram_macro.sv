// tb_rram_macro: checks the crossbar model's conversions against the
// reference conductances: random row groups, drive patterns and column pairs,
// the ADC latency, the held result, and the spread of the conductance codes
// (range 74..198 codes = 18.5..49.5 uS, mean near 136 codes = 34 uS).
module tb_rram_macro;
  import lsm_pkg::*;
  import tb_ref_pkg::*;
  localparam int LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic conv_start = 0, conv_done;
  logic [2:0] grp = 0;
  logic [63:0] row_drive = 0;
  logic [7:0] col = 0;
  logic signed [ADC_W-1:0] adc_code;
  int checks = 0, failures = 0;

  rram_macro #(.ADC_LAT(LAT)) dut (.clk, .rst_n, .conv_start, .grp, .row_drive, .col, .conv_done, .adc_code);

  initial begin
    int exp, lat, gmin, gmax; longint gsum;
    // conductance statistics of the reference draw
    gmin = 1000; gmax = 0; gsum = 0;
    for (int r = 0; r < 512; r += 3)
      for (int c = 0; c < 512; c += 5) begin
        int g; g = g_code(1, r, c);
        gsum += g; if (g < gmin) gmin = g; if (g > gmax) gmax = g;
      end
    checks++;
    if (gmin < 74 || gmax > 198) begin failures++; $display("FAIL code range %0d..%0d", gmin, gmax); end
    checks++;
    if (gsum / (171 * 103) < 126 || gsum / (171 * 103) > 146) begin failures++; $display("FAIL mean code %0d", gsum / (171 * 103)); end
    $display("conductance codes %0d..%0d, mean %0d", gmin, gmax, gsum / (171 * 103));

    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      grp = 3'($urandom_range(0, 7));
      col = 8'($urandom_range(0, 255));
      row_drive = {$urandom, $urandom};
      if (n % 4 == 1) row_drive = '1;          // all rows: largest sums
      if (n % 4 == 2) row_drive = 64'h1 << $urandom_range(0, 63);
      exp = 0;
      for (int r = 0; r < 64; r++)
        if (row_drive[r]) exp += g_code(1, grp * 64 + r, 2 * col) - g_code(1, grp * 64 + r, 2 * col + 1);
      conv_start = 1;
      @(negedge clk);
      conv_start = 0;
      grp = 3'($urandom); col = 8'($urandom); row_drive = {$urandom, $urandom};  // inputs may change
      lat = 1;
      while (!conv_done && lat < 20) begin @(negedge clk); lat++; end
      checks++;
      if (lat != LAT) begin failures++; $display("FAIL latency %0d exp %0d", lat, LAT); end
      checks++;
      if (int'(adc_code) != exp) begin failures++; if (failures < 10) $display("FAIL code %0d exp %0d", adc_code, exp); end
      @(negedge clk);
      checks++;
      if (int'(adc_code) != exp || conv_done) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
