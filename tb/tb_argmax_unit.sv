// tb_argmax_unit: streams random score vectors of random length and checks
// the label (index of the largest score, lowest index on ties) and its value.
module tb_argmax_unit;
  import lsm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0, out_valid;
  logic [5:0] in_idx = 0, out_idx;
  logic signed [Z_W-1:0] in_data = 0, out_val;
  int checks = 0, failures = 0, nties = 0;

  argmax_unit dut (.clk, .rst_n, .in_valid, .in_idx, .in_data, .in_last, .out_valid, .out_idx, .out_val);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      int len, best, bidx, v;
      len = $urandom_range(1, 64);
      best = 0; bidx = 0;
      for (int k = 0; k < len; k++) begin
        v = (n % 3 == 0) ? $urandom_range(0, 6) - 3 : $urandom_range(0, 65535) - 32768;
        if (k == 0 || v > best) begin best = v; bidx = k; end
        else if (v == best) nties++;
        in_valid = ($urandom_range(0, 3) != 0) || 1'b1;
        in_idx = 6'(k); in_data = 16'(v); in_last = (k == len - 1);
        @(negedge clk);
        if (k != len - 1 && $urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); end
      end
      in_valid = 0; in_last = 0;
      checks++;
      if (!out_valid || int'(out_idx) != bidx || int'(out_val) != best) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d/%0d exp %0d/%0d", out_idx, out_val, bidx, best);
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid not a pulse"); end
    end
    checks++;
    if (nties == 0) begin failures++; $display("FAIL no ties exercised"); end
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
