// tb_similarity_unit: streams random 64-element embedding pairs, including
// full-scale ones, and checks the dot product and both squared norms; checks
// that clr restarts the sums and that en low holds them.
module tb_similarity_unit;
  import lsm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, en = 0;
  logic signed [Z_W-1:0] a = 0, b = 0;
  logic signed [ACC_W-1:0] dot;
  logic [ACC_W-1:0] na, nb;
  int checks = 0, failures = 0;

  similarity_unit dut (.clk, .rst_n, .clr, .en, .a, .b, .dot, .na, .nb);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      longint d, sa, sb;
      clr = 1; @(negedge clk); clr = 0;
      d = 0; sa = 0; sb = 0;
      for (int k = 0; k < P; k++) begin
        int x, y;
        x = $urandom_range(0, 65535) - 32768;
        y = $urandom_range(0, 65535) - 32768;
        if (n == 0) begin x = -32768; y = -32768; end
        if (n == 1) begin x = -32768; y = 32767; end
        a = 16'(x); b = 16'(y); en = 1;
        d += longint'(x) * y; sa += longint'(x) * x; sb += longint'(y) * y;
        @(negedge clk);
        if ($urandom_range(0, 4) == 0) begin en = 0; a = 16'($urandom); b = 16'($urandom); @(negedge clk); end
      end
      en = 0;
      checks++;
      if (longint'(dot) != d || longint'(na) != sa || longint'(nb) != sb) begin
        failures++;
        if (failures < 10) $display("FAIL dot %0d exp %0d na %0d exp %0d nb %0d exp %0d", dot, d, na, sa, nb, sb);
      end
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
