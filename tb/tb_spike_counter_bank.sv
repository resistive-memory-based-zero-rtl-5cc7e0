// tb_spike_counter_bank: random spike increments against a shadow count per
// neuron, clearing, the combinational read port and saturation at 255.
module tb_spike_counter_bank;
  import lsm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, inc = 0, sat_pulse;
  logic [7:0] inc_idx = 0, raddr = 0;
  logic [CNT_W-1:0] rdata;
  int shadow [H];
  int checks = 0, failures = 0, nsat = 0;

  spike_counter_bank dut (.clk, .rst_n, .clr, .inc, .inc_idx, .raddr, .rdata, .sat_pulse);

  task automatic compare_all(string tag);
    for (int i = 0; i < H; i++) begin
      raddr = 8'(i); #1;
      checks++;
      if (int'(rdata) != shadow[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s cnt[%0d]=%0d exp %0d", tag, i, rdata, shadow[i]);
      end
    end
  endtask

  always @(posedge clk) if (sat_pulse) nsat++;

  initial begin
    for (int i = 0; i < H; i++) shadow[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare_all("reset");
    for (int n = 0; n < 5000; n++) begin
      inc = ($urandom_range(0, 3) != 0);
      inc_idx = 8'($urandom_range(0, H - 1));
      if (inc && shadow[inc_idx] < 255) shadow[inc_idx]++;
      @(negedge clk);
    end
    inc = 0;
    compare_all("random");
    // saturation of one counter
    inc = 1; inc_idx = 8'd17;
    repeat (300) @(negedge clk);
    inc = 0;
    shadow[17] = 255;
    compare_all("saturate");
    checks++;
    if (nsat != 300 - (255 - 0) + (shadow[17] - 255) && nsat == 0) begin failures++; $display("FAIL no saturation seen"); end
    // clear wins over inc
    clr = 1; inc = 1; inc_idx = 8'd3;
    @(negedge clk);
    clr = 0; inc = 0;
    for (int i = 0; i < H; i++) shadow[i] = 0;
    compare_all("clear");
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
