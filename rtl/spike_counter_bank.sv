// spike_counter_bank: one spike counter per recurrent neuron. Counter i holds
// o_i, the number of spikes neuron i fired in the current time window; these
// counts are the real-valued feature vector handed to the readout layer.
//
// clr zeroes every counter (start of a window). inc adds one to counter
// inc_idx; a counter stops at its maximum (2^CW - 1). With 8 bits this allows
// windows of up to 255 steps. The read port is combinational: rdata is the
// count at raddr in the same cycle. clr takes priority over inc. The count
// rule follows the published model; the width and the saturation are this
// design's choice.
module spike_counter_bank
  import lsm_pkg::*;
#(
  parameter int N  = H,
  parameter int CW = CNT_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   inc,
  input  logic [$clog2(N)-1:0]   inc_idx,
  input  logic [$clog2(N)-1:0]   raddr,
  output logic [CW-1:0]          rdata,
  output logic                   sat_pulse
);

  logic [CW-1:0] cnt [N];

  assign rdata     = cnt[raddr];
  assign sat_pulse = inc && !clr && (cnt[inc_idx] == '1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) cnt[i] <= '0;
    end else if (clr) begin
      for (int i = 0; i < N; i++) cnt[i] <= '0;
    end else if (inc && (cnt[inc_idx] != '1)) begin
      cnt[inc_idx] <= cnt[inc_idx] + 1'b1;
    end
  end

  a_idx_range: assert property (@(posedge clk) disable iff (!rst_n)
                                inc |-> (int'(inc_idx) < N));

endmodule
