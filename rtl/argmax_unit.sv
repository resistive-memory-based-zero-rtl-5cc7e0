// argmax_unit: turns the output stream of the classification head into a
// label, the index of the largest output. A stream element with in_idx == 0
// starts a new search. A later element replaces the current best only if it is
// strictly larger, so ties keep the lower index. With in_last, out_valid
// pulses in the next cycle with out_idx and out_val. The tie rule is this
// design's choice.
module argmax_unit
  import lsm_pkg::*;
#(
  parameter int IW = 6,
  parameter int ZW = Z_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [IW-1:0]         in_idx,
  input  logic signed [ZW-1:0]  in_data,
  input  logic                  in_last,
  output logic                  out_valid,
  output logic [IW-1:0]         out_idx,
  output logic signed [ZW-1:0]  out_val
);

  logic [IW-1:0]        best_idx;
  logic signed [ZW-1:0] best_val;
  logic                 take;
  logic [IW-1:0]        nidx;
  logic signed [ZW-1:0] nval;

  always_comb begin
    take = (in_idx == '0) || (in_data > best_val);
    nidx = take ? in_idx  : best_idx;
    nval = take ? in_data : best_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_idx  <= '0;
      best_val  <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_val   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        best_idx <= nidx;
        best_val <= nval;
        if (in_last) begin
          out_valid <= 1'b1;
          out_idx   <= nidx;
          out_val   <= nval;
        end
      end
    end
  end

endmodule
