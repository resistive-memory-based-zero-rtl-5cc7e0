// projection_layer: the trainable fully connected layer that follows the LSM.
//     z_j = sat( (b_j + sum_i W_ij * o_i) >>> z_shift ),  j = 0..n_out-1
// o_i are the spike counts of the H recurrent neurons. There is one weight
// and bias set per modality (mod), so vision and audio features each get
// their own projection into the shared embedding space. The same unit is the
// classification head for supervised classification: load class weights in rows
// 0..n_out-1 and set n_out to the number of classes.
//
// Training (contrastive or cross-entropy) happens off-chip. Trained weights
// and biases are written through w_*/b_* at any time the layer is idle.
//
// Timing: start is taken when idle. The counts are read through
// cnt_raddr/cnt_rdata, a combinational read, one per cycle. Each output takes
// H multiply-accumulate cycles plus one output cycle, so the layer finishes
// n_out*(H+1) cycles after start. z_valid/z_idx/z_data/z_last stream the
// outputs in index order, and done pulses with the last one. sat_pulse marks
// an output clipped to the 16-bit range. One MAC per cycle, the word widths
// and the output scaling are this design's choices.
module projection_layer
  import lsm_pkg::*;
#(
  parameter int NH = H,
  parameter int NP = P,
  parameter int NM = NMOD,
  parameter int WW = W_W,
  parameter int BW = B_W,
  parameter int ZW = Z_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [$clog2(NM)-1:0]         mod,
  input  logic [$clog2(NP+1)-1:0]       n_out,
  input  logic [4:0]                    z_shift,
  output logic                          busy,
  output logic                          done,
  // spike counts
  output logic [$clog2(NH)-1:0]         cnt_raddr,
  input  logic [CNT_W-1:0]              cnt_rdata,
  // weight and bias load
  input  logic                          w_we,
  input  logic [$clog2(NM)-1:0]         w_mod,
  input  logic [$clog2(NP)-1:0]         w_row,
  input  logic [$clog2(NH)-1:0]         w_col,
  input  logic signed [WW-1:0]          w_data,
  input  logic                          b_we,
  input  logic [$clog2(NM)-1:0]         b_mod,
  input  logic [$clog2(NP)-1:0]         b_row,
  input  logic signed [BW-1:0]          b_data,
  // output stream
  output logic                          z_valid,
  output logic [$clog2(NP)-1:0]         z_idx,
  output logic signed [ZW-1:0]          z_data,
  output logic                          z_last,
  output logic                          sat_pulse
);

  localparam int AW = BW + 8;
  localparam logic signed [AW-1:0] ZMAX = AW'((1 << (ZW - 1)) - 1);
  localparam logic signed [AW-1:0] ZMIN = -AW'(1 << (ZW - 1));

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_OUT} state_e;
  state_e state;

  logic signed [WW-1:0] wmem [NM][NP][NH];
  logic signed [BW-1:0] bmem [NM][NP];

  logic [$clog2(NM)-1:0]   mod_q;
  logic [$clog2(NP+1)-1:0] n_out_q;
  logic [4:0]              z_shift_q;
  logic [$clog2(NP)-1:0]   j;
  logic [$clog2(NH)-1:0]   i;
  logic signed [AW-1:0]    acc, shifted;

  assign busy      = (state != S_IDLE);
  assign cnt_raddr = i;
  assign shifted   = acc >>> z_shift_q;

  // parameter memories
  always_ff @(posedge clk) begin
    if (w_we) wmem[w_mod][w_row][w_col] <= w_data;
    if (b_we) bmem[b_mod][b_row]        <= b_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      mod_q     <= '0;
      n_out_q   <= '0;
      z_shift_q <= '0;
      j         <= '0;
      i         <= '0;
      acc       <= '0;
      z_valid   <= 1'b0;
      z_idx     <= '0;
      z_data    <= '0;
      z_last    <= 1'b0;
      done      <= 1'b0;
      sat_pulse <= 1'b0;
    end else begin
      z_valid   <= 1'b0;
      z_last    <= 1'b0;
      done      <= 1'b0;
      sat_pulse <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mod_q     <= mod;
          n_out_q   <= n_out;
          z_shift_q <= z_shift;
          j         <= '0;
          i         <= '0;
          acc       <= AW'(bmem[mod][0]);
          state     <= S_MAC;
        end
        S_MAC: begin
          acc <= acc + AW'(wmem[mod_q][j][i]) * AW'($signed({1'b0, cnt_rdata}));
          if (int'(i) == NH - 1) state <= S_OUT;
          else                   i     <= i + 1'b1;
        end
        S_OUT: begin
          z_valid <= 1'b1;
          z_idx   <= j;
          if (shifted > ZMAX) begin
            z_data <= ZMAX[ZW-1:0]; sat_pulse <= 1'b1;
          end else if (shifted < ZMIN) begin
            z_data <= ZMIN[ZW-1:0]; sat_pulse <= 1'b1;
          end else begin
            z_data <= shifted[ZW-1:0];
          end
          if (32'(j) + 1 >= 32'(n_out_q)) begin
            z_last <= 1'b1;
            done   <= 1'b1;
            state  <= S_IDLE;
          end else begin
            j     <= j + 1'b1;
            i     <= '0;
            acc   <= AW'(bmem[mod_q][j + 1'b1]);
            state <= S_MAC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_nout: assert property (@(posedge clk) disable iff (!rst_n)
                           (start && state == S_IDLE) |-> (n_out != '0 && int'(n_out) <= NP));
  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                   (w_we || b_we) |-> (state == S_IDLE));

endmodule
