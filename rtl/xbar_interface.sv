// xbar_interface: obtains the synaptic current of one recurrent neuron (Eq. 1
// of the LSM: input spikes times input weights plus recurrent spikes times
// recurrent weights) from the resistive crossbar.
//
// The array can only be driven 64 rows at a time, so the current of neuron i
// (column pair i) is gathered over the row groups g_first..g_last of the
// active partition. For each group the 64 bits of row_vec that fall in it are
// put on the row drivers, one conversion is started, and the signed ADC code
// is added to an accumulator. A group whose 64 row bits are all zero carries
// no current and is skipped without a conversion (skip_pulse marks each one).
// This skip is this design's choice; the group width and the single ADC follow
// the published board.
//
// Interface: req_valid/req_ready start a request for column pair req_col.
// row_vec, g_first and g_last must stay stable until resp_valid. resp_valid is
// a one-cycle pulse with resp_current. The m_* ports connect to rram_macro.
// Timing: per converted group, 1 cycle to start plus the macro's latency;
// 1 cycle per skipped group; 1 cycle to respond.
module xbar_interface
  import lsm_pkg::*;
#(
  parameter int ROWS  = XB_ROWS,
  parameter int COLS  = XB_COLS,
  parameter int RG    = ROW_GROUP,
  parameter int AW    = ADC_W,
  parameter int CW    = CUR_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // request
  input  logic                          req_valid,
  output logic                          req_ready,
  input  logic [$clog2(COLS/2)-1:0]     req_col,
  input  logic [ROWS-1:0]               row_vec,
  input  logic [$clog2(ROWS/RG)-1:0]    g_first,
  input  logic [$clog2(ROWS/RG)-1:0]    g_last,
  // response
  output logic                          resp_valid,
  output logic signed [CW-1:0]          resp_current,
  output logic                          skip_pulse,
  // macro side
  output logic                          m_conv_start,
  output logic [$clog2(ROWS/RG)-1:0]    m_grp,
  output logic [RG-1:0]                 m_row_drive,
  output logic [$clog2(COLS/2)-1:0]     m_col,
  input  logic                          m_conv_done,
  input  logic signed [AW-1:0]          m_adc_code
);

  localparam int GWID = $clog2(ROWS / RG);

  typedef enum logic [1:0] {S_IDLE, S_GRP, S_WAIT} state_e;
  state_e                 state;
  logic [GWID-1:0]        g;
  logic [$clog2(COLS/2)-1:0] col_q;
  logic signed [CW-1:0]   acc;
  logic [RG-1:0]          slice;

  assign slice        = row_vec[int'(g) * RG +: RG];
  assign req_ready    = (state == S_IDLE);
  assign m_grp        = g;
  assign m_row_drive  = slice;
  assign m_col        = col_q;
  assign m_conv_start = (state == S_GRP) && (slice != '0);
  assign skip_pulse   = (state == S_GRP) && (slice == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      g            <= '0;
      col_q        <= '0;
      acc          <= '0;
      resp_valid   <= 1'b0;
      resp_current <= '0;
    end else begin
      resp_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          col_q <= req_col;
          g     <= g_first;
          acc   <= '0;
          state <= S_GRP;
        end
        S_GRP: begin
          if (slice != '0) begin
            state <= S_WAIT;
          end else if (g == g_last) begin
            resp_valid   <= 1'b1;
            resp_current <= acc;
            state        <= S_IDLE;
          end else begin
            g <= g + 1'b1;
          end
        end
        S_WAIT: if (m_conv_done) begin
          if (g == g_last) begin
            resp_valid   <= 1'b1;
            resp_current <= acc + CW'(m_adc_code);
            state        <= S_IDLE;
          end else begin
            acc   <= acc + CW'(m_adc_code);
            g     <= g + 1'b1;
            state <= S_GRP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A request is only accepted when idle
  a_req_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               (req_valid && req_ready) |=> (state == S_GRP));
  // The partition must be ordered
  a_grp_order: assert property (@(posedge clk) disable iff (!rst_n)
                                (req_valid && req_ready) |-> (g_first <= g_last));

endmodule
