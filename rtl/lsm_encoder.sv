// lsm_encoder: runs the liquid state machine (LSM) on one sample and leaves
// the spike count of every recurrent neuron in its counter bank.
//
// The LSM has an input layer and a recurrent layer of H leaky
// integrate-and-fire neurons. All of its weights are fixed random
// conductances in the crossbar. Neuron i's current is
//     I_i(t) = sum_a w(a,i) x_a(t) + sum_b w(b,i) s_b(t-1)
// where x are this step's input events and s are the recurrent spikes of the
// previous step. Each step goes like this:
//   1. accept one event vector (ev_valid/ev_ready) and form the 512-bit row
//      vector: the first u_cnt event bits go to rows in_base.., and the H
//      spikes of the previous step go to rows REC_BASE..REC_BASE+H-1;
//   2. for i = 0..H-1, ask xbar_interface for I_i, update neuron i with
//      lif_neuron, write the new membrane and spike to the state buffer and
//      count the spike;
//   3. make this step's spikes the recurrent input of the next step.
// After t_steps steps, done pulses and the counts stay readable through
// cnt_raddr/cnt_rdata until the next start.
//
// Which rows a modality uses is given by in_base, u_cnt, g_first and g_last.
// This is how one shared array holds both the vision and the audio encoder.
// The step order, the use of the previous step's spikes and the serial neuron
// update are this design's choices; Eq. 1-4 of the LSM follow the published
// model.
//
// Interface: start is taken in S_IDLE and latches in_base, u_cnt, g_first,
// g_last, lif and t_steps (t_steps >= 1). step_done pulses at the end of each
// step, when spk_vec holds that step's spikes. spike_pulse and skip_pulse are
// event strobes for statistics. The m_* ports go to rram_macro.
// Timing per step: 1 cycle to accept events, then per neuron the interface
// time plus 2 cycles, then 1 cycle.
module lsm_encoder
  import lsm_pkg::*;
#(
  parameter int NH       = H,
  parameter int UMAX     = U_MAX,
  parameter int ROWS     = XB_ROWS,
  parameter int COLS     = XB_COLS,
  parameter int RG       = ROW_GROUP,
  parameter int RBASE    = REC_BASE
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // control
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  input  logic [$clog2(ROWS)-1:0]       in_base,
  input  logic [$clog2(UMAX+1)-1:0]     u_cnt,
  input  logic [$clog2(ROWS/RG)-1:0]    g_first,
  input  logic [$clog2(ROWS/RG)-1:0]    g_last,
  input  lif_cfg_t                      lif,
  input  logic [7:0]                    t_steps,
  // events, one vector per time step
  input  logic                          ev_valid,
  output logic                          ev_ready,
  input  logic [UMAX-1:0]               ev_vec,
  // observation
  output logic                          step_done,
  output logic [NH-1:0]                 spk_vec,
  output logic                          spike_pulse,
  output logic                          skip_pulse,
  // spike counts
  input  logic [$clog2(NH)-1:0]         cnt_raddr,
  output logic [CNT_W-1:0]              cnt_rdata,
  // macro side
  output logic                          m_conv_start,
  output logic [$clog2(ROWS/RG)-1:0]    m_grp,
  output logic [RG-1:0]                 m_row_drive,
  output logic [$clog2(COLS/2)-1:0]     m_col,
  input  logic                          m_conv_done,
  input  logic signed [ADC_W-1:0]       m_adc_code
);

  localparam int GWID = $clog2(ROWS / RG);

  typedef enum logic [2:0] {S_IDLE, S_WAIT_EV, S_REQ, S_RESP, S_STEP} state_e;
  state_e state;

  // latched configuration
  logic [$clog2(ROWS)-1:0]   in_base_q;
  logic [$clog2(UMAX+1)-1:0] u_cnt_q;
  logic [GWID-1:0]           g_first_q, g_last_q;
  lif_cfg_t                  lif_q;
  logic [7:0]                t_steps_q, t_q;

  // state buffer: membrane potentials and spikes
  logic signed [U_W-1:0]     u_buf [NH];
  logic [NH-1:0]             spk_prev, spk_next;
  logic [ROWS-1:0]           row_vec;
  logic [$clog2(NH)-1:0]     col;

  // crossbar interface
  logic                      x_req_valid, x_req_ready, x_resp_valid;
  logic signed [CUR_W-1:0]   x_current;

  // LIF datapath
  logic signed [U_W-1:0]     lif_u;
  logic                      lif_spike;

  assign busy     = (state != S_IDLE);
  assign ev_ready = (state == S_WAIT_EV);
  assign spk_vec  = spk_prev;
  assign x_req_valid = (state == S_REQ);
  assign spike_pulse = (state == S_RESP) && x_resp_valid && lif_spike;

  // event vector masked to the modality's input width, placed on the rows
  function automatic logic [ROWS-1:0] place_rows(input logic [UMAX-1:0] ev,
                                                 input logic [$clog2(UMAX+1)-1:0] n,
                                                 input logic [$clog2(ROWS)-1:0] base,
                                                 input logic [NH-1:0] spk);
    logic [ROWS-1:0] r;
    logic [UMAX-1:0] m;
    for (int k = 0; k < UMAX; k++) m[k] = (k < int'(n)) ? ev[k] : 1'b0;
    r = (ROWS'(m) << base) | (ROWS'(spk) << RBASE);
    return r;
  endfunction

  xbar_interface #(.ROWS(ROWS), .COLS(COLS), .RG(RG), .AW(ADC_W), .CW(CUR_W)) u_xif (
    .clk, .rst_n,
    .req_valid    (x_req_valid),
    .req_ready    (x_req_ready),
    .req_col      ($clog2(COLS/2)'(col)),
    .row_vec      (row_vec),
    .g_first      (g_first_q),
    .g_last       (g_last_q),
    .resp_valid   (x_resp_valid),
    .resp_current (x_current),
    .skip_pulse   (skip_pulse),
    .m_conv_start, .m_grp, .m_row_drive, .m_col, .m_conv_done, .m_adc_code
  );

  lif_neuron #(.CW(CUR_W)) u_lif (
    .u_in  (u_buf[col]),
    .i_syn (x_current),
    .cfg   (lif_q),
    .u_out (lif_u),
    .spike (lif_spike)
  );

  spike_counter_bank #(.N(NH), .CW(CNT_W)) u_counters (
    .clk, .rst_n,
    .clr       (start && (state == S_IDLE)),
    .inc       (spike_pulse),
    .inc_idx   (col),
    .raddr     (cnt_raddr),
    .rdata     (cnt_rdata),
    .sat_pulse ()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      in_base_q <= '0;
      u_cnt_q   <= '0;
      g_first_q <= '0;
      g_last_q  <= '0;
      lif_q     <= '0;
      t_steps_q <= 8'd1;
      t_q       <= '0;
      spk_prev  <= '0;
      spk_next  <= '0;
      row_vec   <= '0;
      col       <= '0;
      done      <= 1'b0;
      step_done <= 1'b0;
      for (int i = 0; i < NH; i++) u_buf[i] <= '0;
    end else begin
      done      <= 1'b0;
      step_done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          in_base_q <= in_base;
          u_cnt_q   <= u_cnt;
          g_first_q <= g_first;
          g_last_q  <= g_last;
          lif_q     <= lif;
          t_steps_q <= t_steps;
          t_q       <= '0;
          spk_prev  <= '0;
          spk_next  <= '0;
          for (int i = 0; i < NH; i++) u_buf[i] <= lif.u_rest;
          state     <= S_WAIT_EV;
        end
        S_WAIT_EV: if (ev_valid) begin
          row_vec <= place_rows(ev_vec, u_cnt_q, in_base_q, spk_prev);
          col     <= '0;
          state   <= S_REQ;
        end
        S_REQ: if (x_req_ready) state <= S_RESP;
        S_RESP: if (x_resp_valid) begin
          u_buf[col]    <= lif_u;
          spk_next[col] <= lif_spike;
          if (int'(col) == NH - 1) begin
            state <= S_STEP;
          end else begin
            col   <= col + 1'b1;
            state <= S_REQ;
          end
        end
        S_STEP: begin
          spk_prev  <= spk_next;
          step_done <= 1'b1;
          t_q       <= t_q + 8'd1;
          if (t_q + 8'd1 >= t_steps_q) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_WAIT_EV;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_steps_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
                                    (start && state == S_IDLE) |-> (t_steps != 8'd0));
  a_ev_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              (ev_valid && !ev_ready) |=> ev_valid);

endmodule
