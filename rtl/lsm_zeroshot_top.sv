// lsm_zeroshot_top: the complete LSM zero-shot learning datapath.
//
// A fixed random spiking reservoir, a liquid state machine (LSM), turns event
// streams of either modality into spike-count vectors. Its 200 leaky
// integrate-and-fire neurons see input and recurrent synapses that are the
// random conductances of a 512x512 resistive crossbar (rram_macro). A
// trainable fully connected layer then maps the counts either to class scores
// or to an embedding in a space shared by both modalities. Nothing in the
// reservoir is trained. Only the last layer is, off-chip, with a contrastive
// loss, and so the embedding space also serves classes never seen in
// training: a query of one modality retrieves the most similar stored
// embedding of the other.
//
// Both encoders share one array. Vision (256 inputs, a 16x16 event frame)
// uses input rows 0..255. Audio (64 frequency channels) uses rows 192..255.
// Both use recurrent rows 256..455 and the same 200 column pairs. The
// modality of a command selects the rows, the LIF hyper-parameters, the
// window length and the projection weight set.
//
// Commands (cmd_valid/cmd_ready, taken when idle):
//   OP_CLASSIFY  encode T steps, run the readout layer with cfg_n_class
//                outputs, return the arg-max label (res_idx) and its score.
//   OP_ENROLL    encode, project to P dimensions, store the embedding in
//                gallery slot cmd_slot.
//   OP_QUERY     encode, project, search gallery slots 0..cfg_n_gal-1; return
//                the best slot with its dot product and squared norms.
// During a command the design pulls one event vector per time step through
// ev_valid/ev_ready. res_valid pulses once per command. The cfg_* inputs and
// the weights must not change while busy. The st_* outputs are event strobes
// (time steps, spikes, skipped row groups, clipped outputs) for monitoring;
// st_spikes holds the spike vector of the latest time step.
//
// The command set and its sequencing are this design's own: in the
// published system these steps run as software on the digital host. The
// sizes (512x512 array, 64-row drive, 14-bit ADC, 200 neurons, 256/64
// inputs, 64-dimensional projection) follow it.
module lsm_zeroshot_top
  import lsm_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  // command
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  op_e                    cmd_op,
  input  modality_e              cmd_mod,
  input  logic [$clog2(NGAL)-1:0] cmd_slot,
  // configuration
  input  lif_cfg_t               cfg_lif     [NMOD],
  input  logic [7:0]             cfg_t_steps [NMOD],
  input  logic [$clog2(P+1)-1:0] cfg_n_class,
  input  logic [$clog2(NGAL+1)-1:0] cfg_n_gal,
  input  logic [4:0]             cfg_z_shift,
  // events
  input  logic                   ev_valid,
  output logic                   ev_ready,
  input  logic [U_MAX-1:0]       ev_vec,
  // weight load
  input  logic                   w_we,
  input  logic                   w_mod,
  input  logic [$clog2(P)-1:0]   w_row,
  input  logic [$clog2(H)-1:0]   w_col,
  input  logic signed [W_W-1:0]  w_data,
  input  logic                   b_we,
  input  logic                   b_mod,
  input  logic [$clog2(P)-1:0]   b_row,
  input  logic signed [B_W-1:0]  b_data,
  // result
  output logic                   res_valid,
  output op_e                    res_op,
  output logic [$clog2(P)-1:0]   res_idx,
  output logic signed [Z_W-1:0]  res_score,
  output logic signed [ACC_W-1:0] res_dot,
  output logic [ACC_W-1:0]       res_ng,
  output logic [ACC_W-1:0]       res_nq,
  // status
  output logic                   busy,
  output logic [H-1:0]           st_spikes,
  output logic                   st_step,
  output logic                   st_spike,
  output logic                   st_skip,
  output logic                   st_zsat
);

  localparam int GWID = $clog2(N_GROUPS);
  localparam logic [GWID-1:0] G_REC_LAST = GWID'((REC_BASE + H - 1) / ROW_GROUP);

  typedef enum logic [2:0] {S_IDLE, S_ENC, S_PROJ, S_SRCH, S_RES} state_e;
  state_e state;

  op_e                   op_q;
  modality_e             mod_q;
  logic [$clog2(NGAL)-1:0] slot_q;

  // encoder
  logic                  enc_start, enc_done;
  logic [$clog2(XB_ROWS)-1:0] in_base;
  logic [$clog2(U_MAX+1)-1:0] u_cnt;
  logic [GWID-1:0]       g_first;
  logic [$clog2(H)-1:0]  cnt_raddr;
  logic [CNT_W-1:0]      cnt_rdata;

  // macro
  logic                  m_conv_start, m_conv_done;
  logic [GWID-1:0]       m_grp;
  logic [ROW_GROUP-1:0]  m_row_drive;
  logic [$clog2(XB_COLS/2)-1:0] m_col;
  logic signed [ADC_W-1:0] m_adc_code;

  // projection
  logic                  prj_start, prj_done;
  logic [$clog2(P+1)-1:0] n_out;
  logic                  z_valid, z_last;
  logic [$clog2(P)-1:0]  z_idx;
  logic signed [Z_W-1:0] z_data;

  // readout
  logic                  am_valid;
  logic [$clog2(P)-1:0]  am_idx;
  logic signed [Z_W-1:0] am_val;
  logic                  sr_start, sr_done;
  logic [$clog2(NGAL)-1:0] sr_idx;
  logic signed [ACC_W-1:0] sr_dot;
  logic [ACC_W-1:0]      sr_ng, sr_nq;

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);
  assign enc_start = (state == S_IDLE) && cmd_valid;

  // row partition of the shared array for the command's modality
  always_comb begin
    if (cmd_mod == MOD_AUDIO) begin
      in_base = $clog2(XB_ROWS)'(AUD_IN_BASE);
      u_cnt   = $clog2(U_MAX+1)'(U_AUD);
      g_first = GWID'(AUD_IN_BASE / ROW_GROUP);
    end else begin
      in_base = $clog2(XB_ROWS)'(VIS_IN_BASE);
      u_cnt   = $clog2(U_MAX+1)'(U_VIS);
      g_first = GWID'(VIS_IN_BASE / ROW_GROUP);
    end
  end

  rram_macro u_macro (
    .clk, .rst_n,
    .conv_start (m_conv_start),
    .grp        (m_grp),
    .row_drive  (m_row_drive),
    .col        (m_col),
    .conv_done  (m_conv_done),
    .adc_code   (m_adc_code)
  );

  lsm_encoder u_enc (
    .clk, .rst_n,
    .start       (enc_start),
    .busy        (),
    .done        (enc_done),
    .in_base     (in_base),
    .u_cnt       (u_cnt),
    .g_first     (g_first),
    .g_last      (G_REC_LAST),
    .lif         (cfg_lif[cmd_mod]),
    .t_steps     (cfg_t_steps[cmd_mod]),
    .ev_valid, .ev_ready, .ev_vec,
    .step_done   (st_step),
    .spk_vec     (st_spikes),
    .spike_pulse (st_spike),
    .skip_pulse  (st_skip),
    .cnt_raddr   (cnt_raddr),
    .cnt_rdata   (cnt_rdata),
    .m_conv_start, .m_grp, .m_row_drive, .m_col, .m_conv_done, .m_adc_code
  );

  assign prj_start = (state == S_ENC) && enc_done;
  assign n_out     = (op_q == OP_CLASSIFY) ? cfg_n_class : $clog2(P+1)'(P);

  projection_layer u_prj (
    .clk, .rst_n,
    .start     (prj_start),
    .mod       (mod_q),
    .n_out     (n_out),
    .z_shift   (cfg_z_shift),
    .busy      (),
    .done      (prj_done),
    .cnt_raddr (cnt_raddr),
    .cnt_rdata (cnt_rdata),
    .w_we, .w_mod, .w_row, .w_col, .w_data,
    .b_we, .b_mod, .b_row, .b_data,
    .z_valid, .z_idx, .z_data, .z_last,
    .sat_pulse (st_zsat)
  );

  argmax_unit #(.IW($clog2(P))) u_argmax (
    .clk, .rst_n,
    .in_valid  (z_valid && op_q == OP_CLASSIFY),
    .in_idx    (z_idx),
    .in_data   (z_data),
    .in_last   (z_last),
    .out_valid (am_valid),
    .out_idx   (am_idx),
    .out_val   (am_val)
  );

  assign sr_start = (state == S_PROJ) && prj_done && (op_q == OP_QUERY);

  zero_shot_retrieval u_ret (
    .clk, .rst_n,
    .wr_en    (z_valid && op_q != OP_CLASSIFY),
    .wr_query (op_q == OP_QUERY),
    .wr_slot  (slot_q),
    .wr_idx   (z_idx),
    .wr_data  (z_data),
    .start    (sr_start),
    .n_gal    (cfg_n_gal),
    .busy     (),
    .done     (sr_done),
    .best_idx (sr_idx),
    .best_dot (sr_dot),
    .best_ng  (sr_ng),
    .nq       (sr_nq)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      op_q      <= OP_CLASSIFY;
      mod_q     <= MOD_VISION;
      slot_q    <= '0;
      res_valid <= 1'b0;
      res_op    <= OP_CLASSIFY;
      res_idx   <= '0;
      res_score <= '0;
      res_dot   <= '0;
      res_ng    <= '0;
      res_nq    <= '0;
    end else begin
      res_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          op_q   <= cmd_op;
          mod_q  <= cmd_mod;
          slot_q <= cmd_slot;
          state  <= S_ENC;
        end
        S_ENC: if (enc_done) state <= S_PROJ;
        S_PROJ: if (prj_done) begin
          if (op_q == OP_QUERY) state <= S_SRCH;
          else if (op_q == OP_ENROLL) begin
            res_valid <= 1'b1;
            res_op    <= op_q;
            res_idx   <= $clog2(P)'(slot_q);
            state     <= S_IDLE;
          end else begin
            state <= S_RES;   // argmax result is one cycle behind
          end
        end
        S_RES: if (am_valid) begin
          res_valid <= 1'b1;
          res_op    <= op_q;
          res_idx   <= am_idx;
          res_score <= am_val;
          state     <= S_IDLE;
        end
        S_SRCH: if (sr_done) begin
          res_valid <= 1'b1;
          res_op    <= op_q;
          res_idx   <= $clog2(P)'(sr_idx);
          res_dot   <= sr_dot;
          res_ng    <= sr_ng;
          res_nq    <= sr_nq;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cmd_op: assert property (@(posedge clk) disable iff (!rst_n)
                             (cmd_valid && cmd_ready) |-> (cmd_op != 2'd3));
  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                   (w_we || b_we) |-> !busy);

endmodule
