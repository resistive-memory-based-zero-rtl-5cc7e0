// zero_shot_retrieval: cross-modal search by cosine similarity. It holds a
// gallery of NG projected embeddings of one modality (e.g. one image
// embedding per class, unseen classes included) and a query embedding of the
// other modality (e.g. a spoken digit). It returns the gallery entry whose
// cosine similarity to the query is highest. Because the shared embedding
// space is trained contrastively, this works for classes the projection was
// never trained on.
//
// Embeddings are written element by element: wr_query selects the query
// buffer, otherwise gallery slot wr_slot. start searches entries
// 0..n_gal-1. For each entry, similarity_unit accumulates over P cycles the
// dot product d_k, the squared gallery norm n_k and the squared query norm.
// The entry is then compared with the best so far in one cycle. The query norm
// is common to all entries, so the cosine order is the order of d_k/sqrt(n_k).
// It is compared exactly, without division or square root: entries of
// different sign are ordered by sign, and two of the same sign by
// d_k^2 * n_b against d_b^2 * n_k (reversed when both are negative). An
// all-zero entry scores 0, and ties keep the lower index.
//
// Timing: done pulses n_gal*(P+1) + 1 cycles after start. best_idx, best_dot
// and best_ng (and nq, the squared query norm) then hold until the next
// start, so the host can form the cosine best_dot/sqrt(best_ng*nq). The gallery
// size and the exact comparison are this design's choices. The
// cosine-similarity rule follows the published model.
module zero_shot_retrieval
  import lsm_pkg::*;
#(
  parameter int NP = P,
  parameter int NG = NGAL,
  parameter int ZW = Z_W,
  parameter int AW = ACC_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // embedding write
  input  logic                          wr_en,
  input  logic                          wr_query,
  input  logic [$clog2(NG)-1:0]         wr_slot,
  input  logic [$clog2(NP)-1:0]         wr_idx,
  input  logic signed [ZW-1:0]          wr_data,
  // search
  input  logic                          start,
  input  logic [$clog2(NG+1)-1:0]       n_gal,
  output logic                          busy,
  output logic                          done,
  output logic [$clog2(NG)-1:0]         best_idx,
  output logic signed [AW-1:0]          best_dot,
  output logic [AW-1:0]                 best_ng,
  output logic [AW-1:0]                 nq
);

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_CMP} state_e;
  state_e state;

  logic signed [ZW-1:0] qbuf [NP];
  logic signed [ZW-1:0] gal  [NG][NP];

  logic [$clog2(NG)-1:0]   k;
  logic [$clog2(NP)-1:0]   j;
  logic [$clog2(NG+1)-1:0] n_gal_q;

  logic                    s_clr, s_en;
  logic signed [AW-1:0]    s_dot;
  logic [AW-1:0]           s_na, s_nb;

  assign busy  = (state != S_IDLE);
  assign s_en  = (state == S_ACC);
  assign s_clr = (state == S_IDLE && start) || (state == S_CMP);

  similarity_unit #(.ZW(ZW), .AW(AW)) u_sim (
    .clk, .rst_n,
    .clr (s_clr),
    .en  (s_en),
    .a   (qbuf[j]),
    .b   (gal[k][j]),
    .dot (s_dot),
    .na  (s_na),
    .nb  (s_nb)
  );

  // sign of a score: +1, 0 or -1 (an empty entry scores 0)
  function automatic int score_sign(input logic signed [AW-1:0] d, input logic [AW-1:0] n);
    if (n == '0 || d == '0) return 0;
    return (d > 0) ? 1 : -1;
  endfunction

  // 1 when candidate (dc, nc) has a strictly higher cosine than (db, nb)
  function automatic logic better(input logic signed [AW-1:0] dc, input logic [AW-1:0] nc,
                                  input logic signed [AW-1:0] db, input logic [AW-1:0] nb);
    int sc, sb;
    logic [AW-1:0]     mc, mb;
    logic [3*AW-1:0]   lhs, rhs;
    sc = score_sign(dc, nc);
    sb = score_sign(db, nb);
    if (sc != sb) return (sc > sb);
    if (sc == 0)  return 1'b0;
    mc  = (dc < 0) ? AW'(-dc) : AW'(dc);
    mb  = (db < 0) ? AW'(-db) : AW'(db);
    lhs = (3*AW)'(mc) * (3*AW)'(mc) * (3*AW)'(nb);
    rhs = (3*AW)'(mb) * (3*AW)'(mb) * (3*AW)'(nc);
    return (sc > 0) ? (lhs > rhs) : (lhs < rhs);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (wr_query) qbuf[wr_idx]         <= wr_data;
      else          gal[wr_slot][wr_idx] <= wr_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      k        <= '0;
      j        <= '0;
      n_gal_q  <= '0;
      done     <= 1'b0;
      best_idx <= '0;
      best_dot <= '0;
      best_ng  <= '0;
      nq       <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          k       <= '0;
          j       <= '0;
          n_gal_q <= n_gal;
          state   <= S_ACC;
        end
        S_ACC: begin
          if (int'(j) == NP - 1) state <= S_CMP;
          j <= (int'(j) == NP - 1) ? '0 : j + 1'b1;
        end
        S_CMP: begin
          if (k == '0 || better(s_dot, s_nb, best_dot, best_ng)) begin
            best_idx <= k;
            best_dot <= s_dot;
            best_ng  <= s_nb;
          end
          nq <= s_na;
          if (32'(k) + 1 >= 32'(n_gal_q)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            k     <= k + 1'b1;
            state <= S_ACC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_ngal: assert property (@(posedge clk) disable iff (!rst_n)
                           (start && state == S_IDLE) |-> (n_gal != '0 && int'(n_gal) <= NG));
  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                    wr_en |-> (state == S_IDLE));

endmodule
