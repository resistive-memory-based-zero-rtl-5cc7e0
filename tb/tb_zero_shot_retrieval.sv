// tb_zero_shot_retrieval: fills the gallery with random embeddings, writes
// queries, and checks the returned entry against a floating-point cosine
// similarity argmax. Directed cases: a scaled copy of one entry, a query that
// anti-correlates with every entry (all cosines negative) and an all-zero
// entry. Also checks the reported dot product and norms, and the latency
// n_gal*(P+1)+1.
module tb_zero_shot_retrieval;
  import lsm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_query = 0, start = 0, busy, done;
  logic [4:0] wr_slot = 0, best_idx;
  logic [5:0] wr_idx = 0;
  logic [5:0] n_gal = 1;
  logic signed [Z_W-1:0] wr_data = 0;
  logic signed [ACC_W-1:0] best_dot;
  logic [ACC_W-1:0] best_ng, nq;
  int G [NGAL][P];
  int Q [P];
  int checks = 0, failures = 0, nskip = 0, nneg = 0;

  zero_shot_retrieval dut (.clk, .rst_n, .wr_en, .wr_query, .wr_slot, .wr_idx, .wr_data, .start, .n_gal,
    .busy, .done, .best_idx, .best_dot, .best_ng, .nq);

  task automatic write_vec(input bit q, input int slot, input int v [P]);
    for (int j = 0; j < P; j++) begin
      wr_en = 1; wr_query = q; wr_slot = 5'(slot); wr_idx = 6'(j); wr_data = 16'(v[j]);
      @(negedge clk);
    end
    wr_en = 0;
  endtask

  function automatic real cosine(input int k);
    real d, a, b;
    d = 0; a = 0; b = 0;
    for (int j = 0; j < P; j++) begin d += real'(Q[j]) * G[k][j]; a += real'(Q[j]) * Q[j]; b += real'(G[k][j]) * G[k][j]; end
    if (a == 0 || b == 0) return 0.0;
    return d / ($sqrt(a) * $sqrt(b));
  endfunction

  task automatic search(input int ng, input int forced);
    int cyc, bi; real bc, second;
    longint d, a, b;
    bi = 0; bc = cosine(0); second = -2.0;
    for (int k = 1; k < ng; k++) begin
      real c; c = cosine(k);
      if (c > bc) begin second = bc; bc = c; bi = k; end
      else if (c > second) second = c;
    end
    if (bc < 0) nneg++;
    n_gal = 6'(ng);
    start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != ng * (P + 1) + 1) begin failures++; $display("FAIL latency %0d exp %0d", cyc, ng * (P + 1) + 1); end
    if (forced >= 0) bi = forced;
    else if (bc - second < 1e-9) begin nskip++; return; end
    checks++;
    if (int'(best_idx) != bi) begin failures++; if (failures < 10) $display("FAIL best %0d exp %0d (cos %f)", best_idx, bi, bc); end
    d = 0; a = 0; b = 0;
    for (int j = 0; j < P; j++) begin d += longint'(Q[j]) * G[bi][j]; a += longint'(Q[j]) * Q[j]; b += longint'(G[bi][j]) * G[bi][j]; end
    checks++;
    if (longint'(best_dot) != d || longint'(nq) != a || longint'(best_ng) != b) begin failures++; $display("FAIL reported sums"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NGAL; k++) begin
      for (int j = 0; j < P; j++) G[k][j] = $urandom_range(0, 4000) - 2000;
      write_vec(0, k, G[k]);
    end
    // random queries
    for (int n = 0; n < 40; n++) begin
      for (int j = 0; j < P; j++) Q[j] = $urandom_range(0, 60000) - 30000;
      write_vec(1, 0, Q);
      search($urandom_range(1, NGAL), -1);
    end
    // query = 3 x entry 7 plus a little noise: entry 7 wins
    for (int j = 0; j < P; j++) Q[j] = 3 * G[7][j] + $urandom_range(0, 20) - 10;
    write_vec(1, 0, Q);
    search(NGAL, 7);
    // anti-correlated with entry 2, gallery of entries 0..3 with 0,1,3 the negated
    // query scaled, so every cosine is negative and entry 2 is the least negative
    for (int j = 0; j < P; j++) Q[j] = $urandom_range(0, 2000) - 1000;
    for (int k = 0; k < 4; k++) for (int j = 0; j < P; j++)
      G[k][j] = (k == 2) ? -Q[j] + $urandom_range(0, 1600) - 800 : -Q[j];
    for (int k = 0; k < 4; k++) write_vec(0, k, G[k]);
    write_vec(1, 0, Q);
    search(4, -1);
    // all-zero entry 0 scores 0 and beats negative entries 1..3
    for (int j = 0; j < P; j++) G[0][j] = 0;
    write_vec(0, 0, G[0]);
    search(4, 0);
    checks++;
    if (nneg == 0) begin failures++; $display("FAIL negative case not exercised"); end
    $display("near ties skipped: %0d", nskip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
