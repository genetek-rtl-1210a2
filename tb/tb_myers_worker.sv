// tb_myers_worker: checks the Myers worker against a dynamic-programming
// edit distance, at a small width (LMAX = 32) with many random pairs and
// at the default width (LMAX = 360) with a few long ones, and at the
// longest length the template targets (LMAX = 1000) with a few more. Pairs include
// related sequences (few edits), unrelated ones, length 1 and full-length
// queries, and empty targets. Also checks the timing: out_valid appears
// n+3 cycles after the pair is accepted (n = target length, 2 for n = 0),
// and a result is held while out_ready is low.
module tb_myers_worker;
  import genetek_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned LS = 32;
  localparam int unsigned LB = LMAX_DEF;
  localparam int unsigned LK = 1000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---- small worker ----
  localparam int unsigned LWS = $clog2(LS + 1);
  logic s_in_valid, s_in_ready, s_out_valid, s_out_ready;
  logic [4*LS+2*LWS+ID_W-1:0] s_pair;
  logic [LWS+ID_W-1:0]        s_res;
  myers_worker #(.LMAX(LS)) dut_s (
    .clk, .rst_n, .in_valid(s_in_valid), .in_ready(s_in_ready), .in_pair(s_pair),
    .out_valid(s_out_valid), .out_ready(s_out_ready), .out_res(s_res));

  // ---- default-size worker ----
  localparam int unsigned LWB = $clog2(LB + 1);
  logic b_in_valid, b_in_ready, b_out_valid, b_out_ready;
  logic [4*LB+2*LWB+ID_W-1:0] b_pair;
  logic [LWB+ID_W-1:0]        b_res;
  myers_worker dut_b (
    .clk, .rst_n, .in_valid(b_in_valid), .in_ready(b_in_ready), .in_pair(b_pair),
    .out_valid(b_out_valid), .out_ready(b_out_ready), .out_res(b_res));

  // ---- 1000-base worker ----
  localparam int unsigned LWK = $clog2(LK + 1);
  logic k_in_valid, k_in_ready, k_out_valid, k_out_ready;
  logic [4*LK+2*LWK+ID_W-1:0] k_pair;
  logic [LWK+ID_W-1:0]        k_res;
  myers_worker #(.LMAX(LK)) dut_k (
    .clk, .rst_n, .in_valid(k_in_valid), .in_ready(k_in_ready), .in_pair(k_pair),
    .out_valid(k_out_valid), .out_ready(k_out_ready), .out_res(k_res));

  function automatic logic [2*LK-1:0] pack_k(input seq_t s);
    logic [2*LK-1:0] v = '0;
    foreach (s[i]) v[2*i +: 2] = s[i][1:0];
    return v;
  endfunction

  task automatic run_k(input seq_t q, input seq_t t, input int unsigned id);
    int exp = edit_distance(q, t);
    int cyc = 0;
    k_pair = {ID_W'(id), LWK'(t.size()), LWK'(q.size()), pack_k(t), pack_k(q)};
    k_in_valid = 1;
    k_out_ready = 1;
    #1; while (!k_in_ready) begin @(posedge clk); #1; end
    @(posedge clk);
    #1 k_in_valid = 0;
    cyc = 1;
    while (!k_out_valid) begin @(posedge clk); #1 cyc++; end
    checks++;
    if (k_res[LWK-1:0] != LWK'(exp) || k_res[LWK +: ID_W] != ID_W'(id) || cyc != t.size() + 3) begin
      failures++;
      $display("FAIL 1000 m=%0d n=%0d exp=%0d got=%0d cycles=%0d", q.size(), t.size(), exp, k_res[LWK-1:0], cyc);
    end
    @(posedge clk); #1;
  endtask

  function automatic logic [2*LB-1:0] pack(input seq_t s);
    logic [2*LB-1:0] v = '0;
    foreach (s[i]) v[2*i +: 2] = s[i][1:0];
    return v;
  endfunction

  task automatic run_small(input seq_t q, input seq_t t, input int unsigned id, input bit stall);
    int exp = edit_distance(q, t);
    int cyc = 0;
    logic [2*LB-1:0] qv = pack(q), tv = pack(t);
    s_pair = {ID_W'(id), LWS'(t.size()), LWS'(q.size()), tv[2*LS-1:0], qv[2*LS-1:0]};
    s_in_valid = 1;
    s_out_ready = !stall;
    @(posedge clk);
    while (!s_in_ready) @(posedge clk);
    #1 s_in_valid = 0;
    cyc = 1;
    while (!s_out_valid) begin @(posedge clk); #1 cyc++; end
    checks++;
    if (cyc != ((t.size() == 0) ? 2 : t.size() + 3)) begin
      failures++; $display("FAIL latency n=%0d got %0d", t.size(), cyc);
    end
    if (stall) begin
      repeat ($urandom_range(1, 4)) begin
        @(posedge clk); #1;
        checks++;
        if (!s_out_valid || s_res[LWS-1:0] != LWS'(exp)) begin failures++; $display("FAIL hold"); end
      end
      s_out_ready = 1;
    end
    checks++;
    if (s_res[LWS-1:0] != LWS'(exp) || s_res[LWS +: ID_W] != ID_W'(id)) begin
      failures++;
      $display("FAIL small m=%0d n=%0d exp=%0d got=%0d id=%0d", q.size(), t.size(), exp, s_res[LWS-1:0], s_res[LWS +: ID_W]);
    end
    @(posedge clk); #1;
  endtask

  task automatic run_big(input seq_t q, input seq_t t, input int unsigned id);
    int exp = edit_distance(q, t);
    b_pair = {ID_W'(id), LWB'(t.size()), LWB'(q.size()), pack(t), pack(q)};
    b_in_valid = 1;
    b_out_ready = 1;
    @(posedge clk);
    while (!b_in_ready) @(posedge clk);
    #1 b_in_valid = 0;
    while (!b_out_valid) begin @(posedge clk); #1; end
    checks++;
    if (b_res[LWB-1:0] != LWB'(exp) || b_res[LWB +: ID_W] != ID_W'(id)) begin
      failures++;
      $display("FAIL big m=%0d n=%0d exp=%0d got=%0d", q.size(), t.size(), exp, b_res[LWB-1:0]);
    end
    @(posedge clk); #1;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seq_t q, t;
    s_in_valid = 0; s_out_ready = 1; b_in_valid = 0; b_out_ready = 1;
    k_in_valid = 0; k_out_ready = 1; k_pair = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // fixed cases
    q = new[4]; q = '{0, 0, 2, 1};          // AATC
    t = new[4]; t = '{0, 0, 2, 1};
    run_small(q, t, 7, 0);                  // identical: 0
    t = new[0];
    run_small(q, t, 8, 0);                  // empty target: m
    t = new[6]; t = '{3, 3, 0, 0, 2, 1};    // GGAATC: query is a suffix
    run_small(q, t, 9, 0);
    // random pairs
    for (int k = 0; k < 300; k++) begin
      automatic int unsigned m = (k % 10 == 0) ? LS : $urandom_range(1, LS);
      q = random_seq(m);
      if (k % 2 == 0) t = mutate(q, $urandom_range(0, 5), LS);
      else t = random_seq($urandom_range(0, LS));
      if (t.size() > LS) t = new[LS](t);
      run_small(q, t, k, (k % 7 == 3));
    end
    // default size
    for (int k = 0; k < 8; k++) begin
      automatic int unsigned m = (k < 2) ? LB : $urandom_range(1, LB);
      q = random_seq(m);
      if (k % 2 == 0) t = mutate(q, $urandom_range(0, 30), LB);
      else t = random_seq($urandom_range(1, LB));
      if (t.size() > LB) t = new[LB](t);
      run_big(q, t, 1000 + k);
    end
    // longest instance
    for (int k = 0; k < 6; k++) begin
      automatic int unsigned m = (k < 2) ? LK : $urandom_range(1, LK);
      q = random_seq(m);
      if (k % 2 == 0) t = mutate(q, $urandom_range(0, 60), LK);
      else t = random_seq($urandom_range(1, LK));
      if (t.size() > LK) t = new[LK](t);
      run_k(q, t, 2000 + k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
