// tb_reader: runs the reader (LMAX = 16, BQ = 4) on two jobs, 10 queries x
// 3 targets (three query chunks) and 3 x 2, with records in the memory
// model. Checks the exact order and content of the pair stream: for each
// chunk, for each target, every buffered query in order, with
// id = target*num_q + query. The first job applies random back-pressure;
// the second keeps pair_ready high and checks that the pairs of one target
// leave on consecutive cycles (one pair per cycle).
module tb_reader;
  import genetek_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned L = 16, BQ = 4;
  localparam int unsigned LW = $clog2(L + 1);
  localparam int unsigned PW = 4 * L + 2 * LW + ID_W;
  localparam int unsigned REC_B = 4 * record_words(L);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, chunk_load, pair_valid, pair_ready;
  logic [31:0] q_base, num_q, t_base, num_t;
  logic [PW-1:0] pair_data;
  logic q_arvalid, q_arready, q_rvalid, q_rready, q_rlast;
  logic t_arvalid, t_arready, t_rvalid, t_rready, t_rlast;
  logic [31:0] q_araddr, q_rdata, t_araddr, t_rdata;
  logic [7:0] q_arlen, t_arlen; logic [2:0] q_arsize, t_arsize; logic [1:0] q_arburst, t_arburst;
  logic d2, d3;
  logic [31:0] z32 = '0;

  reader #(.LMAX(L), .BQ(BQ)) dut (
    .clk, .rst_n, .start, .q_base, .num_q, .t_base, .num_t, .busy, .done, .chunk_load,
    .pair_valid, .pair_ready, .pair_data,
    .q_arvalid, .q_arready, .q_araddr, .q_arlen, .q_arsize, .q_arburst,
    .q_rvalid, .q_rready, .q_rdata, .q_rresp(2'b00), .q_rlast,
    .t_arvalid, .t_arready, .t_araddr, .t_arlen, .t_arsize, .t_arburst,
    .t_rvalid, .t_rready, .t_rdata, .t_rresp(2'b00), .t_rlast);

  axi_mem_model #(.WORDS(1 << 14), .STALL(30)) u_mem (
    .clk, .rst_n,
    .ar0_valid(q_arvalid), .ar0_ready(q_arready), .ar0_addr(q_araddr), .ar0_len(q_arlen),
    .r0_valid(q_rvalid), .r0_ready(q_rready), .r0_data(q_rdata), .r0_last(q_rlast),
    .ar1_valid(t_arvalid), .ar1_ready(t_arready), .ar1_addr(t_araddr), .ar1_len(t_arlen),
    .r1_valid(t_rvalid), .r1_ready(t_rready), .r1_data(t_rdata), .r1_last(t_rlast),
    .aw_valid(1'b0), .aw_ready(d2), .aw_addr(z32), .w_valid(1'b0), .w_ready(d3),
    .w_data(z32), .b_valid(), .b_ready(1'b0));

  function automatic logic [2*L-1:0] pack(input seq_t s);
    logic [2*L-1:0] v = '0;
    foreach (s[i]) v[2*i +: 2] = s[i][1:0];
    return v;
  endfunction

  task automatic put_record(input int unsigned a, input seq_t s);
    u_mem.put_word(a, s.size());
    for (int w = 0; w < (s.size() + 3) / 4; w++) begin
      logic [31:0] word = '0;
      for (int k = 0; k < 4; k++) if (4 * w + k < s.size()) word[8*k +: 8] = code_to_ascii(s[4*w+k], 0);
      u_mem.put_word(a + 4 + 4 * w, word);
    end
  endtask

  int n_chunk = 0;
  always @(posedge clk) if (chunk_load) n_chunk++;

  task automatic run(input int unsigned nq, input int unsigned nt, input bit bp);
    seq_t qs [] = new[nq];
    seq_t ts [] = new[nt];
    int last_cycle = -10, cyc = 0, last_t = -1;
    for (int i = 0; i < int'(nq); i++) begin qs[i] = random_seq($urandom_range(1, L)); put_record(32'h100 + i * REC_B, qs[i]); end
    for (int j = 0; j < int'(nt); j++) begin ts[j] = random_seq($urandom_range(1, L)); put_record(32'h2000 + j * REC_B, ts[j]); end
    q_base = 32'h100; t_base = 32'h2000; num_q = nq; num_t = nt;
    while (busy) begin @(posedge clk); #1; end
    start = 1;
    @(posedge clk); #1 start = 0;
    for (int c0 = 0; c0 < int'(nq); c0 += BQ) begin
      for (int j = 0; j < int'(nt); j++) begin
        for (int i = c0; i < c0 + int'(BQ) && i < int'(nq); i++) begin
          automatic logic [PW-1:0] exp = {ID_W'(j * nq + i), LW'(ts[j].size()), LW'(qs[i].size()), pack(ts[j]), pack(qs[i])};
          pair_ready = bp ? ($urandom_range(99) < 60) : 1'b1;
          #1;
          while (!(pair_valid && pair_ready)) begin
            @(posedge clk); #1; cyc++;
            pair_ready = bp ? ($urandom_range(99) < 60) : 1'b1;
            #1;
          end
          checks++;
          if (pair_data != exp) begin failures++; $display("FAIL pair q=%0d t=%0d", i, j); end
          if (!bp && last_t == j) begin
            checks++;
            if (cyc != last_cycle + 1) begin failures++; $display("FAIL gap of %0d cycles", cyc - last_cycle); end
          end
          last_cycle = cyc; last_t = j;
          @(posedge clk); #1; cyc++;
        end
      end
    end
    pair_ready = 0;
    #1;
    while (!done) begin
      checks++;
      if (pair_valid) begin failures++; $display("FAIL extra pair"); end
      @(posedge clk); #1;
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; pair_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run(10, 3, 1);
    run(3, 2, 0);
    checks++;
    if (n_chunk != 4) begin failures++; $display("FAIL chunk loads %0d", n_chunk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
