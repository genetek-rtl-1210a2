// tb_seq_fetch: writes sequence records (length word, ASCII text, padding
// with 'G' so that stray characters would show) into the memory model and
// fetches them with a small block (LMAX = 22, not a multiple of four).
// Checks the packed 2-bit sequence and the length, including lengths 0,
// 1, LMAX and above LMAX (cut to LMAX), and records that straddle a 4 KiB
// boundary.
module tb_seq_fetch;
  import genetek_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned L = 22;
  localparam int unsigned LW = $clog2(L + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [31:0] addr;
  logic [2*L-1:0] seq;
  logic [LW-1:0] len;
  logic arvalid, arready, rvalid, rready, rlast;
  logic [31:0] araddr, rdata;
  logic [7:0] arlen; logic [2:0] arsize; logic [1:0] arburst;
  logic d0, d1, d2, d3;
  logic [31:0] z32 = '0;

  seq_fetch #(.LMAX(L)) dut (
    .clk, .rst_n, .start, .addr, .busy, .done, .seq, .len,
    .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr), .m_arlen(arlen),
    .m_arsize(arsize), .m_arburst(arburst), .m_rvalid(rvalid), .m_rready(rready),
    .m_rdata(rdata), .m_rresp(2'b00), .m_rlast(rlast));

  axi_mem_model #(.WORDS(1 << 14), .STALL(30)) u_mem (
    .clk, .rst_n,
    .ar0_valid(arvalid), .ar0_ready(arready), .ar0_addr(araddr), .ar0_len(arlen),
    .r0_valid(rvalid), .r0_ready(rready), .r0_data(rdata), .r0_last(rlast),
    .ar1_valid(1'b0), .ar1_ready(d0), .ar1_addr(z32), .ar1_len(8'd0),
    .r1_valid(d1), .r1_ready(1'b0), .r1_data(), .r1_last(),
    .aw_valid(1'b0), .aw_ready(d2), .aw_addr(z32), .w_valid(1'b0), .w_ready(d3),
    .w_data(z32), .b_valid(), .b_ready(1'b0));

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; addr = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 120; r++) begin
      automatic int unsigned n = (r < 4) ? (r == 0 ? 0 : r == 1 ? 1 : r == 2 ? L : L + 9)
                                         : $urandom_range(0, L);
      automatic int unsigned a = (r % 3 == 0) ? 4096 * $urandom_range(1, 12) - 4 * $urandom_range(1, 6)
                                              : 4 * $urandom_range(0, 12000);
      automatic seq_t s = random_seq(n);
      automatic logic [2*L-1:0] exp = '0;
      automatic int unsigned keep = (n > L) ? L : n;
      u_mem.put_word(a, n);
      for (int w = 0; w < int'((n + 3) / 4) + 1; w++) begin
        automatic logic [31:0] word = 32'h4747_4747;   // "GGGG"
        for (int k = 0; k < 4; k++) if (4 * w + k < int'(n)) word[8*k +: 8] = code_to_ascii(s[4*w+k], 1'(k & 1));
        u_mem.put_word(a + 4 + 4 * w, word);
      end
      for (int i = 0; i < int'(keep); i++) exp[2*i +: 2] = s[i][1:0];
      addr = a; start = 1;
      @(posedge clk); #1 start = 0;
      while (!done) begin @(posedge clk); #1; end
      checks++;
      if (seq != exp || len != LW'(keep)) begin
        failures++; $display("FAIL n=%0d seq=%h exp=%h len=%0d", n, seq, exp, len);
      end
      @(posedge clk); #1;
      checks++;
      if (busy) begin failures++; $display("FAIL still busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
