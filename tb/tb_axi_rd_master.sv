// tb_axi_rd_master: random read requests (1..100 words, addresses placed
// near 4 KiB boundaries half of the time) against the memory model with
// random stalls and random consumer back-pressure. Checks every word and
// rd_last against memory, and on the AR channel: bursts of at most 16
// beats, none crossing a 4 KiB boundary, beats adding up to the request,
// and more than one burst in flight at some point.
module tb_axi_rd_master;
  import genetek_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, req_ready, rd_valid, rd_ready, rd_last;
  logic [31:0] req_addr, rd_data;
  logic [15:0] req_words;
  logic arvalid, arready, rvalid, rready, rlast;
  logic [31:0] araddr, rdata;
  logic [7:0] arlen; logic [2:0] arsize; logic [1:0] arburst;
  logic d0, d1, d2, d3;
  logic [31:0] z32 = '0;

  axi_rd_master dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_words,
    .rd_valid, .rd_ready, .rd_data, .rd_last,
    .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr), .m_arlen(arlen),
    .m_arsize(arsize), .m_arburst(arburst), .m_rvalid(rvalid), .m_rready(rready),
    .m_rdata(rdata), .m_rresp(2'b00), .m_rlast(rlast));

  axi_mem_model #(.WORDS(1 << 16), .STALL(30)) u_mem (
    .clk, .rst_n,
    .ar0_valid(arvalid), .ar0_ready(arready), .ar0_addr(araddr), .ar0_len(arlen),
    .r0_valid(rvalid), .r0_ready(rready), .r0_data(rdata), .r0_last(rlast),
    .ar1_valid(1'b0), .ar1_ready(d0), .ar1_addr(z32), .ar1_len(8'd0),
    .r1_valid(d1), .r1_ready(1'b0), .r1_data(), .r1_last(),
    .aw_valid(1'b0), .aw_ready(d2), .aw_addr(z32), .w_valid(1'b0), .w_ready(d3),
    .w_data(z32), .b_valid(), .b_ready(1'b0));

  int beats_req = 0, inflight = 0, max_inflight = 0;
  always @(posedge clk) if (rst_n) begin
    if (arvalid && arready) begin
      beats_req += arlen + 1;
      checks++;
      if (arlen > 15 || (araddr % 4096) + (arlen + 1) * 4 > 4096 || arsize != 3'd2 || arburst != 2'b01) begin
        failures++; $display("FAIL burst addr=%h len=%0d", araddr, arlen);
      end
    end
    inflight += int'(arvalid && arready) - int'(rvalid && rready && rlast);
    if (inflight > max_inflight) max_inflight = inflight;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < (1 << 16); i++) u_mem.put_word(4 * i, $urandom);
    req_valid = 0; rd_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 150; r++) begin
      automatic int unsigned words = (r % 5 == 0) ? $urandom_range(60, 100) : $urandom_range(1, 40);
      automatic int unsigned addr = (r % 2 == 0) ? 4096 * $urandom_range(1, 10) - 4 * $urandom_range(1, 20)
                                                 : 4 * $urandom_range(0, 30000);
      automatic int got = 0;
      beats_req = 0;
      req_addr = addr; req_words = 16'(words); req_valid = 1;
      #1; while (!req_ready) begin @(posedge clk); #1; end
    @(posedge clk);
      #1 req_valid = 0;
      while (got < int'(words)) begin
        rd_ready = ($urandom_range(99) < 75);
        #1;
        if (rd_valid && rd_ready) begin
          checks++;
          if (rd_data != u_mem.get_word(addr + 4 * got) || rd_last != (got == int'(words) - 1)) begin
            failures++; $display("FAIL word %0d of %0d at %h", got, words, addr);
          end
          got++;
        end
        @(posedge clk); #1;
      end
      rd_ready = 0;
      checks++;
      if (beats_req != int'(words)) begin failures++; $display("FAIL beats %0d != %0d", beats_req, words); end
    end
    checks++;
    if (max_inflight < 2) begin failures++; $display("FAIL never more than one burst in flight"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
