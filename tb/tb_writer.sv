// tb_writer: sends 600 results with shuffled indices and random valid
// timing into the writer, with the memory model stalling all write
// channels. Checks that each score lands, zero-extended, at
// score_base + 4*id, that bcount ends at the number of results and returns
// to zero on clear, that writes are single-beat 32-bit INCR, and that no
// more than 32 writes are ever waiting for their response.
module tb_writer;
  import genetek_pkg::*;
  localparam int unsigned SW = 9;
  localparam int unsigned N = 600;
  localparam logic [31:0] SBASE = 32'h0000_2000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, in_valid, in_ready;
  logic [31:0] bcount;
  logic [ID_W+SW-1:0] in_res;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [31:0] awaddr, wdata;
  logic [7:0] awlen; logic [2:0] awsize; logic [1:0] awburst;
  logic [3:0] wstrb;
  logic d0, d1, d2, d3;
  logic [31:0] z32 = '0;

  writer #(.SCORE_W(SW)) dut (
    .clk, .rst_n, .clear, .score_base(SBASE), .bcount, .in_valid, .in_ready, .in_res,
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_awsize(awsize), .m_awburst(awburst), .m_wvalid(wvalid), .m_wready(wready),
    .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_bvalid(bvalid),
    .m_bready(bready), .m_bresp(2'b00));

  axi_mem_model #(.WORDS(1 << 12), .STALL(40)) u_mem (
    .clk, .rst_n,
    .ar0_valid(1'b0), .ar0_ready(d0), .ar0_addr(z32), .ar0_len(8'd0),
    .r0_valid(d1), .r0_ready(1'b0), .r0_data(), .r0_last(),
    .ar1_valid(1'b0), .ar1_ready(d2), .ar1_addr(z32), .ar1_len(8'd0),
    .r1_valid(d3), .r1_ready(1'b0), .r1_data(), .r1_last(),
    .aw_valid(awvalid), .aw_ready(awready), .aw_addr(awaddr), .w_valid(wvalid), .w_ready(wready),
    .w_data(wdata), .b_valid(bvalid), .b_ready(bready));

  int pending = 0, max_pending = 0;
  always @(posedge clk) if (rst_n) begin
    pending += int'(in_valid && in_ready) - int'(bvalid && bready);
    if (pending > max_pending) max_pending = pending;
    if (awvalid && awready) begin
      checks++;
      if (awlen != 0 || awsize != 3'd2 || awburst != 2'b01) begin failures++; $display("FAIL aw attrs"); end
    end
    if (wvalid && wready) begin
      checks++;
      if (wstrb != 4'hF || !wlast) begin failures++; $display("FAIL w attrs"); end
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned ids [N];
    logic [SW-1:0] sc [N];
    for (int i = 0; i < int'(N); i++) begin ids[i] = i; sc[i] = SW'($urandom); end
    ids.shuffle();
    for (int i = 0; i < int'(N) + 8; i++) u_mem.put_word(SBASE + 4 * i, 32'hFFFF_FFFF);
    clear = 0; in_valid = 0; in_res = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < int'(N); i++) begin
      in_res = {ID_W'(ids[i]), sc[ids[i]]};
      in_valid = ($urandom_range(99) < 80);
      while (!in_valid) begin @(posedge clk); #1 in_valid = ($urandom_range(99) < 80); end
      #1; while (!in_ready) begin @(posedge clk); #1; end
    @(posedge clk);
      #1 in_valid = 0;
    end
    while (bcount != N) begin @(posedge clk); #1; end
    repeat (10) @(posedge clk);
    for (int i = 0; i < int'(N) + 8; i++) begin
      checks++;
      if (u_mem.get_word(SBASE + 4 * i) != ((i < int'(N)) ? 32'(sc[i]) : 32'hFFFF_FFFF)) begin
        failures++; $display("FAIL word %0d = %h", i, u_mem.get_word(SBASE + 4 * i));
      end
    end
    checks++;
    if (max_pending > 32 || max_pending < 2) begin failures++; $display("FAIL max pending %0d", max_pending); end
    #1 clear = 1;
    @(posedge clk); #1 clear = 0;
    checks++;
    if (bcount != 0) begin failures++; $display("FAIL clear"); end
    $display("max writes pending: %0d", max_pending);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
