// tb_genetek_top: end-to-end test of the accelerator at reduced size (LMAX = 32, W = 3 workers, BQ = 12 queries per chunk), two jobs, the first with 27 queries so that it needs three query chunks.
//
// The host side is modelled by AXI-Lite tasks and the system memory by
// axi_mem_model, which stalls every channel at random. The testbench writes
// query and target records (a length word, then ASCII text with mixed upper
// and lower case) into memory, programs the registers, starts the job,
// polls DONE and compares every score in memory with a dynamic-programming
// edit distance. Queries have random lengths (1..LMAX); half of the
// targets are edited copies of queries, so small and large distances both
// occur. It also counts how often each mechanism of the design was used
// (query chunk reloads, split back-pressure, merge contention, write
// back-pressure, read bursts cut at a 4 KiB boundary) and counts a failure
// for any that never happened. It also reports how often the split stage
// passed over a worker whose queue was full.
module tb_genetek_top;
  import genetek_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned LMAX = 32;
  localparam int unsigned W    = 3;
  localparam int unsigned BQ   = 12;
  localparam int unsigned REC_B = 4 * record_words(LMAX);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  // AXI-Lite
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [5:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  // HP0 / HP1
  logic hp0_arvalid, hp0_arready, hp0_rvalid, hp0_rready, hp0_rlast;
  logic [31:0] hp0_araddr, hp0_rdata;
  logic [7:0] hp0_arlen; logic [2:0] hp0_arsize; logic [1:0] hp0_arburst, hp0_rresp;
  logic hp1_arvalid, hp1_arready, hp1_rvalid, hp1_rready, hp1_rlast;
  logic [31:0] hp1_araddr, hp1_rdata;
  logic [7:0] hp1_arlen; logic [2:0] hp1_arsize; logic [1:0] hp1_arburst, hp1_rresp;
  logic hp1_awvalid, hp1_awready, hp1_wvalid, hp1_wready, hp1_wlast, hp1_bvalid, hp1_bready;
  logic [31:0] hp1_awaddr, hp1_wdata;
  logic [7:0] hp1_awlen; logic [2:0] hp1_awsize; logic [1:0] hp1_awburst, hp1_bresp;
  logic [3:0] hp1_wstrb;

  assign hp0_rresp = 2'b00;
  assign hp1_rresp = 2'b00;
  assign hp1_bresp = 2'b00;

  genetek_top #(.LMAX(LMAX), .W(W), .BQ(BQ)) dut (
    .clk, .rst_n,
    .s_axil_awvalid(s_awvalid), .s_axil_awready(s_awready), .s_axil_awaddr(s_awaddr),
    .s_axil_wvalid(s_wvalid), .s_axil_wready(s_wready), .s_axil_wdata(s_wdata),
    .s_axil_wstrb(s_wstrb), .s_axil_bvalid(s_bvalid), .s_axil_bready(s_bready),
    .s_axil_bresp(s_bresp), .s_axil_arvalid(s_arvalid), .s_axil_arready(s_arready),
    .s_axil_araddr(s_araddr), .s_axil_rvalid(s_rvalid), .s_axil_rready(s_rready),
    .s_axil_rdata(s_rdata), .s_axil_rresp(s_rresp),
    .hp0_arvalid, .hp0_arready, .hp0_araddr, .hp0_arlen, .hp0_arsize, .hp0_arburst,
    .hp0_rvalid, .hp0_rready, .hp0_rdata, .hp0_rresp, .hp0_rlast,
    .hp1_arvalid, .hp1_arready, .hp1_araddr, .hp1_arlen, .hp1_arsize, .hp1_arburst,
    .hp1_rvalid, .hp1_rready, .hp1_rdata, .hp1_rresp, .hp1_rlast,
    .hp1_awvalid, .hp1_awready, .hp1_awaddr, .hp1_awlen, .hp1_awsize, .hp1_awburst,
    .hp1_wvalid, .hp1_wready, .hp1_wdata, .hp1_wstrb, .hp1_wlast,
    .hp1_bvalid, .hp1_bready, .hp1_bresp
  );

  axi_mem_model #(.WORDS(1 << 17), .STALL(25)) u_mem (
    .clk, .rst_n,
    .ar0_valid(hp0_arvalid), .ar0_ready(hp0_arready), .ar0_addr(hp0_araddr), .ar0_len(hp0_arlen),
    .r0_valid(hp0_rvalid), .r0_ready(hp0_rready), .r0_data(hp0_rdata), .r0_last(hp0_rlast),
    .ar1_valid(hp1_arvalid), .ar1_ready(hp1_arready), .ar1_addr(hp1_araddr), .ar1_len(hp1_arlen),
    .r1_valid(hp1_rvalid), .r1_ready(hp1_rready), .r1_data(hp1_rdata), .r1_last(hp1_rlast),
    .aw_valid(hp1_awvalid), .aw_ready(hp1_awready), .aw_addr(hp1_awaddr),
    .w_valid(hp1_wvalid), .w_ready(hp1_wready), .w_data(hp1_wdata),
    .b_valid(hp1_bvalid), .b_ready(hp1_bready)
  );

  // ---- mechanism counters ----
  int n_chunk = 0, n_split_stall = 0, n_skip = 0, n_merge_cont = 0, n_wr_bp = 0, n_4k = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.chunk_load) n_chunk++;
    if (dut.pair_valid && !dut.pair_ready) n_split_stall++;
    if (dut.pair_valid && dut.pair_ready && dut.u_split.sel != dut.u_split.ptr) n_skip++;
    if ($countones(dut.mi_valid) > 1) n_merge_cont++;
    if (dut.res_valid && !dut.res_ready) n_wr_bp++;
    if (hp0_arvalid && hp0_arready && 32'(hp0_araddr[11:0]) + 32'({hp0_arlen, 2'b00}) + 4 == 32'h1000 && hp0_arlen != 8'd15) n_4k++;
    if (hp1_arvalid && hp1_arready && 32'(hp1_araddr[11:0]) + 32'({hp1_arlen, 2'b00}) + 4 == 32'h1000 && hp1_arlen != 8'd15) n_4k++;
    if (hp1_awvalid) begin
      checks++;
      if (hp1_awlen != 0 || hp1_awsize != 3'd2 || hp1_awburst != 2'b01) begin failures++; $display("FAIL aw attrs"); end
    end
  end

  // ---- host tasks ----
  task automatic axil_write(input logic [5:0] a, input logic [31:0] d);
    s_awaddr = a; s_wdata = d; s_wstrb = 4'hF; s_awvalid = 1; s_wvalid = 1;
    #1; while (!(s_awready && s_wready)) begin @(posedge clk); #1; end
    @(posedge clk);
    #1 s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) begin @(posedge clk); #1; end
    @(posedge clk); #1;
  endtask

  task automatic axil_read(input logic [5:0] a, output logic [31:0] d);
    s_araddr = a; s_arvalid = 1;
    #1; while (!s_arready) begin @(posedge clk); #1; end
    @(posedge clk);
    #1 s_arvalid = 0;
    while (!s_rvalid) begin @(posedge clk); #1; end
    d = s_rdata;
    @(posedge clk); #1;
  endtask

  task automatic put_record(input int unsigned addr, input seq_t s);
    u_mem.put_word(addr, 32'(s.size()));
    for (int w = 0; w < (s.size() + 3) / 4; w++) begin
      logic [31:0] word = '0;
      for (int k = 0; k < 4; k++) begin
        if (4 * w + k < s.size()) word[8*k +: 8] = code_to_ascii(s[4*w+k], 1'($urandom_range(1)));
        else word[8*k +: 8] = "N";
      end
      u_mem.put_word(addr + 4 + 4 * w, word);
    end
  endtask

  task automatic run_job(input int unsigned nq, input int unsigned nt, input int unsigned qb,
                         input int unsigned tb, input int unsigned sb);
    seq_t qs [], ts [];
    logic [31:0] r;
    longint t0;
    qs = new[nq];
    ts = new[nt];
    for (int i = 0; i < nq; i++) begin
      qs[i] = random_seq((i % 3 == 0) ? LMAX : $urandom_range(1, LMAX));
      put_record(qb + i * REC_B, qs[i]);
    end
    for (int j = 0; j < nt; j++) begin
      if (j % 2 == 0) ts[j] = mutate(qs[$urandom_range(nq - 1)], $urandom_range(0, 8), LMAX);
      else ts[j] = random_seq($urandom_range(1, LMAX));
      put_record(tb + j * REC_B, ts[j]);
    end
    for (int k = 0; k < nq * nt; k++) u_mem.put_word(sb + 4 * k, 32'hDEAD_BEEF);
    axil_write(6'h10, qb);
    axil_write(6'h14, nq);
    axil_write(6'h18, tb);
    axil_write(6'h1C, nt);
    axil_write(6'h20, sb);
    axil_read(6'h00, r);
    checks++;
    if (r[2] != 1'b1) begin failures++; $display("FAIL not idle before start"); end
    t0 = cycles;
    axil_write(6'h00, 32'h1);
    axil_read(6'h00, r);
    checks++;
    if (r[2] != 1'b0 || r[1] != 1'b0) begin failures++; $display("FAIL not busy after start: %h", r); end
    do axil_read(6'h00, r); while (!r[1]);
    $display("job %0dx%0d finished in %0d cycles", nq, nt, cycles - t0);
    checks++;
    if (r[2] != 1'b1) begin failures++; $display("FAIL not idle when done"); end
    for (int j = 0; j < nt; j++) begin
      for (int i = 0; i < nq; i++) begin
        int exp = edit_distance(qs[i], ts[j]);
        logic [31:0] got = u_mem.get_word(sb + 4 * (j * nq + i));
        checks++;
        if (got != 32'(exp)) begin
          failures++;
          if (failures < 10) $display("FAIL score q=%0d t=%0d exp=%0d got=%0d", i, j, exp, got);
        end
      end
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    run_job(27, 6, 32'h0000_0F00, 32'h0000_4F00, 32'h0001_0000);
    run_job(5, 3, 32'h0000_8000, 32'h0000_9000, 32'h0001_8000);
    // mechanisms
    checks++; if (n_chunk < 2)       begin failures++; $display("FAIL no query chunk reload"); end
    checks++; if (n_split_stall == 0) begin failures++; $display("FAIL split never stalled"); end
    checks++; if (n_merge_cont == 0) begin failures++; $display("FAIL merge never had contention"); end
    checks++; if (n_wr_bp == 0)      begin failures++; $display("FAIL writer never back-pressured"); end
    checks++; if (n_4k == 0)         begin failures++; $display("FAIL no burst cut at 4 KiB"); end
    $display("mechanisms: chunk=%0d split_stall=%0d skip=%0d merge_cont=%0d wr_bp=%0d cut4k=%0d",
             n_chunk, n_split_stall, n_skip, n_merge_cont, n_wr_bp, n_4k);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
