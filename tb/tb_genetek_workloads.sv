// tb_genetek_workloads: runs the accelerator at its default size (LMAX = 360,
// W = 42, BQ = 10240, no parameter overrides) on scaled-down versions of the
// evaluation data sets: read sets compared all against all, with fixed read
// lengths of 100, 200 and 360 bases ("group A") and variable lengths in the
// ranges 100-160, 200-260 and 300-360 bases ("group B"). The evaluation used
// 1000 to 100000 reads per set; here each set has 64 to 96 reads so the
// simulation stays short. Reads are cut from a random reference at random
// positions with a few random edits, so overlapping reads give small
// distances and the rest large ones. Queries and targets are the same records
// in memory, as in an all-against-all run.
//
// For every set it checks each score against a dynamic-programming edit
// distance and checks the run time against the compute bound of the design:
// W workers, each busy Lt + 4 cycles per pair (Lt = target length). The run
// must reach at least 80 % of that bound, counting the time to load the
// queries as overhead. It prints the cycle count, the efficiency, and the
// equivalent cell-update rate at the 220 MHz clock of the reference
// implementation, next to its theoretical rate W * LMAX * 220 MHz * Lq / LMAX.
// Memory is the behavioural model with a 5 % random stall on each channel.
module tb_genetek_workloads;
  import genetek_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned LMAX = LMAX_DEF;
  localparam int unsigned W    = W_DEF;
  localparam int unsigned BQ   = BQ_DEF;
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

  genetek_top  dut (
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

  axi_mem_model #(.WORDS(1 << 16), .STALL(5)) u_mem (
    .clk, .rst_n,
    .ar0_valid(hp0_arvalid), .ar0_ready(hp0_arready), .ar0_addr(hp0_araddr), .ar0_len(hp0_arlen),
    .r0_valid(hp0_rvalid), .r0_ready(hp0_rready), .r0_data(hp0_rdata), .r0_last(hp0_rlast),
    .ar1_valid(hp1_arvalid), .ar1_ready(hp1_arready), .ar1_addr(hp1_araddr), .ar1_len(hp1_arlen),
    .r1_valid(hp1_rvalid), .r1_ready(hp1_rready), .r1_data(hp1_rdata), .r1_last(hp1_rlast),
    .aw_valid(hp1_awvalid), .aw_ready(hp1_awready), .aw_addr(hp1_awaddr),
    .w_valid(hp1_wvalid), .w_ready(hp1_wready), .w_data(hp1_wdata),
    .b_valid(hp1_bvalid), .b_ready(hp1_bready)
  );

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


  seq_t genome;

  function automatic seq_t cut_read(input int unsigned len);
    seq_t s;
    int unsigned p = $urandom_range(genome.size() - len);
    s = new[len];
    foreach (s[i]) s[i] = genome[p + i];
    return mutate(s, $urandom_range(0, 3), LMAX);
  endfunction

  task automatic run_set(input string name, input int unsigned n, input int unsigned lmin,
                         input int unsigned lmax_r);
    seq_t rd [];
    logic [31:0] r;
    longint t0, dt;
    real ideal, load, cells, eff, gcups, gcups_th, lq_avg;
    int unsigned qb = 32'h0000_1000, sb = 32'h0002_0000;
    rd = new[n];
    ideal = 0; cells = 0; load = 0; lq_avg = 0;
    for (int i = 0; i < n; i++) begin
      rd[i] = cut_read($urandom_range(lmin, lmax_r));
      put_record(qb + i * REC_B, rd[i]);
      load += 1.0 + (rd[i].size() + 3) / 4;
      lq_avg += real'(rd[i].size()) / n;
    end
    for (int j = 0; j < n; j++) begin
      ideal += real'(n) * (rd[j].size() + 4) / W;
      foreach (rd[i]) cells += real'(rd[i].size()) * rd[j].size();
    end
    for (int k = 0; k < n * n; k++) u_mem.put_word(sb + 4 * k, 32'hDEAD_BEEF);
    axil_write(6'h10, qb);
    axil_write(6'h14, n);
    axil_write(6'h18, qb);
    axil_write(6'h1C, n);
    axil_write(6'h20, sb);
    t0 = cycles;
    axil_write(6'h00, 32'h1);
    do axil_read(6'h00, r); while (!r[1]);
    dt = cycles - t0;
    eff = (ideal + load) / real'(dt);
    gcups = cells / real'(dt) * 220.0 / 1.0e3;
    gcups_th = real'(W * LMAX) * 220.0 / 1.0e3 * lq_avg / LMAX;
    $display("%s: %0d reads, %0d cycles, compute bound %0.0f + load %0.0f, efficiency %0.3f, %0.1f GCUPS at 220 MHz (theory %0.1f)",
             name, n, dt, ideal, load, eff, gcups, gcups_th);
    checks++;
    if (eff < 0.80) begin failures++; $display("FAIL %s: efficiency %0.3f below 0.80", name, eff); end
    for (int j = 0; j < n; j++) begin
      for (int i = 0; i < n; i++) begin
        int exp = edit_distance(rd[i], rd[j]);
        logic [31:0] got = u_mem.get_word(sb + 4 * (j * n + i));
        checks++;
        if (got != 32'(exp)) begin
          failures++;
          if (failures < 10) $display("FAIL %s score q=%0d t=%0d exp=%0d got=%0d", name, i, j, exp, got);
        end
      end
    end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    genome = random_seq(4000);
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    run_set("group A 100 bp", 96, 100, 100);
    run_set("group A 200 bp", 96, 200, 200);
    run_set("group A 360 bp", 64, 360, 360);
    run_set("group B 100-160 bp", 96, 100, 160);
    run_set("group B 200-260 bp", 96, 200, 260);
    run_set("group B 300-360 bp", 64, 300, 360);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
