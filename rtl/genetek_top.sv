// genetek_top: the GeneTEK accelerator instance, an all-against-all
// edit-distance engine for DNA reads.
//
// Data flow (one job = num_q queries against num_t targets):
//   ctrl_regs --start--> reader --pairs--> split --> W x (FIFO -> myers_worker
//   -> FIFO) --> merge --> writer --> scores in memory
// The reader caches up to BQ queries on chip (AXI port HP0) and streams the
// targets (AXI port HP1), emitting one query-target pair per cycle. The
// split stage deals the pairs to W independent workers round-robin; each
// worker runs Myers's bit-vector algorithm over a whole query at once, one
// target base per cycle. The merge stage gathers the scores and the writer
// stores each at score_base + 4*(target_index*num_q + query_index) over
// HP1. The job ends (DONE in the control register) when the reader has
// sent every pair and the writer has seen a response for every score.
//
// Follows the paper: the stage structure, the query buffer of BQ entries,
// W workers behind FIFOs of depth two, pair and result widths
// (4*LMAX + 2*LEN_W + 32 and LEN_W + 32 bits), 32-bit AXI ports with
// bursts of 16, the AXI-Lite control slave and the defaults of the 360 bp
// instance (LMAX = 360, W = 42, BQ = 10240). This design's own choices:
// the record layout in memory, the register map, single-beat score writes
// and the completion rule. The clocking wizard, processor, DDR controller
// and memory are outside this module: its AXI ports face the processor's
// HP ports and its AXI-Lite port the processor's master port. One clock,
// synchronous active-low reset.
module genetek_top
  import genetek_pkg::*;
#(
  parameter int unsigned LMAX = LMAX_DEF,
  parameter int unsigned W    = W_DEF,
  parameter int unsigned BQ   = BQ_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-Lite control slave
  input  logic                  s_axil_awvalid,
  output logic                  s_axil_awready,
  input  logic [5:0]            s_axil_awaddr,
  input  logic                  s_axil_wvalid,
  output logic                  s_axil_wready,
  input  logic [31:0]           s_axil_wdata,
  input  logic [3:0]            s_axil_wstrb,
  output logic                  s_axil_bvalid,
  input  logic                  s_axil_bready,
  output logic [1:0]            s_axil_bresp,
  input  logic                  s_axil_arvalid,
  output logic                  s_axil_arready,
  input  logic [5:0]            s_axil_araddr,
  output logic                  s_axil_rvalid,
  input  logic                  s_axil_rready,
  output logic [31:0]           s_axil_rdata,
  output logic [1:0]            s_axil_rresp,
  // AXI4 master HP0: query reads
  output logic                  hp0_arvalid,
  input  logic                  hp0_arready,
  output logic [AXI_ADDR_W-1:0] hp0_araddr,
  output logic [7:0]            hp0_arlen,
  output logic [2:0]            hp0_arsize,
  output logic [1:0]            hp0_arburst,
  input  logic                  hp0_rvalid,
  output logic                  hp0_rready,
  input  logic [31:0]           hp0_rdata,
  input  logic [1:0]            hp0_rresp,
  input  logic                  hp0_rlast,
  // AXI4 master HP1: target reads and score writes
  output logic                  hp1_arvalid,
  input  logic                  hp1_arready,
  output logic [AXI_ADDR_W-1:0] hp1_araddr,
  output logic [7:0]            hp1_arlen,
  output logic [2:0]            hp1_arsize,
  output logic [1:0]            hp1_arburst,
  input  logic                  hp1_rvalid,
  output logic                  hp1_rready,
  input  logic [31:0]           hp1_rdata,
  input  logic [1:0]            hp1_rresp,
  input  logic                  hp1_rlast,
  output logic                  hp1_awvalid,
  input  logic                  hp1_awready,
  output logic [AXI_ADDR_W-1:0] hp1_awaddr,
  output logic [7:0]            hp1_awlen,
  output logic [2:0]            hp1_awsize,
  output logic [1:0]            hp1_awburst,
  output logic                  hp1_wvalid,
  input  logic                  hp1_wready,
  output logic [31:0]           hp1_wdata,
  output logic [3:0]            hp1_wstrb,
  output logic                  hp1_wlast,
  input  logic                  hp1_bvalid,
  output logic                  hp1_bready,
  input  logic [1:0]            hp1_bresp
);
  localparam int unsigned LEN_W  = $clog2(LMAX + 1);
  localparam int unsigned PAIR_W = 4 * LMAX + 2 * LEN_W + ID_W;
  localparam int unsigned RES_W  = LEN_W + ID_W;

  // ---- control ----
  logic                  start, job_busy, job_done;
  logic [AXI_ADDR_W-1:0] q_base, t_base, s_base;
  logic [31:0]           num_q, num_t, total, bcount;
  logic                  rd_busy, rd_done, rd_seen, chunk_load;

  ctrl_regs u_ctrl (
    .clk, .rst_n,
    .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready), .s_awaddr(s_axil_awaddr),
    .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready), .s_wdata(s_axil_wdata),
    .s_wstrb(s_axil_wstrb), .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready),
    .s_bresp(s_axil_bresp), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_araddr(s_axil_araddr), .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp),
    .start, .busy(job_busy), .done(job_done),
    .q_base, .num_q, .t_base, .num_t, .s_base
  );

  // The job ends when every pair has been sent and every score written.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      job_busy <= 1'b0;
      rd_seen  <= 1'b0;
    end else if (start) begin
      job_busy <= 1'b1;
      rd_seen  <= 1'b0;
      total    <= num_q * num_t;
    end else if (job_busy) begin
      if (rd_done) rd_seen <= 1'b1;
      if (job_done) job_busy <= 1'b0;
    end
  end
  assign job_done = job_busy && rd_seen && (bcount == total);

  // ---- reader ----
  logic              pair_valid, pair_ready;
  logic [PAIR_W-1:0] pair_data;

  reader #(.LMAX(LMAX), .BQ(BQ)) u_reader (
    .clk, .rst_n, .start, .q_base, .num_q, .t_base, .num_t,
    .busy(rd_busy), .done(rd_done), .chunk_load,
    .pair_valid, .pair_ready, .pair_data,
    .q_arvalid(hp0_arvalid), .q_arready(hp0_arready), .q_araddr(hp0_araddr),
    .q_arlen(hp0_arlen), .q_arsize(hp0_arsize), .q_arburst(hp0_arburst),
    .q_rvalid(hp0_rvalid), .q_rready(hp0_rready), .q_rdata(hp0_rdata),
    .q_rresp(hp0_rresp), .q_rlast(hp0_rlast),
    .t_arvalid(hp1_arvalid), .t_arready(hp1_arready), .t_araddr(hp1_araddr),
    .t_arlen(hp1_arlen), .t_arsize(hp1_arsize), .t_arburst(hp1_arburst),
    .t_rvalid(hp1_rvalid), .t_rready(hp1_rready), .t_rdata(hp1_rdata),
    .t_rresp(hp1_rresp), .t_rlast(hp1_rlast)
  );

  // ---- split, workers, merge ----
  logic [W-1:0]      sp_valid, sp_ready;
  logic [PAIR_W-1:0] sp_data;
  logic [W-1:0]      wi_valid, wi_ready, wo_valid, wo_ready, mi_valid, mi_ready;
  logic [PAIR_W-1:0] wi_data [W];
  logic [RES_W-1:0]  wo_data [W];
  logic [RES_W-1:0]  mi_data [W];

  split #(.W(W), .WIDTH(PAIR_W)) u_split (
    .clk, .rst_n,
    .in_valid(pair_valid), .in_ready(pair_ready), .in_data(pair_data),
    .out_valid(sp_valid), .out_ready(sp_ready), .out_data(sp_data)
  );

  for (genvar g = 0; g < W; g++) begin : g_worker
    stream_fifo #(.WIDTH(PAIR_W), .DEPTH(2)) u_in_fifo (
      .clk, .rst_n,
      .in_valid(sp_valid[g]), .in_ready(sp_ready[g]), .in_data(sp_data),
      .out_valid(wi_valid[g]), .out_ready(wi_ready[g]), .out_data(wi_data[g])
    );
    myers_worker #(.LMAX(LMAX)) u_worker (
      .clk, .rst_n,
      .in_valid(wi_valid[g]), .in_ready(wi_ready[g]), .in_pair(wi_data[g]),
      .out_valid(wo_valid[g]), .out_ready(wo_ready[g]), .out_res(wo_data[g])
    );
    stream_fifo #(.WIDTH(RES_W), .DEPTH(2)) u_out_fifo (
      .clk, .rst_n,
      .in_valid(wo_valid[g]), .in_ready(wo_ready[g]), .in_data(wo_data[g]),
      .out_valid(mi_valid[g]), .out_ready(mi_ready[g]), .out_data(mi_data[g])
    );
  end

  logic             res_valid, res_ready;
  logic [RES_W-1:0] res_data;

  merge #(.W(W), .WIDTH(RES_W)) u_merge (
    .clk, .rst_n,
    .in_valid(mi_valid), .in_ready(mi_ready), .in_data(mi_data),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_data)
  );

  // ---- writer ----
  writer #(.SCORE_W(LEN_W)) u_writer (
    .clk, .rst_n, .clear(start), .score_base(s_base), .bcount,
    .in_valid(res_valid), .in_ready(res_ready), .in_res(res_data),
    .m_awvalid(hp1_awvalid), .m_awready(hp1_awready), .m_awaddr(hp1_awaddr),
    .m_awlen(hp1_awlen), .m_awsize(hp1_awsize), .m_awburst(hp1_awburst),
    .m_wvalid(hp1_wvalid), .m_wready(hp1_wready), .m_wdata(hp1_wdata),
    .m_wstrb(hp1_wstrb), .m_wlast(hp1_wlast),
    .m_bvalid(hp1_bvalid), .m_bready(hp1_bready), .m_bresp(hp1_bresp)
  );
endmodule
