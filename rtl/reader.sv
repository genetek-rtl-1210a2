// reader: the input stage of the accelerator. It fills the query buffer,
// streams the targets and emits one query-target pair per cycle.
//
// Operation, for one job of num_q queries and num_t targets:
//   1. Load the next chunk of up to BQ queries from memory (AXI port HP0)
//      into the query buffer.
//   2. For each target in turn: fetch it (AXI port HP1) into a target
//      register, then read the buffered queries one per cycle and send
//      {id, target length, query length, target, query} for each of them.
//   3. When all targets have met the chunk, go back to 1 with the next
//      chunk, until every query has been used.
// This is the buffering scheme of the paper: queries are read once, and
// each target is read once per chunk. The comparison index is
// id = target_index * num_q + query_index, the position of the score in
// the result array. Records sit at a stride of 4*(1+ceil(LMAX/4)) bytes
// from q_base and t_base (see seq_fetch); the record layout, the stride
// and the order of the steps within a chunk are this design's choices.
//
// Timing: after a target record has arrived, pairs leave at one per cycle
// while the downstream stage accepts them (pair_valid/pair_ready), using
// the single-cycle wide read of the query buffer. The next target is
// fetched only after the last pair of the current one has left, so each
// target costs its memory read latency once per chunk. done pulses for
// one cycle when the last pair has been accepted.
module reader
  import genetek_pkg::*;
#(
  parameter int unsigned LMAX = LMAX_DEF,
  parameter int unsigned BQ   = BQ_DEF,
  localparam int unsigned LEN_W  = $clog2(LMAX + 1),
  localparam int unsigned PAIR_W = 4 * LMAX + 2 * LEN_W + ID_W,
  localparam int unsigned QAW    = (BQ > 1) ? $clog2(BQ) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [AXI_ADDR_W-1:0] q_base,
  input  logic [31:0]           num_q,
  input  logic [AXI_ADDR_W-1:0] t_base,
  input  logic [31:0]           num_t,
  output logic                  busy,
  output logic                  done,
  output logic                  chunk_load,   // pulses when a query chunk starts loading
  // pair stream
  output logic                  pair_valid,
  input  logic                  pair_ready,
  output logic [PAIR_W-1:0]     pair_data,
  // AXI4 read port for queries (HP0)
  output logic                  q_arvalid,
  input  logic                  q_arready,
  output logic [AXI_ADDR_W-1:0] q_araddr,
  output logic [7:0]            q_arlen,
  output logic [2:0]            q_arsize,
  output logic [1:0]            q_arburst,
  input  logic                  q_rvalid,
  output logic                  q_rready,
  input  logic [31:0]           q_rdata,
  input  logic [1:0]            q_rresp,
  input  logic                  q_rlast,
  // AXI4 read port for targets (HP1)
  output logic                  t_arvalid,
  input  logic                  t_arready,
  output logic [AXI_ADDR_W-1:0] t_araddr,
  output logic [7:0]            t_arlen,
  output logic [2:0]            t_arsize,
  output logic [1:0]            t_arburst,
  input  logic                  t_rvalid,
  output logic                  t_rready,
  input  logic [31:0]           t_rdata,
  input  logic [1:0]            t_rresp,
  input  logic                  t_rlast
);
  localparam logic [AXI_ADDR_W-1:0] STRIDE_B = AXI_ADDR_W'(4 * record_words(LMAX));

  typedef enum logic [2:0] {S_IDLE, S_QREQ, S_QWAIT, S_TREQ, S_TWAIT, S_PAIRS, S_DONE} state_e;

  state_e                state;
  logic [31:0]           chunk_base, nq_chunk, q_i, t_i, rd_q;
  logic [AXI_ADDR_W-1:0] q_addr, t_addr;
  logic [ID_W-1:0]       id_base, s1_id;
  logic                  s1_valid;

  // query fetch -> query buffer
  logic                  qf_start, qf_busy, qf_done;
  logic [2*LMAX-1:0]     qf_seq;
  logic [LEN_W-1:0]      qf_len;
  // target fetch -> target register (held by seq_fetch until the next start)
  logic                  tf_start, tf_busy, tf_done;
  logic [2*LMAX-1:0]     tf_seq;
  logic [LEN_W-1:0]      tf_len;
  // query buffer read side
  logic                  qb_re;
  logic [QAW-1:0]        qb_raddr;
  logic [2*LMAX+LEN_W-1:0] qb_rdata;

  seq_fetch #(.LMAX(LMAX)) u_qfetch (
    .clk, .rst_n, .start(qf_start), .addr(q_addr), .busy(qf_busy), .done(qf_done),
    .seq(qf_seq), .len(qf_len),
    .m_arvalid(q_arvalid), .m_arready(q_arready), .m_araddr(q_araddr), .m_arlen(q_arlen),
    .m_arsize(q_arsize), .m_arburst(q_arburst), .m_rvalid(q_rvalid), .m_rready(q_rready),
    .m_rdata(q_rdata), .m_rresp(q_rresp), .m_rlast(q_rlast)
  );

  seq_fetch #(.LMAX(LMAX)) u_tfetch (
    .clk, .rst_n, .start(tf_start), .addr(t_addr), .busy(tf_busy), .done(tf_done),
    .seq(tf_seq), .len(tf_len),
    .m_arvalid(t_arvalid), .m_arready(t_arready), .m_araddr(t_araddr), .m_arlen(t_arlen),
    .m_arsize(t_arsize), .m_arburst(t_arburst), .m_rvalid(t_rvalid), .m_rready(t_rready),
    .m_rdata(t_rdata), .m_rresp(t_rresp), .m_rlast(t_rlast)
  );

  query_buffer #(.LMAX(LMAX), .BQ(BQ)) u_qbuf (
    .clk,
    .we(qf_done && state == S_QWAIT), .waddr(QAW'(q_i)), .wdata({qf_len, qf_seq}),
    .re(qb_re), .raddr(qb_raddr), .rdata(qb_rdata)
  );

  assign qf_start   = (state == S_QREQ);
  assign tf_start   = (state == S_TREQ);
  assign busy       = (state != S_IDLE);
  assign done       = (state == S_DONE);
  assign chunk_load = (state == S_QREQ) && (q_i == '0);

  // pair emission: the query buffer output register is the pipeline stage
  wire adv      = !s1_valid || pair_ready;
  wire more     = (rd_q < nq_chunk);
  assign qb_re    = (state == S_PAIRS) && adv && more;
  assign qb_raddr = QAW'(rd_q);

  assign pair_valid = (state == S_PAIRS) && s1_valid;
  assign pair_data  = {s1_id, tf_len, qb_rdata[2*LMAX +: LEN_W], tf_seq, qb_rdata[2*LMAX-1:0]};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      s1_valid <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          chunk_base <= '0;
          q_addr     <= q_base;
          q_i        <= '0;
          nq_chunk   <= (num_q > 32'(BQ)) ? 32'(BQ) : num_q;
          state      <= (num_q == '0 || num_t == '0) ? S_DONE : S_QREQ;
        end
        S_QREQ: state <= S_QWAIT;
        S_QWAIT: if (qf_done) begin
          q_addr <= q_addr + STRIDE_B;
          q_i    <= q_i + 1'b1;
          if (q_i + 1'b1 == nq_chunk) begin
            t_i     <= '0;
            t_addr  <= t_base;
            id_base <= chunk_base;
            state   <= S_TREQ;
          end else begin
            state <= S_QREQ;
          end
        end
        S_TREQ: state <= S_TWAIT;
        S_TWAIT: if (tf_done) begin
          rd_q     <= '0;
          s1_valid <= 1'b0;
          state    <= S_PAIRS;
        end
        S_PAIRS: if (adv) begin
          if (more) begin
            s1_valid <= 1'b1;
            s1_id    <= id_base + ID_W'(rd_q);
            rd_q     <= rd_q + 1'b1;
          end else begin
            // the last pair of this target has been accepted
            s1_valid <= 1'b0;
            t_i      <= t_i + 1'b1;
            t_addr   <= t_addr + STRIDE_B;
            id_base  <= id_base + num_q;
            if (t_i + 1'b1 < num_t) begin
              state <= S_TREQ;
            end else if (chunk_base + nq_chunk < num_q) begin
              chunk_base <= chunk_base + nq_chunk;
              q_i        <= '0;
              nq_chunk   <= (num_q - chunk_base - nq_chunk > 32'(BQ)) ? 32'(BQ)
                                                                       : num_q - chunk_base - nq_chunk;
              state      <= S_QREQ;
            end else begin
              state <= S_DONE;
            end
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_pair_stable: assert property (@(posedge clk) disable iff (!rst_n)
    pair_valid && !pair_ready |=> pair_valid && $stable(pair_data));
endmodule
