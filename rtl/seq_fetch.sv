// seq_fetch: reads one sequence record from system memory over an AXI read
// port and packs it into a wide 2-bit-per-base word.
//
// The host leaves sequences in memory as ASCII text. A record here is one
// 32-bit length word followed by the characters, four per word, first
// character in the low byte (the record layout is this design's choice;
// the paper says only that sequences sit in memory as ASCII). On start the
// block reads the length word, then ceil(len/4) character words, and
// translates every word with nt_encoder, so that base k lands in
// seq[2k+1:2k]. Lengths above LMAX are cut to LMAX; bases beyond len are
// zero. done pulses for one cycle when seq and len are valid; they then hold
// until the next start. start is ignored while busy is high.
module seq_fetch
  import genetek_pkg::*;
#(
  parameter int unsigned LMAX = LMAX_DEF,
  localparam int unsigned LEN_W = $clog2(LMAX + 1),
  localparam int unsigned NWORD = (LMAX + 3) / 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [AXI_ADDR_W-1:0] addr,
  output logic                  busy,
  output logic                  done,
  output logic [2*LMAX-1:0]     seq,
  output logic [LEN_W-1:0]      len,
  // AXI4 read channels
  output logic                  m_arvalid,
  input  logic                  m_arready,
  output logic [AXI_ADDR_W-1:0] m_araddr,
  output logic [7:0]            m_arlen,
  output logic [2:0]            m_arsize,
  output logic [1:0]            m_arburst,
  input  logic                  m_rvalid,
  output logic                  m_rready,
  input  logic [31:0]           m_rdata,
  input  logic [1:0]            m_rresp,
  input  logic                  m_rlast
);
  typedef enum logic [2:0] {S_IDLE, S_REQLEN, S_LEN, S_REQDAT, S_DAT, S_DONE} state_e;

  state_e                state;
  logic [AXI_ADDR_W-1:0] base;
  logic [8*NWORD-1:0]    buf_r;
  logic [15:0]           widx;
  logic                  req_valid, req_ready;
  logic [AXI_ADDR_W-1:0] req_addr;
  logic [15:0]           req_words;
  logic                  rd_valid, rd_ready, rd_last;
  logic [31:0]           rd_data;
  logic [7:0]            codes;

  axi_rd_master u_rd (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_addr, .req_words,
    .rd_valid, .rd_ready, .rd_data, .rd_last,
    .m_arvalid, .m_arready, .m_araddr, .m_arlen, .m_arsize, .m_arburst,
    .m_rvalid, .m_rready, .m_rdata, .m_rresp, .m_rlast
  );

  nt_encoder u_enc (.word(rd_data), .codes);

  assign req_valid = (state == S_REQLEN) || (state == S_REQDAT);
  assign req_addr  = (state == S_REQLEN) ? base : base + AXI_ADDR_W'(4);
  assign req_words = (state == S_REQLEN) ? 16'd1 : 16'((32'(len) + 3) >> 2);
  assign rd_ready  = (state == S_LEN) || (state == S_DAT);
  assign busy      = (state != S_IDLE);
  assign done      = (state == S_DONE);
  assign seq       = buf_r[2*LMAX-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          base  <= addr;
          buf_r <= '0;
          widx  <= '0;
          state <= S_REQLEN;
        end
        S_REQLEN: if (req_ready) state <= S_LEN;
        S_LEN: if (rd_valid) begin
          len   <= (rd_data > 32'(LMAX)) ? LEN_W'(LMAX) : LEN_W'(rd_data);
          state <= (rd_data == '0) ? S_DONE : S_REQDAT;
        end
        S_REQDAT: if (req_ready) state <= S_DAT;
        S_DAT: if (rd_valid) begin
          for (int k = 0; k < 4; k++) begin
            buf_r[8*widx + 2*k +: 2] <= (32'(widx) * 4 + k < 32'(len)) ? codes[2*k +: 2] : 2'b00;
          end
          widx <= widx + 1'b1;
          if (rd_last) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
