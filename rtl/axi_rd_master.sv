// axi_rd_master: AXI4 read master that turns a request for a run of
// consecutive 32-bit words into INCR bursts and returns the words as a
// valid/ready stream.
//
// A request (req_addr, req_words) is taken when req_valid && req_ready;
// req_ready stays low until the last word of the request has been handed
// on. Bursts carry up to AXI_MAX_BURST (16) beats, never cross a 4 KiB
// boundary, and up to RD_OUTSTANDING (16) of them may be in flight, the
// settings the paper reports for its AXI ports. The R channel is passed
// straight through: rd_valid = rvalid, rready = rd_ready, and rd_last marks
// the final word of the request. Read responses are assumed OKAY (rresp is
// not checked) and all bursts use ID 0, so data return in order.
// req_addr must be 4-byte aligned. A request for 0 words is dropped.
module axi_rd_master
  import genetek_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // request
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic [AXI_ADDR_W-1:0] req_addr,
  input  logic [15:0]           req_words,
  // word stream
  output logic                  rd_valid,
  input  logic                  rd_ready,
  output logic [31:0]           rd_data,
  output logic                  rd_last,
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
  localparam int unsigned OW = $clog2(RD_OUTSTANDING + 1);

  logic                  active;
  logic [AXI_ADDR_W-1:0] ar_addr;
  logic [15:0]           ar_rem;   // words not yet requested
  logic [15:0]           rx_rem;   // words not yet received
  logic [OW-1:0]         outst;    // bursts in flight
  logic [10:0]           to_4k;    // beats left before the next 4 KiB boundary
  logic [15:0]           blen;

  always_comb begin
    to_4k = 11'((13'h1000 - {1'b0, ar_addr[11:0]}) >> 2);
    blen  = 16'(AXI_MAX_BURST);
    if (ar_rem < blen) blen = ar_rem;
    if (16'(to_4k) < blen) blen = 16'(to_4k);
  end

  wire ar_hs = m_arvalid && m_arready;
  wire r_hs  = m_rvalid && m_rready;

  assign req_ready = !active;
  assign m_arvalid = active && (ar_rem != '0) && (outst < OW'(RD_OUTSTANDING));
  assign m_araddr  = ar_addr;
  assign m_arlen   = 8'(blen - 1'b1);
  assign m_arsize  = 3'd2;    // 4 bytes per beat
  assign m_arburst = 2'b01;   // INCR
  assign rd_valid  = active && m_rvalid;
  assign m_rready  = active && rd_ready;
  assign rd_data   = m_rdata;
  assign rd_last   = (rx_rem == 16'd1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      ar_rem <= '0;
      rx_rem <= '0;
      outst  <= '0;
    end else begin
      if (req_valid && req_ready && req_words != '0) begin
        active  <= 1'b1;
        ar_addr <= req_addr;
        ar_rem  <= req_words;
        rx_rem  <= req_words;
      end
      if (ar_hs) begin
        ar_addr <= ar_addr + AXI_ADDR_W'({blen, 2'b00});
        ar_rem  <= ar_rem - blen;
      end
      outst <= outst + OW'(ar_hs) - OW'(r_hs && m_rlast);
      if (r_hs) begin
        rx_rem <= rx_rem - 1'b1;
        if (rx_rem == 16'd1) active <= 1'b0;
      end
    end
  end

  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr) && $stable(m_arlen));
  a_no_4k_cross: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid |-> ({1'b0, m_araddr[11:0]} + {3'b0, m_arlen, 2'b00}) < 13'h1000);
endmodule
