// writer: stores every alignment score in system memory at the position
// given by its comparison index.
//
// A result {id, score} is taken from the merge stage and written as one
// 32-bit word (score zero-extended) to score_base + 4*id with a
// single-beat AXI4 write. Because each result carries its index, results
// may arrive in any order. Up to WR_OUTSTANDING (32) writes may wait for
// their response, the figure the paper reports for its write port. The
// address and data channels are driven together and may be accepted in
// either order; a new result is taken in the cycle in which the last of
// the two is accepted, so a ready port stores one score per cycle.
// bcount counts write responses since the last clear; the top uses it to
// know when every score is in memory. Write responses are assumed OKAY.
// Single-beat writes (no bursts of consecutive scores) are this design's
// choice.
module writer
  import genetek_pkg::*;
#(
  parameter int unsigned SCORE_W = 9
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic [AXI_ADDR_W-1:0]   score_base,
  output logic [31:0]             bcount,
  // results
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [ID_W+SCORE_W-1:0] in_res,
  // AXI4 write channels
  output logic                    m_awvalid,
  input  logic                    m_awready,
  output logic [AXI_ADDR_W-1:0]   m_awaddr,
  output logic [7:0]              m_awlen,
  output logic [2:0]              m_awsize,
  output logic [1:0]              m_awburst,
  output logic                    m_wvalid,
  input  logic                    m_wready,
  output logic [31:0]             m_wdata,
  output logic [3:0]              m_wstrb,
  output logic                    m_wlast,
  input  logic                    m_bvalid,
  output logic                    m_bready,
  input  logic [1:0]              m_bresp
);
  localparam int unsigned OW = $clog2(WR_OUTSTANDING + 1);

  logic [ID_W-1:0]    in_id;
  logic [SCORE_W-1:0] in_score;
  logic [OW-1:0]      outst;

  assign {in_id, in_score} = in_res;

  wire take = in_valid && in_ready;
  wire b_hs = m_bvalid && m_bready;

  assign in_ready  = (!m_awvalid || m_awready) && (!m_wvalid || m_wready) &&
                     (outst < OW'(WR_OUTSTANDING));
  assign m_awlen   = 8'd0;
  assign m_awsize  = 3'd2;
  assign m_awburst = 2'b01;
  assign m_wstrb   = 4'hF;
  assign m_wlast   = 1'b1;
  assign m_bready  = 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_awvalid <= 1'b0;
      m_wvalid  <= 1'b0;
      outst     <= '0;
      bcount    <= '0;
    end else begin
      if (take) begin
        m_awvalid <= 1'b1;
        m_wvalid  <= 1'b1;
        m_awaddr  <= score_base + AXI_ADDR_W'({in_id, 2'b00});
        m_wdata   <= 32'(in_score);
      end else begin
        if (m_awready) m_awvalid <= 1'b0;
        if (m_wready)  m_wvalid  <= 1'b0;
      end
      outst <= outst + OW'(take) - OW'(b_hs);
      if (clear)     bcount <= '0;
      else if (b_hs) bcount <= bcount + 1'b1;
    end
  end

  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata));
endmodule
