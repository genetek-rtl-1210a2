// query_buffer: on-chip store for a chunk of BQ query sequences.
//
// Queries are reused against every target, so the accelerator caches a
// chunk of them on chip and reads only the targets from system memory for
// each comparison. Every entry holds a whole query, two bits per base, plus
// its length, and is written and read as one wide word so that a complete
// query is available in a single cycle (the paper maps the wide word onto
// parallel block RAMs). One write port, one read port with a registered
// output: rdata shows the entry addressed by raddr in the cycle after a
// cycle with re set, and holds its value while re is low. The contents are
// not reset. Depth and entry width follow the paper (10240 entries of a
// 360 bp query); the length field next to the query is this design's choice.
module query_buffer
  import genetek_pkg::*;
#(
  parameter int unsigned LMAX = LMAX_DEF,
  parameter int unsigned BQ   = BQ_DEF,
  localparam int unsigned LEN_W = $clog2(LMAX + 1),
  localparam int unsigned AW    = (BQ > 1) ? $clog2(BQ) : 1,
  localparam int unsigned DW    = 2 * LMAX + LEN_W
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [BQ];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
