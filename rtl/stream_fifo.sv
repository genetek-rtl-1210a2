// stream_fifo: small valid/ready FIFO used between the pipeline stages.
//
// The accelerator connects its stages (Split -> Worker -> Merge) through
// FIFO streams; the paper configures them with a depth of two elements,
// which is the default here. A stage writes when in_valid && in_ready and
// reads when out_valid && out_ready. Data written in one cycle can be read
// in the next; a full FIFO accepts a write in the same cycle as a read.
// Storage is a circular buffer with a level counter. Synchronous reset,
// active low, empties the FIFO (the contents are not cleared).
module stream_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic [PW:0]      level;

  wire do_rd = out_valid && out_ready;
  wire do_wr = in_valid && in_ready;

  assign out_valid = (level != '0);
  assign in_ready  = (level != (PW+1)'(DEPTH)) || out_ready;
  assign out_data  = mem[rp];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
      level <= '0;
    end else begin
      if (do_wr) wp <= inc(wp);
      if (do_rd) rp <= inc(rp);
      level <= level + (PW+1)'(do_wr) - (PW+1)'(do_rd);
    end
  end

  // A producer must hold its data until it is accepted.
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_data));
endmodule
