// split: hands the single stream of query-target pairs to W worker queues
// in round-robin order.
//
// The payload is broadcast to every output; only the chosen output sees
// out_valid. The choice starts at the output after the last one served and
// takes the first one, in rotating order, whose queue has room
// (out_ready). A busy worker is therefore skipped rather than waited for.
// The input stalls (in_ready low) only when every queue is full. One pair
// per cycle, no added latency (combinational choice). The rotating order
// follows the paper ("round-robin"); skipping full queues is this design's
// choice.
module split #(
  parameter int unsigned W     = genetek_pkg::W_DEF,
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic [W-1:0]     out_valid,
  input  logic [W-1:0]     out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned IW = (W > 1) ? $clog2(W) : 1;

  logic [IW-1:0] ptr, sel;
  logic          found;

  always_comb begin
    sel   = ptr;
    found = 1'b0;
    for (int k = 0; k < W; k++) begin
      automatic int unsigned j = (int'(ptr) + k) % W;
      if (!found && out_ready[j]) begin
        sel   = IW'(j);
        found = 1'b1;
      end
    end
  end

  assign in_ready = found;
  assign out_data = in_data;
  always_comb begin
    out_valid = '0;
    out_valid[sel] = in_valid && found;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) ptr <= '0;
    else if (in_valid && found) ptr <= (sel == IW'(W - 1)) ? '0 : sel + 1'b1;
  end
endmodule
