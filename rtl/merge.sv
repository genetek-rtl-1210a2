// merge: collects the results of W workers into one stream.
//
// Each cycle it forwards one result from the worker queues, choosing in
// round-robin order: the search starts at the queue after the last one
// served and takes the first that holds a result. The chosen queue sees
// in_ready = out_ready, the others wait. One result per cycle, no added
// latency. Results leave in completion order, not in comparison order;
// each carries its own index so the writer can place it. The paper names
// the Merge stage; the round-robin choice is this design's.
module merge #(
  parameter int unsigned W     = genetek_pkg::W_DEF,
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [W-1:0]     in_valid,
  output logic [W-1:0]     in_ready,
  input  logic [WIDTH-1:0] in_data [W],
  output logic             out_valid,
  input  logic             out_ready,
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
      if (!found && in_valid[j]) begin
        sel   = IW'(j);
        found = 1'b1;
      end
    end
  end

  assign out_valid = found;
  assign out_data  = in_data[sel];
  always_comb begin
    in_ready = '0;
    in_ready[sel] = out_ready && found;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) ptr <= '0;
    else if (found && out_ready) ptr <= (sel == IW'(W - 1)) ? '0 : sel + 1'b1;
  end
endmodule
