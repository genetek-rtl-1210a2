// tb_merge: W = 5 producer queues with random traffic and random
// out_ready. Checks against a model of the rotating pointer that the
// result forwarded is the head of the first non-empty queue at or after the
// pointer, that only that queue sees in_ready, and that every item arrives
// exactly once.
module tb_merge;
  localparam int unsigned W = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [W-1:0] in_valid, in_ready;
  logic [15:0] in_data [W];
  logic out_valid, out_ready;
  logic [15:0] out_data;
  logic [15:0] q [W][$];
  int ptr = 0, sent = 0, received = 0;

  merge #(.W(W), .WIDTH(16)) dut (.*);

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = '0; out_ready = 0;
    for (int k = 0; k < int'(W); k++) in_data[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      automatic int exp_sel = -1;
      // producers add items while c < 3500
      for (int k = 0; k < int'(W); k++) begin
        if (c < 3500 && $urandom_range(99) < 15) begin q[k].push_back(16'(sent)); sent++; end
        in_valid[k] = (q[k].size() > 0);
        in_data[k]  = (q[k].size() > 0) ? q[k][0] : 16'hxxxx;
      end
      out_ready = ($urandom_range(99) < 70);
      for (int k = 0; k < int'(W); k++) begin
        automatic int j = (ptr + k) % W;
        if (exp_sel < 0 && in_valid[j]) exp_sel = j;
      end
      #1;
      checks++;
      if (out_valid != (exp_sel >= 0)) begin failures++; $display("FAIL out_valid"); end
      else if (exp_sel >= 0) begin
        if (out_data != q[exp_sel][0]) begin failures++; $display("FAIL data from %0d", exp_sel); end
        else if (in_ready != (out_ready ? (W'(1) << exp_sel) : '0)) begin failures++; $display("FAIL in_ready %b", in_ready); end
      end
      @(posedge clk); #1;
      if (exp_sel >= 0 && out_ready) begin
        void'(q[exp_sel].pop_front());
        received++;
        ptr = (exp_sel + 1) % W;
      end
    end
    checks++;
    if (received != sent) begin failures++; $display("FAIL received %0d of %0d", received, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
