// tb_split: W = 5 outputs with random out_ready and a random input stream.
// Checks against a model of the rotating pointer: the chosen output is the
// first ready one at or after the pointer, at most one out_valid, only on a
// ready output, payload passed unchanged, in_ready high exactly when some
// output is ready. With all outputs ready the outputs are served 0,1,2,...
module tb_split;
  localparam int unsigned W = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready;
  logic [11:0] in_data, out_data;
  logic [W-1:0] out_valid, out_ready;
  int ptr = 0;

  split #(.W(W), .WIDTH(12)) dut (.*);

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = '0; in_data = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      automatic int exp_sel = -1;
      automatic logic [W-1:0] exp_v = '0;
      in_valid  = ($urandom_range(99) < 80);
      in_data   = 12'($urandom);
      out_ready = (c < 200) ? '1 : W'($urandom);
      for (int k = 0; k < int'(W); k++) begin
        automatic int j = (ptr + k) % W;
        if (exp_sel < 0 && out_ready[j]) exp_sel = j;
      end
      if (exp_sel >= 0 && in_valid) exp_v[exp_sel] = 1'b1;
      #1;
      checks++;
      if (out_valid != exp_v || in_ready != (out_ready != '0) || out_data != in_data) begin
        failures++; $display("FAIL c=%0d ptr=%0d ready=%b valid=%b exp=%b", c, ptr, out_ready, out_valid, exp_v);
      end
      @(posedge clk); #1;
      if (in_valid && exp_sel >= 0) ptr = (exp_sel + 1) % W;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
