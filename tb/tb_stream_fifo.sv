// tb_stream_fifo: random pushes and pops on a depth-2 FIFO, compared with a
// queue model: data order, out_valid exactly when the model holds data,
// in_ready low exactly when the FIFO is full and not being read, and a
// write accepted into a full FIFO in the same cycle as a read.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [15:0] model [$];
  int full_wr = 0;

  stream_fifo #(.WIDTH(16), .DEPTH(2)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      // drive (hold data while a push is pending)
      if (!in_valid || in_ready) begin
        in_valid = ($urandom_range(99) < 60);
        in_data  = 16'($urandom);
      end
      out_ready = ($urandom_range(99) < 50);
      #1;
      checks++;
      if (out_valid != (model.size() > 0)) begin failures++; $display("FAIL out_valid"); end
      if (in_ready != (model.size() < 2 || out_ready)) begin failures++; $display("FAIL in_ready"); end
      if (out_valid && out_data != model[0]) begin failures++; $display("FAIL data %h exp %h", out_data, model[0]); end
      @(posedge clk);
      if (in_valid && in_ready && model.size() == 2) full_wr++;
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      #1;
    end
    checks++;
    if (full_wr == 0) begin failures++; $display("FAIL never wrote while full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
