// tb_query_buffer: writes random entries into a small buffer (LMAX = 40,
// BQ = 24) and one entry into the default-size buffer, then reads them
// back. Checks the one-cycle read latency, that the output holds while the
// read enable is low, and that every entry keeps its own value.
module tb_query_buffer;
  import genetek_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int unsigned L = 40, B = 24;
  localparam int unsigned DW = 2 * L + $clog2(L + 1);
  logic we, re;
  logic [$clog2(B)-1:0] waddr, raddr;
  logic [DW-1:0] wdata, rdata;
  logic [DW-1:0] model [B];

  query_buffer #(.LMAX(L), .BQ(B)) dut (.*);

  localparam int unsigned DWB = 2 * LMAX_DEF + $clog2(LMAX_DEF + 1);
  logic bwe, bre;
  logic [$clog2(BQ_DEF)-1:0] bwaddr, braddr;
  logic [DWB-1:0] bwdata, brdata;
  query_buffer dut_b (.clk, .we(bwe), .waddr(bwaddr), .wdata(bwdata),
                      .re(bre), .raddr(braddr), .rdata(brdata));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; bwe = 0; bre = 0;
    @(posedge clk); #1;
    for (int i = 0; i < B; i++) begin
      we = 1; waddr = i[$clog2(B)-1:0];
      for (int k = 0; k < DW; k += 32) wdata[k +: 32] = $urandom;
      model[i] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    for (int r = 0; r < 200; r++) begin
      automatic int unsigned a = $urandom_range(B - 1);
      automatic logic [DW-1:0] prev_out = rdata;
      re = 1; raddr = a[$clog2(B)-1:0];
      #1;
      checks++;
      if (rdata != prev_out) begin failures++; $display("FAIL output changed before the clock"); end
      @(posedge clk); #1;
      re = 0;
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL read %0d", a); end
      raddr = raddr + 1'b1;
      @(posedge clk); #1;
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL output did not hold"); end
    end
    // default size: one full-width entry near the top
    bwe = 1; bwaddr = 14'(BQ_DEF - 1);
    for (int k = 0; k < DWB; k += 32) bwdata[k +: 32] = $urandom;
    @(posedge clk); #1;
    bwe = 0; bre = 1; braddr = 14'(BQ_DEF - 1);
    @(posedge clk); #1;
    checks++;
    if (brdata != bwdata) begin failures++; $display("FAIL default-size entry"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
