// tb_ctrl_regs: AXI4-Lite accesses to the register block. Checks write
// and read-back of the five argument registers (full and byte-strobed
// writes), a one-cycle start pulse on writing CTRL bit 0 while idle, no
// pulse while busy, the DONE bit set by done and cleared by the next start,
// the IDLE bit, and zero from an unmapped offset.
module tb_ctrl_regs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [5:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  logic start, busy, done;
  logic [31:0] q_base, num_q, t_base, num_t, s_base;
  int starts = 0;

  ctrl_regs dut (.*);

  always @(negedge clk) if (start) starts++;

  task automatic wr(input logic [5:0] a, input logic [31:0] d, input logic [3:0] be);
    s_awaddr = a; s_wdata = d; s_wstrb = be; s_awvalid = 1; s_wvalid = 1;
    #1; while (!(s_awready && s_wready)) begin @(posedge clk); #1; end
    @(posedge clk);
    #1 s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) begin @(posedge clk); #1; end
    checks++;
    if (s_bresp != 2'b00) begin failures++; $display("FAIL bresp"); end
    @(posedge clk); #1;
  endtask

  task automatic rd(input logic [5:0] a, output logic [31:0] d);
    s_araddr = a; s_arvalid = 1;
    #1; while (!s_arready) begin @(posedge clk); #1; end
    @(posedge clk);
    #1 s_arvalid = 0;
    while (!s_rvalid) begin @(posedge clk); #1; end
    d = s_rdata;
    @(posedge clk); #1;
  endtask

  task automatic expect_reg(input logic [5:0] a, input logic [31:0] e);
    logic [31:0] d;
    rd(a, d);
    checks++;
    if (d != e) begin failures++; $display("FAIL reg %h = %h, expected %h", a, d, e); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v [5];
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0; busy = 0; done = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    expect_reg(6'h00, 32'h4);                    // idle, not done
    for (int i = 0; i < 5; i++) begin
      v[i] = $urandom;
      wr(6'h10 + 6'(4 * i), v[i], 4'hF);
    end
    for (int i = 0; i < 5; i++) expect_reg(6'h10 + 6'(4 * i), v[i]);
    checks++;
    if (q_base != v[0] || num_q != v[1] || t_base != v[2] || num_t != v[3] || s_base != v[4]) begin
      failures++; $display("FAIL register outputs");
    end
    wr(6'h14, 32'hAABB_CCDD, 4'b0101);           // byte strobes
    expect_reg(6'h14, {v[1][31:24], 8'hBB, v[1][15:8], 8'hDD});
    expect_reg(6'h3C, 32'h0);
    // start while idle
    wr(6'h00, 32'h1, 4'hF);
    checks++;
    if (starts != 1) begin failures++; $display("FAIL start pulses %0d", starts); end
    busy = 1;
    expect_reg(6'h00, 32'h0);                    // busy: not idle, not done
    wr(6'h00, 32'h1, 4'hF);                      // ignored while busy
    checks++;
    if (starts != 1) begin failures++; $display("FAIL start while busy"); end
    done = 1; @(posedge clk); #1 done = 0; busy = 0;
    expect_reg(6'h00, 32'h6);                    // idle and done
    expect_reg(6'h00, 32'h6);                    // done stays set
    wr(6'h00, 32'h1, 4'hF);
    expect_reg(6'h00, 32'h4);                    // cleared by start
    checks++;
    if (starts != 2) begin failures++; $display("FAIL second start"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
