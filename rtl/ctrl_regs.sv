// ctrl_regs: AXI4-Lite register file through which the host starts a job
// and sees it finish.
//
// Register map (byte offsets, 32-bit registers):
//   0x00 CTRL    bit 0 START: write 1 to start a job (ignored while busy)
//                bit 1 DONE : read-only, set when a job ends, cleared by START
//                bit 2 IDLE : read-only, 1 when no job is running
//   0x10 Q_BASE  address of the first query record
//   0x14 NUM_Q   number of queries
//   0x18 T_BASE  address of the first target record
//   0x1C NUM_T   number of targets
//   0x20 S_BASE  address of the score array (num_q*num_t 32-bit words)
// The paper states only that the accelerator has control registers behind
// an AXI-Lite slave; the map, the bit layout and the handshake here are
// this design's choices. A write is taken when address and data are both
// valid, and answered with an OKAY response; a read returns data one cycle
// after its address. start pulses for one cycle. Unmapped offsets read 0.
module ctrl_regs
  import genetek_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-Lite slave
  input  logic                  s_awvalid,
  output logic                  s_awready,
  input  logic [5:0]            s_awaddr,
  input  logic                  s_wvalid,
  output logic                  s_wready,
  input  logic [31:0]           s_wdata,
  input  logic [3:0]            s_wstrb,
  output logic                  s_bvalid,
  input  logic                  s_bready,
  output logic [1:0]            s_bresp,
  input  logic                  s_arvalid,
  output logic                  s_arready,
  input  logic [5:0]            s_araddr,
  output logic                  s_rvalid,
  input  logic                  s_rready,
  output logic [31:0]           s_rdata,
  output logic [1:0]            s_rresp,
  // to and from the accelerator
  output logic                  start,
  input  logic                  busy,
  input  logic                  done,
  output logic [AXI_ADDR_W-1:0] q_base,
  output logic [31:0]           num_q,
  output logic [AXI_ADDR_W-1:0] t_base,
  output logic [31:0]           num_t,
  output logic [AXI_ADDR_W-1:0] s_base
);
  localparam logic [5:0] A_CTRL = 6'h00, A_QB = 6'h10, A_NQ = 6'h14,
                         A_TB = 6'h18, A_NT = 6'h1C, A_SB = 6'h20;

  logic done_r;

  wire wr = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr;
  assign s_wready  = wr;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  function automatic logic [31:0] merge_bytes(input logic [31:0] old, input logic [31:0] d,
                                              input logic [3:0] be);
    for (int b = 0; b < 4; b++) if (be[b]) old[8*b +: 8] = d[8*b +: 8];
    return old;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      start    <= 1'b0;
      done_r   <= 1'b0;
      q_base   <= '0;
      num_q    <= '0;
      t_base   <= '0;
      num_t    <= '0;
      s_base   <= '0;
    end else begin
      start <= 1'b0;
      if (done) done_r <= 1'b1;
      if (wr) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr & 6'h3C)
          A_CTRL: if (s_wstrb[0] && s_wdata[0] && !busy && !start) begin
            start  <= 1'b1;
            done_r <= 1'b0;
          end
          A_QB: q_base <= merge_bytes(q_base, s_wdata, s_wstrb);
          A_NQ: num_q  <= merge_bytes(num_q,  s_wdata, s_wstrb);
          A_TB: t_base <= merge_bytes(t_base, s_wdata, s_wstrb);
          A_NT: num_t  <= merge_bytes(num_t,  s_wdata, s_wstrb);
          A_SB: s_base <= merge_bytes(s_base, s_wdata, s_wstrb);
          default: ;
        endcase
      end else if (s_bready) begin
        s_bvalid <= 1'b0;
      end
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr & 6'h3C)
          A_CTRL:  s_rdata <= {29'b0, !busy && !start, done_r, 1'b0};
          A_QB:    s_rdata <= q_base;
          A_NQ:    s_rdata <= num_q;
          A_TB:    s_rdata <= t_base;
          A_NT:    s_rdata <= num_t;
          A_SB:    s_rdata <= s_base;
          default: s_rdata <= '0;
        endcase
      end else if (s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end
endmodule
