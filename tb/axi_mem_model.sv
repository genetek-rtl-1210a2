// axi_mem_model: behavioural model of system memory behind AXI4 ports, for
// simulation only (not synthesizable; stands in for the DDR controller and
// DRAM). Two read ports and one write port share one array of 32-bit words
// starting at address 0. Every ready/valid the model drives is withheld at
// random (STALL percent of cycles) to exercise back-pressure. Reads return
// INCR bursts in order; writes take single beats and answer OKAY. The
// testbench fills and inspects the array with put_word/get_word.
module axi_mem_model #(
  parameter int unsigned WORDS = 65536,
  parameter int unsigned STALL = 30
) (
  input  logic        clk,
  input  logic        rst_n,
  // read port 0
  input  logic        ar0_valid,
  output logic        ar0_ready,
  input  logic [31:0] ar0_addr,
  input  logic [7:0]  ar0_len,
  output logic        r0_valid,
  input  logic        r0_ready,
  output logic [31:0] r0_data,
  output logic        r0_last,
  // read port 1
  input  logic        ar1_valid,
  output logic        ar1_ready,
  input  logic [31:0] ar1_addr,
  input  logic [7:0]  ar1_len,
  output logic        r1_valid,
  input  logic        r1_ready,
  output logic [31:0] r1_data,
  output logic        r1_last,
  // write port
  input  logic        aw_valid,
  output logic        aw_ready,
  input  logic [31:0] aw_addr,
  input  logic        w_valid,
  output logic        w_ready,
  input  logic [31:0] w_data,
  output logic        b_valid,
  input  logic        b_ready
);
  logic [31:0] mem [WORDS];

  function automatic void put_word(input int unsigned byte_addr, input logic [31:0] d);
    mem[byte_addr / 4] = d;
  endfunction
  function automatic logic [31:0] get_word(input int unsigned byte_addr);
    return mem[byte_addr / 4];
  endfunction

  function automatic bit go();
    return ($urandom_range(99) >= STALL);
  endfunction

  typedef struct { int unsigned addr; int unsigned len; } burst_t;
  burst_t q0[$], q1[$];
  int unsigned beat0, beat1;
  int unsigned aw_q[$];
  logic [31:0] w_q[$];
  int unsigned b_pending;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ar0_ready <= 1'b0; ar1_ready <= 1'b0; r0_valid <= 1'b0; r1_valid <= 1'b0;
      aw_ready <= 1'b0; w_ready <= 1'b0; b_valid <= 1'b0;
      beat0 <= 0; beat1 <= 0; b_pending <= 0;
      q0.delete(); q1.delete(); aw_q.delete(); w_q.delete();
    end else begin
      // address channels
      if (ar0_valid && ar0_ready) q0.push_back('{ar0_addr, 32'(ar0_len)});
      if (ar1_valid && ar1_ready) q1.push_back('{ar1_addr, 32'(ar1_len)});
      ar0_ready <= go();
      ar1_ready <= go();
      // read data, port 0
      if (!r0_valid || r0_ready) begin
        if (r0_valid && r0_last) void'(q0.pop_front());
        if ((q0.size() > 0) && go()) begin
          r0_valid <= 1'b1;
          r0_data  <= mem[(q0[0].addr / 4 + beat0) % WORDS];
          r0_last  <= (beat0 == q0[0].len);
          beat0    <= (beat0 == q0[0].len) ? 0 : beat0 + 1;
        end else begin
          r0_valid <= 1'b0;
        end
      end
      // read data, port 1
      if (!r1_valid || r1_ready) begin
        if (r1_valid && r1_last) void'(q1.pop_front());
        if ((q1.size() > 0) && go()) begin
          r1_valid <= 1'b1;
          r1_data  <= mem[(q1[0].addr / 4 + beat1) % WORDS];
          r1_last  <= (beat1 == q1[0].len);
          beat1    <= (beat1 == q1[0].len) ? 0 : beat1 + 1;
        end else begin
          r1_valid <= 1'b0;
        end
      end
      // writes
      if (aw_valid && aw_ready) aw_q.push_back(aw_addr);
      if (w_valid && w_ready) w_q.push_back(w_data);
      aw_ready <= go();
      w_ready  <= go();
      if (aw_q.size() > 0 && w_q.size() > 0) begin
        mem[(aw_q[0] / 4) % WORDS] <= w_q[0];
        void'(aw_q.pop_front());
        void'(w_q.pop_front());
        b_pending <= b_pending + 1 - ((b_valid && b_ready) ? 1 : 0);
      end else begin
        b_pending <= b_pending - ((b_valid && b_ready) ? 1 : 0);
      end
      if (!b_valid || b_ready) b_valid <= (b_pending > ((b_valid && b_ready) ? 1 : 0)) && go();
    end
  end
endmodule
