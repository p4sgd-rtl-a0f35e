// hbm_axi_model -- behavioural model of one HBM pseudo-channel group seen
// through a 256-bit AXI4 read port (testbench only, not synthesizable).
//
// Holds DEPTH 256-bit words in `mem` (word i at byte address 32*i),
// written directly by the testbench. Accepts read bursts (INCR) on AR with
// random back-pressure, queues them, and returns the beats in order on R
// with random gaps, rlast on the last beat of each burst. Addresses wrap
// modulo DEPTH.
module hbm_axi_model
  import p4sgd_pkg::*;
#(
  parameter int DEPTH = 1024,
  parameter int SEED  = 1
) (
  input  logic        clk,
  input  axi_rd_req_t req,
  output axi_rd_rsp_t rsp
);
  logic [AXI_DW-1:0] mem [DEPTH];
  typedef struct { int word; int beats; } burst_t;
  burst_t q [$];
  int unsigned rnd = SEED;

  function automatic int unsigned nxt();
    rnd = rnd * 1103515245 + 12345;
    return rnd >> 16;
  endfunction

  initial begin
    rsp = '0;
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always @(posedge clk) begin
    // address channel
    if (req.arvalid && rsp.arready) begin
      burst_t b;
      b.word  = int'(req.araddr / (AXI_DW / 8));
      b.beats = int'(req.arlen) + 1;
      q.push_back(b);
    end
    // data channel: retire the beat just taken
    if (rsp.rvalid && req.rready) begin
      q[0].word++;
      q[0].beats--;
      if (q[0].beats == 0) void'(q.pop_front());
    end
    rsp.arready <= (nxt() % 4) != 0;
  end

  always @(negedge clk) begin
    if (q.size() > 0 && (nxt() % 5) != 0) begin
      rsp.rvalid <= 1'b1;
      rsp.rdata  <= mem[q[0].word % DEPTH];
      rsp.rlast  <= (q[0].beats == 1);
    end else begin
      rsp.rvalid <= 1'b0;
    end
  end
endmodule
