// tb_switch_agg -- checks the in-switch aggregator against the protocol's
// algorithm written out in the testbench.
//
// Each cycle (mostly) a random packet enters: one of 3 slots, one of 4
// workers, aggregation or acknowledgement, random payload. Such traffic
// contains duplicates, acknowledgements before completion, repeated slot
// reuse and back-to-back packets to the same slot. A behavioural copy of
// the algorithm predicts, for every packet, whether a multicast leaves and
// its contents; the design must produce exactly that two cycles later.
// Afterwards an orderly round checks a complete aggregation: 4 PAs give
// FA = their sum, 4 acks give a confirmation, and the slot starts again
// from zero.
module tb_switch_agg;
  import p4sgd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int W = 4;
  logic       in_valid = 0, out_valid;
  pmt_pkt_t   in_pkt, out_pkt;
  logic [5:0] num_workers = 6'(W);

  switch_agg #(.NUM_SLOTS(16)) dut (.*);

  // reference state
  mbvec_t      r_agg [16];
  int          r_aggc [16], r_ackc [16];
  logic [31:0] r_aggbm [16], r_ackbm [16];

  typedef struct { logic v; pmt_pkt_t p; } out_t;
  out_t expq [$];
  int n_fa = 0, n_conf = 0, n_dup = 0, n_b2b = 0;
  int prev_slot = -1;

  function automatic out_t ref_step(pmt_pkt_t p);
    out_t o;
    int s = int'(p.hdr.seq);
    o.v = 0; o.p = p;
    if (p.hdr.is_agg) begin
      if ((r_aggbm[s] & p.hdr.bm) == 0) begin
        r_aggc[s]++;
        r_aggbm[s] |= p.hdr.bm;
        for (int k = 0; k < MB; k++) r_agg[s][k] += p.payload[k];
        if (r_aggc[s] == W) begin r_ackc[s] = 0; r_ackbm[s] = 0; end
      end else n_dup++;
      if (r_aggc[s] == W) begin o.v = 1; o.p.payload = r_agg[s]; n_fa++; end
    end else begin
      if ((r_ackbm[s] & p.hdr.bm) == 0) begin
        r_ackc[s]++;
        r_ackbm[s] |= p.hdr.bm;
        if (r_ackc[s] == W) begin r_aggc[s] = 0; r_aggbm[s] = 0; r_agg[s] = '0; end
      end else n_dup++;
      if (r_ackc[s] == W) begin o.v = 1; o.p.hdr.acked = 1; n_conf++; end
    end
    return o;
  endfunction

  task automatic send(int slot, int w, bit agg, mbvec_t pl);
    @(negedge clk);
    in_pkt = '0;
    in_pkt.hdr.seq = 32'(slot);
    in_pkt.hdr.bm = 32'(1) << w;
    in_pkt.hdr.is_agg = agg;
    in_pkt.payload = pl;
    in_valid = 1;
    if (slot == prev_slot) n_b2b++;
    prev_slot = slot;
    expq.push_back(ref_step(in_pkt));
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 0;
    prev_slot = -1;
    begin out_t o; o.v = 0; o.p = '0; expq.push_back(o); end
  endtask

  // compare two cycles after input
  always @(posedge clk) if (rst_n) begin
    if (expq.size() > 2) begin
      out_t o;
      o = expq.pop_front();
      checks++;
      if (out_valid !== o.v || (o.v && out_pkt !== o.p)) begin
        failures++;
        $display("FAIL out_valid %0b exp %0b pkt %h exp %h", out_valid, o.v, out_pkt, o.p);
      end
    end
  end

  initial begin
    mbvec_t pl, sum;
    in_pkt = '0;
    for (int s = 0; s < 16; s++) begin
      r_agg[s] = '0; r_aggc[s] = 0; r_ackc[s] = 0; r_aggbm[s] = 0; r_ackbm[s] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      if ($urandom % 8 == 0) idle();
      else begin
        for (int k = 0; k < MB; k++) pl[k] = elem_t'($urandom);
        send($urandom % 3, $urandom % W, ($urandom % 3) != 0, pl);
      end
    end
    // orderly round on an untouched slot
    sum = '0;
    for (int w = 0; w < W; w++) begin
      for (int k = 0; k < MB; k++) begin pl[k] = elem_t'($urandom); sum[k] += pl[k]; end
      send(9, w, 1, pl);
    end
    idle(); idle();
    checks++;
    if (!out_valid || out_pkt.payload !== sum) begin failures++; $display("FAIL orderly FA"); end
    for (int w = 0; w < W; w++) send(9, w, 0, '0);
    idle(); idle();
    checks++;
    if (!out_valid || !out_pkt.hdr.acked) begin failures++; $display("FAIL orderly confirmation"); end
    repeat (4) idle();
    checks++;
    if (n_fa < 20 || n_conf < 20 || n_dup < 20 || n_b2b < 20) begin
      failures++;
      $display("FAIL coverage fa=%0d conf=%0d dup=%0d b2b=%0d", n_fa, n_conf, n_dup, n_b2b);
    end
    $display("fa=%0d confirmations=%0d duplicates=%0d back-to-back=%0d", n_fa, n_conf, n_dup, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
