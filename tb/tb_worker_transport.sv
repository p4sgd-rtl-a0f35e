// tb_worker_transport -- checks the worker-side protocol against a lossy,
// reordering stand-in for the switch.
//
// The testbench answers an aggregation packet for slot s with
// FA = 3*PA + s after a random delay, and an acknowledgement with a
// confirmation (acked = 1), dropping about 1 packet in 5 in either
// direction and sometimes answering twice. With WINDOW = 4 and 8 slots the
// slot numbers wrap several times. Checks: header fields (bm, seq in order,
// is_agg), every FA delivered exactly once and in order with the right
// value, no retransmission earlier than the timeout, retransmissions
// actually happen, out-of-order answers happen, and all slots are free at
// the end.
module tb_worker_transport;
  import p4sgd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int TO = 40;
  logic [4:0]  worker_idx = 5'd3;
  logic [15:0] timeout = 16'(TO);
  logic        pa_valid = 0, pa_ready, fa_valid, fa_ready = 0, tx_valid, tx_ready = 0;
  mbvec_t      pa, fa;
  pmt_pkt_t    tx_pkt, rx_pkt;
  logic        rx_valid = 0;
  logic [31:0] retransmits;

  worker_transport #(.NUM_SLOTS(8), .WINDOW(4)) dut (.*);

  function automatic mbvec_t fa_of(mbvec_t p, int s);
    mbvec_t r;
    for (int k = 0; k < MB; k++) r[k] = 3 * p[k] + s;
    return r;
  endfunction

  localparam int NPA = 60;
  mbvec_t sent_pa [NPA];
  int     n_sent = 0, n_recv = 0, n_ooo = 0;
  int     cyc = 0;
  int     last_tx [8][2];   // last send time per slot and kind
  always @(posedge clk) cyc <= cyc + 1;

  // PA source
  initial begin
    pa = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NPA; i++) begin
      @(negedge clk);
      for (int k = 0; k < MB; k++) pa[k] = elem_t'($urandom);
      sent_pa[i] = pa;
      pa_valid = 1;
      do @(posedge clk); while (!pa_ready);
      @(negedge clk);
      pa_valid = 0;
      n_sent++;
    end
  end

  // pending replies of the stand-in switch
  typedef struct { pmt_pkt_t pkt; int due; } reply_t;
  reply_t replies [$];
  int last_seq_new = -1, n_new = 0;

  always @(posedge clk) if (rst_n) begin
    tx_ready <= ($urandom % 4) != 0;
    if (tx_valid && tx_ready) begin
      pmt_pkt_t p;
      int s;
      p = tx_pkt;
      s = int'(p.hdr.seq);
      checks++;
      if (p.hdr.bm !== 32'h8 || s > 7) begin failures++; $display("FAIL header %h", p.hdr); end
      last_tx[s][p.hdr.is_agg] = cyc;
      if (($urandom % 5) != 0) begin
        reply_t r;
        r.pkt = p;
        if (p.hdr.is_agg) r.pkt.payload = fa_of(p.payload, s);
        else r.pkt.hdr.acked = 1'b1;
        r.due = cyc + 2 + $urandom % 25;
        replies.push_back(r);
        if ($urandom % 6 == 0) begin r.due += 7; replies.push_back(r); end
      end
    end
  end

  // deliver replies whose time has come (not necessarily in order)
  initial forever begin
    @(negedge clk);
    rx_valid = 0;
    for (int i = 0; i < replies.size(); i++)
      if (replies[i].due <= cyc && ($urandom % 5) != 0) begin
        if (i != 0) n_ooo++;
        rx_pkt   = replies[i].pkt;
        rx_valid = 1;
        replies.delete(i);
        break;
      end
  end

  // FA sink
  always @(negedge clk) fa_ready <= ($urandom % 3) != 0;
  always @(posedge clk) if (rst_n && fa_valid && fa_ready) begin
    checks++;
    if (n_recv >= NPA || fa !== fa_of(sent_pa[n_recv], n_recv % 8)) begin
      failures++;
      $display("FAIL FA %0d wrong or extra", n_recv);
    end
    n_recv++;
  end

  // a slot's aggregation packet is never repeated before the timeout
  int first_agg [8];
  always @(posedge clk) if (rst_n && tx_valid && tx_ready && tx_pkt.hdr.is_agg) begin
    int s;
    s = int'(tx_pkt.hdr.seq);
    if (first_agg[s] >= 0 && (cyc - first_agg[s]) < TO && dut.st[s % 4] == 1 && first_agg[s] != cyc) begin
      checks++;
      failures++;
      $display("FAIL slot %0d resent after %0d cycles", s, cyc - first_agg[s]);
    end
    first_agg[s] = cyc;
  end

  initial begin
    for (int s = 0; s < 8; s++) begin first_agg[s] = -1000; last_tx[s][0] = -1; last_tx[s][1] = -1; end
    wait (n_recv == NPA);
    repeat (400) @(negedge clk);
    checks++;
    for (int e = 0; e < 4; e++)
      if (dut.st[e] != 0) begin failures++; $display("FAIL entry %0d still busy", e); end
    checks++;
    if (retransmits == 0 || n_ooo == 0) begin
      failures++; $display("FAIL retransmits=%0d out-of-order=%0d", retransmits, n_ooo);
    end
    $display("retransmits=%0d out-of-order replies=%0d", retransmits, n_ooo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
