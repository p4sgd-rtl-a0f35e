// switch_agg -- data-plane logic of the aggregation server in the switch.
//
// NUM_SLOTS aggregation slots each hold the running sum `agg` of the
// partial activations (MB x 32 bit), the number of workers that have
// contributed (agg_cnt) and which ones (agg_bm), and likewise the number
// and set of workers that have acknowledged the result (ack_cnt, ack_bm).
// An aggregation packet (is_agg = 1) from a worker not yet in agg_bm adds
// its payload; once all `num_workers` have contributed the acknowledgement
// state is cleared and every aggregation packet for the slot (the last one
// and any retransmission) is answered by multicasting the sum (FA) to all
// workers. An acknowledgement (is_agg = 0) from a worker not yet in ack_bm
// is counted; once all workers have acknowledged, the aggregation state is
// cleared and every acknowledgement for the slot is answered by a multicast
// with acked = 1. Duplicates never change a sum or a count.
//
// Timing: one packet per cycle, two-stage pipeline (read slot, then update
// and write slot); `out_valid`/`out_pkt` two cycles after `in_valid`. The
// last write is forwarded to a read of the same slot in the next cycle, so
// back-to-back packets to one slot see each other's updates. Slot state is
// valid-tagged: a register of NUM_SLOTS bits clears the whole table on
// reset, as the protocol requires all counters, bitmaps and sums to start
// at zero.
//
// Follows the paper's switch algorithm and register arrays (64K slots). The
// paper builds it in P4 on a Tofino switch with one register array per
// field over four pipeline stages; here the fields of a slot share one
// memory word, and counters are 6 bits (up to 32 workers, the width of bm).
module switch_agg
  import p4sgd_pkg::*;
#(
  parameter int NUM_SLOTS = 65536,
  localparam int SAW = $clog2(NUM_SLOTS)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [5:0] num_workers,
  input  logic       in_valid,
  input  pmt_pkt_t   in_pkt,
  output logic       out_valid,    // multicast to all workers
  output pmt_pkt_t   out_pkt
);

  typedef struct packed {
    mbvec_t      agg;
    logic [5:0]  agg_cnt;
    logic [31:0] agg_bm;
    logic [5:0]  ack_cnt;
    logic [31:0] ack_bm;
  } slot_t;

  slot_t                mem [NUM_SLOTS];
  logic [NUM_SLOTS-1:0] slot_v;

  // stage 1: slot read
  logic           s1_valid;
  pmt_pkt_t       s1_pkt;
  logic [SAW-1:0] s1_idx;
  slot_t          s1_rd;
  logic           s1_rd_v;

  logic [SAW-1:0] in_idx;
  assign in_idx = SAW'(in_pkt.hdr.seq);

  // last write, for forwarding
  logic           wb_valid;
  logic [SAW-1:0] wb_idx;
  slot_t          wb_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_pkt  <= in_pkt;
      s1_idx  <= in_idx;
      s1_rd   <= mem[in_idx];
      s1_rd_v <= slot_v[in_idx];
    end
  end

  // stage 2: update
  slot_t    cur, nxt;
  logic     fwd;
  pmt_pkt_t opkt;

  always_comb begin
    if (wb_valid && wb_idx == s1_idx) cur = wb_data;
    else if (s1_rd_v)                 cur = s1_rd;
    else                              cur = '0;
    nxt  = cur;
    opkt = s1_pkt;
    fwd  = 1'b0;
    if (s1_pkt.hdr.is_agg) begin
      if ((cur.agg_bm & s1_pkt.hdr.bm) == '0) begin
        nxt.agg_cnt = cur.agg_cnt + 6'd1;
        nxt.agg_bm  = cur.agg_bm | s1_pkt.hdr.bm;
        for (int k = 0; k < MB; k++) nxt.agg[k] = cur.agg[k] + s1_pkt.payload[k];
        if (nxt.agg_cnt == num_workers) begin
          nxt.ack_cnt = '0;
          nxt.ack_bm  = '0;
        end
      end
      if (nxt.agg_cnt == num_workers) begin
        opkt.payload = nxt.agg;
        fwd          = 1'b1;
      end
    end else begin
      if ((cur.ack_bm & s1_pkt.hdr.bm) == '0) begin
        nxt.ack_cnt = cur.ack_cnt + 6'd1;
        nxt.ack_bm  = cur.ack_bm | s1_pkt.hdr.bm;
        if (nxt.ack_cnt == num_workers) begin
          nxt.agg_cnt = '0;
          nxt.agg_bm  = '0;
          nxt.agg     = '0;
        end
      end
      if (nxt.ack_cnt == num_workers) begin
        opkt.hdr.acked = 1'b1;
        fwd            = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_v    <= '0;
      wb_valid  <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      wb_valid  <= s1_valid;
      out_valid <= s1_valid && fwd;
      if (s1_valid) slot_v[s1_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      mem[s1_idx] <= nxt;
      wb_idx      <= s1_idx;
      wb_data     <= nxt;
      out_pkt     <= opkt;
    end
  end

endmodule
