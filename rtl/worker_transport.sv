// worker_transport -- worker side of the latency-centric in-switch
// aggregation protocol with packet-loss recovery.
//
// Each partial-activation vector taken on `pa_*` is given the next
// aggregation slot `seq` (0..NUM_SLOTS-1, wrapping) and sent to the switch
// as an aggregation packet (is_agg = 1, bm = one-hot worker index). The
// switch answers with the full activation FA once every worker's PA for
// that slot arrived. On FA the worker acknowledges (same slot, is_agg = 0)
// and hands FA, in slot order, to `fa_*`. The slot becomes usable again only
// when the switch confirms that all workers acknowledged (is_agg = 0,
// acked = 1). Every packet sent starts a timer; the timer stops on FA (for
// an aggregation packet) or on the confirmation (for an acknowledgement);
// when it reaches `timeout` cycles the packet is sent again.
//
// The state of slot s is kept in entry s mod WINDOW (the stored PA for
// retransmission, the FA until it is delivered, the timer): a new PA waits
// while that entry is busy, which is the "unused[seq]" test of the protocol
// applied to the WINDOW most recent slots. FA packets that arrive for an
// entry not waiting for one (duplicates of a multicast after a
// retransmission) are dropped, and FAs that arrive out of order are held
// until the older ones have been delivered, so backward propagation always
// sees micro-batches in order.
//
// Transmission: one packet per cycle on `tx_*` (valid/ready); among entries
// with a packet pending, the oldest (from the delivery pointer on) goes
// first. `rx_valid` packets are always taken.
//
// From the paper: the header fields and the send/receive/timeout behaviour.
// This design's choices: the WINDOW-entry table, in-order delivery, dropping
// duplicate FAs, timer width and one-packet-per-cycle arbitration.
module worker_transport
  import p4sgd_pkg::*;
#(
  parameter int NUM_SLOTS = 65536,
  parameter int WINDOW    = 16,
  localparam int WIW = $clog2(WINDOW)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  worker_idx,
  input  logic [15:0] timeout,      // cycles before a retransmission
  // partial activations from the engines
  input  logic        pa_valid,
  output logic        pa_ready,
  input  mbvec_t      pa,
  // full activations to scale calculation
  output logic        fa_valid,
  input  logic        fa_ready,
  output mbvec_t      fa,
  // network
  output logic        tx_valid,
  input  logic        tx_ready,
  output pmt_pkt_t    tx_pkt,
  input  logic        rx_valid,
  input  pmt_pkt_t    rx_pkt,
  // statistics
  output logic [31:0] retransmits
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT_FA, S_WAIT_ACK} slot_state_e;

  slot_state_e st      [WINDOW];
  logic [31:0] e_seq   [WINDOW];
  mbvec_t      e_pa    [WINDOW];
  mbvec_t      e_fa    [WINDOW];
  logic        fa_pend [WINDOW];
  logic        tx_pend [WINDOW];
  logic [15:0] timer   [WINDOW];

  logic [31:0]    seq;    // next slot to use
  logic [WIW-1:0] dp;     // entry of the next FA to deliver

  logic [WIW-1:0] ne;
  assign ne       = WIW'(seq % WINDOW);
  assign pa_ready = (st[ne] == S_IDLE) && !fa_pend[ne];

  assign fa_valid = fa_pend[dp];
  assign fa       = e_fa[dp];

  // oldest entry with a packet to send
  logic           sel_found;
  logic [WIW-1:0] sel;
  always_comb begin
    sel_found = 1'b0;
    sel       = '0;
    for (int i = 0; i < WINDOW; i++) begin
      logic [WIW-1:0] idx;
      idx = dp + WIW'(i);
      if (!sel_found && tx_pend[idx]) begin
        sel_found = 1'b1;
        sel       = idx;
      end
    end
  end

  assign tx_valid = sel_found;
  always_comb begin
    tx_pkt                = '0;
    tx_pkt.hdr.bm         = 32'(1) << worker_idx;
    tx_pkt.hdr.seq        = e_seq[sel];
    tx_pkt.hdr.is_agg     = (st[sel] == S_WAIT_FA);
    tx_pkt.payload        = (st[sel] == S_WAIT_FA) ? e_pa[sel] : e_fa[sel];
  end

  logic [WIW-1:0] re;
  assign re = WIW'(rx_pkt.hdr.seq % WINDOW);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq         <= '0;
      dp          <= '0;
      retransmits <= '0;
      for (int e = 0; e < WINDOW; e++) begin
        st[e]      <= S_IDLE;
        fa_pend[e] <= 1'b0;
        tx_pend[e] <= 1'b0;
        timer[e]   <= '0;
        e_seq[e]   <= '0;
      end
    end else begin
      // timers run while a sent packet waits for its answer
      for (int e = 0; e < WINDOW; e++) begin
        if (st[e] != S_IDLE && !tx_pend[e]) begin
          if (timer[e] >= timeout) begin
            tx_pend[e]  <= 1'b1;
            timer[e]    <= '0;
            retransmits <= retransmits + 32'd1;
          end else begin
            timer[e] <= timer[e] + 16'd1;
          end
        end
      end
      // a packet leaves: start its timer
      if (tx_valid && tx_ready) begin
        tx_pend[sel] <= 1'b0;
        timer[sel]   <= '0;
      end
      // new partial activation
      if (pa_valid && pa_ready) begin
        st[ne]      <= S_WAIT_FA;
        e_seq[ne]   <= seq;
        e_pa[ne]    <= pa;
        tx_pend[ne] <= 1'b1;
        timer[ne]   <= '0;
        seq         <= (seq == 32'(NUM_SLOTS - 1)) ? '0 : seq + 32'd1;
      end
      // received packet
      if (rx_valid && e_seq[re] == rx_pkt.hdr.seq) begin
        if (rx_pkt.hdr.is_agg && st[re] == S_WAIT_FA) begin
          e_fa[re]    <= rx_pkt.payload;
          fa_pend[re] <= 1'b1;
          st[re]      <= S_WAIT_ACK;
          tx_pend[re] <= 1'b1;          // send the acknowledgement
          timer[re]   <= '0;
        end else if (!rx_pkt.hdr.is_agg && st[re] == S_WAIT_ACK) begin
          st[re]      <= S_IDLE;
          tx_pend[re] <= 1'b0;
          timer[re]   <= '0;
        end
      end
      // deliver FA in order
      if (fa_valid && fa_ready) begin
        fa_pend[dp] <= 1'b0;
        dp          <= dp + 1'b1;
      end
    end
  end

  a_window_divides: assert property (@(posedge clk) disable iff (!rst_n)
    (NUM_SLOTS % WINDOW) == 0 && (WINDOW & (WINDOW - 1)) == 0);

endmodule
