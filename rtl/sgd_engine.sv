// sgd_engine -- one training engine: 8 banks, gradient accumulation and
// model update for this engine's slice of the model (up to MAX_CHUNKS*64
// weights).
//
// Data arrive as 512-bit words (`in_*`, valid/ready), ordered micro-batch by
// micro-batch, inside a micro-batch chunk by chunk (64 features), inside a
// chunk bit plane by bit plane, most significant first: prec words per
// chunk, num_chunks*prec words per micro-batch. Lane k of a word goes to
// bank k (sample k). For each accepted word the engine reads the matching
// row of 64 weights from the model memory (one cycle) and hands word and
// row to the banks. When a micro-batch has passed, the 8 partial
// activations leave on `pa_*` (valid/ready, 2-entry buffer).
//
// When the scale vector of the oldest outstanding micro-batch arrives
// (`scale_*`), the banks replay their FIFOs; 64 adder trees of fan-in 8
// with three numbers added per level sum the 8 banks' gradients element by
// element, an accumulator collects the prec bit planes of a chunk, and the
// chunk gradient, shifted right by prec, is subtracted from the "updated
// model" row (read-modify-write). For the last micro-batch of a mini-batch
// the same new row is also written into the model memory that the forward
// pass reads, so every micro-batch of one mini-batch sees the same model.
//
// Stalls: the input stalls (1) when the bank FIFOs are full, (2) when a new
// micro-batch would have no room in the PA buffer, and (3) at the start of
// a mini-batch until the previous mini-batch's last backward pass has
// finished updating the model (synchronous SGD). Forward of later
// micro-batches overlaps communication and backward of earlier ones.
//
// Host port: `ld_*` writes a row into both model memories (only while the
// engine is idle); `rd_addr` reads a row of the model, `rd_data` one cycle
// later, valid in cycles with no accepted input.
//
// From the paper: 8 banks, 512-bit input, 64 bit-serial multipliers per
// bank and direction, 64 8-input adder trees with three inputs per level,
// model and updated-model memories of 256K 32-bit weights, update of the
// model with the last micro-batch. This design's choices: word order,
// fixed-point scaling, FIFO depth (one micro-batch of the largest slice at
// 4-bit precision), the mini-batch barrier and the buffer sizes.
module sgd_engine
  import p4sgd_pkg::*;
#(
  parameter int MAX_CHUNKS = 4096,    // 256K weights
  parameter int FIFO_DEPTH = 16384,   // 64-bit words per bank FIFO
  localparam int CAW = $clog2(MAX_CHUNKS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  train_cfg_t     cfg,
  // 512-bit sample stream from HBM
  input  logic           in_valid,
  output logic           in_ready,
  input  word_t          in_data,
  // partial activations of a micro-batch
  output logic           pa_valid,
  input  logic           pa_ready,
  output mbvec_t         pa,
  // scale vector of a micro-batch
  input  logic           scale_valid,
  output logic           scale_ready,
  input  mbvec_t         scale,
  // host model access
  input  logic           ld_we,
  input  logic [CAW-1:0] ld_addr,
  input  row_t           ld_data,
  input  logic [CAW-1:0] rd_addr,
  output row_t           rd_data,
  output logic           busy
);

  localparam int FCW = $clog2(FIFO_DEPTH + 1);
  localparam int PA_DEPTH = 2;

  // ================= model memories ======================================
  row_t model_mem [MAX_CHUNKS];
  row_t upd_mem   [MAX_CHUNKS];
  row_t model_q;

  // ================= forward control ====================================
  logic [15:0]    fc;        // chunk
  logic [3:0]     fb;        // bit plane
  logic [15:0]    fmb;       // micro-batch within mini-batch
  logic [FCW-1:0] fifo_cnt;
  logic [1:0]     credits;
  logic           fresh;     // model holds the result of the last mini-batch

  logic f_first, f_last, accept, pa_pop;
  assign f_first = (fc == '0) && (fb == '0);
  assign f_last  = (fc == cfg.num_chunks - 16'd1) && (fb == cfg.prec - 4'd1);

  logic stall_fifo, stall_barrier, stall_pa;
  assign stall_fifo    = (fifo_cnt >= FCW'(FIFO_DEPTH));
  assign stall_barrier = f_first && (fmb == '0) && !fresh;
  assign stall_pa      = f_first && (credits == '0);
  assign in_ready      = !stall_fifo && !stall_barrier && !stall_pa;
  assign accept        = in_valid && in_ready;

  // stage 1: word aligned with its model row
  logic        s1_valid, s1_first, s1_last;
  logic [2:0]  s1_shift;
  word_t       s1_bits;

  logic        b_pop;      // backward pops all bank FIFOs
  logic        fresh_set;  // last row of a mini-batch written

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fc       <= '0;
      fb       <= '0;
      fmb      <= '0;
      fifo_cnt <= '0;
      credits  <= 2'(PA_DEPTH);
      fresh    <= 1'b1;
      s1_valid <= 1'b0;
    end else begin
      s1_valid <= accept;
      fifo_cnt <= fifo_cnt + FCW'(accept) - FCW'(b_pop);
      credits  <= credits - 2'(accept && f_first) + 2'(pa_pop);
      if (fresh_set) fresh <= 1'b1;
      if (accept) begin
        if (fb == cfg.prec - 4'd1) begin
          fb <= '0;
          if (f_last) begin
            fc <= '0;
            if (fmb == cfg.mb_per_batch - 16'd1) begin
              fmb   <= '0;
              fresh <= 1'b0;
            end else begin
              fmb <= fmb + 16'd1;
            end
          end else begin
            fc <= fc + 16'd1;
          end
        end else begin
          fb <= fb + 4'd1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      s1_bits  <= in_data;
      s1_first <= f_first;
      s1_last  <= f_last;
      s1_shift <= 3'(cfg.prec - 4'd1 - fb);
    end
    model_q <= model_mem[accept ? CAW'(fc) : rd_addr];
  end
  assign rd_data = model_q;

  // ================= banks ==============================================
  logic   [MB-1:0] bank_pa_valid;
  mbvec_t          bank_pa;
  logic   [MB-1:0] bank_grad_valid;
  row_t            bank_grad [MB];
  logic   [MB-1:0] bank_empty, bank_full;

  mbvec_t      scale_q;
  logic [2:0]  b_shift;

  for (genvar k = 0; k < MB; k++) begin : g_bank
    sgd_bank #(.FIFO_DEPTH(FIFO_DEPTH)) u_bank (
      .clk, .rst_n,
      .fwd_valid (s1_valid),
      .fwd_first (s1_first),
      .fwd_last  (s1_last),
      .fwd_shift (s1_shift),
      .fwd_bits  (s1_bits[k]),
      .fwd_model (model_q),
      .pa_valid  (bank_pa_valid[k]),
      .pa        (bank_pa[k]),
      .bwd_pop   (b_pop),
      .bwd_shift (b_shift),
      .scale     (scale_q[k]),
      .grad_valid(bank_grad_valid[k]),
      .grad      (bank_grad[k]),
      .fifo_empty(bank_empty[k]),
      .fifo_full (bank_full[k])
    );
  end

  // PA buffer
  logic pa_empty;
  sync_fifo #(.W(MB*ELEM_W), .DEPTH(PA_DEPTH)) u_pa_fifo (
    .clk, .rst_n,
    .wr   (bank_pa_valid[0]),
    .din  (bank_pa),
    .rd   (pa_pop),
    .dout (pa),
    .empty(pa_empty),
    .full (),
    .count()
  );
  assign pa_valid = !pa_empty;
  assign pa_pop   = pa_valid && pa_ready;

  // ================= backward control ===================================
  logic        b_run, b_lastmb;
  logic [15:0] bc, bmb;
  logic [3:0]  bb;
  logic        b_lastword;

  assign scale_ready = !b_run;
  assign b_pop       = b_run;
  assign b_shift     = 3'(cfg.prec - 4'd1 - bb);
  assign b_lastword  = (bc == cfg.num_chunks - 16'd1) && (bb == cfg.prec - 4'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_run    <= 1'b0;
      b_lastmb <= 1'b0;
      bc       <= '0;
      bb       <= '0;
      bmb      <= '0;
    end else if (!b_run) begin
      if (scale_valid) begin
        b_run    <= 1'b1;
        bc       <= '0;
        bb       <= '0;
        b_lastmb <= (bmb == cfg.mb_per_batch - 16'd1);
        bmb      <= (bmb == cfg.mb_per_batch - 16'd1) ? '0 : bmb + 16'd1;
      end
    end else begin
      if (bb == cfg.prec - 4'd1) begin
        bb <= '0;
        bc <= bc + 16'd1;
        if (b_lastword) b_run <= 1'b0;
      end else begin
        bb <= bb + 4'd1;
      end
    end
  end

  always_ff @(posedge clk) if (!b_run && scale_valid) scale_q <= scale;

  // tag of a popped word: {chunk, first plane, last plane, last word, last mb}
  localparam int TW = CAW + 4;
  logic [TW-1:0] pop_tag, grad_tag;
  assign pop_tag = {CAW'(bc), bb == '0, bb == cfg.prec - 4'd1, b_lastword, b_lastmb};
  always_ff @(posedge clk) grad_tag <= pop_tag;   // aligned with bank grad

  // ================= gradient accumulation: 64 ternary adder trees ======
  logic          t_valid [LANE_W];
  logic [TW-1:0] t_tag   [LANE_W];
  row_t          t_sum;

  for (genvar j = 0; j < LANE_W; j++) begin : g_tree
    logic signed [ELEM_W-1:0] gin [MB];
    always_comb for (int k = 0; k < MB; k++) gin[k] = bank_grad[k][j];
    adder_tree #(.N(MB), .W(ELEM_W), .ARITY(3), .TAG_W(TW)) u_gtree (
      .clk, .rst_n,
      .in_valid (bank_grad_valid[0]),
      .in_tag   (grad_tag),
      .in_data  (gin),
      .out_valid(t_valid[j]),
      .out_tag  (t_tag[j]),
      .sum      (t_sum[j])
    );
  end

  logic [CAW-1:0] tc;
  logic           t_first, t_lastp, t_lastw, t_lastmb;
  assign {tc, t_first, t_lastp, t_lastw, t_lastmb} = t_tag[0];

  // ================= model update =======================================
  row_t gacc, gacc_next;
  always_comb
    for (int j = 0; j < LANE_W; j++)
      gacc_next[j] = t_first ? t_sum[j] : gacc[j] + t_sum[j];

  logic           w_valid, w_lastmb, w_lastw;
  logic [CAW-1:0] w_c;
  row_t           w_final, w_new, upd_q;

  always_comb
    for (int j = 0; j < LANE_W; j++)
      w_new[j] = upd_q[j] - (w_final[j] >>> cfg.prec);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) w_valid <= 1'b0;
    else        w_valid <= t_valid[0] && t_lastp;
  end

  always_ff @(posedge clk) begin
    if (t_valid[0]) gacc <= gacc_next;
    if (t_valid[0] && t_first)
      upd_q <= (w_valid && w_c == tc) ? w_new : upd_mem[tc];
    if (t_valid[0] && t_lastp) begin
      w_c      <= tc;
      w_final  <= gacc_next;
      w_lastmb <= t_lastmb;
      w_lastw  <= t_lastw;
    end
  end

  assign fresh_set = w_valid && w_lastmb && w_lastw;

  // memory writes: host load or model update
  always_ff @(posedge clk) begin
    if (ld_we) begin
      upd_mem[ld_addr]   <= ld_data;
      model_mem[ld_addr] <= ld_data;
    end else if (w_valid) begin
      upd_mem[w_c] <= w_new;
      if (w_lastmb) model_mem[w_c] <= w_new;
    end
  end

  assign busy = b_run || s1_valid || (fifo_cnt != '0) || w_valid || !pa_empty;

  // ================= protocol checks ====================================
  a_fifo_holds_mb: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> (32'(cfg.num_chunks) * 32'(cfg.prec) <= 32'(FIFO_DEPTH)));
  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    b_pop |-> !bank_empty[0]);
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
    ld_we |-> !w_valid);

endmodule
