// sgd_bank -- one bank of an engine: trains on one sample of a micro-batch.
//
// Forward propagation: every cycle the bank takes 64 bits, one bit of each
// of 64 features of its sample, plus the 64 matching 32-bit model weights.
// 64 bit-serial multipliers pass a weight where the bit is one, a pipelined
// binary adder tree sums the 64 products, and the accumulator adds the sum
// shifted left by the bit's weight (`fwd_shift` = prec-1-plane, planes MSB
// first). After the word flagged `fwd_last` the accumulator holds the
// partial activation PA = sum_j q_j * x_j of the sample over this engine's
// features (q_j = unsigned integer feature value), shown on `pa` for one
// cycle with `pa_valid`. Latency from the last word to `pa_valid` is the
// tree latency (6) plus one.
//
// The same 64 bits are written into the bank FIFO. Backward propagation
// pops the FIFO in the same order (`bwd_pop`): another 64 bit-serial
// multipliers pass `scale <<< bwd_shift` where the bit is one, giving 64
// gradient elements (2048 bits) per cycle on `grad`, registered, one cycle
// after the pop.
//
// Follows the paper: the two sets of 64 bit-serial multipliers, the adder
// tree, the accumulator and the 64-bit FIFO. This design's choices: MSB-first
// bit planes with the shift applied at the accumulator, the binary tree, and
// the FIFO depth (see sgd_engine). The engine guarantees the FIFO never
// overflows or underflows.
module sgd_bank
  import p4sgd_pkg::*;
#(
  parameter int FIFO_DEPTH = 16384
) (
  input  logic                clk,
  input  logic                rst_n,
  // forward propagation
  input  logic                fwd_valid,
  input  logic                fwd_first,   // first word of the micro-batch
  input  logic                fwd_last,    // last word of the micro-batch
  input  logic [2:0]          fwd_shift,   // weight of this bit plane
  input  logic [LANE_W-1:0]   fwd_bits,
  input  row_t                fwd_model,
  output logic                pa_valid,
  output elem_t               pa,
  // backward propagation
  input  logic                bwd_pop,
  input  logic [2:0]          bwd_shift,
  input  elem_t               scale,
  output logic                grad_valid,
  output row_t                grad,
  // status
  output logic                fifo_empty,
  output logic                fifo_full
);

  // ---------------- forward: bit-serial multipliers + adder tree -------
  logic signed [ELEM_W-1:0] prod [LANE_W];
  always_comb
    for (int j = 0; j < LANE_W; j++)
      prod[j] = fwd_bits[j] ? fwd_model[j] : '0;

  logic                     t_valid;
  logic [4:0]               t_tag;      // {first, last, shift}
  logic signed [ELEM_W-1:0] t_sum;

  adder_tree #(.N(LANE_W), .W(ELEM_W), .ARITY(2), .TAG_W(5)) u_tree (
    .clk, .rst_n,
    .in_valid (fwd_valid),
    .in_tag   ({fwd_first, fwd_last, fwd_shift}),
    .in_data  (prod),
    .out_valid(t_valid),
    .out_tag  (t_tag),
    .sum      (t_sum)
  );

  // ---------------- accumulator ---------------------------------------
  elem_t acc;
  elem_t acc_next;
  always_comb begin
    elem_t shifted;
    shifted  = t_sum <<< t_tag[2:0];
    acc_next = t_tag[4] ? shifted : acc + shifted;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      pa_valid <= 1'b0;
      pa       <= '0;
    end else begin
      pa_valid <= 1'b0;
      if (t_valid) begin
        acc <= acc_next;
        if (t_tag[3]) begin
          pa_valid <= 1'b1;
          pa       <= acc_next;
        end
      end
    end
  end

  // ---------------- FIFO of sample bits --------------------------------
  logic [LANE_W-1:0] head;
  sync_fifo #(.W(LANE_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr   (fwd_valid),
    .din  (fwd_bits),
    .rd   (bwd_pop),
    .dout (head),
    .empty(fifo_empty),
    .full (fifo_full),
    .count()
  );

  // ---------------- backward: bit-serial multipliers --------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) grad_valid <= 1'b0;
    else        grad_valid <= bwd_pop;
  end

  always_ff @(posedge clk) begin
    if (bwd_pop) begin
      elem_t s;
      s = scale <<< bwd_shift;
      for (int j = 0; j < LANE_W; j++) grad[j] <= head[j] ? s : '0;
    end
  end

endmodule
