// scale_calc -- turns the full activations of a micro-batch into the scale
// vector that drives backward propagation.
//
// For each of the MB samples k:  scale[k] = gamma/B * df(a[k], b[k]),
// where a[k] = FA[k] >>> prec is the dot product in fixed point (the engines
// sum integer feature values times FRAC-bit weights, so the prec fraction
// bits of the features are removed here), b[k] the label, gamma the
// learning rate and B = 2^log2_batch the mini-batch size. The model update
// x -= g/B of the training algorithm is folded into the scale, so the
// engines only subtract.
//
// df by cfg.loss:
//   LOSS_LINREG  a - b                                 (least squares)
//   LOSS_LOGREG  sigmoid(a) - b, sigmoid approximated by
//                clamp(1/2 + a/4, 0, 1)                (logistic regression)
//   LOSS_SVM     -b if b*a < 1 else 0, labels +-1      (hinge loss)
//
// Interface: FA (from the transport) and labels (from HBM) are joined; a
// result is registered and held on `scale_*` (valid/ready) until taken.
// Latency one cycle. The paper names the block and gives the formula
// gamma*df(FA,b); the fixed-point format, the sigmoid approximation and the
// folding of 1/B are this design's choices.
module scale_calc
  import p4sgd_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  train_cfg_t cfg,
  input  logic       fa_valid,
  output logic       fa_ready,
  input  mbvec_t     fa,
  input  logic       lb_valid,
  output logic       lb_ready,
  input  mbvec_t     lb,
  output logic       scale_valid,
  input  logic       scale_ready,
  output mbvec_t     scale
);

  localparam elem_t ONE  = elem_t'(1) <<< FRAC;
  localparam elem_t HALF = elem_t'(1) <<< (FRAC - 1);

  function automatic elem_t df(loss_e loss, elem_t a, elem_t b);
    elem_t s, margin;
    case (loss)
      LOSS_LOGREG: begin
        s = HALF + (a >>> 2);
        if (s < 0)   s = '0;
        if (s > ONE) s = ONE;
        return s - b;
      end
      LOSS_SVM: begin
        margin = (b < 0) ? -a : a;
        return (margin < ONE) ? -b : '0;
      end
      default: return a - b;
    endcase
  endfunction

  logic take;
  assign take     = fa_valid && lb_valid && (!scale_valid || scale_ready);
  assign fa_ready = take;
  assign lb_ready = take;

  mbvec_t result;
  always_comb
    for (int k = 0; k < MB; k++) begin
      logic signed [63:0] prod;
      prod      = 64'(df(cfg.loss, fa[k] >>> cfg.prec, lb[k])) * 64'(cfg.gamma);
      result[k] = elem_t'(prod >>> (FRAC + int'(cfg.log2_batch)));
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) scale_valid <= 1'b0;
    else if (take) scale_valid <= 1'b1;
    else if (scale_ready) scale_valid <= 1'b0;
  end

  always_ff @(posedge clk) if (take) scale <= result;

endmodule
