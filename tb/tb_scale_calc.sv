// tb_scale_calc -- checks the scale unit for the three loss functions.
//
// Random full activations and labels are presented (with random gaps on
// either input and random back-pressure on the output); every result is
// compared with gamma*df(FA>>>prec, b)/2^(FRAC+log2B) computed here in
// 64-bit integers, with df written out independently of the design.
module tb_scale_calc;
  import p4sgd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  train_cfg_t cfg;
  logic   fa_valid = 0, fa_ready, lb_valid = 0, lb_ready;
  mbvec_t fa, lb;
  logic   scale_valid, scale_ready = 0;
  mbvec_t scale;

  scale_calc dut (.*);

  function automatic longint ref_df(int loss, longint a, longint b);
    longint one = 65536;
    if (loss == 1) begin
      longint s = 32768 + (a >>> 2);
      if (s < 0) s = 0;
      if (s > one) s = one;
      return s - b;
    end else if (loss == 2) begin
      if (b * a < one * one / 1 && ((b > 0 && a < one) || (b < 0 && -a < one))) return -b;
      return 0;
    end
    return a - b;
  endfunction

  mbvec_t expq [$];
  int n_loss [3];

  initial begin
    cfg = '0; fa = '0; lb = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      mbvec_t e;
      @(negedge clk);
      // change configuration only when idle
      if (!scale_valid && expq.size() == 0) begin
        cfg.loss       = loss_e'(it % 3);
        cfg.prec       = 4'(1 + $urandom % 8);
        cfg.log2_batch = 5'($urandom % 9);
        cfg.gamma      = elem_t'($urandom % 65536);
      end
      for (int k = 0; k < MB; k++) begin
        longint a, d, p;
        fa[k] = elem_t'($signed($urandom) >>> ($urandom % 16));
        if (cfg.loss == LOSS_LINREG) lb[k] = elem_t'($signed($urandom % 400000) - 200000);
        else if (cfg.loss == LOSS_LOGREG) lb[k] = ($urandom % 2) ? 65536 : 0;
        else lb[k] = ($urandom % 2) ? 65536 : -65536;
        a = longint'(fa[k] >>> cfg.prec);
        d = ref_df(int'(cfg.loss), a, longint'(lb[k]));
        p = d * longint'(cfg.gamma);
        e[k] = elem_t'(p >>> (16 + cfg.log2_batch));
      end
      n_loss[int'(cfg.loss)]++;
      expq.push_back(e);
      fa_valid = 1; lb_valid = 1;
      do @(posedge clk); while (!fa_ready);
      @(negedge clk);
      fa_valid = 0; lb_valid = 0;
      repeat ($urandom % 3) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (expq.size() != 0 || n_loss[0] == 0 || n_loss[1] == 0 || n_loss[2] == 0) begin
      failures++; $display("FAIL results missing or a loss never used");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) scale_ready <= ($urandom % 3) != 0;

  always @(posedge clk) if (rst_n && scale_valid && scale_ready) begin
    mbvec_t e;
    e = expq.pop_front();
    checks++;
    if (scale !== e) begin
      failures++;
      $display("FAIL loss %0d: got %h exp %h", cfg.loss, scale, e);
    end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
