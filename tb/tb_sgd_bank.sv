// tb_sgd_bank -- checks one bank on its own.
//
// For several micro-batches with random chunk counts and precisions it
// streams a random sample (q_j of prec bits, bit planes MSB first) with a
// random 64-weight row per chunk and checks that the partial activation
// equals sum_j q_j * x_j (32-bit wrap) and appears 7 cycles after the last
// word. It then pops the FIFO with a random scale and checks each gradient
// row: element j = scale << (prec-1-plane) where the sample bit is one, 0
// otherwise.
module tb_sgd_bank;
  import p4sgd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        fwd_valid = 0, fwd_first = 0, fwd_last = 0;
  logic [2:0]  fwd_shift = 0;
  logic [63:0] fwd_bits = 0;
  row_t        fwd_model;
  logic        pa_valid;
  elem_t       pa;
  logic        bwd_pop = 0;
  logic [2:0]  bwd_shift = 0;
  elem_t       scale = 0;
  logic        grad_valid;
  row_t        grad;
  logic        fifo_empty, fifo_full;

  sgd_bank #(.FIFO_DEPTH(256)) dut (.*);

  int unsigned q [16][64];
  row_t        x [16];
  int          cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    fwd_model = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 12; it++) begin
      int chunks, prec, last_cyc;
      elem_t exp_pa;
      chunks = 1 + $urandom % 8;
      prec   = 1 + $urandom % 8;
      exp_pa = 0;
      for (int c = 0; c < chunks; c++)
        for (int j = 0; j < 64; j++) begin
          q[c][j] = $urandom % (1 << prec);
          x[c][j] = elem_t'($signed($urandom % 2001) - 1000);
          exp_pa += elem_t'(q[c][j]) * x[c][j];
        end
      // forward
      for (int c = 0; c < chunks; c++)
        for (int b = 0; b < prec; b++) begin
          @(negedge clk);
          fwd_valid = 1;
          fwd_first = (c == 0 && b == 0);
          fwd_last  = (c == chunks - 1 && b == prec - 1);
          fwd_shift = 3'(prec - 1 - b);
          fwd_model = x[c];
          for (int j = 0; j < 64; j++) fwd_bits[j] = q[c][j][prec-1-b];
          last_cyc = cyc;
        end
      @(negedge clk);
      fwd_valid = 0;
      while (!pa_valid) @(negedge clk);
      checks++;
      if (pa !== exp_pa || (cyc - last_cyc) != 7) begin
        failures++;
        $display("FAIL pa it %0d: got %0d exp %0d lat %0d", it, pa, exp_pa, cyc - last_cyc);
      end
      // backward
      scale = elem_t'($urandom);
      for (int c = 0; c < chunks; c++)
        for (int b = 0; b < prec; b++) begin
          @(negedge clk);
          bwd_pop   = 1;
          bwd_shift = 3'(prec - 1 - b);
          @(negedge clk);
          bwd_pop = 0;
          checks++;
          begin
            bit bad = !grad_valid;
            for (int j = 0; j < 64; j++)
              if (grad[j] !== (q[c][j][prec-1-b] ? (scale <<< (prec - 1 - b)) : 0)) bad = 1;
            if (bad) begin
              failures++;
              $display("FAIL grad it %0d chunk %0d plane %0d", it, c, b);
            end
          end
        end
      checks++;
      if (!fifo_empty) begin failures++; $display("FAIL fifo not empty"); end
    end
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
