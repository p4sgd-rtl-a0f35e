// tb_sgd_engine -- end-to-end check of one engine against a reference model.
//
// For several configurations (chunks, precision, micro-batches per
// mini-batch) the testbench loads a random model, streams random samples in
// the weaved word order and plays the part of network and scale unit: every
// partial-activation vector is answered, after a random delay, with
// scale[k] = (PA[k] >>> 4) - 3*k. A reference model in the testbench does
// the same arithmetic (PA from the model of the current mini-batch; at each
// micro-batch updated -= (sum_k scale[k]*q[k][j]) >>> prec; model := updated
// at the end of a mini-batch). Every PA and, after each run, every model row
// (read through the host port) is compared. The FIFO is kept small so that
// the input stalls on a full FIFO; the run also counts mini-batch barrier
// stalls and cycles where forward and backward overlap, and fails if any of
// these never happened. Throughput check: with no stalls the engine takes
// one word per cycle.
module tb_sgd_engine;
  import p4sgd_pkg::*;
  localparam int MAXC = 16;
  localparam int FD   = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  train_cfg_t cfg;
  logic   in_valid = 0, in_ready;
  word_t  in_data;
  logic   pa_valid, pa_ready;
  mbvec_t pa;
  logic   scale_valid = 0, scale_ready;
  mbvec_t scale;
  logic   ld_we = 0;
  logic [3:0] ld_addr = 0, rd_addr = 0;
  row_t   ld_data, rd_data;
  logic   busy;

  sgd_engine #(.MAX_CHUNKS(MAXC), .FIFO_DEPTH(FD)) dut (.*);

  // reference state
  elem_t  xr   [MAXC][64];   // model seen by forward
  elem_t  ur   [MAXC][64];   // updated model
  int unsigned qd [$];        // q values of all micro-batches, [mb][k][feature]
  mbvec_t exp_pa [$];

  int n_fifo_stall = 0, n_barrier = 0, n_overlap = 0, n_full_rate = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && dut.stall_fifo) n_fifo_stall++;
    if (in_valid && dut.stall_barrier) n_barrier++;
    if (dut.s1_valid && dut.b_run) n_overlap++;
  end

  function automatic mbvec_t scale_of(mbvec_t p);
    mbvec_t s;
    for (int k = 0; k < MB; k++) s[k] = (p[k] >>> 4) - elem_t'(3 * k);
    return s;
  endfunction

  // network / scale responder
  mbvec_t pend [$];
  assign pa_ready = 1'b1;
  always @(posedge clk) if (rst_n && pa_valid) begin
    mbvec_t e;
    checks++;
    e = exp_pa.pop_front();
    if (pa !== e) begin
      failures++;
      $display("FAIL pa: got %h exp %h", pa, e);
    end
    pend.push_back(scale_of(pa));
  end
  initial forever begin
    @(negedge clk);
    if (pend.size() > 0 && !scale_valid) begin
      repeat ($urandom % 30) @(negedge clk);
      scale = pend.pop_front();
      scale_valid = 1;
      do @(posedge clk); while (!scale_ready);
      @(negedge clk);
      scale_valid = 0;
    end
  end

  task automatic run(int chunks, int prec, int mbpb, int nbatches);
    int nmb = mbpb * nbatches;
    int stream_cyc, stream_words;
    cfg = '0;
    cfg.num_chunks = 16'(chunks);
    cfg.prec = 4'(prec);
    cfg.mb_per_batch = 16'(mbpb);
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load model
    for (int c = 0; c < chunks; c++) begin
      @(negedge clk);
      for (int j = 0; j < 64; j++) begin
        xr[c][j] = elem_t'($signed($urandom % 200001) - 100000);
        ur[c][j] = xr[c][j];
        ld_data[j] = xr[c][j];
      end
      ld_we = 1; ld_addr = 4'(c);
    end
    @(negedge clk); ld_we = 0;
    // data and reference
    qd.delete();
    for (int i = 0; i < nmb * MB * chunks * 64; i++) qd.push_back($urandom % (1 << prec));
    for (int bt = 0; bt < nbatches; bt++) begin
      for (int m = 0; m < mbpb; m++) begin
        int mb = bt * mbpb + m;
        mbvec_t p, s;
        for (int k = 0; k < MB; k++) begin
          p[k] = 0;
          for (int f = 0; f < chunks * 64; f++)
            p[k] += elem_t'(qd[(mb * MB + k) * chunks * 64 + f]) * xr[f / 64][f % 64];
        end
        exp_pa.push_back(p);
        s = scale_of(p);
        for (int f = 0; f < chunks * 64; f++) begin
          elem_t g = 0;
          for (int k = 0; k < MB; k++) g += s[k] * elem_t'(qd[(mb * MB + k) * chunks * 64 + f]);
          ur[f / 64][f % 64] -= g >>> prec;
        end
      end
      for (int c = 0; c < chunks; c++) for (int j = 0; j < 64; j++) xr[c][j] = ur[c][j];
    end
    // stream
    stream_words = 0;
    for (int mb = 0; mb < nmb; mb++)
      for (int c = 0; c < chunks; c++)
        for (int b = 0; b < prec; b++) begin
          @(negedge clk);
          in_valid = 1;
          for (int k = 0; k < MB; k++)
            for (int j = 0; j < 64; j++)
              in_data[k][j] = qd[(mb * MB + k) * chunks * 64 + c * 64 + j][prec - 1 - b];
          stream_cyc = 0;
          do begin @(posedge clk); stream_cyc++; end while (!in_ready);
          if (stream_cyc == 1) n_full_rate++;
          stream_words++;
        end
    @(negedge clk); in_valid = 0;
    // wait for completion
    while (busy || pend.size() > 0 || scale_valid) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (exp_pa.size() != 0) begin failures++; $display("FAIL missing PA"); end
    for (int c = 0; c < chunks; c++) begin
      rd_addr = 4'(c);
      @(negedge clk);
      checks++;
      for (int j = 0; j < 64; j++)
        if (rd_data[j] !== xr[c][j]) begin
          failures++;
          $display("FAIL model row %0d elem %0d: got %0d exp %0d", c, j, rd_data[j], xr[c][j]);
          break;
        end
    end
  endtask

  initial begin
    in_data = '0; ld_data = '0; scale = '0; cfg = '0;
    run(3, 4, 3, 2);   // 12 words per micro-batch
    run(2, 1, 2, 2);   // one bit plane
    run(1, 2, 4, 2);   // one chunk: back-to-back updates of one row
    run(8, 4, 1, 3);   // full FIFO = one micro-batch
    run(5, 3, 2, 2);
    checks++;
    if (n_fifo_stall == 0 || n_barrier == 0 || n_overlap == 0 || n_full_rate < 50) begin
      failures++;
      $display("FAIL mechanisms: fifo_stall=%0d barrier=%0d overlap=%0d full_rate=%0d",
               n_fifo_stall, n_barrier, n_overlap, n_full_rate);
    end
    $display("mechanisms: fifo_stall=%0d barrier=%0d overlap=%0d one-word-per-cycle=%0d",
             n_fifo_stall, n_barrier, n_overlap, n_full_rate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
