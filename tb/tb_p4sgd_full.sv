// tb_p4sgd_full -- one complete training operation of the system at its
// default size: 8 workers of 8 engines, 256K-weight model memories per
// engine, 64K switch slots, 16-entry transport windows. No parameter of the
// top is overridden.
//
// To keep the run short the launch configuration uses a small slice: one
// 64-feature chunk per engine (4096 features in all), 4-bit samples, one
// mini-batch of 2 micro-batches (16 samples), logistic regression. The
// testbench generates the data, writes every engine's two HBM port memories
// and every worker's label memory, loads a random model, starts training,
// waits for all workers to go idle and compares the trained model rows
// (and one untouched row per engine) with a reference computed here:
// FA = sum of q*x over all features, a = FA>>>prec,
// scale = gamma*(hsig(a) - b) >>> (16 + log2 B) with
// hsig(a) = clamp(0.5 + a/4, 0, 1), updated -= (sum_k scale_k*q_k) >>> prec.
// The network is loss-free here; losses are tested at reduced size by
// tb_p4sgd_system.
module tb_p4sgd_full;
  import p4sgd_pkg::*;
  localparam int M = 8, N = 8;            // the top's defaults
  localparam int CHUNKS = 1, PREC = 4, MBPB = 2, NB = 1, LOG2B = 4;
  localparam int NMB = MBPB * NB;
  localparam int WORDS = NMB * CHUNKS * PREC;
  localparam int FEAT = M * N * CHUNKS * 64;
  localparam elem_t ONE = elem_t'(1 << FRAC);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  train_cfg_t        cfg;
  logic [15:0]       timeout = 16'd200;
  logic              start = 0;
  logic [AXI_AW-1:0] data_base = 0, label_base = 0;
  logic [31:0]       data_words = 32'(WORDS), label_words = 32'(NMB);
  axi_rd_req_t       hbm_req   [M][N][2];
  axi_rd_rsp_t       hbm_rsp   [M][N][2];
  axi_rd_req_t       label_req [M][1];
  axi_rd_rsp_t       label_rsp [M][1];
  logic              ld_we = 0;
  logic [2:0]        ld_worker = 0, rd_worker = 0;
  logic [2:0]        ld_engine = 0, rd_engine = 0;
  logic [11:0]       ld_addr = 0, rd_addr = 0;
  row_t              ld_data = '0, rd_data;
  logic [M-1:0]      up_drop = 0, down_drop = 0, busy;
  logic [31:0]       retransmits [M];

  p4sgd_system dut (.*);

  byte unsigned      q    [NMB * MB][FEAT];
  elem_t             x0   [FEAT];
  elem_t             x    [FEAT];
  elem_t             u    [FEAT];
  elem_t             lbl  [NMB * MB];
  logic [AXI_DW-1:0] img  [M][N][2][WORDS];
  logic [AXI_DW-1:0] limg [NMB];
  bit                mem_ready = 0;

  for (genvar m = 0; m < M; m++) begin : g_m
    hbm_axi_model #(.DEPTH(64), .SEED(m + 3)) u_lmem (
      .clk, .req(label_req[m][0]), .rsp(label_rsp[m][0]));
    initial begin
      wait (mem_ready);
      for (int i = 0; i < NMB; i++) u_lmem.mem[i] = limg[i];
    end
    for (genvar e = 0; e < N; e++) begin : g_e
      for (genvar p = 0; p < 2; p++) begin : g_p
        hbm_axi_model #(.DEPTH(64), .SEED(100 * m + 10 * e + p + 1)) u_mem (
          .clk, .req(hbm_req[m][e][p]), .rsp(hbm_rsp[m][e][p]));
        initial begin
          wait (mem_ready);
          for (int i = 0; i < WORDS; i++) u_mem.mem[i] = img[m][e][p][i];
        end
      end
    end
  end

  function automatic int fidx(int m, int e, int c, int j);
    return ((m * N + e) * CHUNKS + c) * 64 + j;
  endfunction

  function automatic elem_t scale_ref(elem_t fa, elem_t b);
    longint a, h;
    a = longint'(fa >>> PREC);
    h = longint'(ONE / 2) + (a >>> 2);
    if (h < 0) h = 0;
    if (h > longint'(ONE)) h = longint'(ONE);
    return elem_t'(((h - longint'(b)) * longint'(cfg.gamma)) >>> (FRAC + LOG2B));
  endfunction

  task automatic build_and_reference();
    for (int s = 0; s < NMB * MB; s++) begin
      for (int f = 0; f < FEAT; f++) q[s][f] = 8'($urandom % (1 << PREC));
      lbl[s] = ($urandom % 2) ? ONE : 0;
    end
    for (int f = 0; f < FEAT; f++) begin
      x0[f] = elem_t'($signed($urandom % 512) - 256);
      x[f]  = x0[f];
      u[f]  = x0[f];
    end
    for (int m = 0; m < M; m++)
      for (int e = 0; e < N; e++)
        for (int mb = 0; mb < NMB; mb++)
          for (int c = 0; c < CHUNKS; c++)
            for (int b = 0; b < PREC; b++) begin
              int    w;
              word_t wd;
              w = (mb * CHUNKS + c) * PREC + b;
              for (int k = 0; k < MB; k++)
                for (int j = 0; j < 64; j++)
                  wd[k][j] = q[mb * MB + k][fidx(m, e, c, j)][PREC - 1 - b];
              img[m][e][0][w] = wd[3:0];
              img[m][e][1][w] = wd[7:4];
            end
    for (int mb = 0; mb < NMB; mb++) begin
      mbvec_t lv;
      for (int k = 0; k < MB; k++) lv[k] = lbl[mb * MB + k];
      limg[mb] = lv;
    end
    mem_ready = 1;
    for (int bt = 0; bt < NB; bt++) begin
      for (int mm = 0; mm < MBPB; mm++) begin
        int    mb;
        elem_t s [MB];
        mb = bt * MBPB + mm;
        for (int k = 0; k < MB; k++) begin
          elem_t fa;
          fa = 0;
          for (int f = 0; f < FEAT; f++) fa += elem_t'(q[mb * MB + k][f]) * x[f];
          s[k] = scale_ref(fa, lbl[mb * MB + k]);
        end
        for (int f = 0; f < FEAT; f++) begin
          elem_t g;
          g = 0;
          for (int k = 0; k < MB; k++) g += s[k] * elem_t'(q[mb * MB + k][f]);
          u[f] -= g >>> PREC;
        end
      end
      for (int f = 0; f < FEAT; f++) x[f] = u[f];
    end
  endtask

  int   t_start, t_end, changed;
  row_t spare;
  initial begin
    cfg              = '0;
    cfg.num_chunks   = 16'(CHUNKS);
    cfg.prec         = 4'(PREC);
    cfg.mb_per_batch = 16'(MBPB);
    cfg.log2_batch   = 5'(LOG2B);
    cfg.gamma        = elem_t'(1 << 15);   // 0.5
    cfg.loss         = LOSS_LOGREG;
    build_and_reference();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // model rows used by training, plus a spare row 4095 per engine
    for (int j = 0; j < 64; j++) spare[j] = elem_t'(j * 1000 - 7);
    for (int m = 0; m < M; m++)
      for (int e = 0; e < N; e++) begin
        for (int c = 0; c < CHUNKS; c++) begin
          @(negedge clk);
          ld_we = 1; ld_worker = 3'(m); ld_engine = 3'(e); ld_addr = 12'(c);
          for (int j = 0; j < 64; j++) ld_data[j] = x0[fidx(m, e, c, j)];
        end
        @(negedge clk);
        ld_we = 1; ld_worker = 3'(m); ld_engine = 3'(e); ld_addr = 12'd4095; ld_data = spare;
      end
    @(negedge clk);
    ld_we = 0;
    start = 1;
    t_start = cyc;
    @(negedge clk);
    start = 0;
    repeat (20) @(negedge clk);
    while (|busy) @(negedge clk);
    t_end = cyc;
    repeat (20) @(negedge clk);
    changed = 0;
    for (int f = 0; f < FEAT; f++) if (x[f] != x0[f]) changed++;
    for (int m = 0; m < M; m++)
      for (int e = 0; e < N; e++) begin
        for (int c = 0; c < CHUNKS; c++) begin
          @(negedge clk);
          rd_worker = 3'(m); rd_engine = 3'(e); rd_addr = 12'(c);
          @(negedge clk);
          checks++;
          for (int j = 0; j < 64; j++)
            if (rd_data[j] !== x[fidx(m, e, c, j)]) begin
              failures++;
              $display("FAIL worker %0d engine %0d row %0d lane %0d: got %0d expected %0d",
                       m, e, c, j, rd_data[j], x[fidx(m, e, c, j)]);
              break;
            end
        end
        @(negedge clk);
        rd_addr = 12'd4095;
        @(negedge clk);
        checks++;
        if (rd_data !== spare) begin
          failures++;
          $display("FAIL worker %0d engine %0d: untouched row 4095 changed", m, e);
        end
      end
    checks++;
    if (changed < FEAT / 2) begin
      failures++;
      $display("FAIL training changed only %0d of %0d weights", changed, FEAT);
    end
    $display("%0d workers x %0d engines, %0d features, %0d weights changed, %0d cycles",
             M, N, FEAT, changed, t_end - t_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
