// tb_p4sgd_system -- end-to-end training run of the whole system (M
// workers of N engines each, and the switch) on a lossy network.
//
// The testbench builds a random dataset: MB*NMB samples with
// M*N*CHUNKS*64 features of PREC bits, plus labels. It lays each engine's
// feature slice out in its two HBM port memories in the weaved order
// (micro-batch, chunk, bit plane, MSB first; lanes 0-3 on port 0, lanes
// 4-7 on port 1) and the labels in each worker's label memory, one 256-bit
// beat per micro-batch. It loads a random initial model into every engine
// and starts all workers.
//
// A reference model runs the same mini-batch SGD (linear regression,
// 32-bit two's-complement arithmetic like the hardware). Per micro-batch:
// FA = sum of q*x over all features; scale = gamma*(FA>>>prec - b) >>>
// (16 + log2 B); updated -= (sum_k scale_k*q_k) >>> prec. After each
// mini-batch the model becomes the updated model. At the end every model
// row of every engine is read back and compared.
//
// About 1 packet in 8 is dropped, independently on each uplink and each
// downlink. The run must show every mechanism at least once and fails
// otherwise: packet drops, retransmission after a timeout, the switch
// ignoring a duplicate, the mini-batch barrier stall, the FIFO-full stall,
// and forward/backward overlap inside an engine.
module tb_p4sgd_system;
  import p4sgd_pkg::*;
  localparam int M = 2, N = 2, MAXC = 8, FD = 16;
  localparam int CHUNKS = 2, PREC = 4, MBPB = 4, NB = 2, LOG2B = 5;
  localparam int NMB = MBPB * NB;
  localparam int WORDS = NMB * CHUNKS * PREC;
  localparam int CAW = $clog2(MAXC);
  localparam int EW = (N > 1) ? $clog2(N) : 1;
  localparam int MW = (M > 1) ? $clog2(M) : 1;
  localparam int FEAT = M * N * CHUNKS * 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  train_cfg_t        cfg;
  logic [15:0]       timeout = 16'd60;
  logic              start = 0;
  logic [AXI_AW-1:0] data_base = 0, label_base = 0;
  logic [31:0]       data_words = 32'(WORDS), label_words = 32'(NMB);
  axi_rd_req_t       hbm_req   [M][N][2];
  axi_rd_rsp_t       hbm_rsp   [M][N][2];
  axi_rd_req_t       label_req [M][1];
  axi_rd_rsp_t       label_rsp [M][1];
  logic              ld_we = 0;
  logic [MW-1:0]     ld_worker = 0, rd_worker = 0;
  logic [EW-1:0]     ld_engine = 0, rd_engine = 0;
  logic [CAW-1:0]    ld_addr = 0, rd_addr = 0;
  row_t              ld_data = '0, rd_data;
  logic [M-1:0]      up_drop = 0, down_drop = 0, busy;
  logic [31:0]       retransmits [M];

  p4sgd_system #(.M(M), .N(N), .MAX_CHUNKS(MAXC), .FIFO_DEPTH(FD),
                 .NUM_SLOTS(16), .WINDOW(4)) dut (.*);

  // ---------------- dataset, memories, reference ---------------------
  byte unsigned      q    [NMB * MB][FEAT];
  elem_t             x0   [FEAT];   // initial model
  elem_t             x    [FEAT];   // reference model
  elem_t             u    [FEAT];   // reference updated model
  elem_t             lbl  [NMB * MB];
  logic [AXI_DW-1:0] img  [M][N][2][WORDS];
  logic [AXI_DW-1:0] limg [NMB];
  bit                mem_ready = 0;

  for (genvar m = 0; m < M; m++) begin : g_m
    hbm_axi_model #(.DEPTH(WORDS + 16), .SEED(m + 3)) u_lmem (
      .clk, .req(label_req[m][0]), .rsp(label_rsp[m][0]));
    initial begin
      wait (mem_ready);
      for (int i = 0; i < NMB; i++) u_lmem.mem[i] = limg[i];
    end
    for (genvar e = 0; e < N; e++) begin : g_e
      for (genvar p = 0; p < 2; p++) begin : g_p
        hbm_axi_model #(.DEPTH(WORDS + 16), .SEED(100 * m + 10 * e + p + 1)) u_mem (
          .clk, .req(hbm_req[m][e][p]), .rsp(hbm_rsp[m][e][p]));
        initial begin
          wait (mem_ready);
          for (int i = 0; i < WORDS; i++) u_mem.mem[i] = img[m][e][p][i];
        end
      end
    end
  end

  // global feature index of lane j, local chunk c of engine e in worker m
  function automatic int fidx(int m, int e, int c, int j);
    return ((m * N + e) * CHUNKS + c) * 64 + j;
  endfunction

  function automatic elem_t scale_ref(elem_t fa, elem_t b);
    longint d;
    d = longint'(fa >>> PREC) - longint'(b);
    return elem_t'((d * longint'(cfg.gamma)) >>> (16 + LOG2B));
  endfunction

  task automatic build_and_reference();
    for (int s = 0; s < NMB * MB; s++) begin
      for (int f = 0; f < FEAT; f++) q[s][f] = 8'($urandom % (1 << PREC));
      lbl[s] = elem_t'($signed($urandom % 131072) - 65536);
    end
    for (int f = 0; f < FEAT; f++) begin
      x0[f] = elem_t'($signed($urandom % 8192) - 4096);
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

  // ---------------- mechanism counters and loss injection ------------
  int n_barrier = 0, n_fifo = 0, n_overlap = 0, n_dup = 0, n_drop = 0;
  bit run = 0;
  for (genvar m = 0; m < M; m++) begin : g_cnt
    for (genvar e = 0; e < N; e++) begin : g_ce
      always @(posedge clk) if (run) begin
        if (dut.g_w[m].u_worker.g_eng[e].u_eng.in_valid &&
            dut.g_w[m].u_worker.g_eng[e].u_eng.stall_barrier) n_barrier++;
        if (dut.g_w[m].u_worker.g_eng[e].u_eng.in_valid &&
            dut.g_w[m].u_worker.g_eng[e].u_eng.stall_fifo) n_fifo++;
        if (dut.g_w[m].u_worker.g_eng[e].u_eng.s1_valid &&
            dut.g_w[m].u_worker.g_eng[e].u_eng.b_run) n_overlap++;
      end
    end
  end

  always @(posedge clk) if (run) begin
    if (dut.u_switch.s1_valid &&
        ((dut.u_switch.cur.agg_bm & dut.u_switch.s1_pkt.hdr.bm) != 0 && dut.u_switch.s1_pkt.hdr.is_agg ||
         (dut.u_switch.cur.ack_bm & dut.u_switch.s1_pkt.hdr.bm) != 0 && !dut.u_switch.s1_pkt.hdr.is_agg))
      n_dup++;
    if (dut.gnt_found && up_drop[dut.gnt]) n_drop++;
    if (dut.sw_out_valid)
      for (int m = 0; m < M; m++) if (down_drop[m]) n_drop++;
  end

  always @(negedge clk) begin
    up_drop   <= run ? M'($urandom) & M'($urandom) & M'($urandom) : '0;
    down_drop <= run ? M'($urandom) & M'($urandom) & M'($urandom) : '0;
  end

  // ---------------- sequence -----------------------------------------
  int t_start, t_end, rt;
  initial begin
    cfg              = '0;
    cfg.num_chunks   = 16'(CHUNKS);
    cfg.prec         = 4'(PREC);
    cfg.mb_per_batch = 16'(MBPB);
    cfg.log2_batch   = 5'(LOG2B);
    cfg.gamma        = elem_t'(1 << 14);   // 0.25
    cfg.loss         = LOSS_LINREG;
    build_and_reference();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < M; m++)
      for (int e = 0; e < N; e++)
        for (int c = 0; c < CHUNKS; c++) begin
          @(negedge clk);
          ld_we = 1; ld_worker = MW'(m); ld_engine = EW'(e); ld_addr = CAW'(c);
          for (int j = 0; j < 64; j++) ld_data[j] = x0[fidx(m, e, c, j)];
        end
    @(negedge clk);
    ld_we = 0;
    start = 1;
    run   = 1;
    t_start = cyc;
    @(negedge clk);
    start = 0;
    repeat (20) @(negedge clk);
    while (|busy) @(negedge clk);
    t_end = cyc;
    run = 0;
    repeat (20) @(negedge clk);
    for (int m = 0; m < M; m++)
      for (int e = 0; e < N; e++)
        for (int c = 0; c < CHUNKS; c++) begin
          @(negedge clk);
          rd_worker = MW'(m); rd_engine = EW'(e); rd_addr = CAW'(c);
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
    rt = 0;
    for (int m = 0; m < M; m++) rt += retransmits[m];
    $display("mechanisms: dropped=%0d retransmits=%0d switch-duplicates=%0d barrier-stall=%0d fifo-stall=%0d fwd/bwd-overlap=%0d",
             n_drop, rt, n_dup, n_barrier, n_fifo, n_overlap);
    $display("training of %0d micro-batches took %0d cycles", NMB, t_end - t_start);
    checks++; if (n_drop    == 0) begin failures++; $display("FAIL no packet dropped"); end
    checks++; if (rt        == 0) begin failures++; $display("FAIL no retransmission"); end
    checks++; if (n_dup     == 0) begin failures++; $display("FAIL switch saw no duplicate"); end
    checks++; if (n_barrier == 0) begin failures++; $display("FAIL no barrier stall"); end
    checks++; if (n_fifo    == 0) begin failures++; $display("FAIL no FIFO-full stall"); end
    checks++; if (n_overlap == 0) begin failures++; $display("FAIL no forward/backward overlap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
