// p4sgd_worker -- one FPGA worker of model-parallel GLM training.
//
// The worker owns a vertical slice of the model and of the dataset (its
// features) and splits it evenly over N engines that run in lock step.
// Each engine streams its share of the samples from HBM through its own
// reader (two 256-bit AXI ports -> 512 bits per cycle) and produces, per
// micro-batch of 8 samples, 8 partial activations. The worker adds the N
// engines' vectors into PA_m, and the transport sends PA_m to the switch
// and later returns the full activation FA (the sum over all workers).
// The scale calculator combines FA with the 8 labels of the micro-batch,
// read by a one-port reader, into the scale vector that every engine uses
// for its backward pass and model update.
//
// Interface: `start` launches the readers (data_words 512-bit words per
// engine from data_base, label_words 256-bit label beats from label_base);
// the engines then train for as long as data arrive. `ld_*` loads model
// rows into engine ld_engine, `rd_*` reads them back (one-cycle latency).
// `tx_*`/`rx_*` carry one packet (header + 8 activations) per cycle to and
// from the switch. `busy` is high while any reader, engine or transport
// entry is active.
//
// From the paper: N engines with their HBM ports, summation of the engines'
// PAs, scale calculation from FA and labels, the transport. This design's
// choices: the adder after the engines (a plain sum), the host ports and
// the handshakes.
module p4sgd_worker
  import p4sgd_pkg::*;
#(
  parameter int N          = 8,
  parameter int MAX_CHUNKS = 4096,
  parameter int FIFO_DEPTH = 16384,
  parameter int NUM_SLOTS  = 65536,
  parameter int WINDOW     = 16,
  localparam int CAW = $clog2(MAX_CHUNKS),
  localparam int EW  = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  train_cfg_t        cfg,
  input  logic [4:0]        worker_idx,
  input  logic [15:0]       timeout,
  // launch
  input  logic              start,
  input  logic [AXI_AW-1:0] data_base,
  input  logic [31:0]       data_words,
  input  logic [AXI_AW-1:0] label_base,
  input  logic [31:0]       label_words,
  // HBM
  output axi_rd_req_t       hbm_req   [N][2],
  input  axi_rd_rsp_t       hbm_rsp   [N][2],
  output axi_rd_req_t       label_req [1],
  input  axi_rd_rsp_t       label_rsp [1],
  // host model access
  input  logic              ld_we,
  input  logic [EW-1:0]     ld_engine,
  input  logic [CAW-1:0]    ld_addr,
  input  row_t              ld_data,
  input  logic [EW-1:0]     rd_engine,
  input  logic [CAW-1:0]    rd_addr,
  output row_t              rd_data,
  // network
  output logic              tx_valid,
  input  logic              tx_ready,
  output pmt_pkt_t          tx_pkt,
  input  logic              rx_valid,
  input  pmt_pkt_t          rx_pkt,
  output logic              busy,
  output logic [31:0]       retransmits
);

  logic   [N-1:0] in_valid, in_ready, rd_busy, eng_busy;
  word_t          in_data   [N];
  logic   [N-1:0] pa_valid, scale_ready;
  mbvec_t         eng_pa    [N];
  row_t           eng_rd    [N];

  logic   sc_valid, sc_ready;
  mbvec_t sc_scale;
  logic   pa_all, tp_pa_ready;

  for (genvar e = 0; e < N; e++) begin : g_eng
    hbm_reader #(.CH(2)) u_rd (
      .clk, .rst_n,
      .start,
      .base     (data_base),
      .num_words(data_words),
      .axi_req  (hbm_req[e]),
      .axi_rsp  (hbm_rsp[e]),
      .out_valid(in_valid[e]),
      .out_ready(in_ready[e]),
      .out_data (in_data[e]),
      .busy     (rd_busy[e])
    );

    sgd_engine #(.MAX_CHUNKS(MAX_CHUNKS), .FIFO_DEPTH(FIFO_DEPTH)) u_eng (
      .clk, .rst_n, .cfg,
      .in_valid   (in_valid[e]),
      .in_ready   (in_ready[e]),
      .in_data    (in_data[e]),
      .pa_valid   (pa_valid[e]),
      .pa_ready   (pa_all && tp_pa_ready),
      .pa         (eng_pa[e]),
      .scale_valid(sc_valid && (&scale_ready)),
      .scale_ready(scale_ready[e]),
      .scale      (sc_scale),
      .ld_we      (ld_we && (ld_engine == EW'(e))),
      .ld_addr,
      .ld_data,
      .rd_addr,
      .rd_data    (eng_rd[e]),
      .busy       (eng_busy[e])
    );
  end

  assign rd_data  = eng_rd[rd_engine];
  assign sc_ready = &scale_ready;

  // PA_m = sum over the engines
  assign pa_all = &pa_valid;
  mbvec_t pa_sum;
  always_comb begin
    pa_sum = '0;
    for (int e = 0; e < N; e++)
      for (int k = 0; k < MB; k++)
        pa_sum[k] = pa_sum[k] + eng_pa[e][k];
  end

  // transport
  logic   fa_valid, fa_ready;
  mbvec_t fa;
  worker_transport #(.NUM_SLOTS(NUM_SLOTS), .WINDOW(WINDOW)) u_tp (
    .clk, .rst_n, .worker_idx, .timeout,
    .pa_valid   (pa_all),
    .pa_ready   (tp_pa_ready),
    .pa         (pa_sum),
    .fa_valid, .fa_ready, .fa,
    .tx_valid, .tx_ready, .tx_pkt,
    .rx_valid, .rx_pkt,
    .retransmits
  );

  // labels
  logic                 lb_valid, lb_ready, lb_busy;
  logic [AXI_DW-1:0]    lb_data;
  hbm_reader #(.CH(1)) u_lbl (
    .clk, .rst_n,
    .start,
    .base     (label_base),
    .num_words(label_words),
    .axi_req  (label_req),
    .axi_rsp  (label_rsp),
    .out_valid(lb_valid),
    .out_ready(lb_ready),
    .out_data (lb_data),
    .busy     (lb_busy)
  );

  scale_calc u_sc (
    .clk, .rst_n, .cfg,
    .fa_valid, .fa_ready, .fa,
    .lb_valid, .lb_ready,
    .lb         (mbvec_t'(lb_data)),
    .scale_valid(sc_valid),
    .scale_ready(sc_ready),
    .scale      (sc_scale)
  );

  assign busy = (|rd_busy) || (|eng_busy) || lb_busy || fa_valid || sc_valid;

endmodule
