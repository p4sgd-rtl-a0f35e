// p4sgd_pkg -- types and constants shared by the model-parallel GLM training
// worker, the in-switch aggregator and the system top.
//
// A micro-batch holds MB = 8 samples, one per bank of an engine. Every
// engine consumes a 512-bit word per cycle: 8 lanes of 64 bits, lane k
// belonging to sample k, bit j of a lane being one bit of feature j of
// that sample (bit-serial, "weaved" layout). Model weights, activations,
// labels, scales and gradients are 32-bit two's complement fixed point with
// FRAC fractional bits (the fraction width is this design's choice).
//
// The packet header follows the paper's PMT header: bm (32 bit, the sender's
// one-hot worker bitmap), seq (32 bit, aggregation slot), is_agg (1 bit),
// acked (1 bit) and 6 reserved bits, 9 bytes in all. The payload carries MB
// 32-bit partial or full activations (32 bytes, the size of one aggregator
// value in the switch).
package p4sgd_pkg;

  localparam int MB        = 8;    // micro-batch size = banks per engine
  localparam int LANE_W    = 64;   // features consumed per bank per cycle
  localparam int ELEM_W    = 32;   // width of weights, activations, gradients
  localparam int WORD_W    = MB * LANE_W;  // 512-bit engine input word
  localparam int FRAC      = 16;   // fractional bits of fixed-point values
  localparam int MAX_PREC  = 8;    // largest feature precision in bits
  localparam int AXI_DW    = 256;  // HBM AXI data width
  localparam int AXI_AW    = 33;   // byte address of one 8 GB HBM space

  typedef logic signed [ELEM_W-1:0] elem_t;
  typedef elem_t [MB-1:0]           mbvec_t;     // one value per sample
  typedef elem_t [LANE_W-1:0]       row_t;       // 64 weights / gradients
  typedef logic [MB-1:0][LANE_W-1:0] word_t;     // 512-bit weaved word

  typedef struct packed {
    logic [31:0] bm;
    logic [31:0] seq;
    logic        is_agg;
    logic        acked;
    logic [5:0]  reserve;
  } pmt_hdr_t;

  typedef struct packed {
    pmt_hdr_t hdr;
    mbvec_t   payload;   // PA on the way up, FA on the way down
  } pmt_pkt_t;

  typedef enum logic [1:0] {
    LOSS_LINREG = 2'd0,  // least squares: df = a - b
    LOSS_LOGREG = 2'd1,  // logistic:      df = sigmoid(a) - b
    LOSS_SVM    = 2'd2   // hinge:         df = -b if b*a < 1 else 0
  } loss_e;

  // Run-time training configuration, written by the host before start.
  typedef struct packed {
    logic [15:0] num_chunks;    // 64-feature chunks in one engine's partition
    logic [3:0]  prec;          // feature precision in bits, 1..MAX_PREC
    logic [15:0] mb_per_batch;  // micro-batches per mini-batch (B / MB)
    logic [4:0]  log2_batch;    // log2(B), folded into the scale
    elem_t       gamma;         // learning rate, FRAC fractional bits
    loss_e       loss;          // which GLM is trained
  } train_cfg_t;

  // AXI4 read channels (AR and R only; the engines never write HBM).
  typedef struct packed {
    logic [AXI_AW-1:0] araddr;
    logic [7:0]        arlen;
    logic              arvalid;
    logic              rready;
  } axi_rd_req_t;

  typedef struct packed {
    logic              arready;
    logic [AXI_DW-1:0] rdata;
    logic              rlast;
    logic              rvalid;
  } axi_rd_rsp_t;

endpackage
