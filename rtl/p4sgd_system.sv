// p4sgd_system -- M FPGA workers and the in-switch aggregation server.
//
// The workers train one GLM by model parallelism: worker m holds features
// (and weights) of its own slice, every worker sees all samples' labels.
// Per micro-batch each worker sends its partial activations to the switch;
// the switch sums the M contributions and multicasts the full activations,
// and each worker completes its backward pass and model update on its own
// slice. All workers therefore advance in lock step, synchronised only by
// the aggregation slots of the switch.
//
// Network: the M worker uplinks share the switch pipeline through a
// round-robin arbiter (one packet per cycle); the switch output is copied
// to every worker's downlink, standing in for the switch's packet
// replication engine. `up_drop[m]` / `down_drop[m]` discard the packet that
// crosses worker m's uplink / downlink in that cycle; they model a lossy
// network for testing the retransmission protocol and are tied low in use.
//
// Host and memory ports of every worker are brought out: HBM AXI read ports
// (hbm_*, label_*), model load/readback selected by worker and engine, and
// the shared launch configuration. `busy[m]` and `retransmits[m]` report
// each worker's state.
//
// The default configuration is the one the paper evaluates most: 8 workers
// of 8 engines each, 256K weights per engine, 64K aggregation slots.
module p4sgd_system
  import p4sgd_pkg::*;
#(
  parameter int M          = 8,
  parameter int N          = 8,
  parameter int MAX_CHUNKS = 4096,
  parameter int FIFO_DEPTH = 16384,
  parameter int NUM_SLOTS  = 65536,
  parameter int WINDOW     = 16,
  localparam int CAW = $clog2(MAX_CHUNKS),
  localparam int EW  = (N > 1) ? $clog2(N) : 1,
  localparam int MW  = (M > 1) ? $clog2(M) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  train_cfg_t        cfg,
  input  logic [15:0]       timeout,
  input  logic              start,
  input  logic [AXI_AW-1:0] data_base,
  input  logic [31:0]       data_words,
  input  logic [AXI_AW-1:0] label_base,
  input  logic [31:0]       label_words,
  output axi_rd_req_t       hbm_req   [M][N][2],
  input  axi_rd_rsp_t       hbm_rsp   [M][N][2],
  output axi_rd_req_t       label_req [M][1],
  input  axi_rd_rsp_t       label_rsp [M][1],
  input  logic              ld_we,
  input  logic [MW-1:0]     ld_worker,
  input  logic [EW-1:0]     ld_engine,
  input  logic [CAW-1:0]    ld_addr,
  input  row_t              ld_data,
  input  logic [MW-1:0]     rd_worker,
  input  logic [EW-1:0]     rd_engine,
  input  logic [CAW-1:0]    rd_addr,
  output row_t              rd_data,
  input  logic [M-1:0]      up_drop,
  input  logic [M-1:0]      down_drop,
  output logic [M-1:0]      busy,
  output logic [31:0]       retransmits [M]
);

  logic     [M-1:0] tx_valid, tx_ready;
  pmt_pkt_t         tx_pkt [M];
  row_t             w_rd   [M];
  logic             sw_out_valid;
  pmt_pkt_t         sw_out_pkt;

  for (genvar m = 0; m < M; m++) begin : g_w
    p4sgd_worker #(
      .N(N), .MAX_CHUNKS(MAX_CHUNKS), .FIFO_DEPTH(FIFO_DEPTH),
      .NUM_SLOTS(NUM_SLOTS), .WINDOW(WINDOW)
    ) u_worker (
      .clk, .rst_n, .cfg,
      .worker_idx (5'(m)),
      .timeout,
      .start, .data_base, .data_words, .label_base, .label_words,
      .hbm_req    (hbm_req[m]),
      .hbm_rsp    (hbm_rsp[m]),
      .label_req  (label_req[m]),
      .label_rsp  (label_rsp[m]),
      .ld_we      (ld_we && (ld_worker == MW'(m))),
      .ld_engine, .ld_addr, .ld_data,
      .rd_engine, .rd_addr,
      .rd_data    (w_rd[m]),
      .tx_valid   (tx_valid[m]),
      .tx_ready   (tx_ready[m]),
      .tx_pkt     (tx_pkt[m]),
      .rx_valid   (sw_out_valid && !down_drop[m]),
      .rx_pkt     (sw_out_pkt),
      .busy       (busy[m]),
      .retransmits(retransmits[m])
    );
  end

  assign rd_data = w_rd[rd_worker];

  // round-robin uplink arbiter
  logic [MW-1:0] rr;       // highest priority this cycle
  logic          gnt_found;
  logic [MW-1:0] gnt;
  always_comb begin
    gnt_found = 1'b0;
    gnt       = '0;
    for (int i = 0; i < M; i++) begin
      logic [MW-1:0] idx;
      idx = MW'((32'(rr) + i) % M);
      if (!gnt_found && tx_valid[idx]) begin
        gnt_found = 1'b1;
        gnt       = idx;
      end
    end
    tx_ready = '0;
    if (gnt_found) tx_ready[gnt] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (gnt_found) rr <= MW'((32'(gnt) + 1) % M);
  end

  switch_agg #(.NUM_SLOTS(NUM_SLOTS)) u_switch (
    .clk, .rst_n,
    .num_workers(6'(M)),
    .in_valid   (gnt_found && !up_drop[gnt]),
    .in_pkt     (tx_pkt[gnt]),
    .out_valid  (sw_out_valid),
    .out_pkt    (sw_out_pkt)
  );

endmodule
