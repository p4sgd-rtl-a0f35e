// hbm_reader -- streams a region of HBM through CH 256-bit AXI read ports
// as one CH*256-bit stream.
//
// After `start`, the reader fetches `num_words` output words beginning at
// byte address `base`. Output word i is made of beat i of every port:
// port c supplies bits [256c +: 256], read at base + 32*i on that port's
// own pseudo-channel group. Reads go out as bursts of up to MAX_LEN beats,
// issued on all ports together; a burst is requested only when the output
// buffer has room for all of it, so R data are always accepted (rready = 1)
// and the stream never loses a beat. The output is valid/ready.
//
// In the worker, each engine uses one reader with CH = 2 to build its
// 512-bit sample stream from two 256-bit AXI ports (as the paper does), and
// one reader with CH = 1 fetches labels, one 256-bit beat (8 labels) per
// micro-batch. Burst length, buffering and the address layout are this
// design's choices; base must be aligned to 32*MAX_LEN bytes so that no
// burst crosses a 4 KB boundary.
module hbm_reader
  import p4sgd_pkg::*;
#(
  parameter int CH        = 2,
  parameter int MAX_LEN   = 16,
  parameter int BUF_DEPTH = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [AXI_AW-1:0]   base,
  input  logic [31:0]         num_words,
  output axi_rd_req_t         axi_req [CH],
  input  axi_rd_rsp_t         axi_rsp [CH],
  output logic                out_valid,
  input  logic                out_ready,
  output logic [CH*AXI_DW-1:0] out_data,
  output logic                busy
);

  localparam int RW = $clog2(BUF_DEPTH + 1);

  logic [AXI_AW-1:0] addr;
  logic [31:0]       rem_issue;    // words not yet requested
  logic [31:0]       rem_out;      // words not yet delivered
  logic [RW-1:0]     reserved;     // requested, not yet delivered
  logic [CH-1:0]     ar_done;
  logic              ar_active;
  logic [7:0]        len;          // beats of the current burst - 1

  logic [31:0] next_len;
  assign next_len = (rem_issue > 32'(MAX_LEN)) ? 32'(MAX_LEN) : rem_issue;

  logic pop;
  logic [CH-1:0] f_empty;
  assign out_valid = !(|f_empty);
  assign pop       = out_valid && out_ready;
  assign busy      = (rem_out != '0);

  // all ports' address handshakes done this cycle?
  logic [CH-1:0] ar_fire;
  for (genvar c = 0; c < CH; c++) begin : g_ar
    assign axi_req[c].araddr  = addr;
    assign axi_req[c].arlen   = len;
    assign axi_req[c].arvalid = ar_active && !ar_done[c];
    assign axi_req[c].rready  = 1'b1;
    assign ar_fire[c]         = axi_req[c].arvalid && axi_rsp[c].arready;
  end

  logic all_done;
  assign all_done = &(ar_done | ar_fire);

  logic issue;   // start a new burst
  assign issue = !ar_active && (rem_issue != '0) &&
                 (32'(reserved) + next_len <= 32'(BUF_DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr      <= '0;
      rem_issue <= '0;
      rem_out   <= '0;
      reserved  <= '0;
      ar_done   <= '0;
      ar_active <= 1'b0;
      len       <= '0;
    end else begin
      reserved <= reserved + (issue ? RW'(next_len) : '0) - RW'(pop);
      if (pop) rem_out <= rem_out - 32'd1;
      if (start) begin
        addr      <= base;
        rem_issue <= num_words;
        rem_out   <= num_words;
        ar_active <= 1'b0;
      end else if (issue) begin
        ar_active <= 1'b1;
        ar_done   <= '0;
        len       <= 8'(next_len - 32'd1);
        rem_issue <= rem_issue - next_len;
      end else if (ar_active) begin
        if (all_done) begin
          ar_active <= 1'b0;
          ar_done   <= '0;
          addr      <= addr + AXI_AW'((32'(len) + 32'd1) * 32'(AXI_DW / 8));
        end else begin
          ar_done <= ar_done | ar_fire;
        end
      end
    end
  end

  for (genvar c = 0; c < CH; c++) begin : g_buf
    sync_fifo #(.W(AXI_DW), .DEPTH(BUF_DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr   (axi_rsp[c].rvalid),
      .din  (axi_rsp[c].rdata),
      .rd   (pop),
      .dout (out_data[c*AXI_DW +: AXI_DW]),
      .empty(f_empty[c]),
      .full (),
      .count()
    );
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (!ar_active && reserved == '0));

endmodule
