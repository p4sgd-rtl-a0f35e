// tb_hbm_reader -- checks the two-port HBM reader.
//
// Two behavioural AXI memories hold different random contents. The reader
// is started several times with random base addresses and lengths
// (including lengths that are not a multiple of the burst); each output
// word must be {port1 word i, port0 word i} in order, with random output
// back-pressure, and exactly num_words words must come out. A
// back-pressure-free run checks a rate of at least one word per two
// cycles, i.e. that bursts are kept in flight.
module tb_hbm_reader;
  import p4sgd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              start = 0;
  logic [AXI_AW-1:0] base = 0;
  logic [31:0]       num_words = 0;
  axi_rd_req_t       axi_req [2];
  axi_rd_rsp_t       axi_rsp [2];
  logic              out_valid, out_ready = 0, busy;
  logic [511:0]      out_data;

  hbm_reader #(.CH(2)) dut (.*);
  hbm_axi_model #(.DEPTH(1024), .SEED(7))  m0 (.clk, .req(axi_req[0]), .rsp(axi_rsp[0]));
  hbm_axi_model #(.DEPTH(1024), .SEED(11)) m1 (.clk, .req(axi_req[1]), .rsp(axi_rsp[1]));

  int got;
  bit bp;   // apply back-pressure
  always @(negedge clk) out_ready <= bp ? (($urandom % 3) != 0) : 1'b1;

  initial begin
    for (int i = 0; i < 1024; i++) begin
      for (int j = 0; j < 8; j++) begin
        m0.mem[i][32*j +: 32] = $urandom;
        m1.mem[i][32*j +: 32] = $urandom;
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 8; run++) begin
      int b0, n, t0;
      b0 = 16 * ($urandom % 32);
      n  = (run == 7) ? 200 : 1 + $urandom % 150;
      bp = (run != 7);
      @(negedge clk);
      base = AXI_AW'(b0 * 32);
      num_words = 32'(n);
      start = 1;
      @(negedge clk);
      start = 0;
      got = 0;
      t0 = 0;
      while (got < n) begin
        @(posedge clk);
        t0++;
        if (out_valid && out_ready) begin
          checks++;
          if (out_data !== {m1.mem[(b0 + got) % 1024], m0.mem[(b0 + got) % 1024]}) begin
            failures++;
            $display("FAIL run %0d word %0d", run, got);
          end
          got++;
        end
        if (t0 > 20000) break;
      end
      repeat (30) @(posedge clk);
      checks++;
      if (busy || out_valid || got != n) begin failures++; $display("FAIL run %0d extra/missing", run); end
      if (run == 7) begin
        checks++;
        if (t0 > 2 * n + 40) begin failures++; $display("FAIL rate: %0d cycles for %0d words", t0, n); end
        $display("rate: %0d words in %0d cycles", n, t0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
