// tb_adder_tree -- checks the pipelined adder tree in both configurations
// used by the design: 8 inputs with three numbers per level (latency 2) and
// 64 inputs with two per level (latency 6). Random vectors enter every
// cycle (with random gaps); each result is compared with a sum computed in
// the testbench and must appear exactly LATENCY cycles after its inputs,
// carrying the same tag.
module tb_adder_tree;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---- 8-input ternary tree
  logic              v3, ov3;
  logic [7:0]        tag3, otag3;
  logic signed [31:0] d3 [8];
  logic signed [31:0] s3;
  adder_tree #(.N(8), .W(32), .ARITY(3), .TAG_W(8)) dut3 (
    .clk, .rst_n, .in_valid(v3), .in_tag(tag3), .in_data(d3),
    .out_valid(ov3), .out_tag(otag3), .sum(s3));

  // ---- 64-input binary tree
  logic              v2, ov2;
  logic [7:0]        tag2, otag2;
  logic signed [31:0] d2 [64];
  logic signed [31:0] s2;
  adder_tree #(.N(64), .W(32), .ARITY(2), .TAG_W(8)) dut2 (
    .clk, .rst_n, .in_valid(v2), .in_tag(tag2), .in_data(d2),
    .out_valid(ov2), .out_tag(otag2), .sum(s2));

  // expected results with the cycle they entered
  typedef struct { logic signed [31:0] sum; logic [7:0] tag; int cyc; } exp_t;
  exp_t q3[$], q2[$];
  int cyc = 0;
  logic run = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // drive
  always @(posedge clk) begin
    if (!run) begin
      v3 <= 0; v2 <= 0;
    end else begin
      v3 <= ($urandom % 4) != 0;
      tag3 <= 8'($urandom);
      v2 <= ($urandom % 4) != 0;
      tag2 <= 8'($urandom);
      for (int i = 0; i < 8; i++) d3[i] <= $urandom;
      for (int i = 0; i < 64; i++) d2[i] <= $urandom;
    end
  end

  // record and compare
  always @(negedge clk) begin
    if (rst_n) begin
      if (v3) begin
        exp_t e; e.sum = 0;
        for (int i = 0; i < 8; i++) e.sum += d3[i];
        e.tag = tag3; e.cyc = cyc; q3.push_back(e);
      end
      if (v2) begin
        exp_t e; e.sum = 0;
        for (int i = 0; i < 64; i++) e.sum += d2[i];
        e.tag = tag2; e.cyc = cyc; q2.push_back(e);
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (ov3) begin
        exp_t e; e = q3.pop_front();
        checks++;
        if (e.sum !== s3 || e.tag !== otag3 || (cyc - e.cyc) != 2) begin
          failures++;
          $display("FAIL tree3: got %0d tag %0h exp %0d tag %0h lat %0d", s3, otag3, e.sum, e.tag, cyc - e.cyc);
        end
      end
      if (ov2) begin
        exp_t e; e = q2.pop_front();
        checks++;
        if (e.sum !== s2 || e.tag !== otag2 || (cyc - e.cyc) != 6) begin
          failures++;
          $display("FAIL tree2: got %0d exp %0d lat %0d", s2, e.sum, cyc - e.cyc);
        end
      end
    end
  end

  initial begin
    v3 = 0; v2 = 0; tag3 = 0; tag2 = 0;
    for (int i = 0; i < 8; i++) d3[i] = 0;
    for (int i = 0; i < 64; i++) d2[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; run = 1;
    repeat (500) @(posedge clk);
    run = 0;
    repeat (10) @(posedge clk);
    if (q3.size() > 2 || q2.size() > 6) begin failures++; $display("FAIL results missing"); end
    if (checks < 300) begin failures++; $display("FAIL too few results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
