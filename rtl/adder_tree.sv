// adder_tree -- fully pipelined adder tree with a configurable fan-in.
//
// Sums N signed W-bit inputs. Each level adds groups of ARITY numbers and is
// registered, so the sum of the inputs presented in cycle t appears on
// `sum` in cycle t+LATENCY with `out_valid` high; a new set may enter every
// cycle. A TAG_W-bit side tag travels with the data so that the caller can
// keep control information (bit position, last flags) aligned with it.
// Sums wrap modulo 2^W.
//
// The banks use a binary tree (ARITY = 2) over their 64 bit-serial
// multipliers, as the paper only says "fully pipelined adder tree"; the
// gradient accumulation of an engine uses ARITY = 3, the paper's
// three-numbers-per-level DSP tree. No reset on the data path; the valid
// pipeline is reset.
module adder_tree #(
  parameter int N     = 8,
  parameter int W     = 32,
  parameter int ARITY = 3,
  parameter int TAG_W = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [TAG_W-1:0]    in_tag,
  input  logic signed [W-1:0] in_data [N],
  output logic                out_valid,
  output logic [TAG_W-1:0]    out_tag,
  output logic signed [W-1:0] sum
);

  // number of levels needed to reduce N values to one
  function automatic int levels(int n, int a);
    int l = 0;
    int c = n;
    while (c > 1) begin
      c = (c + a - 1) / a;
      l++;
    end
    return (l == 0) ? 1 : l;
  endfunction

  // number of values left after `l` levels
  function automatic int width_at(int n, int a, int l);
    int c = n;
    for (int i = 0; i < l; i++) c = (c + a - 1) / a;
    return c;
  endfunction

  localparam int LATENCY = levels(N, ARITY);

  logic signed [W-1:0] lvl   [LATENCY+1][N];
  logic                vld   [LATENCY+1];
  logic [TAG_W-1:0]    tag   [LATENCY+1];

  always_comb begin
    for (int i = 0; i < N; i++) lvl[0][i] = in_data[i];
    vld[0] = in_valid;
    tag[0] = in_tag;
  end

  for (genvar l = 0; l < LATENCY; l++) begin : g_level
    localparam int CNT_IN  = width_at(N, ARITY, l);
    localparam int CNT_OUT = width_at(N, ARITY, l + 1);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[l+1] <= 1'b0;
      else        vld[l+1] <= vld[l];
    end

    always_ff @(posedge clk) begin
      tag[l+1] <= tag[l];
      for (int o = 0; o < N; o++) begin
        if (o < CNT_OUT) begin
          logic signed [W-1:0] acc;
          acc = '0;
          for (int a = 0; a < ARITY; a++)
            if (o * ARITY + a < CNT_IN) acc = acc + lvl[l][o*ARITY+a];
          lvl[l+1][o] <= acc;
        end else begin
          lvl[l+1][o] <= '0;
        end
      end
    end
  end

  assign out_valid = vld[LATENCY];
  assign out_tag   = tag[LATENCY];
  assign sum       = lvl[LATENCY][0];

endmodule
