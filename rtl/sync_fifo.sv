// sync_fifo -- single-clock first-in first-out buffer with show-ahead output.
//
// `dout` always shows the oldest entry while `empty` is low; `rd` removes
// it at the clock edge, `wr` appends `din`. Both may happen in the same
// cycle. Writing when full or reading when empty is a protocol error,
// checked by assertions. `count` gives the occupancy. DEPTH need not be a
// power of two. The storage is a plain array read asynchronously.
module sync_fifo #(
  parameter int W     = 64,
  parameter int DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr,
  input  logic [W-1:0]               din,
  input  logic                       rd,
  output logic [W-1:0]               dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr) wp <= inc(wp);
      if (rd) rp <= inc(rp);
      count <= count + CW'(wr) - CW'(rd);
    end
  end

  always_ff @(posedge clk) if (wr) mem[wp] <= din;

  assign dout  = mem[rp];
  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr |-> (!full || rd));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd |-> !empty);

endmodule
