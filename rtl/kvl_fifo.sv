// kvl_fifo: synchronous first-in first-out buffer with valid/ready on both
// sides. In the lookup engine it is the key FIFO that holds each key until the
// compare/select unit receives that key's probe sequence.
//
// Storage is a DEPTH-entry array with read and write pointers; data pushed in
// one cycle can be popped the next (no fall-through). in_ready is low when
// full, out_valid is low when empty; a push and a pop may happen in the same
// cycle. The paper only names the FIFO; depth and timing are this design's own.
module kvl_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0]               in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [W-1:0]               out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH)
    else $error("kvl_fifo: count above depth");
endmodule
