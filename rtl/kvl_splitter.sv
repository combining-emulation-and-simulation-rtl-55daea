// kvl_splitter: passes every item of one stream to two destinations (the
// "Split" block of the lookup pipeline, which sends each key to the key FIFO
// and to the hash unit).
//
// It is a stream fork: each output keeps a "taken" flag, so either side may
// accept the item in a different cycle than the other. The input item is
// consumed in the cycle in which the last of the two sides accepts it; then
// both flags clear. Fully combinational apart from the two flags, so an item
// can pass in the same cycle it arrives. The paper gives the function; the
// fork structure is this design's own.
// Both data outputs are wires from the data input, as a fork's are.
module kvl_splitter #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         a_valid,
  input  logic         a_ready,
  output logic [W-1:0] a_data,
  output logic         b_valid,
  input  logic         b_ready,
  output logic [W-1:0] b_data
);
  logic taken_a, taken_b;
  logic done_a, done_b;

  assign a_data  = in_data;
  assign b_data  = in_data;
  assign a_valid = in_valid && !taken_a;
  assign b_valid = in_valid && !taken_b;
  assign done_a  = taken_a || a_ready;
  assign done_b  = taken_b || b_ready;
  assign in_ready = done_a && done_b;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      taken_a <= 1'b0;
      taken_b <= 1'b0;
    end else if (in_valid) begin
      if (in_ready) begin
        taken_a <= 1'b0;
        taken_b <= 1'b0;
      end else begin
        taken_a <= done_a;
        taken_b <= done_b;
      end
    end
  end
endmodule
