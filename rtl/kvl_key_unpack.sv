// kvl_key_unpack: splits the 128-bit beats read by LSU0-R into single 8-byte
// keys (low half first), and stops after the batch's key count, dropping the
// unused upper half of the last beat when the count is odd. A start pulse
// loads the count. Keys leave one per cycle; a beat is consumed with its
// last used key. Needed because the data path is twice as wide as a key; a
// helper of this design, not a block of the paper.
module kvl_key_unpack
  import kvl_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [31:0]       count,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [KEY_W-1:0]  out_key
);
  logic [31:0] remaining;
  logic        hi;

  assign out_valid = in_valid && (remaining != '0);
  assign out_key   = hi ? in_data[2*KEY_W-1:KEY_W] : in_data[KEY_W-1:0];
  assign in_ready  = out_ready && (remaining != '0) && (hi || remaining == 32'd1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      remaining <= '0;
      hi        <= 1'b0;
    end else if (start) begin
      remaining <= count;
      hi        <= 1'b0;
    end else if (out_valid && out_ready) begin
      remaining <= remaining - 32'd1;
      hi        <= !hi;
    end
  end
endmodule
