// kvl_csu: the compare/select unit. For each target key from the key FIFO it
// takes that key's probe sequence, psl hash table entries ("buckets"), from
// LSU1-R, compares the key of every bucket with the target and emits the value
// of the first matching bucket, or KEY_NOT_FOUND if none matched.
//
// One bucket is consumed per cycle (the 128-bit path carries a whole entry
// per beat). All psl buckets of a key are consumed even after a match, since
// the LSU has read them all. The result is registered: it appears the cycle
// after the last bucket and is held until out_ready. A bucket is only taken
// while a target key is present and the output register is free or being
// emptied. Entry layout (key low, value high) and the not-found code are this
// design's own; the compare-and-select function is the paper's. psl must be
// at least 1 and stable during a batch.
module kvl_csu
  import kvl_pkg::*;
#(
  parameter logic [VAL_W-1:0] NOT_FOUND = KEY_NOT_FOUND
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        psl,
  input  logic              key_valid,
  output logic              key_ready,
  input  logic [KEY_W-1:0]  key,
  input  logic              bkt_valid,
  output logic              bkt_ready,
  input  logic [DATA_W-1:0] bkt,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [VAL_W-1:0]  out_val
);
  logic [7:0]       cnt;
  logic             found;
  logic [VAL_W-1:0] val;
  logic             take, last, hit;

  assign bkt_ready = key_valid && (!out_valid || out_ready);
  assign take      = bkt_valid && bkt_ready;
  assign last      = (cnt == psl - 8'd1);
  assign hit       = (bkt[KEY_W-1:0] == key);
  assign key_ready = take && last;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt       <= '0;
      found     <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        if (last) begin
          cnt       <= '0;
          found     <= 1'b0;
          out_valid <= 1'b1;
        end else begin
          cnt   <= cnt + 8'd1;
          found <= found || hit;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (take) begin
      if (!found && hit) val <= bkt[DATA_W-1 -: VAL_W];
      if (last) out_val <= found ? val : (hit ? bkt[DATA_W-1 -: VAL_W] : NOT_FOUND);
    end
  end
endmodule
