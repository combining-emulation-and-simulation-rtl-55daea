// kvl_hash: the hash unit. Turns each 64-bit key into an index into the hash
// table: index = fmix64(key) mod 2^tbl_log2, where fmix64 is the 64-bit
// MurmurHash3 finaliser (kvl_pkg::fmix64).
//
// The paper names the unit and says its pipeline delay is configurable, but
// gives no hash function; the function is this design's choice. The hash is
// computed as the key enters and then carried through LATENCY register stages,
// so an index leaves LATENCY cycles after its key is taken, one per cycle.
// The whole pipeline holds when out_ready is low and the last stage is full
// (in_ready = !out_valid || out_ready). tbl_log2 must stay stable during a
// batch.
module kvl_hash
  import kvl_pkg::*;
#(
  parameter int unsigned LATENCY = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [4:0]       tbl_log2,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [KEY_W-1:0] in_key,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [IDX_W-1:0] out_idx
);
  logic [IDX_W-1:0] stage_idx [LATENCY];
  logic             stage_v   [LATENCY];
  logic             adv;
  logic [IDX_W-1:0] mask, idx0;

  assign mask     = IDX_W'((64'd1 << tbl_log2) - 64'd1);
  assign idx0     = fmix64(in_key)[IDX_W-1:0] & mask;
  assign adv      = !stage_v[LATENCY-1] || out_ready;
  assign in_ready = adv;
  assign out_valid = stage_v[LATENCY-1];
  assign out_idx   = stage_idx[LATENCY-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) stage_v[i] <= 1'b0;
    end else if (adv) begin
      stage_v[0] <= in_valid;
      for (int i = 1; i < LATENCY; i++) stage_v[i] <= stage_v[i-1];
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      stage_idx[0] <= idx0;
      for (int i = 1; i < LATENCY; i++) stage_idx[i] <= stage_idx[i-1];
    end
  end
endmodule
