// kvl_scratchpad: the accelerator's SRAM scratchpad that receives the looked-
// up values. LSU1-W writes one word per cycle; the CPU reads a word back with
// one cycle of latency (rd_data is valid the cycle after rd_en).
//
// Written as a simple dual-port array (one write, one read port) so that a
// synthesis tool can map it to an SRAM macro. The paper names the SRAM and
// says its latency is configurable; size, width and the one-cycle read are
// this design's choice. Contents are not reset.
// wr_ready is tied high: the array takes a write every cycle.
module kvl_scratchpad #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned W     = 64,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          wr_valid,
  output logic          wr_ready,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [WORDS];

  assign wr_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wr_addr] <= wr_data;
    if (rd_en)    rd_data      <= mem[rd_addr];
  end
endmodule
