// kvl_lsu_wr: the write load/store unit (LSU1-W). Writes the stream of values
// from the compare/select unit to the scratchpad: value i goes to word
// base + i*stride, for i = 0 .. count-1.
//
// A start pulse loads the configuration and clears the counter; afterwards
// each value handshake issues one scratchpad write in the same cycle (the
// write port's valid/ready is passed through). done rises the cycle after
// the last write and stays high until the next start. The paper says LSUs
// write to sequential, strided or random locations as directed by a control
// stream; sequential and strided addressing are built here, random writes
// are not used by the lookup and are left out.
// wr_data is a wire from the value input, and the write handshake passes
// straight through.
module kvl_lsu_wr
  import kvl_pkg::*;
#(
  parameter int unsigned SPAD_AW = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  lsu_wr_cfg_t        cfg,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [VAL_W-1:0]   in_val,
  output logic               wr_valid,
  input  logic               wr_ready,
  output logic [SPAD_AW-1:0] wr_addr,
  output logic [VAL_W-1:0]   wr_data,
  output logic               done
);
  logic [31:0]        remaining;
  logic [SPAD_AW-1:0] addr;
  logic [SPAD_AW-1:0] stride;
  logic               active;

  assign active   = (remaining != '0);
  assign wr_valid = in_valid && active;
  assign in_ready = wr_ready && active;
  assign wr_addr  = addr;
  assign wr_data  = in_val;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      remaining <= '0;
      addr      <= '0;
      stride    <= '0;
      done      <= 1'b0;
    end else if (start) begin
      remaining <= cfg.count;
      addr      <= cfg.base[SPAD_AW-1:0];
      stride    <= cfg.stride[SPAD_AW-1:0];
      done      <= (cfg.count == '0);
    end else if (wr_valid && wr_ready) begin
      remaining <= remaining - 32'd1;
      addr      <= addr + stride;
      if (remaining == 32'd1) done <= 1'b1;
    end
  end
endmodule
