// kvl_ctrl: the control side of one lookup engine (the "stream interconnect"
// that carries control from the CPU to every unit).
//
// The CPU writes the batch description into registers (key base address,
// number of keys, hash table base and log2 size, probe sequence length,
// first scratchpad word for the values; see kvl_pkg REG_*), then writes 1 to
// REG_CTRL. In that cycle, if the engine is idle, start pulses to every unit
// together with its control word:
//   LSU0-R  sequential read of num_keys*8 bytes (rounded up to 16) at key_base
//   unpack  num_keys keys
//   LSU1-R  random mode: num_keys probe sequences of psl entries in the table
//   LSU1-W  num_keys values to consecutive scratchpad words from val_base
// The hash unit and the compare/select unit read tbl_log2 and psl directly.
// The engine is busy until LSU1-W reports its last write; then REG_STATUS
// bit 1 (done) and irq rise and stay until the next start. REG_CYCLES holds
// the cycles from start to done of the last batch. A start while busy is
// ignored. Register reads are combinational (reg_raddr -> reg_rdata).
// The paper says the CPU configures the engine and is told when the batch is
// done; the register map is this design's own.
// Many control-word bits are constants for the lookup (LSU modes, element
// size, strides) or copies of a register, so they are fixed wires by design.
module kvl_ctrl
  import kvl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_we,
  input  logic [3:0]  reg_waddr,
  input  logic [63:0] reg_wdata,
  input  logic [3:0]  reg_raddr,
  output logic [63:0] reg_rdata,
  output logic        start,
  output lsu_rd_cfg_t lsu0_cfg,
  output lsu_rd_cfg_t lsu1_cfg,
  output lsu_wr_cfg_t lsuw_cfg,
  output logic [31:0] num_keys,
  output logic [4:0]  tbl_log2,
  output logic [7:0]  psl,
  input  logic        done_wr,
  output logic        busy,
  output logic        irq
);
  logic [ADDR_W-1:0] key_base, tbl_base;
  logic [15:0]       val_base;
  logic              done, started;
  logic [63:0]       cycles;

  assign start = reg_we && (reg_waddr == REG_CTRL) && reg_wdata[0] && !busy;
  assign irq   = done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      key_base <= '0;
      tbl_base <= '0;
      num_keys <= '0;
      tbl_log2 <= '0;
      psl      <= 8'd1;
      val_base <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      started  <= 1'b0;
      cycles   <= '0;
    end else begin
      if (reg_we && !busy) begin
        unique case (reg_waddr)
          REG_KEY_BASE: key_base <= reg_wdata[ADDR_W-1:0];
          REG_NUM_KEYS: num_keys <= reg_wdata[31:0];
          REG_TBL_BASE: tbl_base <= reg_wdata[ADDR_W-1:0];
          REG_TBL_LOG2: tbl_log2 <= reg_wdata[4:0];
          REG_PSL:      psl      <= reg_wdata[7:0];
          REG_VAL_BASE: val_base <= reg_wdata[15:0];
          default: ;
        endcase
      end
      started <= start;
      if (start) begin
        busy   <= 1'b1;
        done   <= 1'b0;
        cycles <= 64'd1;
      end else if (busy) begin
        if (!started && done_wr) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          cycles <= cycles + 64'd1;
        end
      end
    end
  end

  always_comb begin
    lsu0_cfg        = '0;
    lsu0_cfg.mode   = LSU_SEQ;
    lsu0_cfg.base   = key_base;
    lsu0_cfg.nbytes = ((num_keys << 3) + 32'd15) & ~32'd15;

    lsu1_cfg          = '0;
    lsu1_cfg.mode     = LSU_RANDOM;
    lsu1_cfg.base     = tbl_base;
    lsu1_cfg.count    = num_keys;
    lsu1_cfg.tbl_log2 = tbl_log2;
    lsu1_cfg.psl      = psl;

    lsuw_cfg.base   = val_base;
    lsuw_cfg.stride = 16'd1;
    lsuw_cfg.count  = num_keys;
  end

  always_comb begin
    unique case (reg_raddr)
      REG_KEY_BASE: reg_rdata = 64'(key_base);
      REG_NUM_KEYS: reg_rdata = 64'(num_keys);
      REG_TBL_BASE: reg_rdata = 64'(tbl_base);
      REG_TBL_LOG2: reg_rdata = 64'(tbl_log2);
      REG_PSL:      reg_rdata = 64'(psl);
      REG_VAL_BASE: reg_rdata = 64'(val_base);
      REG_STATUS:   reg_rdata = {62'd0, done, busy};
      REG_CYCLES:   reg_rdata = cycles;
      default:      reg_rdata = '0;
    endcase
  end
endmodule
