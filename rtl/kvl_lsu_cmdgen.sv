// kvl_lsu_cmdgen: address generator at the front of a read load/store unit.
// Turns the unit's control stream into block read commands {addr, nbytes}:
//
//   LSU_SEQ      one command {base, nbytes}
//   LSU_STRIDED  count commands {base + i*stride, elem_bytes}
//   LSU_RANDOM   for each of count indices from the index stream, the probe
//                sequence of psl 16-byte entries starting at entry idx of a
//                table of 2^tbl_log2 entries at base. A sequence that runs
//                past the last entry wraps to entry 0 (open addressing) and
//                is then issued as two commands.
//
// A start pulse loads cfg. One command is offered per cycle; an index is
// consumed when its first (or only) command is taken. active is high until
// the last command has been taken. The three modes are the paper's; the
// command format and the wrap handling are this design's own. psl must not
// exceed the table size.
module kvl_lsu_cmdgen
  import kvl_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  lsu_rd_cfg_t       cfg,
  input  logic              idx_valid,
  output logic              idx_ready,
  input  logic [IDX_W-1:0]  idx,
  output logic              cmd_valid,
  input  logic              cmd_ready,
  output logic [ADDR_W-1:0] cmd_addr,
  output logic [LEN_W-1:0]  cmd_nbytes,
  output logic              active
);
  lsu_rd_cfg_t       c;
  logic [LEN_W-1:0]  remaining;   // commands (SEQ, STRIDED) or indices (RANDOM)
  logic [ADDR_W-1:0] addr;        // STRIDED running address
  logic              wrap_pend;
  logic [LEN_W-1:0]  wrap_bytes;

  // RANDOM: split of the current probe sequence at the table end
  logic [32:0] tbl_size, room, first_ent;
  logic        wraps;
  assign tbl_size  = 33'd1 << c.tbl_log2;
  assign room      = tbl_size - {1'b0, idx};
  assign wraps     = room < {25'd0, c.psl};
  assign first_ent = wraps ? room : {25'd0, c.psl};

  assign active = (remaining != '0) || wrap_pend;

  always_comb begin
    cmd_valid  = 1'b0;
    cmd_addr   = '0;
    cmd_nbytes = '0;
    idx_ready  = 1'b0;
    unique case (c.mode)
      LSU_SEQ: begin
        cmd_valid  = (remaining != '0);
        cmd_addr   = c.base;
        cmd_nbytes = c.nbytes;
      end
      LSU_STRIDED: begin
        cmd_valid  = (remaining != '0);
        cmd_addr   = addr;
        cmd_nbytes = c.elem_bytes;
      end
      LSU_RANDOM: begin
        if (wrap_pend) begin
          cmd_valid  = 1'b1;
          cmd_addr   = c.base;
          cmd_nbytes = wrap_bytes;
        end else begin
          cmd_valid  = (remaining != '0) && idx_valid;
          cmd_addr   = c.base + ADDR_W'({idx, 4'b0000});
          cmd_nbytes = LEN_W'({first_ent, 4'b0000});
          idx_ready  = (remaining != '0) && cmd_ready;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      remaining <= '0;
      wrap_pend <= 1'b0;
      c         <= '0;
      addr      <= '0;
      wrap_bytes <= '0;
    end else if (start) begin
      c         <= cfg;
      addr      <= cfg.base;
      wrap_pend <= 1'b0;
      remaining <= (cfg.mode == LSU_SEQ) ? LEN_W'(cfg.nbytes != '0) : cfg.count;
    end else if (cmd_valid && cmd_ready) begin
      if (c.mode == LSU_RANDOM) begin
        if (wrap_pend) begin
          wrap_pend <= 1'b0;
        end else begin
          remaining <= remaining - 1'b1;
          if (wraps) begin
            wrap_pend  <= 1'b1;
            wrap_bytes <= LEN_W'({{25'd0, c.psl} - room, 4'b0000});
          end
        end
      end else begin
        remaining <= remaining - 1'b1;
        addr      <= addr + c.stride;
      end
    end
  end
endmodule
