// kvl_lsu_rd: read load/store unit (LSU0-R for the key batch, LSU1-R for the
// hash table probe sequences).
//
// kvl_lsu_cmdgen turns the control stream (sequential, strided, or random
// with an index stream) into block commands. The packetiser cuts each block
// into memory read packets of at most PKT_BYTES (128 B) that never cross a
// 128-byte boundary, one packet per cycle. Reading many 8-byte keys with one
// 128-byte packet is the paper's "batch keys" optimisation. Each packet gets
// a slot of a circular reorder buffer of MAX_REQS slots, and the slot number
// is its tag. So at most MAX_REQS packets are outstanding. The paper doubles
// this limit over its original design; the default of 16 assumes an original
// of 8. Response beats may come back in any order between packets (different
// channels); each beat is stored at its slot, and the output stream delivers
// the beats strictly in request order. A beat can leave as soon as it and all
// older beats have arrived. Output is one 128-bit beat per cycle.
//
// Interface: start pulses with cfg; idx_* is the index stream (random mode);
// mem_req_*/mem_resp_* is the memory port (mem_resp_ready is always high
// since every outstanding packet owns buffer space); out_* is the data
// stream; busy stays high until all data of the command has left.
// Addresses and lengths must be multiples of 16 bytes.
// Tag bits above log2 MAX_REQS are constant zero and mem_resp_ready is
// tied high.
module kvl_lsu_rd
  import kvl_pkg::*;
#(
  parameter int unsigned MAX_REQS = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  lsu_rd_cfg_t       cfg,
  input  logic              idx_valid,
  output logic              idx_ready,
  input  logic [IDX_W-1:0]  idx,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mem_req_t          mem_req,
  input  logic              mem_resp_valid,
  output logic              mem_resp_ready,
  input  mem_resp_t         mem_resp,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data,
  output logic              busy
);
  localparam int unsigned SW = $clog2(MAX_REQS);
  localparam int unsigned BW = $clog2(PKT_BEATS);

  // ---------------- command generation ----------------
  logic              cmd_valid, cmd_ready, gen_active;
  logic [ADDR_W-1:0] cmd_addr;
  logic [LEN_W-1:0]  cmd_nbytes;

  kvl_lsu_cmdgen u_cmdgen (
    .clk, .rst_n, .start, .cfg,
    .idx_valid, .idx_ready, .idx,
    .cmd_valid, .cmd_ready, .cmd_addr, .cmd_nbytes,
    .active(gen_active)
  );

  // ---------------- packetiser ----------------
  logic              cur_valid;
  logic [ADDR_W-1:0] cur_addr;
  logic [LEN_W-1:0]  cur_rem;
  logic [7:0]        pkt_bytes;
  logic [7:0]        to_boundary;
  logic              last_pkt, req_fire;

  logic [SW:0]       used;          // allocated slots
  logic [SW-1:0]     wptr, rptr;
  logic [BW:0]       nbeats [MAX_REQS];
  logic [BW:0]       rcv    [MAX_REQS];
  logic [DATA_W-1:0] rob    [MAX_REQS * PKT_BEATS];
  logic [BW:0]       obeat;

  assign to_boundary = 8'(PKT_BYTES) - {1'b0, cur_addr[6:0]};
  assign pkt_bytes   = (cur_rem < LEN_W'(to_boundary)) ? cur_rem[7:0] : to_boundary;
  assign last_pkt    = (cur_rem == LEN_W'(pkt_bytes));

  assign mem_req_valid = cur_valid && (used != (SW+1)'(MAX_REQS));
  assign mem_req.addr   = cur_addr;
  assign mem_req.nbytes = pkt_bytes;
  assign mem_req.tag    = TAG_W'(wptr);
  assign req_fire       = mem_req_valid && mem_req_ready;
  assign cmd_ready      = !cur_valid || (req_fire && last_pkt);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cur_valid <= 1'b0;
      cur_addr  <= '0;
      cur_rem   <= '0;
    end else begin
      if (req_fire) begin
        cur_addr <= cur_addr + ADDR_W'(pkt_bytes);
        cur_rem  <= cur_rem - LEN_W'(pkt_bytes);
        if (last_pkt) cur_valid <= 1'b0;
      end
      if (cmd_valid && cmd_ready) begin
        cur_valid <= (cmd_nbytes != '0);
        cur_addr  <= cmd_addr;
        cur_rem   <= cmd_nbytes;
      end
    end
  end

  // ---------------- reorder buffer ----------------
  logic [SW-1:0] rslot;
  logic          out_fire, slot_done;

  assign mem_resp_ready = 1'b1;
  assign rslot     = mem_resp.tag[SW-1:0];
  assign out_valid = (used != '0) && (rcv[rptr] > obeat);
  assign out_data  = rob[{rptr, obeat[BW-1:0]}];
  assign out_fire  = out_valid && out_ready;
  assign slot_done = out_fire && (obeat == nbeats[rptr] - 1'b1);

  always_ff @(posedge clk) begin
    if (mem_resp_valid) rob[{rslot, rcv[rslot][BW-1:0]}] <= mem_resp.data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      used  <= '0;
      wptr  <= '0;
      rptr  <= '0;
      obeat <= '0;
      for (int i = 0; i < MAX_REQS; i++) begin
        rcv[i]    <= '0;
        nbeats[i] <= '0;
      end
    end else begin
      if (mem_resp_valid) rcv[rslot] <= rcv[rslot] + 1'b1;
      if (req_fire) begin
        nbeats[wptr] <= (BW+1)'(pkt_bytes >> 4);
        rcv[wptr]    <= '0;
        wptr         <= wptr + 1'b1;
      end
      if (out_fire) obeat <= slot_done ? '0 : obeat + 1'b1;
      if (slot_done) rptr <= rptr + 1'b1;
      used <= used + (SW+1)'(req_fire) - (SW+1)'(slot_done);
    end
  end

  assign busy = gen_active || cur_valid || (used != '0);

  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_resp_valid |-> rcv[rslot] < nbeats[rslot])
    else $error("kvl_lsu_rd: response beat for a slot that is not waiting");
endmodule
