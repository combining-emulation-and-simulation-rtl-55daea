// kvl_accel: one near-memory key/value lookup engine.
//
// Pipeline (after the paper's lookup pipeline figure):
//   LSU0-R  reads the batch of keys from memory in 128-byte packets
//   unpack  128-bit beats -> single 8-byte keys
//   Split   sends each key to the key FIFO and to the hash unit
//   Hash    key -> hash table index
//   LSU1-R  reads the probe sequence (psl entries) at each index
//   CSU     compares each probe sequence with the next key from the FIFO,
//           selects the value or the key-not-found code
//   LSU1-W  writes the values to consecutive scratchpad words
// kvl_ctrl holds the batch registers and starts all units together. Every
// stage has valid/ready flow control, so a full FIFO, the outstanding-request
// limit of an LSU or a busy memory stalls the stages behind it.
//
// CPU bus: a request (cpu_valid, cpu_we, cpu_addr word address, cpu_wdata)
// is taken every cycle; a read returns cpu_rdata with cpu_rvalid one cycle
// later. Word addresses with bit 15 set read the scratchpad (bits
// [SPAD_AW-1:0] select the word), the others the control registers (bits
// [3:0]). irq is high while the last batch is done. mem0_* (keys) and
// mem1_* (hash table) are the two memory read ports. The pipeline and its
// stream names follow the paper; the key unpacker, the CPU bus and the
// register map are this design's own.
// Upper tag bits of both memory ports are constant zero (an LSU needs only
// log2 MAX_REQS tag bits) and mem*_resp_ready is tied high.
module kvl_accel
  import kvl_pkg::*;
#(
  parameter int unsigned MAX_REQS       = 16,
  parameter int unsigned HASH_LATENCY   = 3,
  parameter int unsigned KEY_FIFO_DEPTH = 64,
  parameter int unsigned SPAD_WORDS     = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  // CPU bus
  input  logic        cpu_valid,
  input  logic        cpu_we,
  input  logic [15:0] cpu_addr,
  input  logic [63:0] cpu_wdata,
  output logic        cpu_rvalid,
  output logic [63:0] cpu_rdata,
  output logic        irq,
  // memory port of LSU0-R
  output logic        mem0_req_valid,
  input  logic        mem0_req_ready,
  output mem_req_t    mem0_req,
  input  logic        mem0_resp_valid,
  output logic        mem0_resp_ready,
  input  mem_resp_t   mem0_resp,
  // memory port of LSU1-R
  output logic        mem1_req_valid,
  input  logic        mem1_req_ready,
  output mem_req_t    mem1_req,
  input  logic        mem1_resp_valid,
  output logic        mem1_resp_ready,
  input  mem_resp_t   mem1_resp
);
  localparam int unsigned SPAD_AW = $clog2(SPAD_WORDS);

  // ---------------- control ----------------
  logic        start, busy, done_wr;
  lsu_rd_cfg_t lsu0_cfg, lsu1_cfg;
  lsu_wr_cfg_t lsuw_cfg;
  logic [31:0] num_keys;
  logic [4:0]  tbl_log2;
  logic [7:0]  psl;
  logic [63:0] reg_rdata;
  logic        is_spad;

  assign is_spad = cpu_addr[15];

  kvl_ctrl u_ctrl (
    .clk, .rst_n,
    .reg_we(cpu_valid && cpu_we && !is_spad), .reg_waddr(cpu_addr[3:0]),
    .reg_wdata(cpu_wdata), .reg_raddr(cpu_addr[3:0]), .reg_rdata,
    .start, .lsu0_cfg, .lsu1_cfg, .lsuw_cfg, .num_keys, .tbl_log2, .psl,
    .done_wr, .busy, .irq
  );

  // ---------------- LSU0-R: keys ----------------
  logic              kbeat_valid, kbeat_ready;
  logic [DATA_W-1:0] kbeat;
  logic              lsu0_idx_ready, lsu0_busy;

  kvl_lsu_rd #(.MAX_REQS(MAX_REQS)) u_lsu0_r (
    .clk, .rst_n, .start, .cfg(lsu0_cfg),
    .idx_valid(1'b0), .idx_ready(lsu0_idx_ready), .idx('0),
    .mem_req_valid(mem0_req_valid), .mem_req_ready(mem0_req_ready), .mem_req(mem0_req),
    .mem_resp_valid(mem0_resp_valid), .mem_resp_ready(mem0_resp_ready), .mem_resp(mem0_resp),
    .out_valid(kbeat_valid), .out_ready(kbeat_ready), .out_data(kbeat),
    .busy(lsu0_busy)
  );

  logic             key_valid, key_ready;
  logic [KEY_W-1:0] key;

  kvl_key_unpack u_unpack (
    .clk, .rst_n, .start, .count(num_keys),
    .in_valid(kbeat_valid), .in_ready(kbeat_ready), .in_data(kbeat),
    .out_valid(key_valid), .out_ready(key_ready), .out_key(key)
  );

  // ---------------- Split ----------------
  logic             fk_in_valid, fk_in_ready, hk_valid, hk_ready;
  logic [KEY_W-1:0] fk_in, hk;

  kvl_splitter #(.W(KEY_W)) u_split (
    .clk, .rst_n,
    .in_valid(key_valid), .in_ready(key_ready), .in_data(key),
    .a_valid(fk_in_valid), .a_ready(fk_in_ready), .a_data(fk_in),
    .b_valid(hk_valid), .b_ready(hk_ready), .b_data(hk)
  );

  // ---------------- key FIFO ----------------
  logic             tk_valid, tk_ready;
  logic [KEY_W-1:0] tk;
  logic [$clog2(KEY_FIFO_DEPTH+1)-1:0] fifo_count;

  kvl_fifo #(.W(KEY_W), .DEPTH(KEY_FIFO_DEPTH)) u_key_fifo (
    .clk, .rst_n,
    .in_valid(fk_in_valid), .in_ready(fk_in_ready), .in_data(fk_in),
    .out_valid(tk_valid), .out_ready(tk_ready), .out_data(tk),
    .count(fifo_count)
  );

  // ---------------- Hash ----------------
  logic             hidx_valid, hidx_ready;
  logic [IDX_W-1:0] hidx;

  kvl_hash #(.LATENCY(HASH_LATENCY)) u_hash (
    .clk, .rst_n, .tbl_log2,
    .in_valid(hk_valid), .in_ready(hk_ready), .in_key(hk),
    .out_valid(hidx_valid), .out_ready(hidx_ready), .out_idx(hidx)
  );

  // ---------------- LSU1-R: buckets ----------------
  logic              bkt_valid, bkt_ready, lsu1_busy;
  logic [DATA_W-1:0] bkt;

  kvl_lsu_rd #(.MAX_REQS(MAX_REQS)) u_lsu1_r (
    .clk, .rst_n, .start, .cfg(lsu1_cfg),
    .idx_valid(hidx_valid), .idx_ready(hidx_ready), .idx(hidx),
    .mem_req_valid(mem1_req_valid), .mem_req_ready(mem1_req_ready), .mem_req(mem1_req),
    .mem_resp_valid(mem1_resp_valid), .mem_resp_ready(mem1_resp_ready), .mem_resp(mem1_resp),
    .out_valid(bkt_valid), .out_ready(bkt_ready), .out_data(bkt),
    .busy(lsu1_busy)
  );

  // ---------------- Compare/Select ----------------
  logic             val_valid, val_ready;
  logic [VAL_W-1:0] val;

  kvl_csu u_csu (
    .clk, .rst_n, .psl,
    .key_valid(tk_valid), .key_ready(tk_ready), .key(tk),
    .bkt_valid, .bkt_ready, .bkt,
    .out_valid(val_valid), .out_ready(val_ready), .out_val(val)
  );

  // ---------------- LSU1-W and scratchpad ----------------
  logic               spw_valid, spw_ready;
  logic [SPAD_AW-1:0] spw_addr;
  logic [VAL_W-1:0]   spw_data, spad_rdata;

  kvl_lsu_wr #(.SPAD_AW(SPAD_AW)) u_lsu1_w (
    .clk, .rst_n, .start, .cfg(lsuw_cfg),
    .in_valid(val_valid), .in_ready(val_ready), .in_val(val),
    .wr_valid(spw_valid), .wr_ready(spw_ready), .wr_addr(spw_addr), .wr_data(spw_data),
    .done(done_wr)
  );

  kvl_scratchpad #(.WORDS(SPAD_WORDS), .W(VAL_W)) u_spad (
    .clk,
    .wr_valid(spw_valid), .wr_ready(spw_ready), .wr_addr(spw_addr), .wr_data(spw_data),
    .rd_en(cpu_valid && !cpu_we && is_spad), .rd_addr(cpu_addr[SPAD_AW-1:0]),
    .rd_data(spad_rdata)
  );

  // ---------------- CPU read return ----------------
  logic        rd_spad;
  logic [63:0] reg_rdata_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cpu_rvalid <= 1'b0;
      rd_spad    <= 1'b0;
    end else begin
      cpu_rvalid <= cpu_valid && !cpu_we;
      rd_spad    <= is_spad;
    end
    reg_rdata_q <= reg_rdata;
  end

  assign cpu_rdata = rd_spad ? spad_rdata : reg_rdata_q;

  // All pipeline state has drained when the batch is reported done.
  assert property (@(posedge clk) disable iff (!rst_n)
                   $rose(irq) |-> !lsu0_busy && !lsu1_busy && fifo_count == '0)
    else $error("kvl_accel: batch done with data still in the pipeline");
endmodule
