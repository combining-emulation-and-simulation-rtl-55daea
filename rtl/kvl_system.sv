// kvl_system: NUM_ACCEL key/value lookup engines sharing the memory channels
// of a near-memory device (e.g. the vaults of a Hybrid Memory Cube) through
// one memory interconnect.
//
// Engine a drives interconnect ports 2a (LSU0-R, keys) and 2a+1 (LSU1-R,
// hash table). Each engine has its own CPU bus (one CPU per accelerator) and
// done line irq[a]. The NUM_CH channel ports are brought out: the memory
// itself (DRAM vaults) is outside this design. A channel takes read packets
// (mem_req_t) and must return every beat of a packet as mem_resp_t with the
// request's tag unchanged; it may answer packets in any order. Eight engines
// is the largest configuration the paper evaluates; the channel count is
// this design's assumption.
// Tag bits above the port number (tag[15:12] at the default 16 ports) are
// always zero on the channel ports: the tag field keeps room for more ports.
module kvl_system
  import kvl_pkg::*;
#(
  parameter int unsigned NUM_ACCEL      = 8,
  parameter int unsigned NUM_CH         = 32,
  parameter int unsigned MAX_REQS       = 16,
  parameter int unsigned HASH_LATENCY   = 3,
  parameter int unsigned KEY_FIFO_DEPTH = 64,
  parameter int unsigned SPAD_WORDS     = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_ACCEL-1:0] cpu_valid,
  input  logic [NUM_ACCEL-1:0] cpu_we,
  input  logic [15:0]          cpu_addr  [NUM_ACCEL],
  input  logic [63:0]          cpu_wdata [NUM_ACCEL],
  output logic [NUM_ACCEL-1:0] cpu_rvalid,
  output logic [63:0]          cpu_rdata [NUM_ACCEL],
  output logic [NUM_ACCEL-1:0] irq,
  output logic [NUM_CH-1:0]    ch_req_valid,
  input  logic [NUM_CH-1:0]    ch_req_ready,
  output mem_req_t             ch_req    [NUM_CH],
  input  logic [NUM_CH-1:0]    ch_resp_valid,
  output logic [NUM_CH-1:0]    ch_resp_ready,
  input  mem_resp_t            ch_resp   [NUM_CH]
);
  localparam int unsigned NM = 2 * NUM_ACCEL;

  logic [NM-1:0] m_req_valid, m_req_ready, m_resp_valid, m_resp_ready;
  mem_req_t      m_req  [NM];
  mem_resp_t     m_resp [NM];

  for (genvar a = 0; a < NUM_ACCEL; a++) begin : g_acc
    kvl_accel #(
      .MAX_REQS(MAX_REQS), .HASH_LATENCY(HASH_LATENCY),
      .KEY_FIFO_DEPTH(KEY_FIFO_DEPTH), .SPAD_WORDS(SPAD_WORDS)
    ) u_accel (
      .clk, .rst_n,
      .cpu_valid(cpu_valid[a]), .cpu_we(cpu_we[a]), .cpu_addr(cpu_addr[a]),
      .cpu_wdata(cpu_wdata[a]), .cpu_rvalid(cpu_rvalid[a]), .cpu_rdata(cpu_rdata[a]),
      .irq(irq[a]),
      .mem0_req_valid(m_req_valid[2*a]),     .mem0_req_ready(m_req_ready[2*a]),
      .mem0_req(m_req[2*a]),                 .mem0_resp_valid(m_resp_valid[2*a]),
      .mem0_resp_ready(m_resp_ready[2*a]),   .mem0_resp(m_resp[2*a]),
      .mem1_req_valid(m_req_valid[2*a+1]),   .mem1_req_ready(m_req_ready[2*a+1]),
      .mem1_req(m_req[2*a+1]),               .mem1_resp_valid(m_resp_valid[2*a+1]),
      .mem1_resp_ready(m_resp_ready[2*a+1]), .mem1_resp(m_resp[2*a+1])
    );
  end

  kvl_mem_xbar #(.NM(NM), .NC(NUM_CH)) u_xbar (
    .clk, .rst_n,
    .m_req_valid, .m_req_ready, .m_req,
    .m_resp_valid, .m_resp_ready, .m_resp,
    .c_req_valid(ch_req_valid), .c_req_ready(ch_req_ready), .c_req(ch_req),
    .c_resp_valid(ch_resp_valid), .c_resp_ready(ch_resp_ready), .c_resp(ch_resp)
  );
endmodule
