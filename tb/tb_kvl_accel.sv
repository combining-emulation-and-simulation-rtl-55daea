// tb_kvl_accel: self-checking test of one lookup engine. The engine's two
// memory ports go through a 2x2 memory interconnect to behavioural channels.
// Runs batches with different table sizes, probe sequence lengths (1, 4, 8)
// and key counts (odd, even, zero), reads the values back over the CPU bus
// and compares them with a reference lookup. With a probe sequence length of
// 1 it checks the throughput bound of the pipeline: at least one lookup per
// 2 cycles in steady state with a short memory latency.
module tb_kvl_accel;
  import kvl_pkg::*;
  import kvl_tb_pkg::*;
  localparam longint unsigned TBL_BASE = 64'h0100_0000;
  localparam longint unsigned KEY_BASE = 64'h0000_1000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        cpu_valid, cpu_we, cpu_rvalid, irq;
  logic [15:0] cpu_addr;
  logic [63:0] cpu_wdata, cpu_rdata;
  logic [1:0]  m_req_valid, m_req_ready, m_resp_valid, m_resp_ready;
  mem_req_t    m_req [2];
  mem_resp_t   m_resp [2];
  logic [1:0]  c_req_valid, c_req_ready, c_resp_valid, c_resp_ready;
  mem_req_t    c_req [2];
  mem_resp_t   c_resp [2];

  kvl_accel dut (
    .clk, .rst_n, .cpu_valid, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_rvalid, .cpu_rdata, .irq,
    .mem0_req_valid(m_req_valid[0]), .mem0_req_ready(m_req_ready[0]), .mem0_req(m_req[0]),
    .mem0_resp_valid(m_resp_valid[0]), .mem0_resp_ready(m_resp_ready[0]), .mem0_resp(m_resp[0]),
    .mem1_req_valid(m_req_valid[1]), .mem1_req_ready(m_req_ready[1]), .mem1_req(m_req[1]),
    .mem1_resp_valid(m_resp_valid[1]), .mem1_resp_ready(m_resp_ready[1]), .mem1_resp(m_resp[1])
  );
  kvl_mem_xbar #(.NM(2), .NC(2)) u_xbar (.*);
  kvl_mem_model #(.NC(2), .LAT(6), .JITTER(4), .OOO(1'b1), .QDEPTH(32)) u_mem (
    .clk, .rst_n, .req_valid(c_req_valid), .req_ready(c_req_ready), .req(c_req),
    .resp_valid(c_resp_valid), .resp_ready(c_resp_ready), .resp(c_resp)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cpu_wr(logic [15:0] addr, logic [63:0] d);
    @(negedge clk);
    cpu_valid = 1; cpu_we = 1; cpu_addr = addr; cpu_wdata = d;
    @(negedge clk);
    cpu_valid = 0; cpu_we = 0;
  endtask

  task automatic cpu_rd(logic [15:0] addr, output logic [63:0] d);
    @(negedge clk);
    cpu_valid = 1; cpu_we = 0; cpu_addr = addr;
    @(negedge clk);
    cpu_valid = 0;
    check(cpu_rvalid, "read returns after one cycle");
    d = cpu_rdata;
  endtask

  logic [63:0] tkeys[$];

  task automatic batch(int log2n, int lf, int psl, int n, int vbase, output longint cycles);
    logic [63:0] q[$];
    logic [63:0] v, st, cyc;
    mem_clear();
    build_table(TBL_BASE, log2n, ((1 << log2n) * lf) / 100, tkeys);
    for (int i = 0; i < n; i++)
      q.push_back(($urandom_range(2) > 0) ? tkeys[$urandom_range(tkeys.size() - 1)] : rand_key());
    write_keys(KEY_BASE, q);
    cpu_wr(16'(REG_KEY_BASE), KEY_BASE);
    cpu_wr(16'(REG_NUM_KEYS), 64'(n));
    cpu_wr(16'(REG_TBL_BASE), TBL_BASE);
    cpu_wr(16'(REG_TBL_LOG2), 64'(log2n));
    cpu_wr(16'(REG_PSL), 64'(psl));
    cpu_wr(16'(REG_VAL_BASE), 64'(vbase));
    cpu_wr(16'(REG_CTRL), 64'd1);
    while (!irq) @(negedge clk);
    cpu_rd(16'(REG_STATUS), st);
    check(st == 64'd2, "status done");
    cpu_rd(16'(REG_CYCLES), cyc);
    cycles = longint'(cyc);
    for (int i = 0; i < n; i++) begin
      cpu_rd(16'h8000 | 16'(vbase + i), v);
      check(v == ref_lookup(TBL_BASE, log2n, psl, q[i]),
            $sformatf("psl %0d key %0d: got %h exp %h", psl, i, v, ref_lookup(TBL_BASE, log2n, psl, q[i])));
    end
  endtask

  initial begin
    longint c;
    cpu_valid = 0; cpu_we = 0; cpu_addr = 0; cpu_wdata = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    batch(8, 50, 4, 101, 0, c);
    batch(10, 90, 8, 300, 200, c);
    batch(6, 30, 1, 64, 0, c);
    batch(12, 70, 1, 800, 0, c);
    $display("psl 1, 800 keys: %0d cycles", c);
    check(c <= 800 * 2, $sformatf("throughput: %0d cycles for 800 lookups", c));
    batch(8, 50, 4, 0, 0, c);
    check(c <= 4, "empty batch finishes at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
