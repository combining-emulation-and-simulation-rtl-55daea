// tb_kvl_workload_lf: the load-factor sweep workload on one lookup engine.
// For load factors 0.1 .. 0.9 (the range of the evaluation) it fills a
// 4096-entry table by linear probing, sets the probe sequence length to the
// longest probe distance any stored key needs (so every stored key is
// reachable, capped at 255), runs a batch of 512 queries (about half
// present), checks every value against a reference lookup and prints the
// engine cycles per lookup. It also checks the trend the evaluation reports:
// lookups get slower as the load factor (and with it the probe sequence
// length) grows.
module tb_kvl_workload_lf;
  import kvl_pkg::*;
  import kvl_tb_pkg::*;
  localparam longint unsigned TBL_BASE = 64'h0100_0000;
  localparam longint unsigned KEY_BASE = 64'h0000_1000;
  localparam int LAT = 20;   // memory latency in engine cycles
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
  kvl_mem_model #(.NC(2), .LAT(LAT), .JITTER(4), .OOO(1'b1), .QDEPTH(32)) u_mem (
    .clk, .rst_n, .req_valid(c_req_valid), .req_ready(c_req_ready), .req(c_req),
    .resp_valid(c_resp_valid), .resp_ready(c_resp_ready), .resp(c_resp)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
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

  task automatic batch(int log2n, int lf, int n, output longint cycles, output int psl);
    logic [63:0] q[$];
    logic [63:0] v, st, cyc;
    mem_clear();
    build_table(TBL_BASE, log2n, ((1 << log2n) * lf) / 100, tkeys);
    psl = 1;
    foreach (tkeys[i]) begin
      int d;
      d = probe_dist(TBL_BASE, log2n, 255, tkeys[i]);
      if (d > psl) psl = d;
    end
    if (psl > 255) psl = 255;
    for (int i = 0; i < n; i++)
      q.push_back(($urandom_range(1) > 0) ? tkeys[$urandom_range(tkeys.size() - 1)] : rand_key());
    write_keys(KEY_BASE, q);
    cpu_wr(16'(REG_KEY_BASE), KEY_BASE);
    cpu_wr(16'(REG_NUM_KEYS), 64'(n));
    cpu_wr(16'(REG_TBL_BASE), TBL_BASE);
    cpu_wr(16'(REG_TBL_LOG2), 64'(log2n));
    cpu_wr(16'(REG_PSL), 64'(psl));
    cpu_wr(16'(REG_VAL_BASE), 64'd0);
    cpu_wr(16'(REG_CTRL), 64'd1);
    while (!irq) @(negedge clk);
    cpu_rd(16'(REG_STATUS), st);
    check(st == 64'd2, "status done");
    cpu_rd(16'(REG_CYCLES), cyc);
    cycles = longint'(cyc);
    for (int i = 0; i < n; i++) begin
      logic [63:0] e;
      cpu_rd(16'h8000 | 16'(i), v);
      e = ref_lookup(TBL_BASE, log2n, psl, q[i]);
      check(v == e, $sformatf("load %0d key %0d: got %h exp %h", lf, i, v, e));
      if (e == KEY_NOT_FOUND && psl < 255) check(!(q[i] inside {tkeys}), "stored key reachable within psl");
    end
  endtask

  initial begin
    longint c, c_first, c_last;
    int p;
    cpu_valid = 0; cpu_we = 0; cpu_addr = 0; cpu_wdata = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int lf = 10; lf <= 90; lf += 10) begin
      batch(12, lf, 512, c, p);
      $display("latency %0d cycles, load factor 0.%0d: psl %0d, %0d cycles, %0d.%02d cycles per lookup",
               LAT, lf / 10, p, c, c / 512, (100 * c / 512) % 100);
      if (lf == 10) c_first = c;
      c_last = c;
    end
    check(c_last > c_first, "higher load factor costs more cycles per lookup");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
