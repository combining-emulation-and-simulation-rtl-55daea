// tb_kvl_system_full: end-to-end test of the lookup system at its default size: 8 engines, 32 memory channels, 12 batches of up to 1024 keys (a full scratchpad).
//
// The testbench plays one CPU per engine and the memory. It builds an
// open-addressing hash table (linear probing, load factor 70%) in the
// behavioural memory, writes batches of query keys (half of them present in
// the table, half absent), and lets the CPUs take batches from a shared pool
// until none is left: program the registers, start, wait for irq, read the
// values back from the scratchpad. Every value is compared with a reference
// lookup done here over the same probe sequence length. It counts how often
// each mechanism of the design occurred and fails if one never did: hits,
// misses, probe sequences wrapping at the table end, 128-byte key packets,
// LSU outstanding-request limit reached, splitter/FIFO back-pressure,
// out-of-order memory responses put back in order, channel contention in the
// memory interconnect, several engines busy at once.
module tb_kvl_system_full;
  import kvl_pkg::*;
  import kvl_tb_pkg::*;
  localparam int NA = 8, NCH = 32;
  localparam int TBL_LOG2 = 14, PSL = 8, BATCH = 1024, NBATCH = 12;
  localparam longint unsigned TBL_BASE = 64'h1000_0000;
  localparam longint unsigned KEY_BASE = 64'h0010_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NA-1:0]  cpu_valid, cpu_we, cpu_rvalid, irq;
  logic [15:0]    cpu_addr  [NA];
  logic [63:0]    cpu_wdata [NA], cpu_rdata [NA];
  logic [NCH-1:0] ch_req_valid, ch_req_ready, ch_resp_valid, ch_resp_ready;
  mem_req_t       ch_req  [NCH];
  mem_resp_t      ch_resp [NCH];

  kvl_system  u_sys (.*);

  kvl_mem_model #(.NC(NCH), .LAT(20), .JITTER(12), .OOO(1'b1), .QDEPTH(16)) u_mem (
    .clk, .rst_n, .req_valid(ch_req_valid), .req_ready(ch_req_ready), .req(ch_req),
    .resp_valid(ch_resp_valid), .resp_ready(ch_resp_ready), .resp(ch_resp)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters (engine 0 and the interconnect) ----
  int n_hit = 0, n_miss = 0, n_wrap = 0, n_pkt128 = 0, n_maxreq = 0, n_split_stall = 0;
  int n_ooo = 0, n_contention = 0, n_multi_busy = 0, n_batches = 0;
  longint total_cycles = 0, total_keys = 0;
  int batches_of [NA];

  logic [NA-1:0] busy_v;
  for (genvar a = 0; a < NA; a++) begin : g_busy
    assign busy_v[a] = u_sys.g_acc[a].u_accel.busy;
  end

  always @(posedge clk) if (rst_n) begin
    int nbusy, nv [NCH];
    if (u_sys.g_acc[0].u_accel.mem0_req_valid && u_sys.g_acc[0].u_accel.mem0_req_ready
        && u_sys.g_acc[0].u_accel.mem0_req.nbytes == 8'd128) n_pkt128++;
    if (u_sys.g_acc[0].u_accel.u_lsu1_r.used == 5'(u_sys.g_acc[0].u_accel.u_lsu1_r.MAX_REQS)) n_maxreq++;
    if (u_sys.g_acc[0].u_accel.key_valid && !u_sys.g_acc[0].u_accel.key_ready) n_split_stall++;
    if (u_sys.g_acc[0].u_accel.mem1_resp_valid &&
        u_sys.g_acc[0].u_accel.mem1_resp.tag[3:0] != u_sys.g_acc[0].u_accel.u_lsu1_r.rptr) n_ooo++;
    nbusy = 0;
    for (int a = 0; a < NA; a++) if (busy_v[a]) nbusy++;
    if (nbusy > 1) n_multi_busy++;
    foreach (nv[c]) nv[c] = 0;
    for (int m = 0; m < 2 * NA; m++)
      if (u_sys.m_req_valid[m]) nv[u_sys.u_xbar.sel[m]]++;
    foreach (nv[c]) if (nv[c] > 1) n_contention++;
  end

  // ---------------- CPU bus tasks ----------------
  task automatic cpu_wr(int a, logic [15:0] addr, logic [63:0] d);
    @(negedge clk);
    cpu_valid[a] = 1; cpu_we[a] = 1; cpu_addr[a] = addr; cpu_wdata[a] = d;
    @(negedge clk);
    cpu_valid[a] = 0; cpu_we[a] = 0;
  endtask

  task automatic cpu_rd(int a, logic [15:0] addr, output logic [63:0] d);
    @(negedge clk);
    cpu_valid[a] = 1; cpu_we[a] = 0; cpu_addr[a] = addr;
    @(negedge clk);
    cpu_valid[a] = 0;
    check(cpu_rvalid[a], "read data valid one cycle after the request");
    d = cpu_rdata[a];
  endtask

  // ---------------- work pool ----------------
  logic [63:0] qkeys [NBATCH][$];
  int next_batch = 0;
  logic [63:0] tkeys[$];

  task automatic run_cpu(int a);
    forever begin
      int b;
      logic [63:0] st, cyc, v;
      if (next_batch >= NBATCH) break;
      b = next_batch; next_batch++;
      cpu_wr(a, 16'(REG_KEY_BASE), KEY_BASE + 64'(b) * 64'h1_0000);
      cpu_wr(a, 16'(REG_NUM_KEYS), 64'(qkeys[b].size()));
      cpu_wr(a, 16'(REG_TBL_BASE), TBL_BASE);
      cpu_wr(a, 16'(REG_TBL_LOG2), 64'(TBL_LOG2));
      cpu_wr(a, 16'(REG_PSL), 64'(PSL));
      cpu_wr(a, 16'(REG_VAL_BASE), 64'd0);
      cpu_wr(a, 16'(REG_CTRL), 64'd1);
      while (!irq[a]) @(negedge clk);
      cpu_rd(a, 16'(REG_STATUS), st);
      check(st == 64'd2, "status done");
      cpu_rd(a, 16'(REG_CYCLES), cyc);
      total_cycles += longint'(cyc);
      total_keys   += qkeys[b].size();
      for (int i = 0; i < qkeys[b].size(); i++) begin
        logic [63:0] e;
        cpu_rd(a, 16'h8000 | 16'(i), v);
        e = ref_lookup(TBL_BASE, TBL_LOG2, PSL, qkeys[b][i]);
        check(v == e, $sformatf("engine %0d batch %0d key %0d: got %h exp %h", a, b, i, v, e));
        if (v == KEY_NOT_FOUND) n_miss++; else n_hit++;
      end
      batches_of[a]++;
      n_batches++;
    end
  endtask

  initial begin
    cpu_valid = '0; cpu_we = '0;
    for (int a = 0; a < NA; a++) begin cpu_addr[a] = '0; cpu_wdata[a] = '0; batches_of[a] = 0; end
    build_table(TBL_BASE, TBL_LOG2, ((1 << TBL_LOG2) * 70) / 100, tkeys);
    for (int b = 0; b < NBATCH; b++) begin
      for (int i = 0; i < BATCH - (b % 3); i++) begin
        logic [63:0] k;
        longint unsigned h;
        k = ($urandom_range(1) == 1) ? tkeys[$urandom_range(tkeys.size() - 1)] : rand_key();
        if (i % 61 == 0) begin   // steer some queries to the last table slots
          do k = rand_key(); while ((ref_hash(k) & ((64'd1 << TBL_LOG2) - 1)) < (64'd1 << TBL_LOG2) - 2);
        end
        h = ref_hash(k) & ((64'd1 << TBL_LOG2) - 1);
        if (h + PSL > (64'd1 << TBL_LOG2)) n_wrap++;
        qkeys[b].push_back(k);
      end
      write_keys(KEY_BASE + 64'(b) * 64'h1_0000, qkeys[b]);
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int a = 0; a < NA; a++) begin
      automatic int aa = a;
      fork run_cpu(aa); join_none
    end
    wait (n_batches == NBATCH);
    repeat (5) @(posedge clk);
    $display("batches %0d keys %0d engine-cycles %0d (%0d.%02d cycles per lookup per engine)",
             n_batches, total_keys, total_cycles, total_cycles / total_keys,
             (100 * total_cycles / total_keys) % 100);
    $display("mechanisms: hit %0d miss %0d wrap %0d pkt128 %0d maxreq %0d split_stall %0d ooo %0d contention %0d multi_busy %0d",
             n_hit, n_miss, n_wrap, n_pkt128, n_maxreq, n_split_stall, n_ooo, n_contention, n_multi_busy);
    check(n_hit > 0, "some keys found");
    check(n_miss > 0, "some keys not found");
    check(n_wrap > 0, "probe sequences wrapped at the table end");
    check(n_pkt128 > 0, "keys read in 128-byte packets");
    check(n_maxreq > 0, "LSU1-R reached its outstanding-request limit");
    check(n_split_stall > 0, "splitter held a key (back-pressure)");
    check(n_ooo > 0, "out-of-order responses reordered");
    check(n_contention > 0, "ports contended for a channel");
    check(NA == 1 || n_multi_busy > 0, "engines ran concurrently");
    for (int a = 0; a < NA; a++) check(batches_of[a] > 0, "every engine received work");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
