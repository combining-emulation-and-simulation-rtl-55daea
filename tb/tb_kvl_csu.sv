// tb_kvl_csu: self-checking test of the compare/select unit. For several
// probe sequence lengths it feeds target keys and probe sequences in which
// the target sits at a random position, twice, or not at all, with random
// gaps and output stalls, and checks every value against the expected
// first-match value or the not-found code. With no stalls it checks that a
// bucket is consumed every cycle.
module tb_kvl_csu;
  import kvl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0]   psl;
  logic         key_valid, key_ready, bkt_valid, bkt_ready, out_valid, out_ready;
  logic [63:0]  key, out_val;
  logic [127:0] bkt;
  logic [63:0]  keys[$], exp_q[$];
  logic [127:0] bkts[$];
  int nf = 0, hits = 0, busy_cycles = 0, taken = 0;
  bit stalls;
  int psl_list[4] = '{1, 2, 5, 8};

  kvl_csu dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drivers: present the queue heads
  always_comb begin
    key = keys.size() > 0 ? keys[0] : '0;
    bkt = bkts.size() > 0 ? bkts[0] : '0;
  end

  always @(posedge clk) if (rst_n) begin
    if (key_valid && key_ready) void'(keys.pop_front());
    if (bkt_valid && bkt_ready) begin void'(bkts.pop_front()); taken++; end
    if (bkt_valid) busy_cycles++;
    if (out_valid && out_ready) begin
      check(exp_q.size() > 0 && out_val == exp_q[0], $sformatf("value %h exp %h", out_val, exp_q[0]));
      if (out_val == KEY_NOT_FOUND) nf++; else hits++;
      void'(exp_q.pop_front());
    end
  end

  always @(negedge clk) begin
    key_valid <= (keys.size() > 0) && (!stalls || $urandom_range(99) < 70);
    bkt_valid <= (bkts.size() > 0) && (!stalls || $urandom_range(99) < 70);
    out_ready <= !stalls || ($urandom_range(99) < 60);
  end

  task automatic make(int n, int p);
    for (int i = 0; i < n; i++) begin
      logic [63:0] k = {$urandom, $urandom} | 64'd1;
      int pos  = $urandom_range(p);        // p = absent
      int pos2 = $urandom_range(p);
      logic [63:0] e = KEY_NOT_FOUND;
      keys.push_back(k);
      for (int j = 0; j < p; j++) begin
        logic [63:0] bk = (j == pos || j == pos2) ? k : (k ^ 64'(j + 1));
        logic [63:0] bv = {$urandom, $urandom};
        if (bk == k && e == KEY_NOT_FOUND) e = bv;
        bkts.push_back({bv, bk});
      end
      exp_q.push_back(e);
    end
  endtask

  initial begin
    key_valid = 0; bkt_valid = 0; out_ready = 1; psl = 1; stalls = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // rate check: no stalls, psl 4, 50 keys -> 200 buckets in about 200 cycles
    psl = 4;
    make(50, 4);
    busy_cycles = 0; taken = 0;
    wait (exp_q.size() == 0);
    repeat (2) @(posedge clk);
    check(taken == 200, "all buckets taken");
    check(busy_cycles <= 202, $sformatf("one bucket per cycle (%0d cycles)", busy_cycles));
    stalls = 1;
    foreach (psl_list[t]) begin
      wait (keys.size() == 0 && exp_q.size() == 0);
      @(negedge clk);
      psl = 8'(psl_list[t]);
      make(200, psl_list[t]);
    end
    wait (exp_q.size() == 0);
    check(nf > 0 && hits > 0, "both found and not-found results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
