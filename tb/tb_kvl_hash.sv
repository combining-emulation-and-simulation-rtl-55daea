// tb_kvl_hash: self-checking test of the hash unit. Compares every index
// with a separately written reference hash for several table sizes, checks
// that an index leaves exactly LATENCY cycles after its key when the output
// is always ready, that one key per cycle passes, and that order holds under
// random output stalls.
module tb_kvl_hash;
  import kvl_tb_pkg::*;
  localparam int unsigned LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int tbl_log2_list[4] = '{12, 4, 20, 31};
  logic in_ready_q;
  always @(posedge clk) in_ready_q <= in_valid && in_ready;

  logic [4:0]  tbl_log2;
  logic        in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_key;
  logic [31:0] out_idx;
  logic [31:0] exp_q[$];
  longint      in_t[$];
  longint      cyc = 0;
  int          lat_checked = 0, nout = 0;
  bit          lat_mode;

  kvl_hash #(.LATENCY(LAT)) dut (.*);
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(exp_q.size() > 0, "unexpected index");
      if (exp_q.size() > 0) begin
        check(out_idx == exp_q[0], $sformatf("index of key (got %h exp %h)", out_idx, exp_q[0]));
        if (lat_mode) begin
          check(cyc - in_t[0] == LAT, $sformatf("latency %0d", cyc - in_t[0]));
          lat_checked++;
        end
        void'(exp_q.pop_front());
        void'(in_t.pop_front());
        nout++;
      end
    end
    if (in_valid && in_ready) begin
      exp_q.push_back(32'(ref_hash(in_key) & ((64'd1 << tbl_log2) - 1)));
      in_t.push_back(cyc);
    end
  end

  initial begin
    in_valid = 0; out_ready = 1; in_key = 0; tbl_log2 = 12; lat_mode = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (tbl_log2_list[t]) begin
      @(negedge clk);
      tbl_log2 = tbl_log2_list[t];
      lat_mode = (t == 0);
      for (int i = 0; i < 400; i++) begin
        @(negedge clk);
        if (!in_valid || in_ready_q) begin
          in_valid = lat_mode ? 1'b1 : ($urandom_range(99) < 70);
          in_key   = {$urandom, $urandom};
        end
        out_ready = lat_mode ? 1'b1 : ($urandom_range(99) < 60);
      end
      @(negedge clk); in_valid = 0; out_ready = 1;
      repeat (LAT + 3) @(negedge clk);
    end
    check(lat_checked >= 399, "back-to-back keys at one per cycle");
    check(exp_q.size() == 0, "all indices delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
