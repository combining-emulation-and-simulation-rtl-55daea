// tb_kvl_lsu_wr: self-checking test of the write LSU. Runs sequential and
// strided batches with random value gaps and write-port stalls; checks each
// write address and value, that exactly count writes happen, that done rises
// after the last one, and that a zero-length batch is done at once.
module tb_kvl_lsu_wr;
  import kvl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, in_valid, in_ready, wr_valid, wr_ready, done;
  lsu_wr_cfg_t cfg;
  logic [63:0] in_val, wr_data;
  logic [9:0]  wr_addr;
  logic [63:0] vals[$];
  int          nwr;
  logic [9:0]  exp_addr;

  kvl_lsu_wr #(.SPAD_AW(10)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && !start) begin
    if (wr_valid && wr_ready) begin
      check(wr_addr == exp_addr, $sformatf("address %0d exp %0d", wr_addr, exp_addr));
      check(vals.size() > 0 && wr_data == vals[0], "value");
      check(!done, "done only after the last write");
      void'(vals.pop_front());
      exp_addr <= exp_addr + cfg.stride[9:0];
      nwr++;
    end
  end

  always @(negedge clk) begin
    in_valid <= (vals.size() > 0) && ($urandom_range(99) < 70);
    wr_ready <= ($urandom_range(99) < 70);
  end
  assign in_val = vals.size() > 0 ? vals[0] : '0;

  task automatic run(int base, int stride, int count);
    @(negedge clk);
    cfg.base = 16'(base); cfg.stride = 16'(stride); cfg.count = 32'(count);
    start = 1; exp_addr = 10'(base); nwr = 0;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < count + 5; i++) vals.push_back({$urandom, $urandom});
    if (count == 0) begin
      check(done, "zero-length batch done at once");
    end
    while (nwr < count) @(negedge clk);
    @(negedge clk);
    check(done, "done after last write");
    repeat (5) @(negedge clk);
    check(nwr == count, "no writes beyond count");
    vals.delete();
  endtask

  initial begin
    start = 0; cfg = '0; in_valid = 0; wr_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 1, 100);
    run(37, 3, 50);
    run(5, 1, 0);
    run(1000, 1, 40);   // wraps around the 1024-word space
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
