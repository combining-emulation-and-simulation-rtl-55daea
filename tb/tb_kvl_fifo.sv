// tb_kvl_fifo: self-checking test of the key FIFO. Random pushes and pops
// against a queue model; checks data order, that in_ready drops exactly at
// DEPTH entries, the fill count, and the one-cycle push-to-pop latency.
module tb_kvl_fifo;
  localparam int unsigned DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [63:0] model[$];
  int full_seen = 0;

  kvl_fifo #(.W(64), .DEPTH(DEPTH)) dut (.*);

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

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(!out_valid && in_ready && count == 0, "empty after reset");
    // latency: push one, visible next cycle
    in_valid = 1; in_data = 64'h1234;
    @(posedge clk); #1;
    in_valid = 0;
    check(out_valid && out_data == 64'h1234 && count == 1, "one-cycle push to pop");
    out_ready = 1;
    @(posedge clk); #1;
    out_ready = 0;
    check(!out_valid, "empty again");
    // random traffic
    for (int cyc = 0; cyc < 4000; cyc++) begin
      bit phase_fill;
      phase_fill = (cyc / 500) % 2 == 0;
      in_valid  = ($urandom_range(99) < (phase_fill ? 80 : 30));
      out_ready = ($urandom_range(99) < (phase_fill ? 30 : 80));
      in_data   = {$urandom, $urandom};
      #1;
      check(in_ready == (model.size() < DEPTH), "in_ready matches fill");
      check(out_valid == (model.size() > 0), "out_valid matches fill");
      check(count == model.size(), "count");
      if (model.size() == DEPTH) full_seen++;
      if (out_valid && out_ready) begin
        check(out_data == model[0], "data order");
        void'(model.pop_front());
      end
      if (in_valid && in_ready) model.push_back(in_data);
      @(posedge clk); #1;
    end
    check(full_seen > 0, "FIFO was filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
