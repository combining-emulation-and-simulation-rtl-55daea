// tb_kvl_splitter: self-checking test of the stream fork. Random input
// validity and random readiness on both outputs; both outputs must see every
// input item exactly once and in order, and an item must not be consumed
// before both sides have taken it.
module tb_kvl_splitter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  // in_ready as seen in the cycle just ended (holds the item until consumed)
  logic in_ready_q;
  always @(posedge clk) in_ready_q <= in_valid && in_ready;

  logic        in_valid, in_ready, a_valid, a_ready, b_valid, b_ready;
  logic [63:0] in_data, a_data, b_data;
  logic [63:0] sent[$], got_a[$], got_b[$];
  int split_cycles = 0;
  logic [63:0] nxt;

  kvl_splitter #(.W(64)) dut (.*);

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

  initial begin
    in_valid = 0; a_ready = 0; b_ready = 0; in_data = 0; nxt = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      if (!in_valid || in_ready_q) begin
        in_valid = ($urandom_range(99) < 70);
        if (in_valid) begin in_data = nxt; nxt++; end
      end
      a_ready = ($urandom_range(99) < 50);
      b_ready = ($urandom_range(99) < 50);
      #1;
      if (a_valid && a_ready) got_a.push_back(a_data);
      if (b_valid && b_ready) got_b.push_back(b_data);
      if ((a_valid && a_ready) != (b_valid && b_ready)) split_cycles++;
      if (in_valid && in_ready) begin
        sent.push_back(in_data);
        check(got_a.size() == sent.size() && got_b.size() == sent.size(),
              "item consumed only after both sides took it");
      end
    end
    check(split_cycles > 0, "sides accepted in different cycles");
    check(got_a.size() >= sent.size() && got_b.size() >= sent.size(), "counts");
    for (int i = 0; i < sent.size(); i++) begin
      check(got_a[i] == sent[i], "output A order");
      check(got_b[i] == sent[i], "output B order");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
