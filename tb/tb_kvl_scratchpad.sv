// tb_kvl_scratchpad: self-checking test of the value scratchpad. Writes
// random words to random addresses (with reads to other addresses in the
// same cycles), then reads every written word back and checks the data and
// the one-cycle read latency.
module tb_kvl_scratchpad;
  localparam int unsigned WORDS = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        wr_valid, wr_ready, rd_en;
  logic [7:0]  wr_addr, rd_addr;
  logic [63:0] wr_data, rd_data;
  logic [63:0] model [WORDS];
  bit          written [WORDS];

  kvl_scratchpad #(.WORDS(WORDS), .W(64)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_valid = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    foreach (written[i]) written[i] = 0;
    @(negedge clk);
    check(wr_ready, "write port always ready");
    for (int i = 0; i < 600; i++) begin
      wr_valid = ($urandom_range(99) < 80);
      wr_addr  = 8'($urandom);
      wr_data  = {$urandom, $urandom};
      rd_en    = 1; rd_addr = wr_addr + 8'd1;
      if (wr_valid) begin model[wr_addr] = wr_data; written[wr_addr] = 1; end
      @(negedge clk);
    end
    wr_valid = 0;
    for (int a = 0; a < WORDS; a++) begin
      if (!written[a]) continue;
      rd_en = 1; rd_addr = 8'(a);
      @(negedge clk);
      rd_en = 0; rd_addr = 8'(a + 1);
      check(rd_data == model[a], $sformatf("word %0d", a));
      @(negedge clk);
      check(rd_data == model[a], "read data held while rd_en low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
