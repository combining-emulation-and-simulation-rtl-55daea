// tb_kvl_ctrl: self-checking test of the control block. Writes the batch
// registers and reads them back, starts a batch and checks the start pulse
// and every unit's control word (computed here from the register values),
// that writes and a second start are ignored while busy, that done/irq rise
// when the write LSU reports done, and that the cycle counter counts from
// start to done.
module tb_kvl_ctrl;
  import kvl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        reg_we, start, done_wr, busy, irq;
  logic [3:0]  reg_waddr, reg_raddr;
  logic [63:0] reg_wdata, reg_rdata;
  lsu_rd_cfg_t lsu0_cfg, lsu1_cfg;
  lsu_wr_cfg_t lsuw_cfg;
  logic [31:0] num_keys;
  logic [4:0]  tbl_log2;
  logic [7:0]  psl;
  int          starts = 0;

  kvl_ctrl dut (.*);
  always @(posedge clk) if (start) starts++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [3:0] a, logic [63:0] d);
    @(negedge clk); reg_we = 1; reg_waddr = a; reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask

  // register read: reg_rdata follows reg_raddr combinationally
  logic [63:0] rv [16];
  task automatic rd_all();
    for (int a = 0; a < 16; a++) begin
      reg_raddr = 4'(a); #1;
      rv[a] = reg_rdata;
    end
  endtask

  initial begin
    reg_we = 0; reg_waddr = 0; reg_wdata = 0; reg_raddr = 0; done_wr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(REG_KEY_BASE, 64'h1_2345_6780);
    wr(REG_NUM_KEYS, 64'd37);
    wr(REG_TBL_BASE, 64'h2_0000_0000);
    wr(REG_TBL_LOG2, 64'd22);
    wr(REG_PSL, 64'd6);
    wr(REG_VAL_BASE, 64'd100);
    #1;
    rd_all();
    check(rv[REG_KEY_BASE] == 64'h1_2345_6780, "key base readback");
    rd_all();
    check(rv[REG_NUM_KEYS] == 37, "num keys readback");
    rd_all();
    check(rv[REG_TBL_BASE] == 64'h2_0000_0000, "table base readback");
    rd_all();
    check(rv[REG_TBL_LOG2] == 22 && rv[REG_PSL] == 6 && rv[REG_VAL_BASE] == 100, "other regs");
    rd_all();
    check(rv[REG_STATUS] == 0, "idle status");
    // start
    @(negedge clk); reg_we = 1; reg_waddr = REG_CTRL; reg_wdata = 1; #1;
    check(start, "start pulse");
    check(lsu0_cfg.mode == LSU_SEQ && lsu0_cfg.base == 34'h1_2345_6780 && lsu0_cfg.nbytes == 304,
          "LSU0-R: 37 keys -> 296 bytes rounded to 304");
    check(lsu1_cfg.mode == LSU_RANDOM && lsu1_cfg.base == 34'h2_0000_0000 && lsu1_cfg.count == 37
          && lsu1_cfg.tbl_log2 == 22 && lsu1_cfg.psl == 6, "LSU1-R control word");
    check(lsuw_cfg.base == 100 && lsuw_cfg.stride == 1 && lsuw_cfg.count == 37, "LSU1-W control word");
    check(num_keys == 37 && tbl_log2 == 22 && psl == 6, "hash / CSU settings");
    done_wr = 1;   // stale done of a previous batch must not end this one
    @(negedge clk); reg_we = 0; done_wr = 0;
    check(busy && !irq, "busy after start");
    wr(REG_NUM_KEYS, 64'd5);
    rd_all();
    check(rv[REG_NUM_KEYS] == 37, "writes ignored while busy");
    wr(REG_CTRL, 64'd1);
    check(starts == 1, "start ignored while busy");
    repeat (10) @(negedge clk);
    done_wr = 1;
    @(negedge clk);
    check(!busy && irq, "done after write LSU done");
    rd_all();
    check(rv[REG_STATUS] == 64'd2, "status done");
    rd_all();
    check(rv[REG_CYCLES] == 16, $sformatf("cycle count %0d", rv[REG_CYCLES]));
    wr(REG_CTRL, 64'd1);
    check(starts == 2 && !irq, "second batch starts, irq cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
