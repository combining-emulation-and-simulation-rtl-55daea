// tb_kvl_lsu_rd: self-checking test of the read LSU against a behavioural
// memory that answers packets out of order with random latency. Covers the
// three addressing modes: a sequential block that starts and ends off a
// 128-byte boundary, a strided read, and random-mode probe sequences that
// wrap at the table end. Checks every output beat against memory contents in
// request order, every packet's size and alignment, that the number of
// outstanding packets reaches but never exceeds MAX_REQS, and that packets
// issue one per cycle until that limit.
module tb_kvl_lsu_rd;
  import kvl_pkg::*;
  import kvl_tb_pkg::*;
  localparam int unsigned MAXR = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              start;
  lsu_rd_cfg_t       cfg;
  logic              idx_valid, idx_ready;
  logic [31:0]       idx;
  logic [0:0]        mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_req_t          mem_req  [1];
  mem_resp_t         mem_resp [1];
  logic              out_valid, out_ready, busy;
  logic [127:0]      out_data;

  longint unsigned exp_addr[$];
  logic [31:0]     idx_q[$];
  int outstanding = 0, max_out = 0, npkts = 0, nbeats = 0;
  longint cyc = 0, first_req = -1, req16 = -1;

  kvl_lsu_rd #(.MAX_REQS(MAXR)) dut (
    .clk, .rst_n, .start, .cfg, .idx_valid, .idx_ready, .idx,
    .mem_req_valid(mem_req_valid[0]), .mem_req_ready(mem_req_ready[0]), .mem_req(mem_req[0]),
    .mem_resp_valid(mem_resp_valid[0]), .mem_resp_ready(mem_resp_ready[0]), .mem_resp(mem_resp[0]),
    .out_valid, .out_ready, .out_data, .busy
  );

  kvl_mem_model #(.NC(1), .LAT(30), .JITTER(40), .OOO(1'b1)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_ready(mem_resp_ready), .resp(mem_resp)
  );

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

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (mem_req_valid[0] && mem_req_ready[0]) begin
        int nb;
        nb = int'(mem_req[0].nbytes);
        check(nb > 0 && nb <= 128 && nb % 16 == 0, $sformatf("packet size %0d at %h", nb, mem_req[0].addr));
        check((mem_req[0].addr % 128) + nb <= 128, "packet within a 128-byte block");
        if (first_req < 0) first_req = cyc;
        npkts++;
        if (npkts == MAXR) req16 = cyc;
        outstanding++;
      end
      if (mem_resp_valid[0] && mem_resp_ready[0] && mem_resp[0].last) outstanding--;
      if (outstanding > max_out) max_out = outstanding;
      check(outstanding <= MAXR, "outstanding limit");
      if (out_valid && out_ready) begin
        check(exp_addr.size() > 0, "unexpected beat");
        if (exp_addr.size() > 0) begin
          check(out_data == mem_rd(exp_addr[0]), $sformatf("beat data at %h got %h exp %h", exp_addr[0], out_data, mem_rd(exp_addr[0])));
          void'(exp_addr.pop_front());
        end
        nbeats++;
      end
      if (idx_valid && idx_ready) void'(idx_q.pop_front());
    end
  end

  assign idx = idx_q.size() > 0 ? idx_q[0] : '0;
  always @(negedge clk) begin
    out_ready <= ($urandom_range(99) < 85);
    idx_valid <= (idx_q.size() > 0) && ($urandom_range(99) < 80);
  end

  task automatic go();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy || exp_addr.size() > 0) @(negedge clk);
    check(exp_addr.size() == 0, "all beats delivered");
  endtask

  initial begin
    start = 0; cfg = '0; idx_valid = 0; out_ready = 1;
    for (int i = 0; i < 4096; i++) mem_wr(16 * i, {$urandom, $urandom, $urandom, $urandom});
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1) sequential, 0x40 into a block, 8 KB + 64 B
    cfg.mode = LSU_SEQ; cfg.base = 34'h0040; cfg.nbytes = 32'd8256;
    for (longint unsigned a = 64; a < 64 + 8256; a += 16) exp_addr.push_back(a);
    go();
    check(npkts == 65, $sformatf("sequential packet count %0d", npkts));
    check(max_out == MAXR, $sformatf("outstanding reached %0d", max_out));
    check(req16 - first_req == MAXR - 1, "one packet per cycle up to the limit");

    // 2) strided: 20 elements of 32 B, 272 B apart
    cfg = '0; cfg.mode = LSU_STRIDED; cfg.base = 34'h4000; cfg.elem_bytes = 32;
    cfg.stride = 272; cfg.count = 20;
    for (int e = 0; e < 20; e++) begin
      exp_addr.push_back(64'h4000 + 272 * e);
      exp_addr.push_back(64'h4000 + 272 * e + 16);
    end
    go();

    // 3) random: 64-entry table at 0x8000, psl 5, indices incl. the wrap case
    cfg = '0; cfg.mode = LSU_RANDOM; cfg.base = 34'h8000; cfg.tbl_log2 = 6; cfg.psl = 5;
    cfg.count = 300;
    for (int i = 0; i < 300; i++) begin
      logic [31:0] ix;
      ix = (i % 10 == 0) ? 32'(60 + (i / 10) % 4) : 32'($urandom_range(63));
      idx_q.push_back(ix);
      for (int p = 0; p < 5; p++) exp_addr.push_back(64'h8000 + 16 * ((ix + p) % 64));
    end
    go();
    check(idx_q.size() == 0, "all indices consumed");

    // 4) random with psl 8 on a 2^20-entry table
    cfg.tbl_log2 = 20; cfg.psl = 8; cfg.base = 34'h0; cfg.count = 50;
    for (int i = 0; i < 50; i++) begin
      logic [31:0] ix;
      ix = 32'($urandom_range(200));
      idx_q.push_back(ix);
      for (int p = 0; p < 8; p++) exp_addr.push_back(16 * (ix + p));
    end
    go();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
