// tb_kvl_mem_xbar: self-checking test of the memory interconnect with 4 LSU
// ports and 4 channels. Each port issues random read packets (random 128-byte
// block, offset and size) with its own tags; the behavioural channels answer
// with random latency and out of order. Checks that every packet reaches the
// channel its address selects, carries the port number in tag[15:8], and
// that each port receives exactly the beats of its own packets with the
// right data; also that contention for one channel happened and was served
// round-robin (no port starved).
module tb_kvl_mem_xbar;
  import kvl_pkg::*;
  import kvl_tb_pkg::*;
  localparam int NM = 4, NC = 4, NPKT = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NM-1:0] m_req_valid, m_req_ready, m_resp_valid, m_resp_ready;
  mem_req_t      m_req  [NM];
  mem_resp_t     m_resp [NM];
  logic [NC-1:0] c_req_valid, c_req_ready, c_resp_valid, c_resp_ready;
  mem_req_t      c_req  [NC];
  mem_resp_t     c_resp [NC];

  kvl_mem_xbar #(.NM(NM), .NC(NC)) dut (.*);
  kvl_mem_model #(.NC(NC), .LAT(5), .JITTER(30), .OOO(1'b1), .QDEPTH(8), .REQ_STALL(20)) u_mem (
    .clk, .rst_n, .req_valid(c_req_valid), .req_ready(c_req_ready), .req(c_req),
    .resp_valid(c_resp_valid), .resp_ready(c_resp_ready), .resp(c_resp)
  );

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

  // per port: outstanding packets by tag, beats received per tag
  mem_req_t pend [NM][256];
  bit       open_t [NM][256];
  int       rbeat [NM][256];
  int       sent [NM], done_pkts [NM];
  int       contention = 0;

  always @(posedge clk) if (rst_n) begin
    int nv [NC];
    foreach (nv[c]) nv[c] = 0;
    for (int m = 0; m < NM; m++) begin
      if (m_req_valid[m]) nv[m_req[m].addr[8:7]]++;
      if (m_req_valid[m] && m_req_ready[m]) begin
        pend[m][m_req[m].tag[7:0]]   = m_req[m];
        open_t[m][m_req[m].tag[7:0]] = 1;
        rbeat[m][m_req[m].tag[7:0]]  = 0;
        sent[m]++;
      end
      if (m_resp_valid[m] && m_resp_ready[m]) begin
        logic [7:0] t;
        t = m_resp[m].tag[7:0];
        check(m_resp[m].tag[15:8] == 8'(m), "response routed to its source port");
        check(open_t[m][t], "response for an open packet");
        check(m_resp[m].data == mem_rd(64'(pend[m][t].addr) + 64'(16 * rbeat[m][t])), "response data");
        rbeat[m][t]++;
        check(m_resp[m].last == (rbeat[m][t] * 16 == int'(pend[m][t].nbytes)), "last beat flag");
        if (m_resp[m].last) begin open_t[m][t] = 0; done_pkts[m]++; end
      end
    end
    foreach (nv[c]) if (nv[c] > 1) contention++;
    for (int c = 0; c < NC; c++)
      if (c_req_valid[c] && c_req_ready[c])
        check(32'(c_req[c].addr[8:7]) == c, "packet reaches the channel its address selects");
  end

  // port drivers
  for (genvar m = 0; m < NM; m++) begin : g_drv
    logic [7:0] tag;
    initial begin
      m_req_valid[m] = 0; m_resp_ready[m] = 0; m_req[m] = '0; tag = 0;
      wait (rst_n);
      while (sent[m] < NPKT) begin
        @(negedge clk);
        m_resp_ready[m] = ($urandom_range(99) < 80);
        if (!m_req_valid[m] && !open_t[m][tag]) begin
          int off, nb;
          off = 16 * $urandom_range(7);
          nb  = 16 * $urandom_range(1, 8 - off / 16);
          m_req[m].addr   = 34'(128 * $urandom_range(255) + off);
          m_req[m].nbytes = 8'(nb);
          m_req[m].tag    = {8'hA5, tag};   // upper byte must be replaced
          m_req_valid[m]  = 1;
        end
        @(posedge clk); #1;
        if (m_req_valid[m] && sent[m] > 0 && open_t[m][tag] && pend[m][tag].addr == m_req[m].addr) begin
          m_req_valid[m] = 0;
          tag = tag + 1;
        end
      end
      m_req_valid[m] = 0;
      forever begin @(negedge clk); m_resp_ready[m] = ($urandom_range(99) < 80); end
    end
  end

  initial begin
    for (int i = 0; i < 256 * 8; i++) mem_wr(16 * i, {$urandom, $urandom, $urandom, $urandom});
    for (int m = 0; m < NM; m++) begin
      sent[m] = 0; done_pkts[m] = 0;
      for (int t = 0; t < 256; t++) open_t[m][t] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (sent[0] >= NPKT && sent[1] >= NPKT && sent[2] >= NPKT && sent[3] >= NPKT);
    wait (done_pkts[0] >= NPKT && done_pkts[1] >= NPKT && done_pkts[2] >= NPKT && done_pkts[3] >= NPKT);
    repeat (20) @(posedge clk);
    for (int m = 0; m < NM; m++) check(done_pkts[m] == NPKT, "every packet answered once");
    check(contention > 0, "ports contended for a channel");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
