// kvl_mem_xbar: the memory interconnect. A crossbar from NM read ports (the
// LSU0-R and LSU1-R of every accelerator) to NC memory channels (HMC vaults).
//
// Requests are routed by address: the channel is address bits [7 +: log2 NC],
// so consecutive 128-byte blocks go to consecutive channels, and since no
// packet crosses a 128-byte boundary every packet lives in one channel. Each
// channel has a round-robin arbiter over the ports that address it; the
// granted port's number is written into tag[15:8], so the channel sends its
// response beats back with that source id. Each port has a round-robin
// arbiter over the channels that hold a response beat for it. Both
// directions are combinational (no added latency): valid and data pass
// through, ready comes back through the grant. The paper draws the
// interconnect and the channels but gives neither routing nor arbitration;
// both are this design's choice. NC must be a power of two.
// Channel-side tag bits above log2(NM)+8 are constant zero: tag[15:8] has
// room for up to 256 ports, more than NM needs.
module kvl_mem_xbar
  import kvl_pkg::*;
#(
  parameter int unsigned NM = 16,
  parameter int unsigned NC = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // LSU side
  input  logic [NM-1:0]     m_req_valid,
  output logic [NM-1:0]     m_req_ready,
  input  mem_req_t          m_req [NM],
  output logic [NM-1:0]     m_resp_valid,
  input  logic [NM-1:0]     m_resp_ready,
  output mem_resp_t         m_resp [NM],
  // channel side
  output logic [NC-1:0]     c_req_valid,
  input  logic [NC-1:0]     c_req_ready,
  output mem_req_t          c_req [NC],
  input  logic [NC-1:0]     c_resp_valid,
  output logic [NC-1:0]     c_resp_ready,
  input  mem_resp_t         c_resp [NC]
);
  localparam int unsigned CB = (NC > 1) ? $clog2(NC) : 1;
  localparam int unsigned MB = (NM > 1) ? $clog2(NM) : 1;

  // channel addressed by each port
  logic [CB-1:0] sel [NM];
  for (genvar m = 0; m < NM; m++) begin : g_sel
    if (NC > 1) begin : g_multi
      assign sel[m] = m_req[m].addr[7 +: CB];
    end else begin : g_one
      assign sel[m] = '0;
    end
  end

  // ---------------- request direction ----------------
  logic [NM-1:0] c_gnt [NC];
  for (genvar c = 0; c < NC; c++) begin : g_ch
    logic [NM-1:0] req;
    logic [MB-1:0] gidx;
    logic          any;
    for (genvar m = 0; m < NM; m++) begin : g_req
      assign req[m] = m_req_valid[m] && (32'(sel[m]) == c);
    end
    kvl_rr_arb #(.N(NM)) u_arb (
      .clk, .rst_n, .req, .advance(c_req_ready[c]),
      .gnt(c_gnt[c]), .gnt_idx(gidx), .any
    );
    assign c_req_valid[c] = any;
    always_comb begin
      c_req[c]          = m_req[gidx];
      c_req[c].tag[15:8] = 8'(gidx);
    end
  end

  for (genvar m = 0; m < NM; m++) begin : g_mrdy
    assign m_req_ready[m] = c_gnt[sel[m]][m] && c_req_ready[sel[m]];
  end

  // ---------------- response direction ----------------
  logic [NC-1:0] m_gnt [NM];
  for (genvar m = 0; m < NM; m++) begin : g_port
    logic [NC-1:0] req;
    logic [CB-1:0] gidx;
    logic          any;
    for (genvar c = 0; c < NC; c++) begin : g_req
      assign req[c] = c_resp_valid[c] && (32'(c_resp[c].tag[15:8]) == m);
    end
    kvl_rr_arb #(.N(NC)) u_arb (
      .clk, .rst_n, .req, .advance(m_resp_ready[m]),
      .gnt(m_gnt[m]), .gnt_idx(gidx), .any
    );
    assign m_resp_valid[m] = any;
    assign m_resp[m]       = c_resp[gidx];
  end

  always_comb begin
    c_resp_ready = '0;
    for (int c = 0; c < NC; c++)
      for (int m = 0; m < NM; m++)
        if (m_gnt[m][c] && m_resp_ready[m]) c_resp_ready[c] = 1'b1;
  end
endmodule
