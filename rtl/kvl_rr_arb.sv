// kvl_rr_arb: round-robin arbiter. Grants one of N requesters (one-hot gnt,
// plus its index) combinationally; the priority pointer moves past the
// granted requester when advance is high (the granted transfer took place),
// so every requester is served within N grants. Helper of the memory
// interconnect; its policy is this design's own choice.
module kvl_rr_arb #(
  parameter int unsigned N = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  input  logic          advance,
  output logic [N-1:0]  gnt,
  output logic [IW-1:0] gnt_idx,
  output logic          any
);
  logic [IW-1:0] ptr;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    any     = 1'b0;
    for (int k = 0; k < N; k++) begin
      int unsigned j;
      j = (int'(ptr) + k) % N;
      if (!any && req[j]) begin
        any     = 1'b1;
        gnt[j]  = 1'b1;
        gnt_idx = IW'(j);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) ptr <= '0;
    else if (advance && any) ptr <= (gnt_idx == IW'(N - 1)) ? '0 : gnt_idx + 1'b1;
  end
endmodule
