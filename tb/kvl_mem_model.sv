// kvl_mem_model: behavioural model of NC memory channels (e.g. HMC vaults)
// for the testbenches. Not synthesizable: contents live in kvl_tb_pkg::store.
// Each channel accepts a read packet per cycle while fewer than QDEPTH are
// queued, and answers a packet LAT + random(0..JITTER) cycles after it was
// accepted, one 128-bit beat per cycle, with the request's tag. With OOO set,
// a channel picks a random ready packet instead of the oldest, so packets
// come back out of order. REQ_STALL is the percentage of cycles in which a
// channel refuses requests. While rst_n is low the model refuses and ignores
// requests, so nothing the design drives before its reset counts as a read.
module kvl_mem_model
  import kvl_pkg::*;
#(
  parameter int unsigned NC        = 1,
  parameter int unsigned LAT       = 20,
  parameter int unsigned JITTER    = 0,
  parameter int unsigned QDEPTH    = 64,
  parameter bit          OOO       = 1'b0,
  parameter int unsigned REQ_STALL = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NC-1:0] req_valid,
  output logic [NC-1:0] req_ready,
  input  mem_req_t      req  [NC],
  output logic [NC-1:0] resp_valid,
  input  logic [NC-1:0] resp_ready,
  output mem_resp_t     resp [NC]
);
  typedef struct {
    mem_req_t    r;
    longint      due;
  } pend_t;

  longint cycle = 0;
  longint n_reqs = 0;
  pend_t  q    [NC][$];
  int     cur  [NC];        // index into q of the packet being returned, -1 none
  int     beat [NC];
  logic   stall[NC];

  initial begin
    for (int c = 0; c < NC; c++) begin
      cur[c] = -1; beat[c] = 0; stall[c] = 0;
    end
  end

  initial begin
    req_ready  = '1;
    resp_valid = '0;
    for (int c = 0; c < NC; c++) resp[c] = '0;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int c = 0; c < NC; c++) begin
      // finish / advance the current beat
      if (cur[c] >= 0 && resp_ready[c]) begin
        if ((beat[c] + 1) * 16 >= int'(q[c][cur[c]].r.nbytes)) begin
          q[c].delete(cur[c]);
          cur[c]  = -1;
          beat[c] = 0;
        end else begin
          beat[c] = beat[c] + 1;
        end
      end
      // accept a request
      if (rst_n && req_valid[c] && req_ready[c]) begin
        pend_t p;
        p.r   = req[c];
        p.due = cycle + longint'(LAT) + ((JITTER > 0) ? longint'($urandom_range(JITTER)) : 0);
        q[c].push_back(p);
        n_reqs++;
      end
      // choose the next packet to return
      if (cur[c] < 0) begin
        int ready_ix[$];
        ready_ix.delete();
        for (int i = 0; i < q[c].size(); i++)
          if (q[c][i].due <= cycle) ready_ix.push_back(i);
        if (ready_ix.size() > 0)
          cur[c] = OOO ? ready_ix[$urandom_range(ready_ix.size() - 1)] : ready_ix[0];
      end
      stall[c] = (REQ_STALL > 0) && ($urandom_range(99) < REQ_STALL);
      // outputs for the next cycle
      req_ready[c]  <= rst_n && (q[c].size() < QDEPTH) && !stall[c];
      resp_valid[c] <= (cur[c] >= 0);
      if (cur[c] >= 0) begin
        mem_resp_t rr;
        rr.data = kvl_tb_pkg::mem_rd(64'(q[c][cur[c]].r.addr) + 64'(16 * beat[c]));
        rr.tag  = q[c][cur[c]].r.tag;
        rr.last = (beat[c] + 1) * 16 >= int'(q[c][cur[c]].r.nbytes);
        resp[c] <= rr;
      end else begin
        resp[c] <= '0;
      end
    end
  end
endmodule
