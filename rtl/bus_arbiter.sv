// bus_arbiter: shared bus between N masters and one slave port, with round-robin
// arbitration; it is the PE bus of the design (one instance for PE data accesses,
// one for instruction fetch between the PE i-caches and the shared i-cache).
//
// Masters hold req.valid until they get rsp.rvalid. When the bus is idle the arbiter
// grants the first requesting master after the last one served, passes its request
// to the slave for exactly one cycle with the master's index in req.id, and waits for
// the slave's rvalid, which it returns to that master only. One transaction is in
// flight at a time. The paper says only that the PEs reach the hypothesis unit,
// shared memory and shared caches "through a bus"; the arbitration policy and the
// protocol are this design's choices.
module bus_arbiter
  import asrpu_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t m_req [N],
  output bus_rsp_t m_rsp [N],
  output bus_req_t s_req,
  input  bus_rsp_t s_rsp,
  output logic     contention   // a request waited because another master was granted
);
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1;

  logic          busy;
  logic [NW-1:0] owner, last;
  logic          found;
  logic [NW-1:0] pick;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last) + k) % N;
      if (!found && m_req[c].valid) begin
        found = 1'b1;
        pick  = NW'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      owner <= '0;
      last  <= NW'(N - 1);
    end else if (!busy) begin
      if (found) begin
        busy  <= 1'b1;
        owner <= pick;
        last  <= pick;
      end
    end else if (s_rsp.rvalid) begin
      busy <= 1'b0;
    end
  end

  // the request is forwarded in the grant cycle only
  logic grant_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) grant_q <= 1'b0;
    else        grant_q <= !busy && found;
  end

  always_comb begin
    s_req       = m_req[owner];
    s_req.valid = grant_q && m_req[owner].valid;
    s_req.id    = ID_W'(owner);
    for (int k = 0; k < N; k++) begin
      m_rsp[k]        = s_rsp;
      m_rsp[k].rvalid = s_rsp.rvalid && busy && (owner == NW'(k));
    end
  end

  always_comb begin
    int unsigned waiting;
    waiting = 0;
    for (int k = 0; k < N; k++) if (m_req[k].valid) waiting++;
    contention = (waiting > 1);
  end
endmodule
