// ext_mem_model: behavioural model of external memory (DRAM behind the SoC bus) for
// testbenches. Word-addressed storage in an associative array; a word never written
// reads as hash(addr) = addr * 0x9E3779B1. A request is captured when the model is
// idle and answered LAT cycles later. Counts the reads it served.
module ext_mem_model
  import asrpu_pkg::*;
#(
  parameter int LAT = 3
) (
  input  logic     clk,
  input  bus_req_t req,
  output bus_rsp_t rsp
);
  logic [31:0] mem [int];
  int          reads = 0;
  logic        busy = 1'b0;
  initial rsp = '0;
  int          cnt = 0;
  logic [31:0] addr_q;

  function automatic logic [31:0] hash(logic [31:0] a);
    return a * 32'h9E37_79B1;
  endfunction

  function automatic logic [31:0] peek(logic [31:0] a);
    int w = int'(a >> 2);
    return mem.exists(w) ? mem[w] : hash(a);
  endfunction

  task automatic poke(logic [31:0] a, logic [31:0] d);
    mem[int'(a >> 2)] = d;
  endtask

  always @(posedge clk) begin
    rsp.rvalid <= 1'b0;
    if (!busy && !rsp.rvalid && req.valid) begin
      busy   <= 1'b1;
      addr_q <= req.addr;
      cnt    <= LAT - 1;
      if (req.we) mem[int'(req.addr >> 2)] = req.wdata;
    end else if (busy) begin
      if (cnt == 0) begin
        rsp.rvalid <= 1'b1;
        rsp.rdata  <= peek(addr_q);
        busy       <= 1'b0;
        reads++;
      end else cnt <= cnt - 1;
    end
  end
endmodule
