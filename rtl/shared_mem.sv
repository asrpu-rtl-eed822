// shared_mem: the shared scratchpad memory that PE threads use for kernel buffers,
// kernel parameters and other program variables (paper: 512 KB, the default here).
//
// A single-port word RAM on the PE bus. A request (one-cycle valid from the bus)
// is served in the next cycle: rsp.rvalid rises one cycle after req.valid, with the
// read data for a read and as an acknowledge for a write. addr is a byte address; its
// low two bits are ignored and bits above the memory size wrap. The single port and
// the one-cycle latency are this design's choices.
module shared_mem
  import asrpu_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 512 * 1024
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,
  output bus_rsp_t rsp
);
  localparam int unsigned WORDS = SIZE_BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic [31:0] rdata_q;
  logic        rvalid_q;
  logic [AW-1:0] widx;
  assign widx = req.addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (req.valid && req.we) mem[widx] <= req.wdata;
    rdata_q <= mem[widx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid_q <= 1'b0;
    else        rvalid_q <= req.valid;
  end
  assign rsp.rvalid = rvalid_q;
  assign rsp.rdata  = rdata_q;
endmodule
