// hyp_mem: hypothesis memory (paper: 24 KB). It holds two sets of 16-byte hypothesis
// records: bank 0 the active hypotheses of the current expansion, bank 1 the newly
// generated ones. 24 KB / 16 B = 1536 records, 768 per bank.
//
// One synchronous read port and one write port, each addressed by {bank, index}; the
// read data appears one cycle after raddr. The split into two equal banks is this
// design's choice; the paper says both sets "reside inside the hypothesis memory".
module hyp_mem
  import asrpu_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 24 * 1024,
  localparam int unsigned ENTRIES   = SIZE_BYTES / 16,
  localparam int unsigned AW        = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  hyp_t          wdata,
  input  logic [AW-1:0] raddr,
  output hyp_t          rdata
);
  hyp_t mem [ENTRIES];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
