// model_mem: the model memory that holds prefetched DNN weights during acoustic
// scoring (paper: 1 MB, the default here).
//
// Two ports: a bus port through which PE threads read (and may write) model data,
// and a write-only fill port driven by the DMA engine. Both are word wide with byte
// addresses. Bus requests are answered one cycle later like the shared memory. If
// both ports write the same word in one cycle the DMA write wins. The paper also lets
// this memory act as an LRU data cache during hypothesis expansion; that mode is not
// built here, so during hypothesis expansion threads reach graph data only through
// what setup threads copy in with the DMA.
module model_mem
  import asrpu_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 1024 * 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  bus_req_t    req,
  output bus_rsp_t    rsp,
  input  logic        fill_we,
  input  logic [31:0] fill_addr,
  input  logic [31:0] fill_data
);
  localparam int unsigned WORDS = SIZE_BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic [31:0] rdata_q;
  logic        rvalid_q;
  logic [AW-1:0] bidx, fidx;
  assign bidx = req.addr[AW+1:2];
  assign fidx = fill_addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (fill_we)                                          mem[fidx] <= fill_data;
    if (req.valid && req.we && !(fill_we && fidx == bidx)) mem[bidx] <= req.wdata;
    rdata_q <= mem[bidx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid_q <= 1'b0;
    else        rvalid_q <= req.valid;
  end
  assign rsp.rvalid = rvalid_q;
  assign rsp.rdata  = rdata_q;
endmodule
