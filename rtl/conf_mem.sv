// conf_mem: configuration memory of the decoding unit. Entry n holds the setup
// program address and kernel program address of acoustic-scoring kernel n; entry
// MAX_KERNELS holds those of the hypothesis-expansion kernel.
//
// The command decoder writes it; the ASR controller reads it. Synchronous read, one
// cycle latency. The paper names this memory and says the ASR controller "reads from
// the Configuration memory the address of the first setup program"; its size
// (MAX_KERNELS) and layout are this design's choices.
module conf_mem
  import asrpu_pkg::*;
#(
  parameter int unsigned MAX_KERNELS = 128
) (
  input  logic                             clk,
  input  logic                             we,
  input  logic [$clog2(MAX_KERNELS+1)-1:0] waddr,
  input  kernel_cfg_t                      wdata,
  input  logic [$clog2(MAX_KERNELS+1)-1:0] raddr,
  output kernel_cfg_t                      rdata
);
  kernel_cfg_t mem [MAX_KERNELS+1];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
