// dma: copy engine that loads model data from external memory into the model memory.
//
// Setup threads program it through four word registers on the PE bus (offsets in
// asrpu_pkg): SRC (external byte address), DST (model-memory byte address), LEN (number
// of 32-bit words) and GO. Writing GO starts the copy; reading GO returns 1 while a
// copy is running, which is how a setup thread waits for the load to finish. The
// engine reads one word at a time on its external master port and writes it to the
// model memory fill port in the cycle the word arrives. Register accesses are answered
// one cycle after the request. The paper shows setup threads configuring a DMA to
// load kernel weights into the model memory; its register interface is this design's.
module dma
  import asrpu_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  bus_req_t    req,        // register port
  output bus_rsp_t    rsp,
  output bus_req_t    ext_req,    // external memory read port
  input  bus_rsp_t    ext_rsp,
  output logic        fill_we,
  output logic [31:0] fill_addr,
  output logic [31:0] fill_data,
  output logic        busy
);
  logic [31:0] src, dst, len;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src <= '0; dst <= '0; len <= '0; busy <= 1'b0;
      rsp <= '0;
    end else begin
      rsp.rvalid <= req.valid;
      if (req.valid) begin
        unique case (req.addr[3:0])
          DMA_SRC: rsp.rdata <= src;
          DMA_DST: rsp.rdata <= dst;
          DMA_LEN: rsp.rdata <= len;
          default: rsp.rdata <= {31'b0, busy};
        endcase
      end
      if (busy) begin
        if (ext_rsp.rvalid) begin
          src <= src + 32'd4;
          dst <= dst + 32'd4;
          len <= len - 32'd1;
          if (len == 32'd1) busy <= 1'b0;
        end
      end else if (req.valid && req.we) begin
        unique case (req.addr[3:0])
          DMA_SRC: src <= req.wdata;
          DMA_DST: dst <= req.wdata;
          DMA_LEN: len <= req.wdata;
          default: busy <= (len != 32'd0);
        endcase
      end
    end
  end

  always_comb begin
    ext_req       = '0;
    ext_req.valid = busy;
    ext_req.addr  = src;
  end
  assign fill_we   = busy && ext_rsp.rvalid;
  assign fill_addr = dst;
  assign fill_data = ext_rsp.rdata;
endmodule
