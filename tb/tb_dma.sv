// tb_dma: programs the DMA through its registers to copy blocks from an external
// memory model; checks every fill write (address and data), the busy flag seen
// through the GO register, and a copy of length 0 (must not start).
module tb_dma;
  import asrpu_pkg::*;
  logic clk = 0, rst_n = 0;
  bus_req_t req, ext_req;
  bus_rsp_t rsp, ext_rsp;
  logic fill_we, busy;
  logic [31:0] fill_addr, fill_data;
  int checks = 0, failures = 0, fills = 0;
  logic [31:0] exp_dst, exp_src;
  dma dut (.clk, .rst_n, .req, .rsp, .ext_req, .ext_rsp, .fill_we, .fill_addr, .fill_data, .busy);
  ext_mem_model #(.LAT(2)) ext (.clk, .req(ext_req), .rsp(ext_rsp));
  always #5 clk = ~clk;

  always @(negedge clk) if (fill_we) begin
    fills++;
    checks++;
    if (fill_addr !== exp_dst || fill_data !== ext.peek(exp_src)) begin failures++; $display("fill %h %h exp %h %h", fill_addr, fill_data, exp_dst, ext.peek(exp_src)); end
    exp_dst += 4; exp_src += 4;
  end

  task automatic wr(input logic [3:0] off, input logic [31:0] d);
    @(negedge clk);
    req = '0; req.valid = 1; req.we = 1; req.addr = {28'h3000000, off}; req.wdata = d;
    @(negedge clk);
    req.valid = 0;
    checks++;
    if (!rsp.rvalid) failures++;
  endtask
  task automatic rdgo(output logic [31:0] d);
    @(negedge clk);
    req = '0; req.valid = 1; req.addr = {28'h3000000, DMA_GO};
    @(negedge clk);
    req.valid = 0;
    d = rsp.rdata;
  endtask

  initial begin
    logic [31:0] st;
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 5; b++) begin
      int len = (b == 4) ? 0 : $urandom_range(1, 40);
      exp_src = 32'h0800_0000 + 64 * b; exp_dst = 32'h1000_0100 + 256 * b;
      fills = 0;
      wr(DMA_SRC, exp_src); wr(DMA_DST, exp_dst); wr(DMA_LEN, len); wr(DMA_GO, 1);
      rdgo(st);
      checks++;
      if (st[0] != (len > 0)) begin failures++; $display("busy %0d len %0d", st[0], len); end
      do rdgo(st); while (st[0]);
      checks++;
      if (fills != len) begin failures++; $display("fills %0d len %0d", fills, len); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
