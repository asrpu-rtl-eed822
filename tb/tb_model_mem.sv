// tb_model_mem: bus reads and writes plus DMA fill-port writes, checked against a
// model; a fill write and a bus write to the same word in one cycle must leave the
// fill data.
module tb_model_mem;
  import asrpu_pkg::*;
  logic clk = 0, rst_n = 0;
  bus_req_t req;
  bus_rsp_t rsp;
  logic fill_we;
  logic [31:0] fill_addr, fill_data;
  int checks = 0, failures = 0;
  logic [31:0] model [int];
  model_mem dut (.clk, .rst_n, .req, .rsp, .fill_we, .fill_addr, .fill_data);
  always #5 clk = ~clk;

  initial begin
    req = '0; fill_we = 0; fill_addr = 0; fill_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      logic [31:0] a;
      int w;
      a = {12'h100, $urandom_range(0, 255), 2'b00} | ((t % 2) ? 32'h000F_0000 : 32'h0);
      w = int'(a[19:2]);
      @(negedge clk);
      req.valid = 1; req.we = $urandom_range(0, 1); req.addr = a; req.wdata = $urandom;
      fill_we = $urandom_range(0, 1);
      fill_addr = (t % 5 == 0) ? a : {12'h100, $urandom_range(0, 255), 2'b00};
      fill_data = $urandom;
      if (req.we) model[w] = req.wdata;
      if (fill_we) model[int'(fill_addr[19:2])] = fill_data;
      @(negedge clk);
      req.valid = 0; fill_we = 0;
      checks++;
      if (!rsp.rvalid) failures++;
      // read back the word just touched
      @(negedge clk);
      req.valid = 1; req.we = 0;
      @(negedge clk);
      req.valid = 0;
      if (model.exists(w)) begin
        checks++;
        if (rsp.rdata !== model[w]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
