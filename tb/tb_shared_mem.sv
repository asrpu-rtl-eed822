// tb_shared_mem: random word writes and reads against an associative-array model of
// the memory; every request must be answered exactly one cycle later.
module tb_shared_mem;
  import asrpu_pkg::*;
  logic clk = 0, rst_n = 0;
  bus_req_t req;
  bus_rsp_t rsp;
  int checks = 0, failures = 0;
  logic [31:0] model [int];
  shared_mem dut (.clk, .rst_n, .req, .rsp);
  always #5 clk = ~clk;

  initial begin
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      logic [31:0] a;
      int w;
      a = {$urandom_range(0, 1023), 2'b00} + ((t % 3 == 0) ? 32'h7_F000 : 32'h0);
      @(negedge clk);
      req.valid = 1; req.we = $urandom_range(0, 1); req.addr = a; req.wdata = $urandom;
      w = int'(a[18:2]);
      if (req.we) model[w] = req.wdata;
      @(negedge clk);
      req.valid = 0;
      checks++;
      if (!rsp.rvalid) failures++;
      if (!req.we && model.exists(w)) begin
        checks++;
        if (rsp.rdata !== model[w]) failures++;
      end
      @(negedge clk);
      checks++;
      if (rsp.rvalid) failures++;
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
