// tb_hyp_mem: random record writes over both banks and reads with one-cycle latency.
module tb_hyp_mem;
  import asrpu_pkg::*;
  localparam int ENT = 24 * 1024 / 16;
  localparam int AW  = $clog2(ENT);
  logic clk = 0;
  logic we;
  logic [AW-1:0] waddr, raddr;
  hyp_t wdata, rdata;
  hyp_t model [int];
  int checks = 0, failures = 0;
  hyp_mem dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int t = 0; t < 3000; t++) begin
      int k;
      k = $urandom_range(0, ENT - 1);
      @(negedge clk);
      we = 1; waddr = AW'(k); wdata = {$urandom, $urandom, $urandom, $urandom};
      model[k] = wdata;
      k = $urandom_range(0, ENT - 1);
      if (t % 2) k = int'(waddr);
      @(negedge clk);
      we = 0; raddr = AW'(k);
      @(negedge clk);
      if (model.exists(k)) begin
        checks++;
        if (rdata !== model[k]) failures++;
      end
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
