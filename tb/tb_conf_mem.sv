// tb_conf_mem: writes every entry (all kernels plus the expansion entry) with random
// addresses and reads them back with the one-cycle read latency.
module tb_conf_mem;
  import asrpu_pkg::*;
  localparam int MK = 128;
  logic clk = 0;
  logic we;
  logic [$clog2(MK+1)-1:0] waddr, raddr;
  kernel_cfg_t wdata, rdata;
  kernel_cfg_t model [MK+1];
  int checks = 0, failures = 0;
  conf_mem #(.MAX_KERNELS(MK)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int k = 0; k <= MK; k++) begin
      @(negedge clk);
      we = 1; waddr = k[$clog2(MK+1)-1:0]; wdata = {$urandom, $urandom};
      model[k] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int t = 0; t < 1000; t++) begin
      int k;
      k = $urandom_range(0, MK);
      raddr = k[$clog2(MK+1)-1:0];
      @(negedge clk);
      checks++;
      if (rdata !== model[k]) failures++;
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
