// tb_icache: drives a small (256-byte) i-cache with random reads over a footprint
// larger than the cache; checks every returned word against external memory, the
// two-cycle hit latency, that hits never reach the downstream port, and that flush
// turns the next access into a miss.
module tb_icache;
  import asrpu_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0;
  bus_req_t up_req, down_req;
  bus_rsp_t up_rsp, down_rsp;
  logic hit, miss;
  int checks = 0, failures = 0, hits = 0, misses = 0;
  icache #(.SIZE_BYTES(256)) dut (.clk, .rst_n, .flush, .up_req, .up_rsp, .down_req,
    .down_rsp, .hit_pulse(hit), .miss_pulse(miss));
  ext_mem_model #(.LAT(4)) ext (.clk, .req(down_req), .rsp(down_rsp));
  always #5 clk = ~clk;
  always @(negedge clk) begin hits += hit; misses += miss; end

  task automatic rd(input logic [31:0] a, output int lat);
    @(negedge clk);
    up_req = '0; up_req.valid = 1; up_req.addr = a;
    lat = 0;
    do begin @(negedge clk); lat++; end while (!up_rsp.rvalid);
    checks++;
    if (up_rsp.rdata !== ext.peek(a)) begin
      failures++;
      $display("MISMATCH a=%h got %h", a, up_rsp.rdata);
    end
    up_req.valid = 0;
  endtask

  initial begin
    int lat, r0;
    up_req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    rd(32'h100, lat);               // cold miss
    checks++; if (lat < 5) begin failures++; $display("short miss lat %0d", lat); end
    r0 = ext.reads;
    rd(32'h100, lat);               // hit: answered in the cycle after the capture edge
    checks++; if (lat != 1) begin failures++; $display("hit lat %0d", lat); end
    checks++; if (ext.reads != r0) failures++;
    rd(32'h500, lat);               // conflicting line (same index, other tag)
    rd(32'h100, lat);
    checks++; if (lat < 5) begin failures++; $display("short miss lat %0d", lat); end
    for (int t = 0; t < 3000; t++) rd({$urandom_range(0, 127), 2'b00}, lat);
    @(negedge clk) flush = 1;
    @(negedge clk) flush = 0;
    rd(32'h100, lat);
    checks++; if (lat < 5) begin failures++; $display("short miss lat %0d", lat); end
    checks++; if (hits == 0 || misses == 0) failures++;
    $display("hits=%0d misses=%0d", hits, misses);
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
