// tb_bus_arbiter: four masters issue random read/write streams into one slave (a memory
// model with random latency). Checks that every master gets exactly its own answers,
// that the slave sees each request as a single-cycle valid tagged with the right
// master id, that only one transaction is in flight, and round-robin service: with
// all four masters requesting continuously, grants rotate 0,1,2,3.
module tb_bus_arbiter;
  import asrpu_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  bus_req_t m_req [N];
  bus_rsp_t m_rsp [N];
  bus_req_t s_req;
  bus_rsp_t s_rsp;
  logic cont;
  int checks = 0, failures = 0, conts = 0;
  bus_arbiter #(.N(N)) dut (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp, .contention(cont));
  always #5 clk = ~clk;

  // slave: memory indexed by address, answers after 1..3 cycles
  logic [31:0] smem [int];
  int inflight = 0;
  int grants[$];
  always @(posedge clk) begin
    conts += cont;
    s_rsp.rvalid <= 1'b0;
    if (s_req.valid) begin
      checks++;
      if (inflight != 0) failures++;
      inflight = 1;
      grants.push_back(int'(s_req.id));
      if (s_req.addr[31:28] != 4'(s_req.id)) failures++;     // addresses carry the id
      fork begin
        automatic bus_req_t r = s_req;
        repeat ($urandom_range(0, 2)) @(posedge clk);
        if (r.we) smem[int'(r.addr)] = r.wdata;
        s_rsp.rvalid <= 1'b1;
        s_rsp.rdata  <= smem.exists(int'(r.addr)) ? smem[int'(r.addr)] : r.addr;
        inflight = 0;
      end join_none
    end
  end

  for (genvar g = 0; g < N; g++) begin : g_m
    initial begin
      logic [31:0] local_mem [int];
      m_req[g] = '0;
      wait (rst_n);
      for (int t = 0; t < 300; t++) begin
        logic [31:0] a;
        @(negedge clk);
        a = {4'(g), 20'b0, 6'($urandom_range(0, 15)), 2'b00};
        m_req[g].valid = 1;
        m_req[g].we    = $urandom_range(0, 1);
        m_req[g].addr  = a;
        m_req[g].wdata = $urandom;
        @(posedge clk);
        while (!m_rsp[g].rvalid) @(posedge clk);
        if (m_req[g].we) local_mem[int'(a)] = m_req[g].wdata;
        else begin
          checks++;
          if (m_rsp[g].rdata !== (local_mem.exists(int'(a)) ? local_mem[int'(a)] : a)) failures++;
        end
        #1 m_req[g].valid = 0;
      end
    end
  end

  initial begin
    s_rsp = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (20000) @(posedge clk);
    // round robin: within the first grants, while all masters were busy, each
    // master appears once in every window of four
    for (int k = 0; k + 4 <= 40; k += 4) begin
      int seen = 0;
      for (int j = 0; j < 4; j++) seen |= 1 << grants[k + j];
      checks++;
      if (seen != 15) failures++;
    end
    checks++;
    if (grants.size() != N * 300) failures++;
    checks++;
    if (conts == 0) failures++;
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
