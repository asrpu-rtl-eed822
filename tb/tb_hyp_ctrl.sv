// tb_hyp_ctrl: the hypothesis controller with its memory, at a small size (8 records
// per set, 2 bus masters). Random hypotheses with few distinct hashes are pushed from
// both masters with interleaved staging writes; a queue-based reference model of
// merge / beam prune / overflow eviction / swap predicts the sets. After each round
// the test swaps and compares the active set (count and every field, read through the
// bus) with the model. Checks that merges, prunes and evictions all happened.
module tb_hyp_ctrl;
  import asrpu_pkg::*;
  localparam int SIZE = 256, NM = 2, BANK = SIZE / 32, AW = $clog2(SIZE / 16);
  logic clk = 0, rst_n = 0;
  bus_req_t req;
  bus_rsp_t rsp;
  logic signed [31:0] beam;
  logic clean, swap, swap_done;
  logic [31:0] act_count;
  logic mem_we;
  logic [AW-1:0] mem_waddr, mem_raddr;
  hyp_t mem_wdata, mem_rdata;
  logic ev_merge, ev_prune, ev_evict;
  int checks = 0, failures = 0, n_merge = 0, n_prune = 0, n_evict = 0;

  hyp_ctrl #(.SIZE_BYTES(SIZE), .NUM_MASTERS(NM)) dut (.clk, .rst_n, .req, .rsp, .beam, .clean,
    .swap, .swap_done, .act_count, .mem_we, .mem_waddr, .mem_wdata, .mem_raddr, .mem_rdata,
    .ev_merge, .ev_prune, .ev_evict);
  hyp_mem #(.SIZE_BYTES(SIZE)) mem (.clk, .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .raddr(mem_raddr), .rdata(mem_rdata));
  always #5 clk = ~clk;
  always @(negedge clk) begin n_merge += ev_merge; n_prune += ev_prune; n_evict += ev_evict; end

  // ---------------- reference model ----------------
  hyp_t nl[$], al[$];
  int best;
  function automatic void m_push(hyp_t c);
    int wi;
    if (nl.size() > 0 && longint'(c.score) < longint'(best) - longint'(beam)) return;
    foreach (nl[i]) if (nl[i].hash == c.hash) begin
      if (c.score > nl[i].score) begin
        nl[i] = c;
        if (c.score > best) best = c.score;
      end
      return;
    end
    if (nl.size() < BANK) begin
      if (nl.size() == 0 || c.score > best) best = c.score;
      nl.push_back(c);
      return;
    end
    wi = 0;
    foreach (nl[i]) if (nl[i].score < nl[wi].score) wi = i;
    if (c.score > nl[wi].score) begin
      nl[wi] = c;
      if (c.score > best) best = c.score;
    end
  endfunction
  function automatic void m_swap();
    al.delete();
    foreach (nl[i]) if (longint'(nl[i].score) >= longint'(best) - longint'(beam)) al.push_back(nl[i]);
    nl.delete();
  endfunction

  // ---------------- bus helpers ----------------
  task automatic bus(input int id, input logic we, input logic [15:0] a, input logic [31:0] d,
                     output logic [31:0] q);
    @(negedge clk);
    req = '0; req.valid = 1; req.we = we; req.id = ID_W'(id); req.addr = {16'h2000, a};
    req.wdata = d;
    @(negedge clk);
    req.valid = 0;
    while (!rsp.rvalid) @(negedge clk);
    q = rsp.rdata;
  endtask
  task automatic stage(input int id, input hyp_t h);
    logic [31:0] q;
    bus(id, 1, HYP_STG_HASH, h.hash, q);
    bus(id, 1, HYP_STG_SCORE, h.score, q);
    bus(id, 1, HYP_STG_D0, h.d0, q);
    bus(id, 1, HYP_STG_D1, h.d1, q);
  endtask
  task automatic check_active();
    logic [31:0] q;
    bus(0, 0, HYP_ACT_COUNT, 0, q);
    checks++;
    if (q != al.size()) begin
      failures++;
      $display("count %0d exp %0d", q, al.size());
    end
    foreach (al[i]) begin
      logic [31:0] f[4];
      for (int k = 0; k < 4; k++) bus(1, 0, 16'(HYP_ACT_BASE + 16 * i + 4 * k), 0, f[k]);
      checks++;
      if ({f[0], f[1], f[2], f[3]} !== al[i]) begin
        failures++;
        $display("record %0d %h exp %h", i, {f[0], f[1], f[2], f[3]}, al[i]);
      end
    end
  endtask

  initial begin
    logic [31:0] q;
    req = '0; beam = 100; clean = 0; swap = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk) clean = 1;
    @(negedge clk) clean = 0;
    // seed three active hypotheses
    for (int i = 0; i < 3; i++) begin
      hyp_t h = '{hash: 32'(100 + i), score: -i, d0: $urandom, d1: $urandom};
      stage(i % NM, h);
      bus(i % NM, 1, HYP_SEED, 0, q);
      al.push_back(h);
    end
    check_active();
    for (int round = 0; round < 12; round++) begin
      for (int p = 0; p < 20; p++) begin
        hyp_t h0, h1;
        h0 = '{hash: $urandom_range(0, 11), score: $urandom_range(0, 300) - 150, d0: $urandom, d1: $urandom};
        h1 = '{hash: $urandom_range(0, 11), score: $urandom_range(0, 300) - 150, d0: $urandom, d1: $urandom};
        // interleave the staging of two masters: records must not mix
        bus(0, 1, HYP_STG_HASH, h0.hash, q);
        bus(1, 1, HYP_STG_HASH, h1.hash, q);
        bus(0, 1, HYP_STG_SCORE, h0.score, q);
        bus(1, 1, HYP_STG_SCORE, h1.score, q);
        bus(0, 1, HYP_STG_D0, h0.d0, q);
        bus(1, 1, HYP_STG_D0, h1.d0, q);
        bus(0, 1, HYP_STG_D1, h0.d1, q);
        bus(1, 1, HYP_STG_D1, h1.d1, q);
        bus(0, 1, HYP_PUSH, 0, q);  m_push(h0);
        bus(1, 1, HYP_PUSH, 0, q);  m_push(h1);
      end
      bus(0, 0, HYP_NEW_COUNT, 0, q);
      checks++;
      if (q != nl.size()) failures++;
      @(negedge clk) swap = 1;
      while (!swap_done) @(negedge clk);
      swap = 0;
      m_swap();
      check_active();
      beam = (round % 2) ? 100 : 20;
    end
    @(negedge clk) clean = 1;
    @(negedge clk) clean = 0;
    al.delete();
    check_active();
    checks++;
    if (n_merge == 0 || n_prune == 0 || n_evict == 0) failures++;
    $display("merges=%0d prunes=%0d evictions=%0d", n_merge, n_prune, n_evict);
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
