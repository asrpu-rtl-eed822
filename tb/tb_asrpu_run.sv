// tb_asrpu_run: end-to-end test of the whole accelerator, used by tb_asrpu_top (small
// memories, so that the hypothesis set overflows) and tb_asrpu_full (every parameter
// at its default). SMALL selects the configuration.
//
// The test plays the host: it configures a two-kernel acoustic-scoring phase and a
// hypothesis-expansion kernel, sets the beam, then issues decoding steps, a
// CleanDecoding, and more steps. The programs (RV32I + vector extension) are
// assembled into the external-memory model:
//   setup 0   counts steps in shared memory, DMAs the step's input vector and the
//             weight matrix into model memory, polls the DMA, reports NOUT threads
//   kernel 0  thread t: out0[t] = input . weight row t (vector MAC)
//   setup 1   reports NOUT threads, or 0 on the second step (stops that step)
//   kernel 1  thread t: out1[t] = max(out0[t], 0)
//   exp setup seeds a root hypothesis if the active set is empty, reports 3 runs
//   exp kernel thread i of run r: reads active hypothesis i (hash h, score s) and
//             pushes two children: hash (3h+j+1) mod 16, score s + out1[(hash+r) mod 16]
// The test computes out0/out1 and the expected hypothesis sets itself. Without
// overflow the surviving set is order independent (best record per hash, within the
// beam of the best) and is compared exactly on (hash, score); with overflow the test
// checks the invariants and that the best hypothesis matches. Each step starts the
// model from the hardware's active set. It counts every mechanism (setup overlap,
// full PE pool, stopped step, expansion runs, bus contention, cache hits and misses,
// DMA, merge, prune, eviction) and fails on one that never happened.
// The kernels are toy stand-ins for the paper's recogniser (one fully-connected layer,
// a ReLU, a 16-node expansion graph); the flow they drive (setup threads that DMA model
// data and notify thread counts, a stop on zero, repeated expansion runs) is the paper's.
// Timing: each step takes a few thousand cycles; the watchdog allows 3 M cycles.
module tb_asrpu_run #(
  parameter bit SMALL = 1'b1
);
  import asrpu_pkg::*;
  import rv_asm_pkg::*;

  localparam int NOUT = 16;
  localparam int BEAM = 20000;
  localparam int REPS = 3;   // expansion runs per step (three, as in the paper's example)
  localparam int STEPS_BEFORE_CLEAN = 3, STEPS_AFTER_CLEAN = 2;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, cmd_error, step_busy, step_done, step_stopped, pe_illegal;
  cmd_op_e cmd_op;
  logic [31:0] a0, a1, a2;
  events_t events;
  bus_req_t ext_i_req, ext_d_req;
  bus_rsp_t ext_i_rsp, ext_d_rsp;
  int checks = 0, failures = 0, cyc = 0;

  if (SMALL) begin : g_dut
    localparam int NPE = 4;
    logic [NPE-1:0] pe_idle;
    asrpu_top #(.NUM_PE(NPE), .SHARED_BYTES(4096), .MODEL_BYTES(1024), .ICACHE_BYTES(512),
                .PE_ICACHE_BYTES(128), .HYP_BYTES(256), .MAX_KERNELS(8)) dut (
      .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_arg0(a0), .cmd_arg1(a1), .cmd_arg2(a2),
      .cmd_error, .step_busy, .step_done, .step_stopped, .pe_illegal, .events, .pe_idle,
      .ext_i_req, .ext_i_rsp, .ext_d_req, .ext_d_rsp);
  end else begin : g_dut
    localparam int NPE = 8;
    logic [NPE-1:0] pe_idle;
    asrpu_top dut (
      .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_arg0(a0), .cmd_arg1(a1), .cmd_arg2(a2),
      .cmd_error, .step_busy, .step_done, .step_stopped, .pe_illegal, .events, .pe_idle,
      .ext_i_req, .ext_i_rsp, .ext_d_req, .ext_d_rsp);
  end
  localparam int BANK = SMALL ? 8 : 768;

  ext_mem_model #(.LAT(4)) ximem (.clk, .req(ext_i_req), .rsp(ext_i_rsp));
  ext_mem_model #(.LAT(4)) xdmem (.clk, .req(ext_d_req), .rsp(ext_d_rsp));
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // ---------------- mechanism counters ----------------
  int ev_cnt [14];
  int illegal_seen = 0;
  always @(negedge clk) if (rst_n) begin
    logic [13:0] e;
    e = events;
    for (int k = 0; k < 14; k++) ev_cnt[k] += int'(e[13 - k]);
    illegal_seen += int'(pe_illegal);
  end
  string ev_name [14] = '{"setup_overlap", "pe_pool_full", "he_run", "step_stop", "ibus_wait",
    "dbus_wait", "pe_ic_hit", "pe_ic_miss", "ic_hit", "ic_miss", "dma_word", "hyp_merge",
    "hyp_prune", "hyp_evict"};

  // ---------------- program assembly ----------------
  localparam logic [31:0] P_S0 = 32'h1000, P_K0 = 32'h2000, P_S1 = 32'h3000, P_K1 = 32'h4000,
                          P_HS = 32'h5000, P_HK = 32'h6000;
  localparam logic [31:0] W_EXT = 32'h0010_0000, SIG_EXT = 32'h0020_0000;
  logic [31:0] pcw;
  task automatic org(logic [31:0] a); pcw = a; endtask
  task automatic emit(logic [31:0] ins); ximem.poke(pcw, ins); pcw += 4; endtask

  task automatic assemble();
    org(P_S0);
    emit(lw(6, 0, 32'h100)); emit(addi(6, 6, 1)); emit(sw(6, 0, 32'h100));
    emit(lui(7, 20'h30000)); emit(lui(8, 20'h40000)); emit(lw(9, 8, 0));
    emit(sw(9, 7, 0)); emit(lui(12, 20'h10000)); emit(sw(12, 7, 4));
    emit(addi(13, 0, 2)); emit(sw(13, 7, 8)); emit(sw(13, 7, 12));
    emit(lw(14, 7, 12)); emit(bne(14, 0, -4));
    emit(lui(9, 20'(W_EXT >> 12))); emit(sw(9, 7, 0));
    emit(addi(12, 12, 32'h100)); emit(sw(12, 7, 4));
    emit(addi(13, 0, NOUT * 2)); emit(sw(13, 7, 8)); emit(sw(13, 7, 12));
    emit(lw(14, 7, 12)); emit(bne(14, 0, -4));
    emit(addi(15, 0, NOUT)); emit(lui(16, 20'hF0000)); emit(sw(15, 16, 0)); emit(ecall());

    org(P_K0);
    emit(lui(6, 20'h10000)); emit(vld(1, 6)); emit(slli(7, 10, 3)); emit(add(7, 7, 6));
    emit(addi(7, 7, 32'h100)); emit(vld(2, 7)); emit(addi(8, 0, 0)); emit(vmac(8, 1, 2));
    emit(slli(9, 10, 2)); emit(sw(8, 9, 32'h200)); emit(ecall());

    org(P_S1);
    emit(lw(6, 0, 32'h100)); emit(addi(7, 0, 2)); emit(addi(15, 0, NOUT));
    emit(bne(6, 7, 8)); emit(addi(15, 0, 0));
    emit(lui(16, 20'hF0000)); emit(sw(15, 16, 0)); emit(ecall());

    org(P_K1);
    emit(slli(9, 10, 2)); emit(lw(8, 9, 32'h200)); emit(bge(8, 0, 8)); emit(addi(8, 0, 0));
    emit(sw(8, 9, 32'h400)); emit(ecall());

    org(P_HS);
    emit(lui(5, 20'h20000)); emit(lw(6, 5, 32'h20)); emit(bne(6, 0, 24));
    emit(sw(0, 5, 0)); emit(sw(0, 5, 4)); emit(sw(0, 5, 8)); emit(sw(0, 5, 12)); emit(sw(0, 5, 32'h14));
    emit(addi(15, 0, REPS)); emit(lui(16, 20'hF0000)); emit(sw(15, 16, 0)); emit(ecall());

    org(P_HK);
    emit(lui(5, 20'h20000)); emit(slli(6, 10, 4)); emit(add(6, 6, 5)); emit(lui(7, 20'h8));
    emit(add(6, 6, 7)); emit(lw(8, 6, 0)); emit(lw(9, 6, 4)); emit(addi(12, 0, 0));
    // loop: two children
    emit(slli(13, 8, 1)); emit(add(13, 13, 8)); emit(add(13, 13, 12)); emit(addi(13, 13, 1));
    emit(andi(13, 13, 15)); emit(add(14, 13, 11)); emit(andi(14, 14, 15)); emit(slli(14, 14, 2));
    emit(lw(14, 14, 32'h400)); emit(add(14, 14, 9));
    emit(sw(13, 5, 0)); emit(sw(14, 5, 4)); emit(sw(8, 5, 8)); emit(sw(11, 5, 12)); emit(sw(0, 5, 32'h10));
    emit(addi(12, 12, 1)); emit(addi(15, 0, 2)); emit(blt(12, 15, -68));
    emit(ecall());
  endtask

  // ---------------- host commands ----------------
  task automatic cmd(input cmd_op_e op, input logic [31:0] x0, x1, x2);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; a0 = x0; a1 = x1; a2 = x2;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- reference model ----------------
  logic [31:0] wrow [NOUT][2];
  int out0 [NOUT], out1 [NOUT];
  typedef struct { int hash; int score; } hs_t;
  hs_t act [$];

  function automatic int sx8(logic [7:0] b); return int'(signed'(b)); endfunction
  function automatic int dot(logic [63:0] x, logic [63:0] w);
    int r = 0;
    for (int i = 0; i < 8; i++) r += sx8(x[i*8 +: 8]) * sx8(w[i*8 +: 8]);
    return r;
  endfunction

  function automatic int hw_act_count();
    return SMALL ? int'(g_dut.dut.act_count) : int'(g_dut.dut.act_count);
  endfunction
  function automatic hyp_t hw_act(int i);
    return g_dut.dut.u_hmem.mem[i];
  endfunction
  function automatic int hw_shared(int byte_addr);
    return int'(g_dut.dut.u_shared.mem[byte_addr / 4]);
  endfunction

  // expected active set after one expansion run, from act
  task automatic model_run(input int r, output int best_out);
    int nh, ns, best;
    int sc [int];
    foreach (act[i]) for (int j = 0; j < 2; j++) begin
      nh = (act[i].hash * 3 + j + 1) & 15;
      ns = act[i].score + out1[(nh + r) & 15];
      if (!sc.exists(nh) || ns > sc[nh]) sc[nh] = ns;
    end
    best = -2147483647;
    foreach (sc[h]) if (sc[h] > best) best = sc[h];
    act.delete();
    foreach (sc[h]) if (longint'(sc[h]) >= longint'(best) - longint'(BEAM)) act.push_back('{h, sc[h]});
    best_out = best;
  endtask

  task automatic load_act_from_hw();
    act.delete();
    for (int i = 0; i < hw_act_count(); i++) begin
      automatic hyp_t h = hw_act(i);
      act.push_back('{int'(h.hash), int'(h.score)});
    end
  endtask

  task automatic compare_act(input int best);
    hs_t hw [$];
    int hwbest = -2147483647;
    for (int i = 0; i < hw_act_count(); i++) begin
      automatic hyp_t h = hw_act(i);
      hw.push_back('{int'(h.hash), int'(h.score)});
      if (int'(h.score) > hwbest) hwbest = int'(h.score);
    end
    // with overflow an evicted hash can come back with a lower score, so the hardware
    // can only fall below the unbounded model; without overflow they are equal
    if (SMALL) chk(hwbest <= best && hw.size() > 0, $sformatf("best score %0d exp <= %0d", hwbest, best));
    else chk(hwbest == best, $sformatf("best score %0d exp %0d", hwbest, best));
    if (!SMALL) begin
      chk(hw.size() == act.size(), $sformatf("active count %0d exp %0d", hw.size(), act.size()));
      foreach (act[i]) begin
        automatic int found = 0;
        foreach (hw[k]) if (hw[k].hash == act[i].hash && hw[k].score == act[i].score) found++;
        chk(found == 1, $sformatf("hypothesis %0d/%0d", act[i].hash, act[i].score));
      end
    end else begin
      chk(hw.size() <= BANK, "active set within capacity");
      foreach (hw[i]) begin
        chk(longint'(hw[i].score) >= longint'(hwbest) - longint'(BEAM), "active within beam");
        foreach (hw[k]) if (k > i) chk(hw[k].hash != hw[i].hash, "hashes unique");
      end
    end
  endtask

  task automatic decoding_step(input int n, input bit expect_stop);
    logic [63:0] sig;
    int c0, best;
    sig = {$urandom, $urandom};
    xdmem.poke(SIG_EXT + 16 * n, sig[31:0]);
    xdmem.poke(SIG_EXT + 16 * n + 4, sig[63:32]);
    load_act_from_hw();
    if (act.size() == 0) act.push_back('{0, 0});
    c0 = cyc;
    cmd(CMD_DEC_STEP, SIG_EXT + 16 * n, 0, 0);
    while (!step_busy) @(posedge clk);
    while (step_busy) @(posedge clk);
    $display("step %0d: %0d cycles, stopped=%0d", n, cyc - c0, expect_stop);
    for (int t = 0; t < NOUT; t++) begin
      out0[t] = dot(sig, {wrow[t][1], wrow[t][0]});
      out1[t] = out0[t] < 0 ? 0 : out0[t];
      chk(hw_shared(32'h200 + 4 * t) == out0[t], $sformatf("step %0d out0[%0d]", n, t));
    end
    if (expect_stop) return;
    for (int t = 0; t < NOUT; t++)
      chk(hw_shared(32'h400 + 4 * t) == out1[t], $sformatf("step %0d out1[%0d]", n, t));
    for (int r = 0; r < REPS; r++) model_run(r, best);
    compare_act(best);
  endtask

  initial begin
    int n = 0;
    cmd_valid = 0; cmd_op = CMD_CLEAN; a0 = 0; a1 = 0; a2 = 0;
    foreach (ev_cnt[k]) ev_cnt[k] = 0;
    assemble();
    for (int t = 0; t < NOUT; t++) begin
      wrow[t][0] = $urandom; wrow[t][1] = $urandom;
      xdmem.poke(W_EXT + 8 * t, wrow[t][0]);
      xdmem.poke(W_EXT + 8 * t + 4, wrow[t][1]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // shared-memory step counter starts at zero (the host would clear it)
    g_dut.dut.u_shared.mem[32'h100 / 4] = 0;
    cmd(CMD_CFG_AS, 0, P_S0, P_K0);
    cmd(CMD_CFG_AS, 1, P_S1, P_K1);
    cmd(CMD_CFG_HE, 0, P_HS, P_HK);
    cmd(CMD_CFG_BEAM, BEAM, 0, 0);
    cmd(CMD_CLEAN, 0, 0, 0);
    for (int s = 0; s < STEPS_BEFORE_CLEAN; s++) begin
      n++;
      decoding_step(n, n == 2);
      chk(step_stopped == 0 || n == 2, "stop flag");
    end
    cmd(CMD_CLEAN, 0, 0, 0);
    repeat (2) @(posedge clk);
    chk(hw_act_count() == 0, "CleanDecoding empties the hypotheses");
    for (int s = 0; s < STEPS_AFTER_CLEAN; s++) begin
      n++;
      decoding_step(n, 0);
    end
    chk(illegal_seen == 0, "no illegal instruction");
    chk(!cmd_error, "no command error");
    for (int k = 0; k < 14; k++) begin
      $display("event %-14s %0d", ev_name[k], ev_cnt[k]);
      if (k == 13 && !SMALL) continue;     // the full-size set never overflows here
      chk(ev_cnt[k] > 0, $sformatf("mechanism %s happened", ev_name[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
