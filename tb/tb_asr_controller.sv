// tb_asr_controller: the ASR controller with a configuration memory and four
// behavioural PEs. Each PE model runs a thread for a random number of cycles; a setup
// thread (recognised by its pc) reports a value from the test's table before it ends.
// Step 1: three acoustic kernels (5, 7 and 3 threads) and a hypothesis expansion
// that the setup asks to run twice over 4 active hypotheses. Step 2: the setup of
// kernel 1 returns 0, so the step must stop after kernel 0.
// Checks: each thread index of each kernel runs exactly once with the right pc and
// arguments; no thread of kernel k+1 starts before kernel k has finished; the setup of
// kernel k+1 overlaps the threads of kernel k; a PE never gets a thread while busy;
// the expansion runs the requested number of times with a swap after each; the
// stopped step launches nothing after kernel 0; and dispatch takes one cycle per
// thread when PEs are free.
module tb_asr_controller;
  import asrpu_pkg::*;
  localparam int NP = 4, MK = 8, KW = $clog2(MK + 1);
  logic clk = 0, rst_n = 0;
  logic step_start, step_busy, step_done, step_stopped;
  logic [KW-1:0] num_as, cfg_raddr, cfg_waddr;
  kernel_cfg_t cfg_rdata, cfg_wdata;
  logic cfg_we;
  logic [NP-1:0] pe_start, pe_done, pe_nv;
  thread_t pe_thread;
  logic [31:0] pe_nval [NP];
  logic [31:0] act_count;
  logic hyp_swap, hyp_swap_done;
  logic ev_overlap, ev_pe_full, ev_he_rep;
  int checks = 0, failures = 0;

  asr_controller #(.NUM_PE(NP), .MAX_KERNELS(MK)) dut (.clk, .rst_n, .step_start, .step_busy,
    .step_done, .step_stopped, .num_as_kernels(num_as), .cfg_raddr, .cfg_rdata, .pe_start,
    .pe_thread, .pe_done, .pe_notify_valid(pe_nv), .pe_notify_value(pe_nval), .act_count,
    .hyp_swap, .hyp_swap_done, .ev_overlap, .ev_pe_full, .ev_he_rep);
  conf_mem #(.MAX_KERNELS(MK)) cm (.clk, .we(cfg_we), .waddr(cfg_waddr), .wdata(cfg_wdata),
    .raddr(cfg_raddr), .rdata(cfg_rdata));
  always #5 clk = ~clk;

  function automatic logic [31:0] setup_pc(int k);  return 32'h1000 + 32'(k) * 16; endfunction
  function automatic logic [31:0] kern_pc(int k);   return 32'h2000 + 32'(k) * 16; endfunction
  localparam int HE = 7;  // index used for the expansion kernel's addresses

  int setup_ret [int];          // value each setup reports, by kernel index (HE for expansion)
  int ran [string];             // "pc:a0:a1" -> times run
  int k_running [int];          // kernel threads running, by kernel pc
  int k_first_start [int], k_last_end [int];
  int setup_start [int];
  int cyc = 0, overlaps = 0, swaps = 0, pe_busy_viol = 0, full = 0;
  logic pe_busy [NP];

  always @(posedge clk) cyc++;
  always @(negedge clk) begin overlaps += ev_overlap; full += ev_pe_full; end

  for (genvar g = 0; g < NP; g++) begin : g_pe
    initial begin
      pe_busy[g] = 0; pe_done[g] = 0; pe_nv[g] = 0; pe_nval[g] = 0;
      @(negedge clk);
      forever begin
        thread_t th;
        int n;
        if (!pe_start[g]) @(negedge clk);
        else begin
          if (pe_busy[g]) pe_busy_viol++;
          th = pe_thread;
          pe_busy[g] = 1;
          ran[$sformatf("%0h:%0d:%0d", th.pc, th.a0, th.a1)]++;
          if (th.pc >= 32'h2000) begin
            if (!k_first_start.exists(int'(th.pc))) k_first_start[int'(th.pc)] = cyc;
          end else setup_start[int'(th.pc)] = cyc;
          n = $urandom_range(1, 8);
          repeat (n) @(negedge clk);
          if (th.pc < 32'h2000) begin
            pe_nv[g] = 1; pe_nval[g] = setup_ret[int'(th.pc - 32'h1000) / 16];
            @(negedge clk);
            pe_nv[g] = 0;
          end else k_last_end[int'(th.pc)] = cyc;
          pe_done[g] = 1;
          @(negedge clk);
          pe_done[g] = 0;
          pe_busy[g] = 0;
        end
      end
    end
  end

  // hypothesis unit stand-in: answers a swap after 3 cycles
  initial begin
    hyp_swap_done = 0;
    forever begin
      @(negedge clk);
      if (hyp_swap) begin
        repeat (2) @(negedge clk);
        hyp_swap_done = 1; swaps++;
        @(negedge clk);
        hyp_swap_done = 0;
      end
    end
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic run_step();
    @(negedge clk) step_start = 1;
    @(negedge clk) step_start = 0;
    while (!step_done) @(negedge clk);
  endtask

  initial begin
    int nthreads[3] = '{5, 7, 3};
    step_start = 0; act_count = 4; cfg_we = 0; cfg_waddr = 0; cfg_wdata = '0;
    num_as = 3;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3; k++) begin
      @(negedge clk) cfg_we = 1; cfg_waddr = KW'(k); cfg_wdata = '{setup_pc(k), kern_pc(k)};
    end
    @(negedge clk) cfg_waddr = KW'(MK); cfg_wdata = '{setup_pc(HE), kern_pc(HE)};
    @(negedge clk) cfg_we = 0;
    setup_ret[0] = 5; setup_ret[1] = 7; setup_ret[2] = 3; setup_ret[HE] = 2;

    // ---------------- step 1: full step ----------------
    run_step();
    chk(!step_stopped, "step 1 not stopped");
    for (int k = 0; k < 3; k++) begin
      chk(ran[$sformatf("%0h:%0d:0", setup_pc(k), k)] == 1, $sformatf("setup %0d once", k));
      for (int t = 0; t < nthreads[k]; t++)
        chk(ran[$sformatf("%0h:%0d:0", kern_pc(k), t)] == 1, $sformatf("kernel %0d thread %0d", k, t));
      chk(!ran.exists($sformatf("%0h:%0d:0", kern_pc(k), nthreads[k])), "no extra thread");
    end
    for (int r = 0; r < 2; r++)
      for (int t = 0; t < 4; t++)
        chk(ran[$sformatf("%0h:%0d:%0d", kern_pc(HE), t, r)] == 1, $sformatf("expansion run %0d thread %0d", r, t));
    chk(ran[$sformatf("%0h:3:0", setup_pc(HE))] == 1, "expansion setup once, a0 = kernel count");
    chk(k_first_start[int'(kern_pc(1))] > k_last_end[int'(kern_pc(0))], "kernel 1 after kernel 0");
    chk(k_first_start[int'(kern_pc(2))] > k_last_end[int'(kern_pc(1))], "kernel 2 after kernel 1");
    chk(k_first_start[int'(kern_pc(HE))] > k_last_end[int'(kern_pc(2))], "expansion after kernel 2");
    chk(setup_start[int'(setup_pc(1))] <= k_first_start[int'(kern_pc(0))], "setup 1 beside kernel 0");
    chk(setup_start[int'(setup_pc(HE))] <= k_first_start[int'(kern_pc(2))], "expansion setup beside last kernel");
    chk(overlaps >= 3, "setup/kernel overlap events");
    chk(swaps == 2, "two swaps");
    chk(pe_busy_viol == 0, "never start a busy PE");
    chk(full > 0, "PE pool was full at some point");

    // ---------------- step 2: setup of kernel 1 returns zero ----------------
    ran.delete(); swaps = 0;
    setup_ret[1] = 0;
    run_step();
    chk(step_stopped, "step 2 stopped");
    for (int t = 0; t < 5; t++)
      chk(ran[$sformatf("%0h:%0d:0", kern_pc(0), t)] == 1, "kernel 0 ran in stopped step");
    chk(!ran.exists($sformatf("%0h:0:0", kern_pc(1))), "kernel 1 not launched");
    chk(!ran.exists($sformatf("%0h:1:0", setup_pc(2))) && !ran.exists($sformatf("%0h:2:0", setup_pc(2))), "setup 2 not launched");
    chk(swaps == 0, "no expansion in stopped step");

    // ---------------- dispatch rate: 1 thread per cycle ----------------
    begin
      int c0, c1;
      setup_ret[1] = 7;
      k_first_start.delete();
      @(negedge clk) step_start = 1;
      @(negedge clk) step_start = 0;
      while (k_first_start.size() == 0) @(negedge clk);
      c0 = cyc;
      wait (pe_busy[0] && pe_busy[1] && pe_busy[2] && pe_busy[3]);
      c1 = cyc;
      chk(c1 - c0 <= NP + 1, "four PEs filled in about four cycles");
      while (!step_done) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
