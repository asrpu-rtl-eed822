// asr_controller: sequences one decoding step over the pool of processing elements.
//
// On step_start it reads kernel 0 from the configuration memory and dispatches its
// setup thread. A setup thread reports a value to the controller (a store to the
// notify address, carried on the controller bus) and then ends. For an acoustic-
// scoring kernel the value is the number of kernel threads to launch; zero stops the
// decoding step once the running kernel has finished. While the threads of kernel k
// run, the setup thread of kernel k+1 is dispatched with them (first, so it gets the
// first idle PE); kernel k+1 starts once every thread of kernel k has finished and its
// setup has reported. The setup thread of hypothesis expansion runs alongside the last
// acoustic-scoring kernel and reports how many times the expansion kernel must run
// (once per acoustic vector). Each run launches one thread per active hypothesis
// (act_count of the hypothesis unit) and ends with a swap in the hypothesis unit,
// which turns the pruned new hypotheses into the active set.
//
// Threads are dispatched one per cycle to the lowest-numbered idle PE: pe_start[i]
// pulses with the start record on pe_thread (pc; a0 = thread index, or the kernel
// index for setup threads, the kernel count for the expansion setup; a1 = expansion
// repetition). A PE is idle from reset and again
// after it pulses pe_done[i]. step_done pulses when a step ends, with step_stopped set
// if a setup thread returned zero. This schedule is the paper's (its thread-pool
// figure); the signal interface and the one-dispatch-per-cycle rate are this design's.
module asr_controller
  import asrpu_pkg::*;
#(
  parameter int unsigned NUM_PE      = 8,
  parameter int unsigned MAX_KERNELS = 128,
  localparam int unsigned KW = $clog2(MAX_KERNELS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              step_start,
  output logic              step_busy,
  output logic              step_done,
  output logic              step_stopped,
  input  logic [KW-1:0]     num_as_kernels,
  output logic [KW-1:0]     cfg_raddr,
  input  kernel_cfg_t       cfg_rdata,
  // controller bus to the PEs
  output logic [NUM_PE-1:0] pe_start,
  output thread_t           pe_thread,
  input  logic [NUM_PE-1:0] pe_done,
  input  logic [NUM_PE-1:0] pe_notify_valid,
  input  logic [31:0]       pe_notify_value [NUM_PE],
  // hypothesis unit
  input  logic [31:0]       act_count,
  output logic              hyp_swap,
  input  logic              hyp_swap_done,
  // statistics pulses
  output logic              ev_overlap,   // setup thread dispatched beside kernel threads
  output logic              ev_pe_full,   // work waiting, no idle PE
  output logic              ev_he_rep     // a hypothesis-expansion run started
);
  localparam int unsigned PW = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;

  typedef enum logic [2:0] {
    S_IDLE, S_FETCH, S_LATCH, S_RUN, S_HE_START, S_HE_RUN, S_HE_SWAP, S_FINISH
  } state_e;
  state_e state;

  logic [NUM_PE-1:0] busy;
  logic [KW-1:0]     cur_k;        // kernel whose setup is pending or running
  logic              setup_is_he;
  logic              setup_pending, setup_running, setup_done;
  logic [31:0]       setup_val;
  logic [PW-1:0]     setup_pe;
  logic [31:0]       nxt_setup_pc, nxt_kernel_pc;
  logic [31:0]       kern_pc, kern_total, kern_issued, kern_done, rep, he_reps;
  logic              stopped;

  // lowest idle PE
  logic          any_idle;
  logic [PW-1:0] idle_pe;
  always_comb begin
    any_idle = 1'b0;
    idle_pe  = '0;
    for (int i = NUM_PE - 1; i >= 0; i--) begin
      if (!busy[i]) begin
        any_idle = 1'b1;
        idle_pe  = PW'(i);
      end
    end
  end

  wire running_state = (state == S_RUN) || (state == S_HE_RUN);
  wire disp_setup    = (state == S_RUN) && setup_pending && any_idle;
  wire disp_kernel   = running_state && !disp_setup && (kern_issued < kern_total) && any_idle;
  wire kern_finished = (kern_done == kern_total) && (kern_issued == kern_total);

  // count of kernel-thread completions this cycle (setup completion excluded)
  logic [31:0] n_done;
  always_comb begin
    n_done = '0;
    for (int i = 0; i < NUM_PE; i++)
      if (pe_done[i] && !(setup_running && setup_pe == PW'(i))) n_done = n_done + 32'd1;
  end

  always_comb begin
    pe_start  = '0;
    pe_thread = '0;
    if (disp_setup) begin
      pe_start[idle_pe] = 1'b1;
      pe_thread.pc = nxt_setup_pc;
      pe_thread.a0 = setup_is_he ? 32'(num_as_kernels) : 32'(cur_k);
      pe_thread.a1 = '0;
    end else if (disp_kernel) begin
      pe_start[idle_pe] = 1'b1;
      pe_thread.pc = kern_pc;
      pe_thread.a0 = kern_issued;
      pe_thread.a1 = rep;
    end
  end

  always_comb begin
    cfg_raddr = setup_is_he ? KW'(MAX_KERNELS) : cur_k;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      busy <= '0;
      cur_k <= '0; setup_is_he <= 1'b0;
      setup_pending <= 1'b0; setup_running <= 1'b0; setup_done <= 1'b0;
      setup_val <= '0; setup_pe <= '0;
      nxt_setup_pc <= '0; nxt_kernel_pc <= '0;
      kern_pc <= '0; kern_total <= '0; kern_issued <= '0; kern_done <= '0;
      rep <= '0; he_reps <= '0; stopped <= 1'b0;
    end else begin
      // PE occupancy
      busy <= (busy | pe_start) & ~pe_done;
      kern_done <= kern_done + n_done;
      if (disp_kernel) kern_issued <= kern_issued + 32'd1;
      if (disp_setup) begin
        setup_pending <= 1'b0;
        setup_running <= 1'b1;
        setup_pe      <= idle_pe;
      end
      if (setup_running && pe_notify_valid[setup_pe]) setup_val <= pe_notify_value[setup_pe];
      if (setup_running && pe_done[setup_pe]) begin
        setup_running <= 1'b0;
        setup_done    <= 1'b1;
      end

      unique case (state)
        S_IDLE: if (step_start) begin
          cur_k       <= '0;
          setup_is_he <= (num_as_kernels == 0);
          kern_total  <= '0; kern_issued <= '0; kern_done <= '0;
          rep         <= '0;
          stopped     <= 1'b0;
          state       <= S_FETCH;
        end
        S_FETCH: state <= S_LATCH;       // configuration memory read latency
        S_LATCH: begin
          nxt_setup_pc  <= cfg_rdata.setup_addr;
          nxt_kernel_pc <= cfg_rdata.kernel_addr;
          setup_pending <= 1'b1;
          setup_done    <= 1'b0;
          setup_val     <= '0;
          state         <= S_RUN;
        end
        S_RUN: if (kern_finished && setup_done) begin
          setup_done <= 1'b0;
          if (setup_val == 0) begin
            stopped <= 1'b1;
            state   <= S_FINISH;
          end else if (setup_is_he) begin
            he_reps <= setup_val;
            kern_pc <= nxt_kernel_pc;
            rep     <= '0;
            state   <= S_HE_START;
          end else begin
            kern_pc     <= nxt_kernel_pc;
            kern_total  <= setup_val;
            kern_issued <= '0;
            kern_done   <= '0;
            if (32'(cur_k) + 32'd1 < 32'(num_as_kernels)) cur_k <= cur_k + KW'(1);
            else                                           setup_is_he <= 1'b1;
            state <= S_FETCH;
          end
        end
        S_HE_START: begin
          kern_total  <= act_count;
          kern_issued <= '0;
          kern_done   <= '0;
          state       <= S_HE_RUN;
        end
        S_HE_RUN: if (kern_finished) state <= S_HE_SWAP;
        S_HE_SWAP: if (hyp_swap_done) begin
          if (rep + 32'd1 >= he_reps) state <= S_FINISH;
          else begin
            rep   <= rep + 32'd1;
            state <= S_HE_START;
          end
        end
        S_FINISH: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign step_busy    = (state != S_IDLE);
  assign step_done    = (state == S_FINISH);
  assign step_stopped = (state == S_FINISH) && stopped;
  assign hyp_swap     = (state == S_HE_SWAP);
  assign ev_overlap   = disp_setup && (kern_issued < kern_total || kern_done < kern_issued);
  assign ev_pe_full   = running_state && !any_idle &&
                        ((state == S_RUN && setup_pending) || kern_issued < kern_total);
  assign ev_he_rep    = (state == S_HE_START);
endmodule
