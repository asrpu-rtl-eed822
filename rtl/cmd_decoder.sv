// cmd_decoder: the command interface between the accelerator and the rest of the SoC.
//
// The host issues one command per valid/ready handshake (cmd_valid && cmd_ready):
//   CMD_CFG_AS   arg0 = n, arg1 = setup_addr, arg2 = kernel_addr: writes entry n of the
//                configuration memory; the number of acoustic-scoring kernels becomes
//                the highest configured n plus one.
//   CMD_CFG_HE   arg1 = setup_addr, arg2 = kernel_addr of hypothesis expansion.
//   CMD_CFG_BEAM arg0 = beam width used by the hypothesis unit.
//   CMD_CLEAN    empties the hypothesis memory (one-cycle clean pulse).
//   CMD_DEC_STEP arg0 = signal_addr: latched for the threads, then a one-cycle
//                step_start pulse to the ASR controller.
// cmd_ready is low while a decoding step runs (step_busy) and in the cycle after a
// DecodingStep is accepted, so configuration cannot change under a running step. A
// CMD_CFG_AS with n >= MAX_KERNELS is accepted but ignored and raises cmd_error.
// The command set is the paper's; the paper lists only kernel_addr for
// ConfigureASR_HypExpansion but also describes a setup thread for that kernel, so this
// design passes both addresses. Encodings and handshake are this design's choices.
module cmd_decoder
  import asrpu_pkg::*;
#(
  parameter int unsigned MAX_KERNELS = 128,
  localparam int unsigned KW = $clog2(MAX_KERNELS + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_op_e     cmd_op,
  input  logic [31:0] cmd_arg0,
  input  logic [31:0] cmd_arg1,
  input  logic [31:0] cmd_arg2,
  output logic        cmd_error,
  // configuration memory write port
  output logic        cfg_we,
  output logic [KW-1:0] cfg_waddr,
  output kernel_cfg_t cfg_wdata,
  // state for the rest of the accelerator
  output logic [KW-1:0] num_as_kernels,
  output logic [31:0] beam,
  output logic [31:0] signal_addr,
  output logic        clean,
  output logic        step_start,
  input  logic        step_busy
);
  wire fire = cmd_valid && cmd_ready;
  assign cmd_ready = !step_busy && !step_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_as_kernels <= '0;
      beam           <= '0;
      signal_addr    <= '0;
      clean          <= 1'b0;
      step_start     <= 1'b0;
      cmd_error      <= 1'b0;
    end else begin
      clean      <= 1'b0;
      step_start <= 1'b0;
      if (fire) begin
        unique case (cmd_op)
          CMD_CFG_AS: begin
            if (cmd_arg0 < MAX_KERNELS) begin
              if (KW'(cmd_arg0) >= num_as_kernels) num_as_kernels <= KW'(cmd_arg0 + 32'd1);
            end else begin
              cmd_error <= 1'b1;
            end
          end
          CMD_CFG_BEAM: beam <= cmd_arg0;
          CMD_CLEAN:    clean <= 1'b1;
          CMD_DEC_STEP: begin
            signal_addr <= cmd_arg0;
            step_start  <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    cfg_we    = fire && ((cmd_op == CMD_CFG_AS && cmd_arg0 < MAX_KERNELS) || cmd_op == CMD_CFG_HE);
    cfg_waddr = (cmd_op == CMD_CFG_HE) ? KW'(MAX_KERNELS) : KW'(cmd_arg0);
    cfg_wdata = '{setup_addr: cmd_arg1, kernel_addr: cmd_arg2};
  end
endmodule
