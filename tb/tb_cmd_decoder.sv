// tb_cmd_decoder: issues every command and checks its effect: configuration-memory
// writes (address and data), the kernel count, beam and signal-address registers,
// the clean and step_start pulses, cmd_ready falling while a step runs, and the
// error flag for an out-of-range kernel index.
module tb_cmd_decoder;
  import asrpu_pkg::*;
  localparam int MK = 16, KW = $clog2(MK + 1);
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, cmd_error;
  cmd_op_e cmd_op;
  logic [31:0] a0, a1, a2;
  logic cfg_we;
  logic [KW-1:0] cfg_waddr, num_as;
  kernel_cfg_t cfg_wdata;
  logic [31:0] beam, signal_addr;
  logic clean, step_start, step_busy;
  int checks = 0, failures = 0, n_we = 0, n_clean = 0, n_start = 0;
  kernel_cfg_t written [MK+1];

  cmd_decoder #(.MAX_KERNELS(MK)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op,
    .cmd_arg0(a0), .cmd_arg1(a1), .cmd_arg2(a2), .cmd_error, .cfg_we, .cfg_waddr, .cfg_wdata,
    .num_as_kernels(num_as), .beam, .signal_addr, .clean, .step_start, .step_busy);
  always #5 clk = ~clk;
  always @(negedge clk) begin
    if (cfg_we && cmd_valid && cmd_ready) begin n_we++; written[cfg_waddr] = cfg_wdata; end
    n_clean += clean;
    n_start += step_start;
  end

  task automatic cmd(input cmd_op_e op, input logic [31:0] x0, x1, x2);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; a0 = x0; a1 = x1; a2 = x2;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    #1 cmd_valid = 0;
  endtask
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    cmd_valid = 0; cmd_op = CMD_CLEAN; a0 = 0; a1 = 0; a2 = 0; step_busy = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cmd(CMD_CFG_AS, 0, 32'h100, 32'h200);
    cmd(CMD_CFG_AS, 2, 32'h300, 32'h400);
    cmd(CMD_CFG_AS, 1, 32'h500, 32'h600);
    cmd(CMD_CFG_HE, 0, 32'h700, 32'h800);
    @(negedge clk);
    chk(num_as == 3, "kernel count");
    chk(written[0] == {32'h100, 32'h200}, "entry 0");
    chk(written[1] == {32'h500, 32'h600}, "entry 1");
    chk(written[2] == {32'h300, 32'h400}, "entry 2");
    chk(written[MK] == {32'h700, 32'h800}, "expansion entry");
    chk(!cmd_error, "no error yet");
    cmd(CMD_CFG_AS, MK, 32'h1, 32'h2);
    @(negedge clk);
    chk(cmd_error, "error flag");
    chk(n_we == 4, "ignored out-of-range write");
    cmd(CMD_CFG_BEAM, 1234, 0, 0);
    @(negedge clk);
    chk(beam == 1234, "beam");
    cmd(CMD_CLEAN, 0, 0, 0);
    repeat (2) @(negedge clk);
    chk(n_clean == 1, "clean pulse");
    cmd(CMD_DEC_STEP, 32'hABC0, 0, 0);
    chk(!cmd_ready, "not ready right after a step command");
    repeat (2) @(negedge clk);
    chk(n_start == 1, "step start pulse");
    chk(signal_addr == 32'hABC0, "signal address");
    step_busy = 1;
    @(negedge clk);
    chk(!cmd_ready, "not ready while busy");
    fork
      cmd(CMD_CFG_BEAM, 77, 0, 0);
      begin repeat (5) @(negedge clk); chk(beam == 1234, "held off while busy"); step_busy = 0; end
    join
    @(negedge clk);
    chk(beam == 77, "accepted after busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
