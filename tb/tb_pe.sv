// tb_pe: one processing element running small programs from an external-memory model
// (through its i-cache), with a second memory model as its data bus.
// Program 1 exercises vector load, MAC, MUL, ADD, ACUM, vector store, int->fp, a
// counted loop with a backward branch, JAL over an illegal word, byte/half loads, the
// notify store and ECALL; every stored result is compared with values the test
// computes from the input data. Program 2 runs into an unimplemented instruction and
// must end with illegal set. Also checks a0/a1 passing, the idle flag, that a second
// run of program 1 hits in the i-cache, and reports cycles per instruction.
module tb_pe;
  import asrpu_pkg::*;
  import rv_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, idle, done, illegal, nv, ic_hit, ic_miss;
  logic [31:0] nval;
  thread_t thread;
  bus_req_t ireq, dreq;
  bus_rsp_t irsp, drsp;
  int checks = 0, failures = 0, notifies = 0, hits = 0;
  logic [31:0] last_notify;

  pe dut (.clk, .rst_n, .start, .thread, .idle, .done, .illegal, .notify_valid(nv),
    .notify_value(nval), .imem_req(ireq), .imem_rsp(irsp), .dmem_req(dreq), .dmem_rsp(drsp),
    .icache_flush(1'b0), .ic_hit, .ic_miss);
  ext_mem_model #(.LAT(3)) imem (.clk, .req(ireq), .rsp(irsp));
  ext_mem_model #(.LAT(1)) dmem (.clk, .req(dreq), .rsp(drsp));
  always #5 clk = ~clk;
  always @(negedge clk) begin
    hits += ic_hit;
    if (nv) begin notifies++; last_notify = nval; end
  end

  localparam logic [31:0] D = 32'h0004_0000;   // data base
  int pc_w;
  task automatic emit(logic [31:0] ins);
    imem.poke(32'(pc_w * 4), ins);
    pc_w++;
  endtask
  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  // single-precision bits of an integer below 2**24 in magnitude (exact), via a double
  function automatic logic [31:0] f32_exact(int v);
    logic [63:0] d = $realtobits(real'(v));
    if (v == 0) return 0;
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction
  function automatic int sx8(logic [7:0] b); return int'(signed'(b)); endfunction

  task automatic run(input logic [31:0] pc, input logic [31:0] a0, a1, output int cycles);
    @(negedge clk);
    start = 1; thread = '{pc: pc, a0: a0, a1: a1};
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    logic [63:0] va, vb;
    int cyc1, cyc2, exp_mac, exp_acum, exp_sum;
    logic [63:0] exp_mul, exp_add;
    start = 0; thread = '0;
    va = {$urandom, $urandom}; vb = {$urandom, $urandom};
    va[7:0] = 8'h80; vb[7:0] = 8'h81;
    dmem.poke(D + 0, va[31:0]); dmem.poke(D + 4, va[63:32]);
    dmem.poke(D + 8, vb[31:0]); dmem.poke(D + 12, vb[63:32]);
    // ---------------- program 1 at 0x0 ----------------
    pc_w = 0;
    emit(lui(6, 20'(D >> 12)));        // x6 = D
    emit(vld(1, 6));                   // v1 = va
    emit(addi(7, 6, 8));
    emit(vld(2, 7));                   // v2 = vb
    emit(addi(8, 0, 5));               // x8 = 5
    emit(vmac(8, 1, 2));               // x8 += va . vb
    emit(vmul(3, 1, 2));
    emit(vadd(4, 1, 2));
    emit(vacum(9, 8, 4));              // x9 = x8 + sum(v4)
    emit(i2f(12, 8));
    emit(addi(13, 0, 0));              // x13 = 0
    emit(add(14, 10, 0));              // x14 = a0
    emit(add(13, 13, 14));             // loop: x13 += x14
    emit(addi(14, 14, -1));
    emit(bne(14, 0, -8));
    emit(sw(8, 6, 16));
    emit(sw(9, 6, 20));
    emit(sw(12, 6, 24));
    emit(sw(13, 6, 28));
    emit(addi(7, 6, 32));
    emit(vst(3, 7));
    emit(addi(7, 6, 40));
    emit(vst(4, 7));
    emit(lui(15, 20'hF0000));
    emit(add(16, 13, 11));             // notify a0-sum + a1
    emit(sw(16, 15, 0));
    emit(jal(1, 8));                   // skip the next word
    emit(32'hFFFF_FFFF);
    emit(sw(1, 6, 56));                // link register
    emit(load(0, 17, 6, 0));           // lb  byte 0 of va (0x80)
    emit(load(5, 18, 6, 2));           // lhu half 1 of va
    emit(sw(17, 6, 48));
    emit(sw(18, 6, 52));
    emit(ecall());
    // ---------------- program 2 at 0x200 ----------------
    pc_w = 128;
    emit(addi(5, 0, 1));
    emit(32'h0000_0000);               // not an instruction of this core

    exp_mac = 5; exp_acum = 0;
    for (int i = 0; i < 8; i++) begin
      exp_mac += sx8(va[i*8 +: 8]) * sx8(vb[i*8 +: 8]);
      exp_mul[i*8 +: 8] = 8'(sx8(va[i*8 +: 8]) * sx8(vb[i*8 +: 8]));
      exp_add[i*8 +: 8] = va[i*8 +: 8] + vb[i*8 +: 8];
    end
    exp_acum = exp_mac;
    for (int i = 0; i < 8; i++) exp_acum += sx8(exp_add[i*8 +: 8]);
    exp_sum = 10 * 11 / 2;

    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(idle, "idle after reset");
    run(0, 10, 7, cyc1);
    chk(!illegal, "program 1 legal");
    chk(dmem.peek(D + 16) == 32'(exp_mac), "vector MAC");
    chk(dmem.peek(D + 20) == 32'(exp_acum), "vector ACUM");
    chk(dmem.peek(D + 24) == f32_exact(exp_mac), "int->fp");
    chk(dmem.peek(D + 28) == 32'(exp_sum), "loop sum");
    chk({dmem.peek(D + 36), dmem.peek(D + 32)} == exp_mul, "vector MUL + store");
    chk({dmem.peek(D + 44), dmem.peek(D + 40)} == exp_add, "vector ADD + store");
    chk(dmem.peek(D + 48) == 32'hFFFF_FF80, "LB sign extension");
    chk(dmem.peek(D + 52) == {16'h0, va[31:16]}, "LHU");
    chk(dmem.peek(D + 56) == 32'd27 * 4, "JAL link");
    chk(notifies == 1 && last_notify == 32'(exp_sum + 7), "notify value");
    @(negedge clk);
    chk(idle, "idle after ECALL");
    hits = 0;
    run(0, 10, 7, cyc2);
    chk(hits > 20, "second run hits in the i-cache");
    chk(cyc2 < cyc1, "second run faster");
    $display("program 1 (59 instructions executed): %0d cycles cold, %0d warm", cyc1, cyc2);
    run(32'h200, 0, 0, cyc1);
    chk(illegal, "illegal instruction ends the thread");
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
