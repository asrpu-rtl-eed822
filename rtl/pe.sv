// pe: processing element. A small in-order RISC-V (RV32I) core that runs one thread at
// a time, extended with 8-lane int8 vector instructions, with a private instruction
// cache in front of its fetch port.
//
// Thread interface (controller bus): start pulses with a thread_t record; the core
// loads pc, puts thread.a0 in x10 (a0) and thread.a1 in x11 (a1), and runs until it
// executes ECALL, when it pulses done and goes idle. A store word to NOTIFY_ADDR does
// not reach the data bus; it pulses notify_valid with the stored value (how a setup
// thread reports its thread count). An instruction the core does not implement also
// ends the thread, pulsing illegal with done.
//
// Execution is multi-cycle: FETCH (through the i-cache, two cycles on a hit), EXEC
// (decode, register read, ALU/vector unit, write-back, next pc) and, for memory
// instructions, MEM (one bus transaction per 32-bit word on the PE data bus; vector
// load/store use two). Loads support LB/LH/LW/LBU/LHU; stores only SW (the data bus
// has no byte enables). Register files: 32 integer registers (x0 reads zero) and 32
// vector registers of VLANES x 8 bits. Vector instructions use the custom-0 opcode
// with funct3 selecting VF_MAC, VF_MUL, VF_ADD, VF_ACUM, VF_LD, VF_ST or VF_I2F
// (see asrpu_pkg).
//
// From the paper: RISC-V ISA, the vector MAC (32-bit accumulator plus a dot product of
// two 8-bit vectors), vector multiply/add/accumulate, int->fp conversion, a register
// bank holding vectors of 8-bit values, private instruction and data caches. This
// design's choices: the encodings, the multi-cycle organisation, integer instead of
// floating-point scalar registers. Not built: the floating-point register set and FP
// ALU, the Exp/Cos/Log units and the private data cache (data accesses go straight
// to the bus).
module pe
  import asrpu_pkg::*;
#(
  parameter int unsigned ICACHE_BYTES = 4 * 1024,
  parameter int unsigned LANES        = VLANES
) (
  input  logic        clk,
  input  logic        rst_n,
  // controller bus
  input  logic        start,
  input  thread_t     thread,
  output logic        idle,
  output logic        done,
  output logic        illegal,
  output logic        notify_valid,
  output logic [31:0] notify_value,
  // instruction path (i-cache miss port) and data bus
  output bus_req_t    imem_req,
  input  bus_rsp_t    imem_rsp,
  output bus_req_t    dmem_req,
  input  bus_rsp_t    dmem_rsp,
  input  logic        icache_flush,
  output logic        ic_hit,
  output logic        ic_miss
);
  localparam int unsigned VW = LANES * 8;

  typedef enum logic [1:0] {P_IDLE, P_FETCH, P_EXEC, P_MEM} pstate_e;
  pstate_e state;

  logic [31:0] pc, ir;
  logic [31:0] xr [32];
  logic [VW-1:0] vr [32];

  // ---------------- instruction cache ----------------
  bus_req_t ic_req;
  bus_rsp_t ic_rsp;
  icache #(.SIZE_BYTES(ICACHE_BYTES)) u_icache (
    .clk, .rst_n, .flush(icache_flush),
    .up_req(ic_req), .up_rsp(ic_rsp),
    .down_req(imem_req), .down_rsp(imem_rsp),
    .hit_pulse(ic_hit), .miss_pulse(ic_miss)
  );
  always_comb begin
    ic_req       = '0;
    ic_req.valid = (state == P_FETCH);
    ic_req.addr  = pc;
  end

  // ---------------- decode ----------------
  wire [6:0] opc = ir[6:0];
  wire [4:0] rd  = ir[11:7];
  wire [2:0] f3  = ir[14:12];
  wire [4:0] rs1 = ir[19:15];
  wire [4:0] rs2 = ir[24:20];
  wire [6:0] f7  = ir[31:25];
  wire [31:0] imm_i = {{20{ir[31]}}, ir[31:20]};
  wire [31:0] imm_s = {{20{ir[31]}}, ir[31:25], ir[11:7]};
  wire [31:0] imm_b = {{19{ir[31]}}, ir[31], ir[7], ir[30:25], ir[11:8], 1'b0};
  wire [31:0] imm_u = {ir[31:12], 12'b0};
  wire [31:0] imm_j = {{11{ir[31]}}, ir[31], ir[19:12], ir[20], ir[30:21], 1'b0};
  wire [31:0] x1v = (rs1 == 5'd0) ? 32'd0 : xr[rs1];
  wire [31:0] x2v = (rs2 == 5'd0) ? 32'd0 : xr[rs2];
  wire [31:0] xdv = (rd  == 5'd0) ? 32'd0 : xr[rd];

  // ---------------- execution units ----------------
  logic [3:0]  alu_op;
  logic [31:0] alu_b, alu_y;
  always_comb begin
    alu_b  = (opc == 7'b0110011) ? x2v : imm_i;
    alu_op = {1'b0, f3};
    if (opc == 7'b0110011)                      alu_op[3] = f7[5];
    else if (opc == 7'b0010011 && f3 == 3'b101) alu_op[3] = f7[5];
  end
  rv_alu u_alu (.op(alu_op), .a(x1v), .b(alu_b), .y(alu_y));

  logic signed [31:0] mac_y, acum_y;
  logic [VW-1:0]      valu_y;
  logic [31:0]        i2f_y;
  vec_mac #(.LANES(LANES)) u_vmac (.acc_in(xdv), .a(vr[rs1]), .b(vr[rs2]), .acc_out(mac_y));
  vec_alu #(.LANES(LANES)) u_valu (
    .op((f3 == VF_MUL) ? 2'd0 : (f3 == VF_ADD) ? 2'd1 : 2'd2),
    .a(vr[rs1]), .b(vr[rs2]), .sin(x1v), .vout(valu_y), .sout(acum_y)
  );
  int2fp u_i2f (.i(x1v), .f(i2f_y));

  logic take;
  always_comb begin
    unique case (f3)
      3'b000:  take = (x1v == x2v);
      3'b001:  take = (x1v != x2v);
      3'b100:  take = ($signed(x1v) <  $signed(x2v));
      3'b101:  take = ($signed(x1v) >= $signed(x2v));
      3'b110:  take = (x1v <  x2v);
      3'b111:  take = (x1v >= x2v);
      default: take = 1'b0;
    endcase
  end

  // next pc of the instruction in EXEC
  logic [31:0] npc;
  always_comb begin
    unique case (opc)
      7'b1101111: npc = pc + imm_j;
      7'b1100111: npc = (x1v + imm_i) & ~32'd1;
      7'b1100011: npc = take ? pc + imm_b : pc + 32'd4;
      default:    npc = pc + 32'd4;
    endcase
  end

  // ---------------- memory stage state ----------------
  logic [31:0] maddr, mwdata;
  logic        mwe, mvec, mbeat;
  logic [4:0]  mrd;
  logic [2:0]  mf3;
  logic [VW-1:0] vbuf;

  always_comb begin
    dmem_req       = '0;
    dmem_req.valid = (state == P_MEM);
    dmem_req.we    = mwe;
    dmem_req.addr  = {maddr[31:2], 2'b00} + (mbeat ? 32'd4 : 32'd0);
    dmem_req.wdata = mvec ? (mbeat ? 32'(vbuf >> 32) : vbuf[31:0]) : mwdata;
  end

  function automatic logic [31:0] load_ext(input logic [31:0] w, input logic [1:0] off,
                                           input logic [2:0] fn);
    logic [31:0] s;
    s = w >> (8 * off);
    unique case (fn)
      3'b000:  return {{24{s[7]}}, s[7:0]};
      3'b001:  return {{16{s[15]}}, s[15:0]};
      3'b100:  return {24'b0, s[7:0]};
      3'b101:  return {16'b0, s[15:0]};
      default: return w;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= P_IDLE;
      pc <= '0; ir <= '0;
      done <= 1'b0; illegal <= 1'b0;
      notify_valid <= 1'b0; notify_value <= '0;
      maddr <= '0; mwdata <= '0; mwe <= 1'b0; mvec <= 1'b0; mbeat <= 1'b0;
      mrd <= '0; mf3 <= '0; vbuf <= '0;
      for (int i = 0; i < 32; i++) xr[i] <= '0;
    end else begin
      done         <= 1'b0;
      illegal      <= 1'b0;
      notify_valid <= 1'b0;
      unique case (state)
        P_IDLE: if (start) begin
          pc      <= thread.pc;
          xr[10]  <= thread.a0;
          xr[11]  <= thread.a1;
          state   <= P_FETCH;
        end
        P_FETCH: if (ic_rsp.rvalid) begin
          ir    <= ic_rsp.rdata;
          state <= P_EXEC;
        end
        P_EXEC: begin
          state <= P_FETCH;
          unique case (opc)
            7'b0110111: xr[rd] <= imm_u;                       // LUI
            7'b0010111: xr[rd] <= pc + imm_u;                  // AUIPC
            7'b1101111: xr[rd] <= pc + 32'd4;                   // JAL
            7'b1100111: xr[rd] <= pc + 32'd4;                   // JALR
            7'b1100011: ;                                      // branches: see npc
            7'b0010011, 7'b0110011: xr[rd] <= alu_y;           // OP-IMM, OP
            7'b0000011: begin                                  // loads
              maddr <= x1v + imm_i; mwe <= 1'b0; mvec <= 1'b0; mbeat <= 1'b0;
              mrd <= rd; mf3 <= f3; state <= P_MEM;
            end
            7'b0100011: begin                                  // stores (SW only)
              if (f3 != 3'b010) begin
                done <= 1'b1; illegal <= 1'b1; state <= P_IDLE;
              end else if (x1v + imm_s == NOTIFY_ADDR) begin
                notify_valid <= 1'b1;
                notify_value <= x2v;
              end else begin
                maddr <= x1v + imm_s; mwdata <= x2v; mwe <= 1'b1; mvec <= 1'b0;
                mbeat <= 1'b0; state <= P_MEM;
              end
            end
            7'b0001111: ;                                      // FENCE: no-op
            7'b1110011: begin done <= 1'b1; state <= P_IDLE; end // ECALL/EBREAK: end thread
            OPC_CUSTOM0: begin
              unique case (f3)
                VF_MAC:           xr[rd] <= mac_y;
                VF_MUL, VF_ADD:   vr[rd] <= valu_y;
                VF_ACUM:          xr[rd] <= acum_y;
                VF_I2F:           xr[rd] <= i2f_y;
                VF_LD: begin
                  maddr <= x1v; mwe <= 1'b0; mvec <= 1'b1; mbeat <= 1'b0; mrd <= rd;
                  state <= P_MEM;
                end
                VF_ST: begin
                  maddr <= x1v; mwe <= 1'b1; mvec <= 1'b1; mbeat <= 1'b0;
                  vbuf <= vr[rs2]; state <= P_MEM;
                end
                default: begin done <= 1'b1; illegal <= 1'b1; state <= P_IDLE; end
              endcase
            end
            default: begin done <= 1'b1; illegal <= 1'b1; state <= P_IDLE; end
          endcase
          pc <= npc;
        end
        P_MEM: if (dmem_rsp.rvalid) begin
          if (mvec) begin
            if (!mwe) begin
              if (mbeat) vr[mrd] <= VW'({dmem_rsp.rdata, vbuf[31:0]});
              else       vbuf[31:0] <= dmem_rsp.rdata;
            end
            mbeat <= ~mbeat;
            if (mbeat || VW <= 32) state <= P_FETCH;
          end else begin
            if (!mwe) xr[mrd] <= load_ext(dmem_rsp.rdata, maddr[1:0], mf3);
            state <= P_FETCH;
          end
        end
        default: state <= P_IDLE;
      endcase
      xr[0] <= '0;
    end
  end

  assign idle = (state == P_IDLE);
endmodule
