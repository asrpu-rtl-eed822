// asrpu_pkg: types and constants shared by the blocks of the ASR processing unit.
//
// It fixes the on-chip bus format, the command codes of the command decoder, the data
// address map seen by the processing elements (PEs), the hypothesis record and the
// encodings of the vector instructions that extend the RISC-V base ISA.
//
// Bus protocol used everywhere (this design's choice): a master raises req.valid with
// we/addr/wdata and holds it until it sees rsp.rvalid for one cycle; writes are
// acknowledged the same way. A slave captures a request when it is idle and answers
// exactly once. Only 32-bit word accesses exist. The command set follows the paper's
// command table; the address map, the instruction encodings and the record layout
// are this design's own choices.
package asrpu_pkg;

  localparam int unsigned XLEN = 32;
  localparam int unsigned ID_W = 4;          // bus master id width (up to 16 masters)

  typedef struct packed {
    logic            valid;
    logic            we;
    logic [ID_W-1:0] id;
    logic [31:0]     addr;
    logic [31:0]     wdata;
  } bus_req_t;

  typedef struct packed {
    logic        rvalid;
    logic [31:0] rdata;
  } bus_rsp_t;

  // ---- command decoder ----------------------------------------------------
  typedef enum logic [2:0] {
    CMD_CFG_AS    = 3'd0,   // ConfigureASR_AcousticScoring n, setup_addr, kernel_addr
    CMD_CFG_HE    = 3'd1,   // ConfigureASR_HypExpansion setup_addr(arg1), kernel_addr(arg2)
    CMD_CFG_BEAM  = 3'd2,   // ConfigureBeamWidth beam(arg0)
    CMD_CLEAN     = 3'd3,   // CleanDecoding
    CMD_DEC_STEP  = 3'd4    // DecodingStep signal_addr(arg0)
  } cmd_op_e;

  // One configuration-memory entry: the two program addresses of a kernel.
  typedef struct packed {
    logic [31:0] setup_addr;
    logic [31:0] kernel_addr;
  } kernel_cfg_t;

  // ---- PE data address map (addr[31:28] selects the slave) ------------------
  localparam logic [3:0] REG_SHARED = 4'h0;  // shared memory (scratchpad)
  localparam logic [3:0] REG_MODEL  = 4'h1;  // model memory
  localparam logic [3:0] REG_HYP    = 4'h2;  // hypothesis unit
  localparam logic [3:0] REG_DMA    = 4'h3;  // DMA registers
  localparam logic [3:0] REG_CTRL   = 4'h4;  // step registers (signal_addr, beam)
  localparam logic [31:0] NOTIFY_ADDR = 32'hF000_0000; // store here: notify ASR controller

  // hypothesis unit register offsets (addr[15:0])
  localparam logic [15:0] HYP_STG_HASH   = 16'h0000;
  localparam logic [15:0] HYP_STG_SCORE  = 16'h0004;
  localparam logic [15:0] HYP_STG_D0     = 16'h0008;
  localparam logic [15:0] HYP_STG_D1     = 16'h000C;
  localparam logic [15:0] HYP_PUSH       = 16'h0010; // insert staged record in new set
  localparam logic [15:0] HYP_SEED       = 16'h0014; // append staged record to active set
  localparam logic [15:0] HYP_ACT_COUNT  = 16'h0020;
  localparam logic [15:0] HYP_NEW_COUNT  = 16'h0024;
  localparam logic [15:0] HYP_ACT_BASE   = 16'h8000; // + 16*i + 4*field

  // DMA register offsets
  localparam logic [3:0] DMA_SRC = 4'h0, DMA_DST = 4'h4, DMA_LEN = 4'h8, DMA_GO = 4'hC;

  // ---- hypothesis record (16 bytes) -----------------------------------------
  typedef struct packed {
    logic        [31:0] hash;
    logic signed [31:0] score;  // higher is better
    logic        [31:0] d0;     // programmer-defined (e.g. graph node)
    logic        [31:0] d1;     // programmer-defined (e.g. backlink / token)
  } hyp_t;

  // ---- vector extension (custom-0 opcode, R-type) ---------------------------
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;
  localparam int unsigned VLANES = 8;  // MAC vector size (paper: 8)
  typedef enum logic [2:0] {
    VF_MAC  = 3'd0,  // x[rd] = x[rd] + sum_i v[rs1][i]*v[rs2][i]
    VF_MUL  = 3'd1,  // v[rd] = v[rs1] * v[rs2] element-wise (low 8 bits)
    VF_ADD  = 3'd2,  // v[rd] = v[rs1] + v[rs2] element-wise (wrapping)
    VF_ACUM = 3'd3,  // x[rd] = x[rs1] + sum_i v[rs2][i]
    VF_LD   = 3'd4,  // v[rd] = mem64[x[rs1]]
    VF_ST   = 3'd5,  // mem64[x[rs1]] = v[rs2]
    VF_I2F  = 3'd6   // x[rd] = float(x[rs1]) bit pattern
  } vfunct_e;

  // PE thread start command from the ASR controller
  typedef struct packed {
    logic [31:0] pc;   // program start address
    logic [31:0] a0;   // thread index (kernel threads) / kernel index (setup threads)
    logic [31:0] a1;   // repetition index of hypothesis expansion, else 0
  } thread_t;

  // event pulses of the whole accelerator, for statistics and tests
  typedef struct packed {
    logic setup_overlap;  // setup thread dispatched while kernel threads pending
    logic pe_pool_full;   // work waiting and no idle PE
    logic he_run;         // a hypothesis-expansion run started
    logic step_stop;      // decoding step stopped by a setup thread returning 0
    logic ibus_wait;      // instruction bus: several requesters at once
    logic dbus_wait;      // data bus: several requesters at once
    logic pe_ic_hit;      // some PE i-cache hit
    logic pe_ic_miss;     // some PE i-cache miss
    logic ic_hit;         // shared i-cache hit
    logic ic_miss;        // shared i-cache miss
    logic dma_word;       // DMA wrote a word into model memory
    logic hyp_merge;      // hypothesis merged with one of equal hash
    logic hyp_prune;      // hypothesis dropped by the beam
    logic hyp_evict;      // full new set: worst hypothesis replaced
  } events_t;

endpackage
