// asrpu_top: the ASR processing unit. A pool of small programmable cores (PEs) runs the
// kernels of a speech recogniser (feature extraction, DNN layers, hypothesis expansion);
// an ASR controller sequences the kernels of each decoding step and a hypothesis unit
// keeps, merges and prunes the search hypotheses in hardware.
//
// Structure (after the paper's architecture figure):
//   decoding unit   cmd_decoder + conf_mem: host commands, kernel address table
//   execution unit  asr_controller + NUM_PE x pe, joined by the controller bus
//                   (start/thread/done/notify signals)
//   PE data bus     bus_arbiter -> address decoder -> shared_mem, model_mem,
//                   hyp_ctrl (+ hyp_mem), dma registers, step registers
//   instruction bus PE i-cache misses -> bus_arbiter -> shared icache -> ext_i port
//   DMA             dma -> ext_d port (reads) -> model_mem fill port (writes)
// Data address map (addr[31:28]): 0 shared memory, 1 model memory, 2 hypothesis unit,
// 3 DMA registers, 4 step registers (+0 signal_addr, +4 beam); other addresses read 0
// and ignore writes. Instruction addresses are external-memory byte addresses.
//
// External ports: the host command handshake, step status, and two read-only master
// ports to external memory (instructions, DMA), which follow the design's bus protocol
// (hold req.valid until rsp.rvalid); their we/wdata/id fields are tied to zero, as
// both only read. Every on-chip memory size and the PE count
// default to the paper's configuration table; everything about ports, protocol and
// address map is this design's choice. The PEs' private data caches are not built:
// data accesses go over the PE bus.
module asrpu_top
  import asrpu_pkg::*;
#(
  parameter int unsigned NUM_PE        = 8,
  parameter int unsigned SHARED_BYTES  = 512 * 1024,
  parameter int unsigned MODEL_BYTES   = 1024 * 1024,
  parameter int unsigned ICACHE_BYTES  = 64 * 1024,
  parameter int unsigned PE_ICACHE_BYTES = 4 * 1024,
  parameter int unsigned HYP_BYTES     = 24 * 1024,
  parameter int unsigned MAX_KERNELS   = 128,
  localparam int unsigned KW = $clog2(MAX_KERNELS + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  // host commands
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_op_e     cmd_op,
  input  logic [31:0] cmd_arg0,
  input  logic [31:0] cmd_arg1,
  input  logic [31:0] cmd_arg2,
  output logic        cmd_error,
  output logic        step_busy,
  output logic        step_done,
  output logic        step_stopped,
  output logic        pe_illegal,     // some PE hit an unimplemented instruction
  output events_t     events,         // event pulses (statistics)
  output logic [NUM_PE-1:0] pe_idle,  // PE occupancy
  // external memory
  output bus_req_t    ext_i_req,
  input  bus_rsp_t    ext_i_rsp,
  output bus_req_t    ext_d_req,
  input  bus_rsp_t    ext_d_rsp
);
  // ---------------- decoding unit ----------------
  logic        cfg_we;
  logic [KW-1:0] cfg_waddr, cfg_raddr, num_as;
  kernel_cfg_t cfg_wdata, cfg_rdata;
  logic [31:0] beam, signal_addr;
  logic        clean, step_start;

  cmd_decoder #(.MAX_KERNELS(MAX_KERNELS)) u_cmd (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_arg0, .cmd_arg1, .cmd_arg2,
    .cmd_error, .cfg_we, .cfg_waddr, .cfg_wdata, .num_as_kernels(num_as),
    .beam, .signal_addr, .clean, .step_start, .step_busy
  );
  conf_mem #(.MAX_KERNELS(MAX_KERNELS)) u_conf (
    .clk, .we(cfg_we), .waddr(cfg_waddr), .wdata(cfg_wdata),
    .raddr(cfg_raddr), .rdata(cfg_rdata)
  );

  // ---------------- execution unit ----------------
  logic [NUM_PE-1:0] pe_start, pe_done, pe_ill, pe_nv, ic_hit, ic_miss;
  logic [31:0]       pe_nval [NUM_PE];
  thread_t           pe_thread;
  logic [31:0]       act_count;
  logic              hyp_swap, hyp_swap_done;
  logic              ev_overlap, ev_pe_full, ev_he_rep;

  asr_controller #(.NUM_PE(NUM_PE), .MAX_KERNELS(MAX_KERNELS)) u_ctrl (
    .clk, .rst_n, .step_start, .step_busy, .step_done, .step_stopped,
    .num_as_kernels(num_as), .cfg_raddr, .cfg_rdata,
    .pe_start, .pe_thread, .pe_done, .pe_notify_valid(pe_nv), .pe_notify_value(pe_nval),
    .act_count, .hyp_swap, .hyp_swap_done, .ev_overlap, .ev_pe_full, .ev_he_rep
  );

  bus_req_t pe_ireq [NUM_PE];
  bus_rsp_t pe_irsp [NUM_PE];
  bus_req_t pe_dreq [NUM_PE];
  bus_rsp_t pe_drsp [NUM_PE];

  for (genvar g = 0; g < NUM_PE; g++) begin : g_pe
    pe #(.ICACHE_BYTES(PE_ICACHE_BYTES)) u_pe (
      .clk, .rst_n, .start(pe_start[g]), .thread(pe_thread), .idle(pe_idle[g]),
      .done(pe_done[g]), .illegal(pe_ill[g]), .notify_valid(pe_nv[g]),
      .notify_value(pe_nval[g]), .imem_req(pe_ireq[g]), .imem_rsp(pe_irsp[g]),
      .dmem_req(pe_dreq[g]), .dmem_rsp(pe_drsp[g]), .icache_flush(cfg_we),
      .ic_hit(ic_hit[g]), .ic_miss(ic_miss[g])
    );
  end
  assign pe_illegal = |pe_ill;

  // ---------------- instruction path ----------------
  bus_req_t ib_req;
  bus_rsp_t ib_rsp;
  logic     ib_cont, sic_hit, sic_miss;
  bus_arbiter #(.N(NUM_PE)) u_ibus (
    .clk, .rst_n, .m_req(pe_ireq), .m_rsp(pe_irsp), .s_req(ib_req), .s_rsp(ib_rsp),
    .contention(ib_cont)
  );
  icache #(.SIZE_BYTES(ICACHE_BYTES)) u_icache (
    .clk, .rst_n, .flush(cfg_we), .up_req(ib_req), .up_rsp(ib_rsp),
    .down_req(ext_i_req), .down_rsp(ext_i_rsp), .hit_pulse(sic_hit), .miss_pulse(sic_miss)
  );

  // ---------------- PE data bus ----------------
  bus_req_t db_req;
  bus_rsp_t db_rsp;
  logic     db_cont;
  bus_arbiter #(.N(NUM_PE)) u_dbus (
    .clk, .rst_n, .m_req(pe_dreq), .m_rsp(pe_drsp), .s_req(db_req), .s_rsp(db_rsp),
    .contention(db_cont)
  );

  bus_req_t sh_req, mm_req, hy_req, dm_req;
  bus_rsp_t sh_rsp, mm_rsp, hy_rsp, dm_rsp, cr_rsp;
  wire [3:0] region = db_req.addr[31:28];
  always_comb begin
    sh_req = db_req; sh_req.valid = db_req.valid && region == REG_SHARED;
    mm_req = db_req; mm_req.valid = db_req.valid && region == REG_MODEL;
    hy_req = db_req; hy_req.valid = db_req.valid && region == REG_HYP;
    dm_req = db_req; dm_req.valid = db_req.valid && region == REG_DMA;
  end
  // step registers and the default responder for unmapped addresses
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cr_rsp <= '0;
    else begin
      cr_rsp.rvalid <= db_req.valid && !(region inside {REG_SHARED, REG_MODEL, REG_HYP, REG_DMA});
      cr_rsp.rdata  <= (region != REG_CTRL) ? 32'd0 : db_req.addr[2] ? beam : signal_addr;
    end
  end
  always_comb begin
    db_rsp.rvalid = sh_rsp.rvalid | mm_rsp.rvalid | hy_rsp.rvalid | dm_rsp.rvalid | cr_rsp.rvalid;
    db_rsp.rdata  = sh_rsp.rvalid ? sh_rsp.rdata :
                    mm_rsp.rvalid ? mm_rsp.rdata :
                    hy_rsp.rvalid ? hy_rsp.rdata :
                    dm_rsp.rvalid ? dm_rsp.rdata : cr_rsp.rdata;
  end

  shared_mem #(.SIZE_BYTES(SHARED_BYTES)) u_shared (.clk, .rst_n, .req(sh_req), .rsp(sh_rsp));

  logic        fill_we, dma_busy;  // dma_busy is also readable by threads
  logic [31:0] fill_addr, fill_data;
  model_mem #(.SIZE_BYTES(MODEL_BYTES)) u_model (
    .clk, .rst_n, .req(mm_req), .rsp(mm_rsp),
    .fill_we, .fill_addr, .fill_data
  );
  dma u_dma (
    .clk, .rst_n, .req(dm_req), .rsp(dm_rsp), .ext_req(ext_d_req), .ext_rsp(ext_d_rsp),
    .fill_we, .fill_addr, .fill_data, .busy(dma_busy)
  );

  // ---------------- hypothesis unit ----------------
  localparam int unsigned HAW = $clog2(HYP_BYTES / 16);
  logic           hm_we;
  logic [HAW-1:0] hm_waddr, hm_raddr;
  hyp_t           hm_wdata, hm_rdata;
  logic           ev_merge, ev_prune, ev_evict;
  hyp_ctrl #(.SIZE_BYTES(HYP_BYTES), .NUM_MASTERS(NUM_PE)) u_hctrl (
    .clk, .rst_n, .req(hy_req), .rsp(hy_rsp), .beam(signed'(beam)), .clean,
    .swap(hyp_swap), .swap_done(hyp_swap_done), .act_count,
    .mem_we(hm_we), .mem_waddr(hm_waddr), .mem_wdata(hm_wdata),
    .mem_raddr(hm_raddr), .mem_rdata(hm_rdata),
    .ev_merge, .ev_prune, .ev_evict
  );
  hyp_mem #(.SIZE_BYTES(HYP_BYTES)) u_hmem (
    .clk, .we(hm_we), .waddr(hm_waddr), .wdata(hm_wdata), .raddr(hm_raddr), .rdata(hm_rdata)
  );

  always_comb begin
    events = '{
      setup_overlap: ev_overlap, pe_pool_full: ev_pe_full, he_run: ev_he_rep,
      step_stop: step_stopped, ibus_wait: ib_cont, dbus_wait: db_cont,
      pe_ic_hit: |ic_hit, pe_ic_miss: |ic_miss, ic_hit: sic_hit, ic_miss: sic_miss,
      dma_word: fill_we, hyp_merge: ev_merge, hyp_prune: ev_prune, hyp_evict: ev_evict
    };
  end
endmodule
