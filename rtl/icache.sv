// icache: read-only, direct-mapped instruction cache. The same module serves as the
// private i-cache of every PE (paper: 4 KB) and as the shared i-cache between the PEs
// and external memory (paper: 64 KB, the default here).
//
// Upstream it is a bus slave: a read request is captured when the cache is idle, the
// tag and data arrays are read in that cycle, and in the next cycle a hit answers with
// up_rsp.rvalid (two cycles from request to data). On a miss the cache issues a read
// on the downstream master port, holds it until down_rsp.rvalid, writes the returned
// word into the line and answers upstream in that same cycle. Writes from upstream are
// acknowledged and ignored. flush clears every valid bit (used when the program
// changes). The paper says only that these are "regular caches managed by the
// hardware"; one-word lines and direct mapping are this design's choices, the
// simplest organisation that caches instructions.
module icache
  import asrpu_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 64 * 1024
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     flush,
  input  bus_req_t up_req,
  output bus_rsp_t up_rsp,
  output bus_req_t down_req,
  input  bus_rsp_t down_rsp,
  output logic     hit_pulse,   // one cycle per hit (statistics)
  output logic     miss_pulse   // one cycle per miss (statistics)
);
  localparam int unsigned LINES = SIZE_BYTES / 4;
  localparam int unsigned IW    = $clog2(LINES);
  localparam int unsigned TW    = 30 - IW;

  logic [31:0]   data_a [LINES];
  logic [TW-1:0] tag_a  [LINES];
  logic [LINES-1:0] vld;

  typedef enum logic [1:0] {S_IDLE, S_LOOK, S_MISS, S_WACK} state_e;
  state_e        state;
  logic [31:0]   addr_q;
  logic [31:0]   rd_data;
  logic [TW-1:0] rd_tag;
  logic          rd_vld;

  wire [IW-1:0] idx_in = up_req.addr[IW+1:2];
  wire [IW-1:0] idx_q  = addr_q[IW+1:2];
  wire [TW-1:0] tag_q  = addr_q[31:IW+2];
  wire          hit    = rd_vld && (rd_tag == tag_q);

  always_ff @(posedge clk) begin
    rd_data <= data_a[idx_in];
    rd_tag  <= tag_a[idx_in];
    if (state == S_MISS && down_rsp.rvalid) begin
      data_a[idx_q] <= down_rsp.rdata;
      tag_a[idx_q]  <= tag_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      addr_q <= '0;
      vld    <= '0;
      rd_vld <= 1'b0;
    end else begin
      rd_vld <= vld[idx_in];
      if (flush) vld <= '0;
      unique case (state)
        S_IDLE: if (up_req.valid) begin
          addr_q <= up_req.addr;
          state  <= up_req.we ? S_WACK : S_LOOK;
        end
        S_LOOK: state <= hit ? S_IDLE : S_MISS;
        S_MISS: if (down_rsp.rvalid) begin
          vld[idx_q] <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    up_rsp         = '0;
    down_req       = '0;
    down_req.addr  = addr_q;
    down_req.valid = (state == S_MISS);
    unique case (state)
      S_LOOK: begin up_rsp.rvalid = hit;             up_rsp.rdata = rd_data;        end
      S_MISS: begin up_rsp.rvalid = down_rsp.rvalid; up_rsp.rdata = down_rsp.rdata; end
      S_WACK:       up_rsp.rvalid = 1'b1;
      default: ;
    endcase
  end
  assign hit_pulse  = (state == S_LOOK) && hit;
  assign miss_pulse = (state == S_LOOK) && !hit;
endmodule
