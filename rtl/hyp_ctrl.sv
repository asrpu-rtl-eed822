// hyp_ctrl: controller of the hypothesis unit. Hypothesis-expansion threads read the
// active hypotheses from it and send it the hypotheses they generate; it keeps the
// new set pruned by score against the beam, and turns the new set into the active set
// at the end of every expansion.
//
// Bus interface (offsets in asrpu_pkg): a thread writes the four words of a record to
// its own staging registers (one set per bus master, selected by req.id, so records
// from different PEs never mix), then writes PUSH. The record is then
//   * dropped if its score is below (best score of the new set - beam),
//   * merged with a record of equal hash already in the new set (the better score
//     survives),
//   * appended if the new set has room, or
//   * written over the worst record of a full new set if it scores better than it.
// The PUSH is acknowledged only when this is done; the search walks the new set at
// two cycles per record. SEED appends the staged record directly to the active set
// (to start an utterance). ACT_COUNT / NEW_COUNT read the set sizes; ACT_BASE+16*i+4*f
// reads field f of active record i (answered two cycles after the request).
// swap (from the ASR controller, only while no thread runs) copies every record of the
// new set that lies within the beam of the best one into the active set, empties the
// new set and pulses swap_done. clean empties both sets.
//
// From the paper: the unit holds active and new hypotheses, records carry a hash and
// a score plus programmer fields, it prunes by score and the configured beam, and it
// is reached through special addresses. This design's choices: the register map, the
// merge of equal hashes (the paper's Viterbi description keeps only the best path
// into a node), the eviction of the worst record on overflow, and the absence of a
// full ordering: the active set is kept in arrival order, not sorted by score.
module hyp_ctrl
  import asrpu_pkg::*;
#(
  parameter int unsigned SIZE_BYTES  = 24 * 1024,
  parameter int unsigned NUM_MASTERS = 8,
  localparam int unsigned ENTRIES    = SIZE_BYTES / 16,
  localparam int unsigned BANK       = ENTRIES / 2,
  localparam int unsigned AW         = $clog2(ENTRIES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  bus_req_t           req,
  output bus_rsp_t           rsp,
  input  logic signed [31:0] beam,
  input  logic               clean,
  input  logic               swap,
  output logic               swap_done,
  output logic [31:0]        act_count,
  // hypothesis memory
  output logic               mem_we,
  output logic [AW-1:0]      mem_waddr,
  output hyp_t               mem_wdata,
  output logic [AW-1:0]      mem_raddr,
  input  hyp_t               mem_rdata,
  // statistics pulses
  output logic               ev_merge,
  output logic               ev_prune,
  output logic               ev_evict
);
  typedef enum logic [3:0] {
    S_IDLE, S_ACK, S_RDWAIT, S_RDACK,
    S_INS_CHK, S_INS_RD, S_INS_CMP, S_INS_END,
    S_SWP_RD, S_SWP_CMP, S_SWP_END
  } state_e;

  state_e state;
  hyp_t   stage [NUM_MASTERS];
  hyp_t   cand;
  logic [31:0] new_count;
  logic [31:0] idx, out_idx;
  logic signed [31:0] best;
  logic        match;
  logic [31:0] match_idx, worst_idx;
  logic signed [31:0] match_score, worst_score;
  logic [1:0]  rfield;
  logic [31:0] rdata_q;

  localparam int unsigned MW = (NUM_MASTERS > 1) ? $clog2(NUM_MASTERS) : 1;
  wire [MW-1:0] mid = MW'(req.id);
  // threshold of the new set: best - beam, in 33 bits so it cannot wrap
  wire signed [32:0] thresh = 33'(best) - 33'(beam);

  function automatic logic [AW-1:0] new_addr(input logic [31:0] i);
    return AW'(BANK + i);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      act_count <= '0;
      new_count <= '0;
      best      <= '0;
      idx       <= '0;
      out_idx   <= '0;
      match     <= 1'b0;
      match_idx <= '0;
      worst_idx <= '0;
      match_score <= '0;
      worst_score <= '0;
      rfield    <= '0;
      rdata_q   <= '0;
      cand      <= '0;
      for (int k = 0; k < NUM_MASTERS; k++) stage[k] <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (clean) begin
            act_count <= '0;
            new_count <= '0;
          end else if (swap) begin
            idx     <= '0;
            out_idx <= '0;
            state   <= S_SWP_RD;
          end else if (req.valid) begin
            state <= S_ACK;
            if (req.addr[15] == 1'b1) begin           // read an active record field
              rfield <= req.addr[3:2];
              state  <= S_RDWAIT;
            end else if (req.we) begin
              unique case (req.addr[15:0])
                HYP_STG_HASH:  stage[mid].hash  <= req.wdata;
                HYP_STG_SCORE: stage[mid].score <= req.wdata;
                HYP_STG_D0:    stage[mid].d0    <= req.wdata;
                HYP_STG_D1:    stage[mid].d1    <= req.wdata;
                HYP_PUSH: begin
                  cand  <= stage[mid];
                  state <= S_INS_CHK;
                end
                HYP_SEED: begin
                  if (act_count < BANK) act_count <= act_count + 32'd1;
                end
                default: ;
              endcase
            end else begin
              unique case (req.addr[15:0])
                HYP_ACT_COUNT: rdata_q <= act_count;
                HYP_NEW_COUNT: rdata_q <= new_count;
                default:       rdata_q <= '0;
              endcase
            end
          end
        end
        S_ACK: state <= S_IDLE;
        S_RDWAIT: state <= S_RDACK;
        S_RDACK: state <= S_IDLE;
        // ---------------- insertion ----------------
        S_INS_CHK: begin
          idx         <= '0;
          match       <= 1'b0;
          worst_idx   <= '0;
          worst_score <= 32'sh7fff_ffff;
          if (new_count != 0 && 33'(cand.score) < thresh) state <= S_ACK;  // pruned
          else                                             state <= S_INS_RD;
        end
        S_INS_RD: state <= (idx < new_count) ? S_INS_CMP : S_INS_END;
        S_INS_CMP: begin
          if (mem_rdata.hash == cand.hash) begin
            match       <= 1'b1;
            match_idx   <= idx;
            match_score <= mem_rdata.score;
          end
          if (mem_rdata.score < worst_score) begin
            worst_score <= mem_rdata.score;
            worst_idx   <= idx;
          end
          idx   <= idx + 32'd1;
          state <= (mem_rdata.hash == cand.hash) ? S_INS_END : S_INS_RD;
        end
        S_INS_END: begin
          if (match) begin
            if (cand.score > match_score && cand.score > best) best <= cand.score;
          end else if (new_count < BANK) begin
            new_count <= new_count + 32'd1;
            if (new_count == 0 || cand.score > best) best <= cand.score;
          end else if (cand.score > worst_score && cand.score > best) begin
            best <= cand.score;
          end
          state <= S_ACK;
        end
        // ---------------- swap: prune new set into active set ----------------
        S_SWP_RD: state <= (idx < new_count) ? S_SWP_CMP : S_SWP_END;
        S_SWP_CMP: begin
          if (33'(mem_rdata.score) >= thresh) out_idx <= out_idx + 32'd1;
          idx   <= idx + 32'd1;
          state <= S_SWP_RD;
        end
        S_SWP_END: begin
          act_count <= out_idx;
          new_count <= '0;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (state == S_RDWAIT) rdata_q <= mem_rdata[32*(3-int'(rfield)) +: 32];
    end
  end

  // memory port control
  always_comb begin
    mem_raddr = new_addr(idx);
    mem_we    = 1'b0;
    mem_waddr = '0;
    mem_wdata = cand;
    ev_merge  = 1'b0;
    ev_prune  = 1'b0;
    ev_evict  = 1'b0;
    unique case (state)
      S_IDLE: mem_raddr = AW'(req.addr[AW+3:4]);
      S_INS_CHK: ev_prune = (new_count != 0 && 33'(cand.score) < thresh);
      S_INS_END: begin
        if (match) begin
          ev_merge  = 1'b1;
          mem_we    = cand.score > match_score;
          mem_waddr = new_addr(match_idx);
        end else if (new_count < BANK) begin
          mem_we    = 1'b1;
          mem_waddr = new_addr(new_count);
        end else begin
          ev_evict  = cand.score > worst_score;
          ev_prune  = !(cand.score > worst_score);
          mem_we    = cand.score > worst_score;
          mem_waddr = new_addr(worst_idx);
        end
      end
      S_SWP_CMP: begin
        mem_we    = (33'(mem_rdata.score) >= thresh);
        mem_waddr = AW'(out_idx);
        mem_wdata = mem_rdata;
        ev_prune  = !(33'(mem_rdata.score) >= thresh);
      end
      default: ;
    endcase
    if (state == S_IDLE && req.valid && req.we && req.addr[15:0] == HYP_SEED && act_count < BANK) begin
      mem_we    = 1'b1;
      mem_waddr = AW'(act_count);
      mem_wdata = stage[mid];
    end
  end

  always_comb begin
    rsp.rvalid = (state == S_ACK) || (state == S_RDACK);
    rsp.rdata  = rdata_q;
  end
  assign swap_done = (state == S_SWP_END);
endmodule
