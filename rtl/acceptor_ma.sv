// acceptor_ma: match/action stage of an acceptor, with its history memory.
//
// Implements the acceptor's two Paxos rules on the instance named in the
// header, using the entry {rnd, vrnd, value} of acceptor_history:
//   Phase 1A (prepare, used by the recover path): if msg.rnd > rnd, promise
//     it (rnd := msg.rnd) and answer with a 1B carrying the stored vrnd and
//     value; otherwise drop the message.
//   Phase 2A (accept request): if msg.rnd >= rnd, vote (rnd := vrnd :=
//     msg.rnd, value := msg.value) and answer with a 2B carrying the vote;
//     otherwise drop the message.
// The answer is the same frame with msgtype, vrnd, value and swid rewritten
// (swid names this acceptor, so learners can count distinct votes) and the
// UDP checksum updated. Other message types and non-Paxos frames are
// forwarded unchanged.
//
// Timing: a 1A/2A record takes two cycles, read then decide-and-write, so
// the read of the next record always sees the previous write. Other records
// take one cycle. The verdict is registered. Nothing is taken while the
// history is still clearing after reset (busy high).
// The two rules follow the paper; dropping rejected messages, the
// pass-through of other frames and the two-cycle schedule are this design's.
module acceptor_ma
  import caans_pkg::*;
#(
  parameter int          INST_IDX_W = 16,
  parameter logic [15:0] INIT_RND   = 16'd1,
  parameter logic [15:0] SWID       = 16'h0001
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  parsed_t   in_rec,
  output logic      in_ready,
  output logic      out_valid,
  output verdict_t  out_verdict,
  input  logic      out_ready,
  output logic      busy
);
  typedef enum logic {S_IDLE, S_DECIDE} state_e;

  state_e      state;
  parsed_t     cur;            // record being decided
  hist_entry_t rd_data, wr_data;
  logic        rd_en, wr_en, init_done;
  logic        out_free, needs_mem, accept;
  paxos_hdr_t  new_hdr;
  logic [15:0] new_csum;

  assign busy      = !init_done;
  assign out_free  = !out_valid || out_ready;
  assign needs_mem = in_rec.is_paxos &&
                     (in_rec.hdr.msgtype == 16'(MSG_1A) || in_rec.hdr.msgtype == 16'(MSG_2A));
  assign in_ready  = (state == S_IDLE) && init_done && out_free;
  assign rd_en     = in_valid && in_ready && needs_mem;

  acceptor_history #(.INST_IDX_W(INST_IDX_W), .INIT_RND(INIT_RND)) u_hist (
    .clk, .rst_n,
    .rd_en, .rd_addr(in_rec.hdr.inst[INST_IDX_W-1:0]), .rd_data,
    .wr_en, .wr_addr(cur.hdr.inst[INST_IDX_W-1:0]), .wr_data,
    .init_done
  );

  // Decision on the current record against the entry just read.
  always_comb begin
    new_hdr = cur.hdr;
    wr_data = rd_data;
    accept  = 1'b0;
    if (cur.hdr.msgtype == 16'(MSG_1A)) begin
      accept          = cur.hdr.rnd > rd_data.rnd;
      wr_data.rnd     = cur.hdr.rnd;
      new_hdr.msgtype = 16'(MSG_1B);
      new_hdr.vrnd    = rd_data.vrnd;
      new_hdr.value   = rd_data.value;
    end else begin
      accept          = cur.hdr.rnd >= rd_data.rnd;
      wr_data.rnd     = cur.hdr.rnd;
      wr_data.vrnd    = cur.hdr.rnd;
      wr_data.value   = cur.hdr.value;
      new_hdr.msgtype = 16'(MSG_2B);
      new_hdr.vrnd    = cur.hdr.rnd;
    end
    new_hdr.swid = SWID;
  end

  assign wr_en = (state == S_DECIDE) && out_free && accept;

  udp_csum_update u_csum (
    .old_csum (cur.udp_csum),
    .old_hdr  (cur.hdr),
    .new_hdr  (new_hdr),
    .new_csum (new_csum)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cur         <= '0;
      out_valid   <= 1'b0;
      out_verdict <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_IDLE: if (in_valid && in_ready) begin
          if (needs_mem) begin
            cur   <= in_rec;
            state <= S_DECIDE;
          end else begin
            out_valid            <= 1'b1;
            out_verdict.drop     <= 1'b0;
            out_verdict.rewrite  <= 1'b0;
            out_verdict.udp_csum <= in_rec.udp_csum;
            out_verdict.hdr      <= in_rec.hdr;
          end
        end
        S_DECIDE: if (out_free) begin
          out_valid            <= 1'b1;
          out_verdict.drop     <= !accept;
          out_verdict.rewrite  <= accept;
          out_verdict.udp_csum <= new_csum;
          out_verdict.hdr      <= new_hdr;
          state                <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
