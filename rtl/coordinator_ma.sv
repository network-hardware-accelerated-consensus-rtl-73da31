// coordinator_ma: match/action stage of the coordinator.
//
// The coordinator is the single sequencer of the protocol. It holds one
// register, the next instance number, which only ever counts up. Each
// proposer request (msgtype REQUEST) is bound to that instance: the header is
// rewritten into a Phase 2A accept request carrying the instance, the initial
// round INIT_RND (the round the acceptors also start with, so no Phase 1 is
// needed) and the coordinator's switch id, and the register is incremented.
// The proposer's value is left in place. Every other frame, including other
// Paxos messages, passes through unchanged. The UDP checksum is updated for
// the rewritten header.
//
// A backup coordinator taking over needs to know which instance to continue
// from; set_inst loads the register with set_inst_value (the paper notes this
// value need not be exact: too low and acceptors ignore it until it catches
// up, too high and learners recover the gap).
//
// Timing: one record per cycle; the verdict is registered, so it appears the
// cycle after the record is taken. in_ready is low while set_inst is high.
// Following the paper: sequencing, 2A rewrite, fail-over load. This design's
// choices: message codes, INIT_RND, the pass-through of other messages.
// The verdict's drop bit is always 0: the coordinator forwards every frame.
module coordinator_ma
  import caans_pkg::*;
#(
  parameter logic [15:0] INIT_RND = 16'd1,
  parameter logic [15:0] SWID     = 16'h0100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  parsed_t     in_rec,
  output logic        in_ready,
  output logic        out_valid,
  output verdict_t    out_verdict,
  input  logic        out_ready,
  input  logic        set_inst,
  input  logic [31:0] set_inst_value,
  output logic [31:0] next_inst
);
  logic       is_req, take;
  paxos_hdr_t new_hdr;
  logic [15:0] new_csum;

  assign in_ready = (!out_valid || out_ready) && !set_inst;
  assign take     = in_valid && in_ready;
  assign is_req   = in_rec.is_paxos && (in_rec.hdr.msgtype == 16'(MSG_REQUEST));

  always_comb begin
    new_hdr         = in_rec.hdr;
    new_hdr.msgtype = 16'(MSG_2A);
    new_hdr.inst    = next_inst;
    new_hdr.rnd     = INIT_RND;
    new_hdr.swid    = SWID;
  end

  udp_csum_update u_csum (
    .old_csum (in_rec.udp_csum),
    .old_hdr  (in_rec.hdr),
    .new_hdr  (new_hdr),
    .new_csum (new_csum)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      next_inst   <= '0;
      out_valid   <= 1'b0;
      out_verdict <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (set_inst) next_inst <= set_inst_value;
      if (take) begin
        out_valid           <= 1'b1;
        out_verdict.drop    <= 1'b0;
        out_verdict.rewrite <= is_req;
        out_verdict.udp_csum<= is_req ? new_csum : in_rec.udp_csum;
        out_verdict.hdr     <= is_req ? new_hdr  : in_rec.hdr;
        if (is_req) next_inst <= next_inst + 32'd1;
      end
    end
  end
endmodule
