// caans_top: the hardware half of an in-network Paxos deployment.
//
// Consensus roles split between servers and network hardware. Proposers and
// learners stay in software; the coordinator and the acceptors, the two roles
// that limit a software Paxos, run in the network as packet pipelines. This
// top holds one coordinator and NUM_ACC acceptors (three by default, the
// configuration the paper evaluates):
//
//   prop_* --> caans_coordinator --> stream_bcast --+--> stream_merge --> caans_acceptor[0] --> lrn_*[0]
//                                                   |       ...
//   bk_*   --> stream_bcast ------------------------+--> stream_merge --> caans_acceptor[N-1] --> lrn_*[N-1]
//
// A proposer's request enters on prop_*; the coordinator gives it the next
// instance number and turns it into a Phase 2A message, which every acceptor
// receives. Each acceptor votes and sends a Phase 2B message out of its own
// lrn_* port towards the learners; a learner delivers a value once a majority
// of acceptors (2 of 3) voted for it. bk_* is the path the paper shows from a
// backup coordinator to the acceptors: after a coordinator failure, software
// (or another device) sends 2A messages there; recover requests (Phase 1A)
// can enter there too. set_inst loads the coordinator's instance counter
// when it takes over again.
//
// In the paper every role is a separate FPGA joined by a switch; here they
// share one clock and the switch's fan-out is done on-chip by stream_bcast.
// All streams: 64-bit data, byte 0 in bits [7:0], keep, last, valid/ready.
module caans_top
  import caans_pkg::*;
#(
  parameter int NUM_ACC        = 3,
  parameter int DATA_W         = 64,
  parameter int INST_IDX_W     = 16,
  parameter int PKT_FIFO_DEPTH = 64
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // from proposers
  input  logic [DATA_W-1:0]                 prop_data,
  input  logic [DATA_W/8-1:0]               prop_keep,
  input  logic                              prop_last,
  input  logic                              prop_valid,
  output logic                              prop_ready,
  // from a backup coordinator / recover path
  input  logic [DATA_W-1:0]                 bk_data,
  input  logic [DATA_W/8-1:0]               bk_keep,
  input  logic                              bk_last,
  input  logic                              bk_valid,
  output logic                              bk_ready,
  // to learners, one stream per acceptor
  output logic [NUM_ACC-1:0][DATA_W-1:0]    lrn_data,
  output logic [NUM_ACC-1:0][DATA_W/8-1:0]  lrn_keep,
  output logic [NUM_ACC-1:0]                lrn_last,
  output logic [NUM_ACC-1:0]                lrn_valid,
  input  logic [NUM_ACC-1:0]                lrn_ready,
  // coordinator fail-over
  input  logic                              set_inst,
  input  logic [31:0]                       set_inst_value,
  output logic [31:0]                       next_inst,
  output logic [NUM_ACC-1:0]                acc_ready
);
  localparam int BYTES = DATA_W / 8;

  logic [DATA_W-1:0]  c_data, cb_data, bb_data;
  logic [BYTES-1:0]   c_keep, cb_keep, bb_keep;
  logic               c_last, c_valid, c_ready, cb_last, bb_last;
  logic [NUM_ACC-1:0] cb_valid, cb_ready, bb_valid, bb_ready;

  caans_coordinator #(.DATA_W(DATA_W), .PKT_FIFO_DEPTH(PKT_FIFO_DEPTH)) u_coord (
    .clk, .rst_n,
    .s_data(prop_data), .s_keep(prop_keep), .s_last(prop_last),
    .s_valid(prop_valid), .s_ready(prop_ready),
    .m_data(c_data), .m_keep(c_keep), .m_last(c_last), .m_valid(c_valid), .m_ready(c_ready),
    .set_inst, .set_inst_value, .next_inst
  );

  stream_bcast #(.N(NUM_ACC), .DATA_W(DATA_W)) u_coord_fanout (
    .clk, .rst_n,
    .s_data(c_data), .s_keep(c_keep), .s_last(c_last), .s_valid(c_valid), .s_ready(c_ready),
    .m_data(cb_data), .m_keep(cb_keep), .m_last(cb_last), .m_valid(cb_valid), .m_ready(cb_ready)
  );

  stream_bcast #(.N(NUM_ACC), .DATA_W(DATA_W)) u_backup_fanout (
    .clk, .rst_n,
    .s_data(bk_data), .s_keep(bk_keep), .s_last(bk_last), .s_valid(bk_valid), .s_ready(bk_ready),
    .m_data(bb_data), .m_keep(bb_keep), .m_last(bb_last), .m_valid(bb_valid), .m_ready(bb_ready)
  );

  for (genvar a = 0; a < NUM_ACC; a++) begin : g_acc
    logic [DATA_W-1:0] x_data;
    logic [BYTES-1:0]  x_keep;
    logic              x_last, x_valid, x_ready;

    stream_merge #(.DATA_W(DATA_W)) u_merge (
      .clk, .rst_n,
      .s0_data(cb_data), .s0_keep(cb_keep), .s0_last(cb_last),
      .s0_valid(cb_valid[a]), .s0_ready(cb_ready[a]),
      .s1_data(bb_data), .s1_keep(bb_keep), .s1_last(bb_last),
      .s1_valid(bb_valid[a]), .s1_ready(bb_ready[a]),
      .m_data(x_data), .m_keep(x_keep), .m_last(x_last), .m_valid(x_valid), .m_ready(x_ready)
    );

    caans_acceptor #(
      .DATA_W(DATA_W), .INST_IDX_W(INST_IDX_W), .PKT_FIFO_DEPTH(PKT_FIFO_DEPTH),
      .SWID(16'(a + 1))
    ) u_acc (
      .clk, .rst_n,
      .s_data(x_data), .s_keep(x_keep), .s_last(x_last), .s_valid(x_valid), .s_ready(x_ready),
      .m_data(lrn_data[a]), .m_keep(lrn_keep[a]), .m_last(lrn_last[a]),
      .m_valid(lrn_valid[a]), .m_ready(lrn_ready[a]),
      .ready_for_traffic(acc_ready[a])
    );
  end
endmodule
