// caans_acceptor: an acceptor as a complete packet pipeline.
//
//   s_* --> pkt_parser --+--> packet buffer (PKT_FIFO_DEPTH words) ------+
//                        +--> record queue --> acceptor_ma --> verdict    |
//                               (history memory)     queue --> pkt_deparser --> m_*
//
// Phase 2A requests leave on m_* as Phase 2B votes for the learners, Phase 1A
// prepares as Phase 1B promises; requests from a stale round are dropped;
// other frames are forwarded. The acceptor keeps its votes in a table of
// 2^INST_IDX_W instances (65,536 by default, as in the paper's FPGA build),
// cleared after reset; ready_for_traffic rises when that is done
// (2^INST_IDX_W cycles) and no frame is processed before it.
//
// Timing: one word per cycle in and out. With a 64-bit bus the first word of
// a 102-byte 2A frame leaves 14 cycles after it arrived, one more than in the
// coordinator because the acceptor reads its history before deciding. The
// stage structure follows the paper; the queues, bus and memory schedule are
// this design's.
module caans_acceptor
  import caans_pkg::*;
#(
  parameter int          DATA_W         = 64,
  parameter int          INST_IDX_W     = 16,
  parameter int          PKT_FIFO_DEPTH = 64,
  parameter logic [15:0] PAXOS_UDP_PORT = DEFAULT_PAXOS_PORT,
  parameter logic [15:0] INIT_RND       = 16'd1,
  parameter logic [15:0] SWID           = 16'h0001
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [DATA_W-1:0]   s_data,
  input  logic [DATA_W/8-1:0] s_keep,
  input  logic                s_last,
  input  logic                s_valid,
  output logic                s_ready,
  output logic [DATA_W-1:0]   m_data,
  output logic [DATA_W/8-1:0] m_keep,
  output logic                m_last,
  output logic                m_valid,
  input  logic                m_ready,
  output logic                ready_for_traffic
);
  localparam int BYTES = DATA_W / 8;
  localparam int WW    = DATA_W + BYTES + 1;

  logic          w_push, w_last, w_full, w_empty, w_pop;
  logic [DATA_W-1:0] w_data;
  logic [BYTES-1:0]  w_keep;
  logic [WW-1:0] b_dout;
  logic          p_push, p_full, p_empty, p_pop;
  parsed_t       p_rec, p_head;
  logic          v_push, v_full, v_empty, v_pop;
  verdict_t      v_rec, v_head;
  logic          p_rdy, v_out;

  assign p_pop  = p_rdy && !p_empty;
  assign v_push = v_out && !v_full;
  logic          busy;

  assign ready_for_traffic = !busy;

  pkt_parser #(.DATA_W(DATA_W), .PAXOS_UDP_PORT(PAXOS_UDP_PORT)) u_parser (
    .clk, .rst_n, .s_data, .s_keep, .s_last, .s_valid, .s_ready,
    .w_push, .w_data, .w_keep, .w_last, .w_full,
    .p_push, .p_rec, .p_full
  );

  sync_fifo #(.WIDTH(WW), .DEPTH(PKT_FIFO_DEPTH)) u_pkt_buf (
    .clk, .rst_n, .push(w_push), .din({w_last, w_keep, w_data}), .pop(w_pop),
    .dout(b_dout), .full(w_full), .empty(w_empty), .count()
  );

  sync_fifo #(.WIDTH($bits(parsed_t)), .DEPTH(4)) u_rec_q (
    .clk, .rst_n, .push(p_push), .din(p_rec), .pop(p_pop),
    .dout(p_head), .full(p_full), .empty(p_empty), .count()
  );

  acceptor_ma #(.INST_IDX_W(INST_IDX_W), .INIT_RND(INIT_RND), .SWID(SWID)) u_ma (
    .clk, .rst_n,
    .in_valid(!p_empty), .in_rec(p_head), .in_ready(p_rdy),
    .out_valid(v_out), .out_verdict(v_rec), .out_ready(!v_full),
    .busy
  );

  sync_fifo #(.WIDTH($bits(verdict_t)), .DEPTH(4)) u_verdict_q (
    .clk, .rst_n, .push(v_push), .din(v_rec), .pop(v_pop),
    .dout(v_head), .full(v_full), .empty(v_empty), .count()
  );

  pkt_deparser #(.DATA_W(DATA_W)) u_deparser (
    .clk, .rst_n,
    .w_valid(!w_empty), .w_data(b_dout[DATA_W-1:0]), .w_keep(b_dout[DATA_W +: BYTES]),
    .w_last(b_dout[WW-1]), .w_pop,
    .v_valid(!v_empty), .v_verdict(v_head), .v_pop,
    .m_data, .m_keep, .m_last, .m_valid, .m_ready
  );
endmodule
