// stream_merge: two word streams into one, a whole frame at a time.
//
// In front of each acceptor, frames from the primary coordinator (s0) and
// from the backup path (s1: a backup coordinator, or recover traffic) share
// the acceptor's input. The arbiter grants one input at the start of a frame
// and holds the grant until that frame's last word has passed, so frames are
// never interleaved. When both inputs wait, the one not served last goes
// first (round robin). The paper shows both paths reaching the acceptors but
// not how they share a link; this arbiter is this design's choice.
// Combinational through path; no added latency.
module stream_merge #(
  parameter int DATA_W = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [DATA_W-1:0]   s0_data,
  input  logic [DATA_W/8-1:0] s0_keep,
  input  logic                s0_last,
  input  logic                s0_valid,
  output logic                s0_ready,
  input  logic [DATA_W-1:0]   s1_data,
  input  logic [DATA_W/8-1:0] s1_keep,
  input  logic                s1_last,
  input  logic                s1_valid,
  output logic                s1_ready,
  output logic [DATA_W-1:0]   m_data,
  output logic [DATA_W/8-1:0] m_keep,
  output logic                m_last,
  output logic                m_valid,
  input  logic                m_ready
);
  logic in_frame;   // a frame is being passed
  logic sel_q;      // input of the frame being passed
  logic last_q;     // input served last
  logic sel;

  always_comb begin
    if (in_frame)                 sel = sel_q;
    else if (s0_valid && s1_valid) sel = !last_q;
    else                          sel = s1_valid;
  end

  assign m_data   = sel ? s1_data  : s0_data;
  assign m_keep   = sel ? s1_keep  : s0_keep;
  assign m_last   = sel ? s1_last  : s0_last;
  assign m_valid  = sel ? s1_valid : s0_valid;
  assign s0_ready = !sel && m_ready;
  assign s1_ready =  sel && m_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_frame <= 1'b0;
      sel_q    <= 1'b0;
      last_q   <= 1'b1;
    end else if (m_valid && m_ready) begin
      in_frame <= !m_last;
      sel_q    <= sel;
      if (m_last) last_q <= sel;
    end
  end
endmodule
