// stream_bcast: copies one word stream to N receivers.
//
// Each word is offered to all N outputs at once. A receiver that takes the
// word early is marked done and is not offered it again; the input word is
// released once every receiver has taken it. The outputs may therefore run
// up to one word apart, and a slow receiver throttles the others. In the
// deployment this replaces the network fan-out of the coordinator's Phase 2A
// message to every acceptor; doing it on-chip is this design's choice.
// Combinational path from m_ready to s_ready; no added latency.
// Data, keep and last are wired through to every output unchanged.
module stream_bcast #(
  parameter int N      = 3,
  parameter int DATA_W = 64
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
  output logic [N-1:0]        m_valid,
  input  logic [N-1:0]        m_ready
);
  logic [N-1:0] done;

  assign m_data  = s_data;
  assign m_keep  = s_keep;
  assign m_last  = s_last;
  assign m_valid = {N{s_valid}} & ~done;
  assign s_ready = &(done | m_ready);

  always_ff @(posedge clk) begin
    if (!rst_n)                   done <= '0;
    else if (s_valid && s_ready)  done <= '0;
    else if (s_valid)             done <= done | (m_valid & m_ready);
  end
endmodule
