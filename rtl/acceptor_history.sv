// acceptor_history: the acceptor's memory of past votes.
//
// One entry per consensus instance holds the highest round the acceptor has
// promised or voted in (rnd), the round of its vote (vrnd) and the value it
// voted for. The table is addressed by the low INST_IDX_W bits of the
// instance number, so it is reused as a ring: once instance numbers wrap
// around the table, older instances are overwritten and can no longer be
// recovered. The default of 2^16 entries matches the 65,535 instances of the
// paper's FPGA build; at 36 bytes per entry that is about 2.4 MB of on-chip
// RAM.
//
// After reset the table clears itself, one entry per cycle, to rnd=INIT_RND,
// vrnd=0 (no vote) and value=0; init_done rises when all 2^INST_IDX_W entries
// are written. Starting every rnd at the coordinator's initial round stands
// for a Phase 1 that all acceptors are assumed to have run beforehand, as the
// paper describes. The clearing sweep and the 0 = "no vote" convention are
// this design's choices.
//
// Ports: one synchronous read port (data one cycle after rd_en, held until
// the next read) and one write port. Writes are ignored until init_done.
module acceptor_history
  import caans_pkg::*;
#(
  parameter int          INST_IDX_W = 16,
  parameter logic [15:0] INIT_RND   = 16'd1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  rd_en,
  input  logic [INST_IDX_W-1:0] rd_addr,
  output hist_entry_t           rd_data,
  input  logic                  wr_en,
  input  logic [INST_IDX_W-1:0] wr_addr,
  input  hist_entry_t           wr_data,
  output logic                  init_done
);
  localparam int ENTRIES = 1 << INST_IDX_W;

  hist_entry_t           mem [ENTRIES];
  logic [INST_IDX_W-1:0] init_addr;
  hist_entry_t           init_entry;

  always_comb begin
    init_entry       = '0;
    init_entry.rnd   = INIT_RND;
  end

  always_ff @(posedge clk) begin
    if (!init_done)  mem[init_addr] <= init_entry;
    else if (wr_en)  mem[wr_addr]   <= wr_data;
    if (rd_en)       rd_data        <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      init_addr <= '0;
      init_done <= 1'b0;
    end else if (!init_done) begin
      init_addr <= init_addr + 1'b1;
      if (init_addr == INST_IDX_W'(ENTRIES - 1)) init_done <= 1'b1;
    end
  end
endmodule
