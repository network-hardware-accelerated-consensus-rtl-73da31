// tb_wide_bus_rate: the acceptor and coordinator with a 512-bit bus.
//
// The published computed rates for wide-bus FPGA builds reach 150M packets
// per second at 300 MHz, i.e. one 102-byte message every two cycles. With
// DATA_W = 512 a 102-byte frame is two words. This test sends 50 back-to-back
// requests through a coordinator and then 50 back-to-back Phase 2A frames
// through an acceptor, both at 512 bits with the outputs always ready. It
// checks every output frame against the expected bytes and that each
// pipeline delivers one frame every two cycles (the acceptor's two-cycle
// read-modify-write matches the two-word frame exactly).
module tb_wide_bus_rate;
  import tb_pkg::*;

  localparam int DW = 512, BY = DW / 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0][DW-1:0] s_data, m_data;
  logic [1:0][BY-1:0] s_keep, m_keep;
  logic [1:0]         s_last, s_valid, s_ready, m_last, m_valid;
  logic               rdy;
  logic [31:0]        next_inst;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  caans_coordinator #(.DATA_W(DW)) u_coord (
    .clk, .rst_n, .s_data(s_data[0]), .s_keep(s_keep[0]), .s_last(s_last[0]), .s_valid(s_valid[0]),
    .s_ready(s_ready[0]), .m_data(m_data[0]), .m_keep(m_keep[0]), .m_last(m_last[0]),
    .m_valid(m_valid[0]), .m_ready(1'b1), .set_inst(1'b0), .set_inst_value(32'd0), .next_inst
  );

  caans_acceptor #(.DATA_W(DW), .INST_IDX_W(8), .SWID(16'h0005)) u_acc (
    .clk, .rst_n, .s_data(s_data[1]), .s_keep(s_keep[1]), .s_last(s_last[1]), .s_valid(s_valid[1]),
    .s_ready(s_ready[1]), .m_data(m_data[1]), .m_keep(m_keep[1]), .m_last(m_last[1]),
    .m_valid(m_valid[1]), .m_ready(1'b1), .ready_for_traffic(rdy)
  );

  task automatic send(input int p, input byte_q_t f);
    int n = f.size();
    for (int w = 0; w < (n + BY - 1) / BY; w++) begin
      @(negedge clk);
      s_valid[p] = 1;
      s_last[p]  = (w == (n + BY - 1) / BY - 1);
      s_data[p]  = '0;
      s_keep[p]  = '0;
      for (int b = 0; b < BY; b++)
        if (BY*w + b < n) begin s_data[p][8*b +: 8] = f[BY*w + b]; s_keep[p][b] = 1'b1; end
      forever begin
        #4;
        if (s_ready[p]) break;
        @(negedge clk);
      end
      @(posedge clk);
    end
  endtask

  byte_q_t rx [2][$];
  byte_q_t cur [2];
  longint  first [2][$];
  always @(negedge clk) begin
    #1;
    for (int p = 0; p < 2; p++)
      if (m_valid[p]) begin
        if (cur[p].size() == 0) first[p].push_back(cyc);
        for (int b = 0; b < BY; b++) if (m_keep[p][b]) cur[p].push_back(m_data[p][8*b +: 8]);
        if (m_last[p]) begin rx[p].push_back(cur[p]); cur[p] = {}; end
      end
  end

  byte_q_t exp_f [2][$];

  initial begin
    s_valid = '0; s_last = '0; s_data = '0; s_keep = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rdy);
    for (int k = 0; k < 50; k++) begin
      byte_q_t f, e;
      f = make_frame(16'd0, 32'd0, 16'd0, 16'd0, 16'd0, rand_value());
      e = set16(f, 42, 16'd3); e = set32(e, 44, 32'(k)); e = set16(e, 48, 16'd1); e = set16(e, 52, 16'h0100);
      exp_f[0].push_back(fix_csum(e));
      send(0, f);
    end
    @(negedge clk) s_valid[0] = 0;
    for (int k = 0; k < 50; k++) begin
      byte_q_t f, e;
      f = make_frame(16'd3, 32'(k), 16'd1, 16'd0, 16'h0100, rand_value());
      e = set16(f, 42, 16'd4); e = set16(e, 50, 16'd1); e = set16(e, 52, 16'h0005);
      exp_f[1].push_back(fix_csum(e));
      send(1, f);
    end
    @(negedge clk) s_valid[1] = 0;
    repeat (50) @(posedge clk);
    for (int p = 0; p < 2; p++) begin
      checks++;
      if (rx[p].size() != 50) begin failures++; $display("FAIL: pipeline %0d delivered %0d frames", p, rx[p].size()); end
      for (int i = 0; i < rx[p].size() && i < 50; i++) begin
        checks++;
        if (rx[p][i] != exp_f[p][i]) begin failures++; $display("FAIL: pipeline %0d frame %0d differs", p, i); end
      end
      if (first[p].size() == 50) begin
        checks++;
        if (first[p][49] - first[p][0] != 2 * 49) begin
          failures++; $display("FAIL: pipeline %0d: 50 frames in %0d cycles, expected %0d", p, first[p][49] - first[p][0], 2 * 49);
        end
      end
    end
    $display("wide bus: coordinator %0d frames, acceptor %0d frames, 2 cycles per frame", rx[0].size(), rx[1].size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
