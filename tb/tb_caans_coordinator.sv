// tb_caans_coordinator: end-to-end test of the coordinator pipeline.
//
// Sends proposer requests mixed with other Paxos messages and non-Paxos
// frames, with random back-pressure on the output. A reference coordinator
// written here predicts each output frame byte for byte: requests become
// Phase 2A messages with consecutive instance numbers, round 1 and the
// coordinator's id, with a fully recomputed UDP checksum; everything else is
// unchanged. Midway the instance counter is loaded through set_inst, as a
// backup coordinator would do. A last phase checks the first-word latency
// (13 cycles) and one word per cycle for back-to-back requests.
module tb_caans_coordinator;
  import tb_pkg::*;

  localparam logic [15:0] SWID = 16'h0100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [63:0] s_data, m_data;
  logic [7:0]  s_keep, m_keep;
  logic        s_last, s_valid, s_ready, m_last, m_valid, m_ready;
  logic        set_inst = 0;
  logic [31:0] set_inst_value = 0, next_inst;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  caans_coordinator dut (
    .clk, .rst_n, .s_data, .s_keep, .s_last, .s_valid, .s_ready,
    .m_data, .m_keep, .m_last, .m_valid, .m_ready,
    .set_inst, .set_inst_value, .next_inst
  );

  // ---------------- stream driver and monitor ----------------
  int ready_pct = 100;
  byte_q_t rx_frames [$];
  byte_q_t rx_cur;
  longint  rx_first_cyc [$];
  longint  tx_first_cyc [$];

  task automatic send(input byte_q_t f);
    int n = f.size();
    for (int w = 0; w < (n + 7) / 8; w++) begin
      @(negedge clk);
      s_valid = 1;
      s_last  = (w == (n + 7) / 8 - 1);
      s_data  = '0;
      s_keep  = '0;
      for (int b = 0; b < 8; b++)
        if (8*w + b < n) begin
          s_data[8*b +: 8] = f[8*w + b];
          s_keep[b] = 1'b1;
        end
      forever begin
        #4;
        if (s_ready) break;
        @(negedge clk);
      end
      if (w == 0) tx_first_cyc.push_back(cyc);
      @(posedge clk);
    end
  endtask

  task automatic idle();
    @(negedge clk);
    s_valid = 0;
  endtask

  always @(negedge clk) begin
    m_ready = ($urandom_range(99) < ready_pct);
    #1;
    if (m_valid && m_ready) begin
      if (rx_cur.size() == 0) rx_first_cyc.push_back(cyc);
      for (int b = 0; b < 8; b++) if (m_keep[b]) rx_cur.push_back(m_data[8*b +: 8]);
      if (m_last) begin
        rx_frames.push_back(rx_cur);
        rx_cur = {};
      end
    end
  end

  // ---------------- reference coordinator ----------------
  logic [31:0] ref_inst = 0;
  int n_2a = 0, n_fwd = 0;

  function automatic bit ref_coord(input byte_q_t f, output byte_q_t e);
    e = f;
    if (get16(f, 36) == PORT && get16(f, 42) == 16'd0) begin
      e = set16(e, 42, 16'd3);
      e = set32(e, 44, ref_inst);
      e = set16(e, 48, 16'd1);
      e = set16(e, 52, SWID);
      e = fix_csum(e);
      ref_inst++;
      n_2a++;
    end else n_fwd++;
    return 1;
  endfunction

  byte_q_t exp_frames [$];

  task automatic send_and_model(input byte_q_t f);
    byte_q_t e;
    if (ref_coord(f, e)) exp_frames.push_back(e);
    send(f);
  endtask

  task automatic compare_all();
    if (rx_frames.size() != exp_frames.size()) begin
      failures++;
      $display("FAIL: got %0d frames, expected %0d", rx_frames.size(), exp_frames.size());
    end
    for (int i = 0; i < rx_frames.size() && i < exp_frames.size(); i++) begin
      checks++;
      if (rx_frames[i] != exp_frames[i]) begin
        failures++;
        $display("FAIL: frame %0d differs (msgtype %h/%h inst %h)", i,
                 get16(rx_frames[i], 42), get16(exp_frames[i], 42), get32(exp_frames[i], 44));
      end
      checks++;
      if (!csum_ok(rx_frames[i])) begin failures++; $display("FAIL: frame %0d bad UDP checksum", i); end
    end
    rx_frames = {};
    exp_frames = {};
  endtask

  initial begin
    s_valid = 0; s_last = 0; s_data = '0; s_keep = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // Phase 1: requests and other traffic with back-pressure.
    ready_pct = 60;
    for (int k = 0; k < 200; k++) begin
      int sel;
      byte_q_t f;
      sel = $urandom_range(9);
      if (k == 100) begin
        // fail-over: continue from instance 5000
        idle();
        repeat (60) @(posedge clk);
        @(negedge clk); set_inst = 1; set_inst_value = 32'd5000;
        @(negedge clk); set_inst = 0;
        checks++;
        if (next_inst != 32'd5000) begin failures++; $display("FAIL: set_inst"); end
        ref_inst = 32'd5000;
      end
      if (sel < 6)      f = make_frame(16'd0, 32'($urandom), 16'd0, 16'd0, 16'h0, rand_value());
      else if (sel < 7) f = make_frame(16'd0, 32'd0, 16'd0, 16'd0, 16'h0, rand_value(), 16, PORT, 0);
      else if (sel < 8) f = make_frame(16'd1, 32'd7, 16'd3, 16'd0, 16'h0, '0);
      else              f = make_frame(16'd0, 32'd0, 16'd0, 16'd0, 16'h0, rand_value(), 16, 16'h4444);
      send_and_model(f);
    end
    idle();
    repeat (400) @(posedge clk);
    compare_all();
    checks++;
    if (n_2a == 0 || n_fwd == 0) begin failures++; $display("FAIL: coverage"); end
    checks++;
    if (next_inst != ref_inst) begin failures++; $display("FAIL: next_inst %0d != %0d", next_inst, ref_inst); end

    // Phase 2: latency and rate, output always ready.
    ready_pct = 100;
    rx_first_cyc = {};
    tx_first_cyc = {};
    for (int k = 0; k < 20; k++)
      send_and_model(make_frame(16'd0, 32'd0, 16'd0, 16'd0, 16'h0, rand_value()));
    idle();
    repeat (100) @(posedge clk);
    compare_all();
    checks++;
    if (rx_first_cyc.size() == 20 && tx_first_cyc.size() == 20) begin
      if (rx_first_cyc[0] - tx_first_cyc[0] != 13) begin
        failures++;
        $display("FAIL: latency %0d cycles, expected 13", rx_first_cyc[0] - tx_first_cyc[0]);
      end
      checks++;
      if (rx_first_cyc[19] - rx_first_cyc[0] != 19 * 13) begin
        failures++;
        $display("FAIL: 20 frames took %0d cycles, expected %0d", rx_first_cyc[19] - rx_first_cyc[0], 19 * 13);
      end
    end else begin
      failures++;
      $display("FAIL: timing phase lost frames");
    end
    $display("coordinator: 2A=%0d forwarded=%0d", n_2a, n_fwd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
