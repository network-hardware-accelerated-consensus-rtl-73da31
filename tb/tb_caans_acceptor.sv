// tb_caans_acceptor: end-to-end test of one acceptor pipeline.
//
// Sends a random mix of Phase 1A and Phase 2A frames over a few instances
// and rounds, plus non-Paxos frames, with random back-pressure on the output.
// A reference acceptor written here predicts every output frame byte for
// byte (including a fully recomputed UDP checksum) or predicts that the frame
// is dropped. A second phase sends back-to-back 2A frames with the output
// always ready and checks the latency of the first word (14 cycles) and that
// frames then stream at one word per cycle (13 cycles per 102-byte frame).
// The history is reduced to 2^8 entries so the clearing sweep is short; the
// instances used cross 256 to exercise the ring addressing.
module tb_caans_acceptor;
  import tb_pkg::*;

  localparam int IDXW = 8;
  localparam logic [15:0] SWID = 16'h0007;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [63:0] s_data, m_data;
  logic [7:0]  s_keep, m_keep;
  logic        s_last, s_valid, s_ready, m_last, m_valid, m_ready;
  logic        rdy;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  caans_acceptor #(.INST_IDX_W(IDXW), .SWID(SWID)) dut (
    .clk, .rst_n, .s_data, .s_keep, .s_last, .s_valid, .s_ready,
    .m_data, .m_keep, .m_last, .m_valid, .m_ready, .ready_for_traffic(rdy)
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

  // ---------------- reference acceptor ----------------
  logic [15:0]  R [int];
  logic [15:0]  V [int];
  logic [255:0] VAL [int];
  int n_1b = 0, n_2b = 0, n_drop = 0, n_fwd = 0;

  function automatic bit ref_acceptor(input byte_q_t f, output byte_q_t e);
    logic [15:0] mt, rnd;
    int idx;
    e = f;
    if (get16(f, 36) != PORT) begin n_fwd++; return 1; end
    mt  = get16(f, 42);
    idx = int'(get32(f, 44) & ((32'd1 << IDXW) - 1));
    rnd = get16(f, 48);
    if (!R.exists(idx)) begin R[idx] = 16'd1; V[idx] = 0; VAL[idx] = 0; end
    if (mt == 16'd1) begin
      if (rnd > R[idx]) begin
        R[idx] = rnd;
        e = set16(e, 42, 16'd2);
        e = set16(e, 50, V[idx]);
        e = set_value(e, VAL[idx]);
        e = set16(e, 52, SWID);
        e = fix_csum(e);
        n_1b++;
        return 1;
      end
      n_drop++;
      return 0;
    end else if (mt == 16'd3) begin
      if (rnd >= R[idx]) begin
        R[idx] = rnd; V[idx] = rnd; VAL[idx] = get_value(f);
        e = set16(e, 42, 16'd4);
        e = set16(e, 50, rnd);
        e = set16(e, 52, SWID);
        e = fix_csum(e);
        n_2b++;
        return 1;
      end
      n_drop++;
      return 0;
    end
    n_fwd++;
    return 1;
  endfunction

  byte_q_t exp_frames [$];

  task automatic send_and_model(input byte_q_t f);
    byte_q_t e;
    if (ref_acceptor(f, e)) exp_frames.push_back(e);
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
    wait (rdy);
    checks++;
    if (cyc > 300) begin failures++; $display("FAIL: clearing took %0d cycles", cyc); end

    // Phase 1: random protocol traffic with back-pressure.
    ready_pct = 60;
    for (int k = 0; k < 300; k++) begin
      int sel;
      logic [31:0] inst;
      logic [15:0] rnd;
      byte_q_t f;
      sel  = $urandom_range(9);
      inst = 32'd250 + 32'($urandom_range(11));   // crosses the 256 wrap
      rnd  = 16'(k / 30 + $urandom_range(3));
      if (sel < 5)      f = make_frame(16'd3, inst, rnd, 16'd0, 16'h0100, rand_value());
      else if (sel < 8) f = make_frame(16'd1, inst, rnd, 16'd0, 16'h0200, '0);
      else if (sel < 9) f = make_frame(16'd3, inst, rnd, 16'd0, 16'h0100, rand_value(), 16, 16'h1111);
      else              f = make_frame(16'd3, inst, rnd, 16'd0, 16'h0100, rand_value(), 16, PORT, 0);
      send_and_model(f);
    end
    // a short non-Paxos frame (60 bytes) must pass untouched
    begin
      byte_q_t f;
      f = make_frame(16'd3, 32'd1, 16'd1, 16'd0, 16'd0, '0, 0, 16'h2222, 0);
      f = f[0:59];
      send_and_model(f);
    end
    idle();
    repeat (400) @(posedge clk);
    compare_all();
    checks++;
    if (n_1b == 0 || n_2b == 0 || n_drop == 0 || n_fwd == 0) begin
      failures++;
      $display("FAIL: coverage 1B=%0d 2B=%0d drop=%0d fwd=%0d", n_1b, n_2b, n_drop, n_fwd);
    end

    // Phase 2: latency and rate, output always ready.
    ready_pct = 100;
    rx_first_cyc = {};
    tx_first_cyc = {};
    for (int k = 0; k < 20; k++)
      send_and_model(make_frame(16'd3, 32'd1000 + 32'(k), 16'd100, 16'd0, 16'h0100, rand_value()));
    idle();
    repeat (100) @(posedge clk);
    compare_all();
    checks++;
    if (rx_first_cyc.size() == 20 && tx_first_cyc.size() == 20) begin
      if (rx_first_cyc[0] - tx_first_cyc[0] != 14) begin
        failures++;
        $display("FAIL: latency %0d cycles, expected 14", rx_first_cyc[0] - tx_first_cyc[0]);
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
    $display("acceptor: 1B=%0d 2B=%0d dropped=%0d forwarded=%0d", n_1b, n_2b, n_drop, n_fwd);
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
