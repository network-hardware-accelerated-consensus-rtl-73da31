// tb_pkt_deparser: rewriting, dropping and forwarding in the deparser.
//
// Plays the packet buffer and the verdict queue: frames are offered word by
// word with random gaps, and each frame's verdict arrives after a random
// delay. Verdicts are random: drop, forward unchanged, or rewrite with a new
// random header and checksum. The output is compared byte for byte with the
// input frame with bytes 40..85 replaced (rewrite), with the input (forward),
// or must not appear (drop). No word may leave before its verdict. With
// everything available, frames must leave at one word per cycle.
module tb_pkt_deparser;
  import caans_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        w_valid = 0, w_last = 0, w_pop, v_valid = 0, v_pop, m_last, m_valid, m_ready = 1;
  logic [63:0] w_data = '0, m_data;
  logic [7:0]  w_keep = '0, m_keep;
  verdict_t    v_verdict;
  int checks = 0, failures = 0, ready_pct = 100, gap_pct = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  pkt_deparser dut (.clk, .rst_n, .w_valid, .w_data, .w_keep, .w_last, .w_pop,
                    .v_valid, .v_verdict, .v_pop, .m_data, .m_keep, .m_last, .m_valid, .m_ready);

  byte_q_t exp_f [$], rx_f [$], cur;
  int n_drop = 0, n_rw = 0, n_fwd = 0, out_words = 0, first_out = -1, last_out = 0;

  always @(negedge clk) begin
    m_ready = ($urandom_range(99) < ready_pct);
    #1;
    checks++;
    if (m_valid && !v_valid) begin failures++; $display("FAIL: word out without verdict"); end
    if (m_valid && m_ready) begin
      for (int b = 0; b < 8; b++) if (m_keep[b]) cur.push_back(m_data[8*b +: 8]);
      if (m_last) begin rx_f.push_back(cur); cur = {}; end
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      out_words++;
    end
  end

  // verdict side: present a verdict some cycles after the frame's first word
  verdict_t vq [$];
  always @(negedge clk) begin
    if (!v_valid && vq.size() > 0 && $urandom_range(99) >= gap_pct) begin
      v_valid = 1;
      v_verdict = vq.pop_front();
    end
    #2;
    if (v_valid && v_pop) begin
      @(posedge clk);
      #1 v_valid = 0;
    end
  end

  task automatic frame(input byte_q_t f, input int kind);
    int n = f.size();
    verdict_t v;
    v = '0;
    v.hdr = paxos_hdr_t'(hdr_bits(f));
    if (kind == 0) begin v.drop = 1; n_drop++; end
    else if (kind == 1) begin
      logic [351:0] nb;
      byte_q_t g;
      for (int i = 0; i < 11; i++) nb[32*i +: 32] = $urandom;
      g = set16(put_hdr_bits(f, nb), 40, 16'($urandom));
      v.rewrite = 1; v.hdr = paxos_hdr_t'(nb); v.udp_csum = get16(g, 40);
      exp_f.push_back(g);
      n_rw++;
    end else begin exp_f.push_back(f); n_fwd++; end
    vq.push_back(v);
    for (int w = 0; w < (n + 7) / 8; w++) begin
      @(negedge clk);
      while ($urandom_range(99) < gap_pct) begin w_valid = 0; @(negedge clk); end
      w_valid = 1;
      w_last  = (w == (n + 7) / 8 - 1);
      w_data  = '0;
      w_keep  = '0;
      for (int b = 0; b < 8; b++)
        if (8*w + b < n) begin w_data[8*b +: 8] = f[8*w + b]; w_keep[b] = 1'b1; end
      forever begin
        #4;
        if (w_pop) break;
        @(negedge clk);
      end
      @(posedge clk);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // rate: 10 forwarded 102-byte frames, everything available
    for (int k = 0; k < 10; k++) frame(make_frame(16'd4, 32'(k), 16'd1, 16'd1, 16'd1, rand_value()), 2);
    @(negedge clk) w_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (out_words != 130 || last_out - first_out != 129) begin
      failures++; $display("FAIL: 130 words took %0d cycles", last_out - first_out + 1);
    end
    ready_pct = 70;
    gap_pct = 20;
    for (int k = 0; k < 300; k++)
      frame(make_frame(16'd3, $urandom, 16'd1, 16'd0, 16'd0, rand_value(), $urandom_range(30)),
            $urandom_range(2));
    @(negedge clk) w_valid = 0;
    repeat (50) @(posedge clk);
    checks++;
    if (rx_f.size() != exp_f.size()) begin failures++; $display("FAIL: %0d frames, expected %0d", rx_f.size(), exp_f.size()); end
    for (int i = 0; i < rx_f.size() && i < exp_f.size(); i++) begin
      checks++;
      if (rx_f[i] != exp_f[i]) begin failures++; $display("FAIL: frame %0d differs", i); end
    end
    checks++;
    if (n_drop == 0 || n_rw == 0) begin failures++; $display("FAIL: coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
