// tb_caans_top: the whole hardware deployment, one coordinator and three
// acceptors, at its default sizes (65,536-instance histories).
//
// The testbench plays the software roles around the hardware: a proposer
// that submits requests, a backup coordinator and a recovering learner that
// use the backup path, and the learners, which collect the Phase 2B votes
// from the three acceptor ports and deliver a value once two of the three
// acceptors (a majority) voted for it. The run goes through:
//   - 30 proposer requests, sequenced by the coordinator into instances 0..29
//   - a stale Phase 2A (round 0, below the initial round 1) and a non-Paxos
//     frame on the backup path while requests flow, so both arbiters
//     see contention; the stale message must be dropped by every acceptor
//   - coordinator fail-over: the counter is loaded with 100 and 10 more
//     requests must land in instances 100..109
//   - a software coordinator sending Phase 2A for instances 30..34 on the
//     backup path
//   - recover: Phase 1A with round 2 for a decided instance (every acceptor
//     must answer 1B with vrnd 1 and the decided value) and for an unused
//     instance (vrnd 0: nothing was accepted, the learner decides no-op)
//   - loss of an acceptor: for each acceptor in turn, the votes of the
//     other two alone must still decide every instance
// Random back-pressure is applied on the learner ports. The first request
// is timed end to end: 13 cycles in the coordinator plus 14 in an acceptor.
// Each mechanism is counted, and one that never happened is a failure.
module tb_caans_top;
  import tb_pkg::*;

  localparam int NA = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0][63:0] in_data;
  logic [1:0][7:0]  in_keep;
  logic [1:0]       in_last, in_valid, in_ready;
  logic [NA-1:0][63:0] lrn_data;
  logic [NA-1:0][7:0]  lrn_keep;
  logic [NA-1:0]       lrn_last, lrn_valid, lrn_ready;
  logic        set_inst = 0;
  logic [31:0] set_inst_value = 0, next_inst;
  logic [NA-1:0] acc_ready;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  caans_top dut (
    .clk, .rst_n,
    .prop_data(in_data[0]), .prop_keep(in_keep[0]), .prop_last(in_last[0]),
    .prop_valid(in_valid[0]), .prop_ready(in_ready[0]),
    .bk_data(in_data[1]), .bk_keep(in_keep[1]), .bk_last(in_last[1]),
    .bk_valid(in_valid[1]), .bk_ready(in_ready[1]),
    .lrn_data, .lrn_keep, .lrn_last, .lrn_valid, .lrn_ready,
    .set_inst, .set_inst_value, .next_inst, .acc_ready
  );

  // ---------------- drivers ----------------
  longint tx_first [2][$];

  task automatic send(input int p, input byte_q_t f);
    int n = f.size();
    for (int w = 0; w < (n + 7) / 8; w++) begin
      @(negedge clk);
      in_valid[p] = 1;
      in_last[p]  = (w == (n + 7) / 8 - 1);
      in_data[p]  = '0;
      in_keep[p]  = '0;
      for (int b = 0; b < 8; b++)
        if (8*w + b < n) begin
          in_data[p][8*b +: 8] = f[8*w + b];
          in_keep[p][b] = 1'b1;
        end
      forever begin
        #4;
        if (in_ready[p]) break;
        @(negedge clk);
      end
      if (w == 0) tx_first[p].push_back(cyc);
      @(posedge clk);
    end
  endtask

  task automatic idle(input int p);
    @(negedge clk);
    in_valid[p] = 0;
  endtask

  // ---------------- learner ports ----------------
  int ready_pct = 100;
  byte_q_t rx [NA][$];
  byte_q_t rx_cur [NA];
  longint  rx_first [NA][$];
  int n_backpressure = 0, n_contention = 0, n_bk_contention = 0;

  always @(negedge clk) begin
    for (int a = 0; a < NA; a++) lrn_ready[a] = ($urandom_range(99) < ready_pct);
    #1;
    for (int a = 0; a < NA; a++) begin
      if (lrn_valid[a] && !lrn_ready[a]) n_backpressure++;
      if (lrn_valid[a] && lrn_ready[a]) begin
        if (rx_cur[a].size() == 0) rx_first[a].push_back(cyc);
        for (int b = 0; b < 8; b++) if (lrn_keep[a][b]) rx_cur[a].push_back(lrn_data[a][8*b +: 8]);
        if (lrn_last[a]) begin
          rx[a].push_back(rx_cur[a]);
          rx_cur[a] = {};
        end
      end
    end
    // both inputs of acceptor 0's arbiter want the link
    if (dut.cb_valid[0] && dut.bb_valid[0]) n_contention++;
    if (in_valid[0] && in_valid[1]) n_bk_contention++;
  end

  // ---------------- scenario ----------------
  logic [255:0] submitted [int];   // instance -> value the hardware must decide
  int n_acc_lost = 0;
  int n_seq = 0, n_stale = 0, n_failover = 0, n_sw_coord = 0, n_recover = 0, n_nonpaxos = 0;

  initial begin
    int stale_seen, nonpaxos_seen;
    logic [255:0] v;
    in_valid = '0; in_last = '0; in_data = '0; in_keep = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&acc_ready);
    @(negedge clk);

    // first request alone, output always ready: end-to-end latency
    v = rand_value();
    submitted[0] = v;
    send(0, make_frame(16'd0, 32'd0, 16'd0, 16'd0, 16'd0, v));
    idle(0);
    repeat (60) @(posedge clk);
    checks++;
    if (rx_first[0].size() != 1 || rx_first[0][0] - tx_first[0][0] != 27) begin
      failures++;
      $display("FAIL: end-to-end latency %0d, expected 27",
               rx_first[0].size() ? rx_first[0][0] - tx_first[0][0] : -1);
    end

    ready_pct = 70;
    fork
      begin
        for (int i = 1; i < 30; i++) begin
          logic [255:0] vv;
          vv = rand_value();
          submitted[i] = vv;
          send(0, make_frame(16'd0, 32'd0, 16'd0, 16'd0, 16'd0, vv));
          n_seq++;
        end
        idle(0);
      end
      begin
        repeat (40) @(posedge clk);
        send(1, make_frame(16'd3, 32'd3, 16'd0, 16'd0, 16'h0999, rand_value()));   // stale
        n_stale++;
        send(1, make_frame(16'd3, 32'd3, 16'd0, 16'd0, 16'h0999, rand_value(), 16, 16'h5555));
        n_nonpaxos++;
        idle(1);
      end
    join
    repeat (300) @(posedge clk);

    // coordinator fail-over
    @(negedge clk); set_inst = 1; set_inst_value = 32'd100;
    @(negedge clk); set_inst = 0;
    n_failover++;
    for (int i = 100; i < 110; i++) begin
      v = rand_value();
      submitted[i] = v;
      send(0, make_frame(16'd0, 32'd0, 16'd0, 16'd0, 16'd0, v));
      n_seq++;
    end
    idle(0);

    // software coordinator on the backup path
    for (int i = 30; i < 35; i++) begin
      v = rand_value();
      submitted[i] = v;
      send(1, make_frame(16'd3, 32'(i), 16'd1, 16'd0, 16'h0300, v));
      n_sw_coord++;
    end
    // recover a decided instance and an unused one
    send(1, make_frame(16'd1, 32'd5, 16'd2, 16'd0, 16'h0400, '0));
    send(1, make_frame(16'd1, 32'd60, 16'd2, 16'd0, 16'h0400, '0));
    n_recover += 2;
    idle(1);
    repeat (600) @(posedge clk);

    // ---------------- learner: votes and quorum ----------------
    begin
      int votes [int];
      logic [255:0] vote_val [int][int];
      int got_1b [int];
      stale_seen = 0;
      nonpaxos_seen = 0;
      for (int a = 0; a < NA; a++) begin
        foreach (rx[a][k]) begin
          byte_q_t f;
          logic [31:0] inst;
          f = rx[a][k];
          checks++;
          if (!csum_ok(f)) begin failures++; $display("FAIL: acceptor %0d frame %0d checksum", a, k); end
          if (get16(f, 36) != PORT) begin nonpaxos_seen++; continue; end
          inst = get32(f, 44);
          if (get16(f, 42) == 16'd4) begin
            checks++;
            if (get16(f, 52) != 16'(a + 1) || get16(f, 50) != get16(f, 48)) begin
              failures++; $display("FAIL: 2B swid/vrnd from acceptor %0d", a);
            end
            if (get16(f, 48) == 16'd0) stale_seen++;
            if (!votes.exists(int'(inst))) votes[int'(inst)] = 0;
            votes[int'(inst)]++;
            vote_val[int'(inst)][a] = get_value(f);
          end else if (get16(f, 42) == 16'd2) begin
            checks++;
            if (!got_1b.exists(int'(inst))) got_1b[int'(inst)] = 0;
            got_1b[int'(inst)]++;
            if (inst == 32'd5 && (get16(f, 50) != 16'd1 || get_value(f) != submitted[5])) begin
              failures++; $display("FAIL: recover of instance 5 from acceptor %0d", a);
            end
            if (inst == 32'd60 && (get16(f, 50) != 16'd0 || get_value(f) != '0)) begin
              failures++; $display("FAIL: recover of unused instance from acceptor %0d", a);
            end
          end else begin
            failures++; $display("FAIL: unexpected msgtype %0d", get16(f, 42));
          end
        end
      end
      foreach (submitted[i]) begin
        int agree;
        agree = 0;
        checks++;
        if (votes.exists(i))
          for (int a = 0; a < NA; a++)
            if (vote_val[i].exists(a) && vote_val[i][a] == submitted[i]) agree++;
        if (agree < 2) begin failures++; $display("FAIL: instance %0d not decided (%0d votes)", i, agree); end
      end
      // one acceptor lost: the learner must still decide every instance
      // from the votes of the remaining ones
      for (int lost = 0; lost < NA; lost++) begin
        n_acc_lost++;
        foreach (submitted[i]) begin
          int agree;
          agree = 0;
          checks++;
          if (votes.exists(i))
            for (int a = 0; a < NA; a++)
              if (a != lost && vote_val[i].exists(a) && vote_val[i][a] == submitted[i]) agree++;
          if (agree < NA / 2 + 1) begin
            failures++; $display("FAIL: acceptor %0d lost, instance %0d not decided", lost, i);
          end
        end
      end
      checks++;
      if (votes.size() != submitted.size()) begin
        failures++; $display("FAIL: votes for %0d instances, expected %0d", votes.size(), submitted.size());
      end
      checks++;
      if (stale_seen != 0) begin failures++; $display("FAIL: stale 2A was voted on"); end
      checks++;
      if (!got_1b.exists(5) || got_1b[5] != NA || !got_1b.exists(60) || got_1b[60] != NA) begin
        failures++; $display("FAIL: recover answers missing");
      end
      checks++;
      if (nonpaxos_seen != NA) begin failures++; $display("FAIL: non-Paxos frame seen %0d times", nonpaxos_seen); end
      checks++;
      if (next_inst != 32'd110) begin failures++; $display("FAIL: next_inst %0d", next_inst); end
    end

    $display("mechanisms: sequenced=%0d stale_dropped=%0d failover=%0d sw_coord_2a=%0d recover_1a=%0d nonpaxos=%0d arbiter_contention=%0d learner_backpressure=%0d acceptor_lost=%0d",
             n_seq, n_stale, n_failover, n_sw_coord, n_recover, n_nonpaxos, n_contention, n_backpressure, n_acc_lost);
    checks++;
    if (n_seq == 0 || n_stale == 0 || n_failover == 0 || n_sw_coord == 0 || n_recover == 0 ||
        n_nonpaxos == 0 || n_contention == 0 || n_backpressure == 0 || n_acc_lost == 0) begin
      failures++; $display("FAIL: a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
