// tb_coordinator_ma: the coordinator's match/action stage on its own.
//
// Feeds parsed records (requests, other Paxos messages, non-Paxos frames)
// with random gaps and random stalls on the verdict side. Each verdict is
// compared with a model: a request becomes a 2A rewrite with the next
// instance, round 1 and the coordinator id, and a checksum matching a full
// recomputation; anything else passes unchanged. Checks the one-record-per-
// cycle rate when nothing stalls, and the set_inst load.
module tb_coordinator_ma;
  import caans_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     in_valid = 0, in_ready, out_valid, out_ready = 1;
  parsed_t  in_rec;
  verdict_t out_verdict;
  logic     set_inst = 0;
  logic [31:0] set_inst_value = 0, next_inst;
  int checks = 0, failures = 0, stall_pct = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  coordinator_ma #(.INIT_RND(16'd1), .SWID(16'h0100)) dut (
    .clk, .rst_n, .in_valid, .in_rec, .in_ready, .out_valid, .out_verdict, .out_ready,
    .set_inst, .set_inst_value, .next_inst
  );

  verdict_t exp_q [$];
  logic [31:0] ref_inst = 0;
  int n_out = 0, first_out = -1, last_out = 0;

  always @(negedge clk) begin
    out_ready = ($urandom_range(99) >= stall_pct);
    #1;
    if (out_valid && out_ready) begin
      verdict_t e;
      e = exp_q.pop_front();
      checks++;
      if (out_verdict != e) begin
        failures++;
        $display("FAIL: verdict rewrite=%b inst=%0d csum=%h, expected rewrite=%b inst=%0d csum=%h",
                 out_verdict.rewrite, out_verdict.hdr.inst, out_verdict.udp_csum, e.rewrite, e.hdr.inst, e.udp_csum);
      end
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      n_out++;
    end
  end

  task automatic push(input byte_q_t f, input bit paxos);
    verdict_t e;
    @(negedge clk);
    in_valid = 1;
    in_rec.is_paxos = paxos;
    in_rec.udp_csum = get16(f, 40);
    in_rec.hdr = paxos_hdr_t'(hdr_bits(f));
    e.drop = 0;
    if (paxos && get16(f, 42) == 16'd0) begin
      byte_q_t g;
      g = set16(f, 42, 16'd3);
      g = set32(g, 44, ref_inst);
      g = set16(g, 48, 16'd1);
      g = set16(g, 52, 16'h0100);
      g = fix_csum(g);
      e.rewrite = 1; e.udp_csum = get16(g, 40); e.hdr = paxos_hdr_t'(hdr_bits(g));
      ref_inst++;
    end else begin
      e.rewrite = 0; e.udp_csum = get16(f, 40); e.hdr = paxos_hdr_t'(hdr_bits(f));
    end
    exp_q.push_back(e);
    forever begin
      #4;
      if (in_ready) break;
      @(negedge clk);
    end
    @(posedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // rate: 20 requests back to back, output always ready
    for (int k = 0; k < 20; k++) push(make_frame(16'd0, 32'd0, 16'd0, 16'd0, 16'd0, rand_value()), 1);
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (n_out != 20 || last_out - first_out != 19) begin
      failures++; $display("FAIL: 20 records in %0d cycles", last_out - first_out + 1);
    end
    stall_pct = 40;
    for (int k = 0; k < 300; k++) begin
      int sel;
      byte_q_t f;
      sel = $urandom_range(5);
      if (k == 150) begin
        @(negedge clk) in_valid = 0;
        repeat (5) @(posedge clk);
        @(negedge clk) set_inst = 1; set_inst_value = 32'hFFFF_FFF0;
        @(negedge clk) set_inst = 0;
        ref_inst = 32'hFFFF_FFF0;
      end
      f = make_frame(16'(sel < 3 ? 0 : sel), $urandom, 16'($urandom), 16'd0, 16'd0, rand_value(),
                     16, PORT, sel != 1);
      push(f, sel != 5);
      if ($urandom_range(3) == 0) begin @(negedge clk) in_valid = 0; end
    end
    @(negedge clk) in_valid = 0;
    repeat (50) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || next_inst != ref_inst) begin
      failures++; $display("FAIL: %0d verdicts missing, next_inst %h vs %h", exp_q.size(), next_inst, ref_inst);
    end
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
