// tb_acceptor_ma: the acceptor's match/action stage with its history, on
// its own, with a 16-entry table.
//
// Waits for the clearing sweep (busy must be high until then and no record
// may be taken), then feeds random 1A/2A records and other records over a
// few instances, with random stalls on the verdict side. Each verdict is
// compared with a reference acceptor: accept/drop decision, rewritten header
// and a checksum equal to a full recomputation. Also checks that a 1A/2A
// record takes two cycles when nothing stalls.
module tb_acceptor_ma;
  import caans_pkg::*;
  import tb_pkg::*;

  localparam int W = 4;
  localparam logic [15:0] SW = 16'h0002;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     in_valid = 0, in_ready, out_valid, out_ready = 1, busy;
  parsed_t  in_rec;
  verdict_t out_verdict;
  int checks = 0, failures = 0, stall_pct = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  acceptor_ma #(.INST_IDX_W(W), .INIT_RND(16'd1), .SWID(SW)) dut (
    .clk, .rst_n, .in_valid, .in_rec, .in_ready, .out_valid, .out_verdict, .out_ready, .busy
  );

  logic [15:0]  R [16], V [16];
  logic [255:0] VAL [16];
  verdict_t exp_q [$];
  int n_out = 0, first_out = -1, last_out = 0, n_acc = 0, n_drop = 0;

  always @(negedge clk) begin
    out_ready = ($urandom_range(99) >= stall_pct);
    #1;
    if (out_valid && out_ready) begin
      verdict_t e;
      e = exp_q.pop_front();
      checks++;
      if (out_verdict.drop != e.drop || (!e.drop && out_verdict != e)) begin
        failures++;
        $display("FAIL: drop=%b rewrite=%b type=%0d, expected drop=%b rewrite=%b type=%0d",
                 out_verdict.drop, out_verdict.rewrite, out_verdict.hdr.msgtype, e.drop, e.rewrite, e.hdr.msgtype);
      end
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      n_out++;
    end
  end

  task automatic push(input byte_q_t f, input bit paxos);
    verdict_t e;
    logic [15:0] mt, rnd;
    int i;
    @(negedge clk);
    in_valid = 1;
    in_rec.is_paxos = paxos;
    in_rec.udp_csum = get16(f, 40);
    in_rec.hdr = paxos_hdr_t'(hdr_bits(f));
    mt  = get16(f, 42);
    rnd = get16(f, 48);
    i   = int'(get32(f, 44) & 32'hF);
    e   = '0;
    e.udp_csum = get16(f, 40);
    e.hdr = paxos_hdr_t'(hdr_bits(f));
    if (paxos && mt == 16'd1) begin
      if (rnd > R[i]) begin
        byte_q_t g;
        R[i] = rnd;
        g = set16(f, 42, 16'd2); g = set16(g, 50, V[i]); g = set_value(g, VAL[i]); g = set16(g, 52, SW);
        g = fix_csum(g);
        e.rewrite = 1; e.udp_csum = get16(g, 40); e.hdr = paxos_hdr_t'(hdr_bits(g));
        n_acc++;
      end else begin e.drop = 1; n_drop++; end
    end else if (paxos && mt == 16'd3) begin
      if (rnd >= R[i]) begin
        byte_q_t g;
        R[i] = rnd; V[i] = rnd; VAL[i] = get_value(f);
        g = set16(f, 42, 16'd4); g = set16(g, 50, rnd); g = set16(g, 52, SW);
        g = fix_csum(g);
        e.rewrite = 1; e.udp_csum = get16(g, 40); e.hdr = paxos_hdr_t'(hdr_bits(g));
        n_acc++;
      end else begin e.drop = 1; n_drop++; end
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
    for (int i = 0; i < 16; i++) begin R[i] = 16'd1; V[i] = 0; VAL[i] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    in_valid = 1;   // offered during the sweep: must not be taken
    in_rec = '0;
    #4;
    checks++;
    if (!busy || in_ready) begin failures++; $display("FAIL: not busy during clearing"); end
    @(negedge clk) in_valid = 0;
    wait (!busy);
    // rate: 10 2A records back to back
    for (int k = 0; k < 10; k++) push(make_frame(16'd3, 32'(k), 16'd1, 16'd0, 16'd0, rand_value()), 1);
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (n_out != 10 || last_out - first_out != 18) begin
      failures++; $display("FAIL: 10 records took %0d cycles, expected 19", last_out - first_out + 1);
    end
    stall_pct = 40;
    for (int k = 0; k < 400; k++) begin
      int sel;
      byte_q_t f;
      sel = $urandom_range(9);
      f = make_frame(sel < 5 ? 16'd3 : (sel < 8 ? 16'd1 : 16'(sel - 6)), 32'($urandom_range(40)),
                     16'(k / 40 + $urandom_range(3)), 16'd0, 16'h0100, rand_value(), 16, PORT, sel != 4);
      push(f, sel != 9);
    end
    @(negedge clk) in_valid = 0;
    repeat (50) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_acc == 0 || n_drop == 0) begin
      failures++; $display("FAIL: %0d verdicts missing, accepted %0d dropped %0d", exp_q.size(), n_acc, n_drop);
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
