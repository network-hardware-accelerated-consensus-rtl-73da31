// tb_stream_bcast: every receiver gets every word exactly once.
//
// Sends a numbered word sequence into a 3-way broadcast while each receiver
// accepts at its own random rate. Each receiver's sequence must equal the
// sent one (no word lost or repeated); the input must not advance until all
// receivers took the word; with all receivers ready it moves one word per
// cycle.
module tb_stream_bcast;
  localparam int N = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [63:0] s_data = '0, m_data;
  logic [7:0]  s_keep = '1, m_keep;
  logic        s_last = 0, s_valid = 0, s_ready, m_last;
  logic [N-1:0] m_valid, m_ready = '1;
  int checks = 0, failures = 0, ready_pct = 100;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  stream_bcast #(.N(N)) dut (.clk, .rst_n, .s_data, .s_keep, .s_last, .s_valid, .s_ready,
                             .m_data, .m_keep, .m_last, .m_valid, .m_ready);

  longint rx [N][$];
  always @(negedge clk) begin
    for (int i = 0; i < N; i++) m_ready[i] = ($urandom_range(99) < ready_pct);
    #1;
    for (int i = 0; i < N; i++) if (m_valid[i] && m_ready[i]) rx[i].push_back(longint'(m_data));
  end

  task automatic send_seq(input int first, input int n);
    for (int k = first; k < first + n; k++) begin
      @(negedge clk);
      s_valid = 1;
      s_data = 64'(k);
      s_last = (k % 5 == 4);
      forever begin
        #4;
        if (s_ready) break;
        @(negedge clk);
      end
      @(posedge clk);
    end
    @(negedge clk) s_valid = 0;
  endtask

  initial begin
    int t0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    t0 = cyc;
    send_seq(0, 50);
    checks++;
    if (cyc - t0 > 52) begin failures++; $display("FAIL: 50 words took %0d cycles", cyc - t0); end
    ready_pct = 50;
    send_seq(50, 1000);
    repeat (10) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (rx[i].size() != 1050) begin failures++; $display("FAIL: receiver %0d got %0d words", i, rx[i].size()); end
      for (int k = 0; k < rx[i].size(); k++) begin
        checks++;
        if (rx[i][k] != longint'(k)) begin failures++; $display("FAIL: receiver %0d word %0d = %0d", i, k, rx[i][k]); break; end
      end
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
