// tb_stream_merge: frame-level arbitration between two inputs.
//
// Both inputs send frames of random length (each word tagged with its
// source, frame number and position) while the output accepts at random.
// Checks that frames are never interleaved, that each source's frames come
// out complete and in order, and that when both inputs wait the grant
// alternates (round robin).
module tb_stream_merge;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0][63:0] s_data;
  logic [1:0]       s_last, s_valid, s_ready;
  logic [63:0] m_data;
  logic [7:0]  m_keep;
  logic        m_last, m_valid, m_ready;
  int checks = 0, failures = 0;

  stream_merge dut (.clk, .rst_n,
    .s0_data(s_data[0]), .s0_keep(8'hFF), .s0_last(s_last[0]), .s0_valid(s_valid[0]), .s0_ready(s_ready[0]),
    .s1_data(s_data[1]), .s1_keep(8'hFF), .s1_last(s_last[1]), .s1_valid(s_valid[1]), .s1_ready(s_ready[1]),
    .m_data, .m_keep, .m_last, .m_valid, .m_ready);

  // word tag: [63:32] source, [31:8] frame number, [7:0] position
  int next_frame [2] = '{0, 0};
  int cur_src = -1, cur_pos = 0, last_src = -1, n_alt = 0, n_same_when_both = 0;
  bit both_waiting;

  always @(negedge clk) begin
    m_ready = ($urandom_range(99) < 70);
    #1;
    if (m_valid && m_ready) begin
      int src, fr, pos;
      src = int'(m_data[63:32]);
      fr  = int'(m_data[31:8]);
      pos = int'(m_data[7:0]);
      checks++;
      if (cur_src >= 0 && src != cur_src) begin failures++; $display("FAIL: frames interleaved"); end
      if (cur_src < 0) begin
        if (fr != next_frame[src]) begin failures++; $display("FAIL: source %0d frame %0d, expected %0d", src, fr, next_frame[src]); end
        if (both_waiting && last_src >= 0) begin
          if (src != last_src) n_alt++; else n_same_when_both++;
        end
      end
      if (pos != cur_pos) begin failures++; $display("FAIL: position %0d, expected %0d", pos, cur_pos); end
      cur_src = src;
      cur_pos++;
      if (m_last) begin
        next_frame[src]++;
        last_src = src;
        cur_src = -1;
        cur_pos = 0;
      end
    end
    both_waiting = s_valid[0] && s_valid[1];
  end

  task automatic sender(input int p, input int nframes);
    for (int f = 0; f < nframes; f++) begin
      int len;
      len = 1 + $urandom_range(5);
      for (int w = 0; w < len; w++) begin
        @(negedge clk);
        // pause inside a frame now and then: the grant must still be held
        while ($urandom_range(4) == 0) begin s_valid[p] = 0; @(negedge clk); end
        s_valid[p] = 1;
        s_last[p]  = (w == len - 1);
        s_data[p]  = {32'(p), 24'(f), 8'(w)};
        forever begin
          #4;
          if (s_ready[p]) break;
          @(negedge clk);
        end
        @(posedge clk);
      end
      if ($urandom_range(3) == 0) begin @(negedge clk) s_valid[p] = 0; end
    end
    @(negedge clk) s_valid[p] = 0;
  endtask

  initial begin
    s_valid = '0; s_last = '0; s_data = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    fork
      sender(0, 200);
      sender(1, 200);
    join
    repeat (20) @(posedge clk);
    checks++;
    if (next_frame[0] != 200 || next_frame[1] != 200) begin
      failures++; $display("FAIL: frames out %0d/%0d", next_frame[0], next_frame[1]);
    end
    checks++;
    if (n_alt == 0 || n_same_when_both != 0) begin
      failures++; $display("FAIL: round robin: alternated %0d, repeated %0d", n_alt, n_same_when_both);
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
