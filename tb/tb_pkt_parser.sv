// tb_pkt_parser: classification and field extraction of the parser.
//
// Sends frames of several kinds: Paxos frames with random fields and
// payload lengths (including the minimum of 86 bytes), and frames that must
// not count as Paxos (other UDP port, other ethertype, IPv4 with options,
// too short). The packet buffer and record queue report full at random.
// Checks that every word is passed to the buffer unchanged, that exactly one
// record per frame is pushed, with the right classification, header fields
// and checksum, and that for a 102-byte frame the record leaves with word 10,
// the word holding the last header byte.
module tb_pkt_parser;
  import caans_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [63:0] s_data, w_data;
  logic [7:0]  s_keep, w_keep;
  logic        s_last, s_valid, s_ready, w_push, w_last, w_full, p_push, p_full;
  parsed_t     p_rec;
  int checks = 0, failures = 0, full_pct = 0;

  pkt_parser dut (.clk, .rst_n, .s_data, .s_keep, .s_last, .s_valid, .s_ready,
                  .w_push, .w_data, .w_keep, .w_last, .w_full, .p_push, .p_rec, .p_full);

  typedef struct { logic [63:0] d; logic [7:0] k; logic l; } word_t;
  word_t   exp_w [$];
  parsed_t exp_r [$];
  int      exp_rec_word [$];
  int      word_in_frame = 0, n_words = 0, n_recs = 0;

  always @(negedge clk) begin
    w_full = ($urandom_range(99) < full_pct);
    p_full = ($urandom_range(99) < full_pct);
    #1;
    if (w_push) begin
      word_t e;
      e = exp_w.pop_front();
      checks++;
      if (w_data != e.d || w_keep != e.k || w_last != e.l) begin failures++; $display("FAIL: word %0d", n_words); end
      n_words++;
    end
    if (p_push) begin
      parsed_t e;
      int ew;
      e  = exp_r.pop_front();
      ew = exp_rec_word.pop_front();
      checks++;
      if (p_rec.is_paxos != e.is_paxos || (e.is_paxos && p_rec != e)) begin
        failures++; $display("FAIL: record %0d is_paxos=%b expected %b", n_recs, p_rec.is_paxos, e.is_paxos);
      end
      if (ew >= 0) begin
        checks++;
        if (word_in_frame != ew) begin failures++; $display("FAIL: record with word %0d, expected %0d", word_in_frame, ew); end
      end
      n_recs++;
    end
    if (w_push) word_in_frame = w_last ? 0 : word_in_frame + 1;
  end

  task automatic send(input byte_q_t f, input bit paxos);
    int n = f.size();
    parsed_t r;
    r.is_paxos = paxos;
    r.udp_csum = get16(f, 40);
    r.hdr = paxos_hdr_t'(hdr_bits(f));
    exp_r.push_back(r);
    exp_rec_word.push_back(n == 102 ? 10 : -1);
    for (int w = 0; w < (n + 7) / 8; w++) begin
      word_t e;
      @(negedge clk);
      s_valid = 1;
      s_last  = (w == (n + 7) / 8 - 1);
      s_data  = '0;
      s_keep  = '0;
      for (int b = 0; b < 8; b++)
        if (8*w + b < n) begin s_data[8*b +: 8] = f[8*w + b]; s_keep[b] = 1'b1; end
      e.d = s_data; e.k = s_keep; e.l = s_last;
      exp_w.push_back(e);
      forever begin
        #4;
        if (s_ready) break;
        @(negedge clk);
      end
      @(posedge clk);
    end
  endtask

  initial begin
    s_valid = 0; s_last = 0; s_data = '0; s_keep = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      int sel;
      byte_q_t f;
      if (k == 100) full_pct = 30;
      sel = $urandom_range(6);
      f = make_frame(16'($urandom_range(4)), $urandom, 16'($urandom), 16'($urandom), 16'($urandom),
                     rand_value(), (sel == 0) ? 0 : ((k < 100) ? 16 : $urandom_range(60)));
      case (sel)
        0, 1, 2: send(f, 1);
        3: send(set16(f, 36, 16'h8889), 0);
        4: send(set16(f, 12, 16'h86DD), 0);
        5: begin f[14] = 8'h46; send(f, 0); end
        default: send(f[0:59 + $urandom_range(25)], 0);
      endcase
    end
    @(negedge clk) s_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (exp_w.size() != 0 || exp_r.size() != 0) begin
      failures++; $display("FAIL: %0d words and %0d records missing", exp_w.size(), exp_r.size());
    end
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
