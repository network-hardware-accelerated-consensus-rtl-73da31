// tb_sync_fifo: random push/pop traffic against a queue model.
//
// Pushes and pops at random (never pushing when full or popping when empty),
// checks the head word, full, empty and count every cycle against the model,
// and makes sure the FIFO fills completely and drains completely.
module tb_sync_fifo;
  localparam int W = 12, D = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push = 0, pop = 0, full, empty;
  logic [W-1:0] din = '0, dout;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .full, .empty, .count);

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      int bias;
      bias = (k / 300) % 2 ? 80 : 20;   // alternate between filling and draining
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == D) || int'(count) != model.size()) begin
        failures++; $display("FAIL: flags at %0d: empty=%b full=%b count=%0d model=%0d", k, empty, full, count, model.size());
      end
      if (model.size() > 0) begin
        checks++;
        if (dout != model[0]) begin failures++; $display("FAIL: head %h expected %h", dout, model[0]); end
      end
      if (full) n_full++;
      if (empty) n_empty++;
      push = !full && ($urandom_range(99) < bias);
      pop  = !empty && ($urandom_range(99) >= bias);
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(din);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("FAIL: never full or never empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
