// tb_acceptor_history: clearing sweep, read latency and writes of the
// acceptor's history memory, with a 16-entry table.
//
// Checks that init_done rises exactly 16 cycles after reset, that writes
// before then are ignored, that every entry reads back as rnd=INIT_RND,
// vrnd=0, value=0 one cycle after the read, that the read data holds while
// no read is issued, and that random writes read back against a model.
module tb_acceptor_history;
  import caans_pkg::*;
  import tb_pkg::rand_value;

  localparam int W = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rd_en = 0, wr_en = 0, init_done;
  logic [W-1:0] rd_addr = '0, wr_addr = '0;
  hist_entry_t rd_data, wr_data, model [16];
  int checks = 0, failures = 0, t0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  acceptor_history #(.INST_IDX_W(W), .INIT_RND(16'd3)) dut (
    .clk, .rst_n, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data, .init_done
  );

  task automatic rd(input int a, input hist_entry_t e);
    @(negedge clk); rd_en = 1; rd_addr = W'(a);
    @(negedge clk); rd_en = 0;
    checks++;
    if (rd_data != e) begin
      failures++; $display("FAIL: entry %0d rnd=%0d vrnd=%0d, expected rnd=%0d vrnd=%0d", a, rd_data.rnd, rd_data.vrnd, e.rnd, e.vrnd);
    end
  endtask

  initial begin
    hist_entry_t init_e;
    init_e = '0;
    init_e.rnd = 16'd3;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    t0 = cyc;
    // a write during the sweep must be lost
    wr_en = 1; wr_addr = 4'd15; wr_data = '1;
    @(negedge clk) wr_en = 0;
    wait (init_done);
    checks++;
    if (cyc - t0 != 16) begin failures++; $display("FAIL: clearing took %0d cycles", cyc - t0); end
    for (int a = 0; a < 16; a++) begin model[a] = init_e; rd(a, init_e); end
    for (int k = 0; k < 200; k++) begin
      int a;
      a = $urandom_range(15);
      @(negedge clk);
      wr_en = 1; wr_addr = W'(a);
      wr_data.rnd = 16'($urandom); wr_data.vrnd = 16'($urandom); wr_data.value = rand_value();
      model[a] = wr_data;
      @(negedge clk) wr_en = 0;
      a = $urandom_range(15);
      rd(a, model[a]);
    end
    // read data holds while rd_en is low
    repeat (3) @(negedge clk);
    checks++;
    if (rd_data != model[rd_addr]) begin failures++; $display("FAIL: read data not held"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
