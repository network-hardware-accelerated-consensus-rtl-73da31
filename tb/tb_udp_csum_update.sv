// tb_udp_csum_update: checks the incremental UDP checksum update.
//
// For random frames, random header bytes are changed (one field, several
// fields, or the whole header); the expected checksum is recomputed from
// scratch over the pseudo-header and the modified datagram and compared with
// the module's incremental result. A received checksum of 0 must stay 0.
module tb_udp_csum_update;
  import tb_pkg::*;
  import caans_pkg::*;

  logic [15:0] old_csum, new_csum;
  paxos_hdr_t  old_hdr, new_hdr;
  int checks = 0, failures = 0;

  udp_csum_update dut (.old_csum, .old_hdr, .new_hdr, .new_csum);

  initial begin
    for (int k = 0; k < 2000; k++) begin
      byte_q_t f, g;
      logic [351:0] nb;
      int mode;
      f = make_frame(16'($urandom_range(4)), $urandom, 16'($urandom), 16'($urandom),
                     16'($urandom), rand_value(), $urandom_range(40), PORT, (k % 50) != 0);
      nb = hdr_bits(f);
      mode = $urandom_range(2);
      if (mode == 0)      nb[351 -: 16] = 16'($urandom);
      else if (mode == 1) begin nb[351 -: 16] = 16'd4; nb[303 -: 16] = 16'($urandom); nb[271 -: 16] = 16'($urandom); end
      else for (int i = 0; i < 11; i++) nb[32*i +: 32] = $urandom;
      g = fix_csum(put_hdr_bits(f, nb));
      old_csum = get16(f, 40);
      old_hdr  = paxos_hdr_t'(hdr_bits(f));
      new_hdr  = paxos_hdr_t'(nb);
      #1;
      checks++;
      if (new_csum != get16(g, 40)) begin
        failures++;
        if (failures < 10) $display("FAIL: k=%0d got %h expected %h", k, new_csum, get16(g, 40));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
