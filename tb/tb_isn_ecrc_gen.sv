// tb_isn_ecrc_gen: checks the ISN ECRC encoder.
// 1. The CRC-64/ECMA-182 check value of "123456789" (leading zero bits do not change a
//    CRC with zero initial value, so the string sits in the low 72 message bits).
// 2. Random headers, payloads and sequence numbers against a bit-serial reference.
// 3. The implicit sequence number: the same flit with SeqNum s and s+d gives different
//    CRCs, and the difference is the CRC of the SeqNum XOR alone (linearity).
module tb_isn_ecrc_gen;
  import tb_rxl_ref_pkg::*;

  logic [15:0]          hdr;
  logic [PAYLOAD_W-1:0] payload;
  logic [9:0]           seq;
  logic [63:0]          crc;
  int checks = 0, failures = 0;

  isn_ecrc_gen dut (.hdr, .payload, .seq, .crc);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] c0, c1, cz;
    // check value
    payload = '0;
    payload[55:0] = "1234567";
    hdr = "89";
    seq = '0;
    #1 check(crc == 64'h6C40DF5F0B497347, $sformatf("check value %h", crc));
    // random vectors
    for (int i = 0; i < 200; i++) begin
      hdr = 16'($urandom); payload = rand_payload(); seq = 10'($urandom);
      #1 check(crc == ref_isn_crc(hdr, payload, seq), $sformatf("random vector %0d", i));
    end
    // sequence number is embedded
    for (int i = 0; i < 50; i++) begin
      hdr = 16'($urandom); payload = rand_payload(); seq = 10'($urandom);
      #1 c0 = crc;
      seq = seq + 10'(1 + ($urandom % 1023));
      #1 c1 = crc;
      check(c0 != c1, "different SeqNum must change the CRC");
    end
    for (int i = 0; i < 50; i++) begin
      logic [9:0] sa, sb;
      hdr = 16'($urandom); payload = rand_payload();
      sa = 10'($urandom); sb = 10'($urandom);
      seq = sa; #1 c0 = crc;
      seq = sb; #1 c1 = crc;
      cz = ref_crc({1910'(0), sa ^ sb, 16'h0});
      check((c0 ^ c1) == cz, "CRC linear in SeqNum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
