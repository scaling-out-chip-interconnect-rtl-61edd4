// tb_isn_ecrc_check: checks the ISN ECRC checker.
// Flits built by the reference with SeqNum s must match when ESeqNum = s, and must
// mismatch when ESeqNum differs (a dropped flit), when any single bit of header, payload
// or CRC is flipped, and for random bursts of up to 64 bits.
module tb_isn_ecrc_check;
  import tb_rxl_ref_pkg::*;

  logic [15:0]          hdr;
  logic [PAYLOAD_W-1:0] payload;
  logic [63:0]          rx_crc;
  logic [9:0]           eseq;
  logic                 match;
  int checks = 0, failures = 0;

  isn_ecrc_check dut (.hdr, .payload, .rx_crc, .eseq, .match);

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
    logic [9:0]  s;
    logic [15:0] h;
    logic [PAYLOAD_W-1:0] p;
    logic [63:0] c;
    for (int i = 0; i < 100; i++) begin
      h = 16'($urandom); p = rand_payload(); s = 10'($urandom);
      c = ref_isn_crc(h, p, s);
      hdr = h; payload = p; rx_crc = c; eseq = s;
      #1 check(match, "in-sequence intact flit must match");
      eseq = s - 10'd1;                       // receiver still waits for the dropped flit
      #1 check(!match, "flit after a drop must mismatch");
      eseq = s + 10'(1 + ($urandom % 1023));
      #1 check(!match, "any other ESeqNum must mismatch");
      eseq = s;
      begin
        int b;
        b = $urandom % 2000;
        if (b < 16)        hdr[b] ^= 1'b1;
        else if (b < 1936) payload[b - 16] ^= 1'b1;
        else               rx_crc[b - 1936] ^= 1'b1;
        #1 check(!match, $sformatf("single bit error at %0d must mismatch", b));
      end
      hdr = h; payload = p; rx_crc = c;
      begin
        int st, len;
        logic [MSG_W-1:0] m;
        len = 2 + ($urandom % 63);
        st  = $urandom % (MSG_W - len);
        m = {p, h};
        m[st] ^= 1'b1;
        m[st + len - 1] ^= 1'b1;
        for (int k = st + 1; k < st + len - 1; k++) m[k] ^= 1'($urandom);
        {payload, hdr} = m;
        #1 check(!match, "burst error up to 64 bits must mismatch");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
