// tb_rxl_rx: checks the RXL receiver (ACK_COALESCE = 4, ACK_TIMEOUT = 10,
// NACK_TIMEOUT = 30). Flits are built by the reference with explicit SeqNums. Covered:
// in-order flits forwarded one cycle later and ESeqNum advancing; coalesced ACK with the
// last good SeqNum, urgent after four data flits or after the ACK timeout; a skipped
// (dropped) flit detected by the next flit's ECRC, which is discarded and answered with a
// single NACK; everything discarded until the replay arrives; corrupted and
// FEC-uncorrectable flits rejected; ACK/NACK carried in headers passed to the transmitter;
// idle flits accepted but not forwarded; NACK repeated after the NACK timeout.
module tb_rxl_rx;
  import tb_rxl_ref_pkg::*;
  import rxl_pkg::replay_cmd_e;
  import rxl_pkg::RC_NONE;
  import rxl_pkg::RC_ACK;
  import rxl_pkg::RC_NACK;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_uncorrectable = 0;
  logic [DATA_W-1:0] in_data = '0;
  logic out_valid;
  logic [3:0] out_types;
  logic [PAYLOAD_W-1:0] out_payload;
  logic peer_valid;
  replay_cmd_e peer_cmd;
  logic [9:0] peer_num;
  logic fb_valid, fb_urgent;
  replay_cmd_e fb_cmd;
  logic [9:0] fb_num;
  logic fb_taken = 0;
  logic [9:0] eseq;
  logic ev_accept, ev_reject;

  int checks = 0, failures = 0, cycle = 0;
  logic [PAYLOAD_W-1:0] pay [1024];
  logic [3:0]           typ [1024];

  rxl_rx #(.ACK_COALESCE(4), .ACK_TIMEOUT(10), .NACK_TIMEOUT(30)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive flit with SeqNum s for one cycle; flip = corrupt one payload bit
  task automatic drive(int s, logic [1:0] cmd = 2'd0, logic [9:0] fsn = '0,
                       bit flip = 0, bit unc = 0, bit idle = 0);
    logic [15:0] h;
    h = ref_hdr(cmd, idle ? 4'h0 : typ[s], fsn);
    in_valid = 1;
    in_data = ref_data(h, idle ? '0 : pay[s], 10'(s));
    if (flip) in_data[100] ^= 1'b1;
    in_uncorrectable = unc;
    @(posedge clk); #1;
    in_valid = 0; in_uncorrectable = 0;
  endtask

  task automatic expect_fwd(int s);
    check(out_valid && out_payload == pay[s] && out_types == typ[s],
          $sformatf("flit %0d forwarded", s));
  endtask

  task automatic take_fb();
    fb_taken = 1;
    @(posedge clk); #1;
    fb_taken = 0;
  endtask

  initial begin
    for (int s = 0; s < 1024; s++) begin
      pay[s] = rand_payload();
      typ[s] = 4'(1 + ($urandom % 15));
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check(!fb_valid && eseq == 0, "idle after reset");
    // 1. in order
    for (int s = 0; s < 3; s++) begin
      drive(s);
      expect_fwd(s);
      check(ev_accept && eseq == 10'(s + 1), "accepted, ESeqNum advanced");
    end
    check(fb_valid && fb_cmd == RC_ACK && fb_num == 10'd2 && !fb_urgent, "ACK pending, not urgent");
    drive(3);
    expect_fwd(3);
    check(fb_urgent && fb_num == 10'd3, "ACK urgent after 4 data flits");
    take_fb();
    check(!fb_valid, "ACK cleared when taken");
    // 2. flit 4 dropped: flit 5 arrives
    drive(5);
    check(!out_valid && ev_reject, "flit after drop discarded");
    check(fb_valid && fb_cmd == RC_NACK && fb_num == 10'd3 && fb_urgent, "NACK with last good SeqNum");
    drive(6);
    check(!out_valid && ev_reject, "discarded while waiting for replay");
    take_fb();
    check(!fb_valid, "NACK sent once");
    drive(7);
    check(!out_valid && !fb_valid, "no second NACK while waiting");
    // 3. replay
    drive(4); expect_fwd(4);
    drive(5); expect_fwd(5);
    check(eseq == 10'd6, "ESeqNum after replay");
    // 4. piggybacked ACK and NACK from the peer
    drive(6, RC_ACK, 10'h155);
    expect_fwd(6);
    check(peer_valid && peer_cmd == RC_ACK && peer_num == 10'h155, "peer ACK extracted");
    drive(7, RC_NACK, 10'h0AA);
    check(peer_valid && peer_cmd == RC_NACK && peer_num == 10'h0AA, "peer NACK extracted");
    @(posedge clk); #1 check(!peer_valid, "peer pulse one cycle");
    take_fb();
    // 5. idle flit: checked against ESeqNum (8), accepted, not forwarded, ESeqNum unchanged
    drive(8, RC_ACK, 10'h001, 0, 0, 1);
    check(!out_valid && ev_accept && eseq == 10'd8, "idle flit accepted, not forwarded");
    check(peer_valid && peer_num == 10'h001, "ACK of idle flit extracted");
    check(!fb_valid, "idle flit not acknowledged");
    drive(9, RC_ACK, 10'h002, 0, 0, 1);
    check(ev_reject && !peer_valid, "idle flit with a gap before it rejected");
    take_fb();
    drive(8, RC_ACK, 10'h002, 0, 0, 1);
    check(ev_accept && !fb_valid, "in-sync idle flit ends the replay wait");
    // 6. ACK timeout: one data flit then wait
    drive(8); expect_fwd(8);
    begin
      int w = 0;
      while (!fb_urgent && w < 50) begin @(posedge clk); #1 w++; end
      check(w >= 8 && w <= 12, $sformatf("ACK urgent after timeout (%0d cycles)", w));
    end
    take_fb();
    // 7. corrupted flit and FEC-uncorrectable flit
    drive(9, 0, 0, 1);
    check(!out_valid && ev_reject && fb_cmd == RC_NACK && fb_num == 10'd8, "corrupted flit NACKed");
    take_fb();
    drive(9); expect_fwd(9);
    drive(10, 0, 0, 0, 1);
    check(!out_valid && ev_reject && fb_cmd == RC_NACK, "FEC-uncorrectable flit NACKed");
    take_fb();
    // 8. NACK repeated when the replay does not come
    begin
      int w = 0;
      while (!fb_valid && w < 100) begin @(posedge clk); #1 w++; end
      check(fb_valid && fb_cmd == RC_NACK && w >= 25 && w <= 35,
            $sformatf("NACK repeated after %0d cycles", w));
    end
    drive(10); expect_fwd(10);
    check(eseq == 10'd11, "final ESeqNum");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
