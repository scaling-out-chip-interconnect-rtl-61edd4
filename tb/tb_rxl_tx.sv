// tb_rxl_tx: checks the RXL transmitter with a small retry buffer (RETRY_DEPTH = 8,
// REPLAY_TIMEOUT = 20). Every flit on the output is checked against the reference
// (header fields, payload, ECRC computed with the SeqNum the flit must have). Covered:
// one-cycle latency and consecutive SeqNums; ACK piggybacking in FSN/ReplayCmd; the idle
// flit for an urgent ACK, which reuses the next SeqNum and is sent even with a full
// buffer; retry-buffer-full stall and release by an ACK; go-back-N replay
// after a NACK with the original payloads and SeqNums; replay after the timer expires.
module tb_rxl_tx;
  import tb_rxl_ref_pkg::*;
  import rxl_pkg::replay_cmd_e;
  import rxl_pkg::RC_NONE;
  import rxl_pkg::RC_ACK;
  import rxl_pkg::RC_NACK;

  localparam int DEPTH = 8;
  localparam int TMO   = 20;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [3:0] in_types = 4'h1;
  logic [PAYLOAD_W-1:0] in_payload = '0;
  logic fb_valid = 0, fb_urgent = 0, fb_taken;
  replay_cmd_e fb_cmd = RC_NONE;
  logic [9:0] fb_num = '0;
  logic peer_valid = 0;
  replay_cmd_e peer_cmd = RC_NONE;
  logic [9:0] peer_num = '0;
  logic out_valid;
  logic [DATA_W-1:0] out_data;
  logic ev_replay, ev_timeout, ev_stall;

  int checks = 0, failures = 0, cycle = 0;
  logic [PAYLOAD_W-1:0] sent [1024];
  logic [3:0]           sent_t [1024];

  rxl_tx #(.RETRY_DEPTH(DEPTH), .REPLAY_TIMEOUT(TMO)) dut (.*);

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

  // expect the flit on the output now (after a posedge) to be seq s with given header
  task automatic expect_flit(int s, logic [1:0] cmd, logic [9:0] fsn, bit idle = 0);
    logic [15:0] h;
    logic [PAYLOAD_W-1:0] p;
    h = ref_hdr(cmd, idle ? 4'h0 : sent_t[s], fsn);
    p = idle ? '0 : sent[s];
    check(out_valid, $sformatf("flit %0d valid", s));
    check(out_data == ref_data(h, p, 10'(s)),
          $sformatf("flit %0d header/payload/ECRC (hdr %h exp %h)", s, out_data[15:0], h));
  endtask

  // present a new payload for one clock; returns whether it was accepted
  task automatic send(int s, output bit acc);
    sent[s] = rand_payload();
    sent_t[s] = 4'(1 + ($urandom % 15));
    in_valid = 1; in_payload = sent[s]; in_types = sent_t[s];
    #1 acc = in_ready;
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  task automatic peer(replay_cmd_e c, int n);
    peer_valid = 1; peer_cmd = c; peer_num = 10'(n);
    @(posedge clk); #1;
    peer_valid = 0;
  endtask

  initial begin
    bit acc;
    int n_stall = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    // 1. four flits, consecutive SeqNums, one-cycle latency
    for (int s = 0; s < 4; s++) begin
      send(s, acc);
      check(acc, "accepted");
      expect_flit(s, RC_NONE, '0);
    end
    @(posedge clk); #1 check(!out_valid, "no flit without request");
    // 2. piggybacked ACK
    fb_valid = 1; fb_cmd = RC_ACK; fb_num = 10'h2A5;
    #1 check(!fb_taken, "fb not taken while idle and not urgent");
    send(4, acc);
    expect_flit(4, RC_ACK, 10'h2A5);
    // 3. urgent ACK without data -> idle flit with SeqNum 5
    fb_urgent = 1; fb_num = 10'h133;
    @(posedge clk); #1;
    fb_valid = 0; fb_urgent = 0;
    // the idle flit is checked with the next SeqNum (5) but does not use it up
    expect_flit(5, RC_ACK, 10'h133, 1);
    // 4. three more fill the buffer (8 flits: 0..7), then stall
    send(5, acc); expect_flit(5, RC_NONE, '0);
    send(6, acc); expect_flit(6, RC_NONE, '0);
    send(7, acc); expect_flit(7, RC_NONE, '0);
    send(8, acc);
    check(!acc, "retry buffer full: payload refused");
    check(!out_valid, "nothing sent while full");
    check(ev_stall, "stall event");
    // an urgent ACK still goes out while the buffer is full, as an idle flit with SeqNum 8
    fb_valid = 1; fb_urgent = 1; fb_cmd = RC_NACK; fb_num = 10'h3C0;
    @(posedge clk); #1;
    fb_valid = 0; fb_urgent = 0;
    expect_flit(8, RC_NACK, 10'h3C0, 1);
    // ACK of flit 2 frees three entries
    peer(RC_ACK, 2);
    send(8, acc); check(acc, "accepted after ACK"); expect_flit(8, RC_NONE, '0);
    // 5. NACK with last good = 4: replay 5..8 in order, original payloads
    peer(RC_NACK, 4);
    check(ev_replay, "replay event");
    @(posedge clk); #1;
    for (int s = 5; s <= 8; s++) begin
      expect_flit(s, RC_NONE, '0);
      @(posedge clk); #1;
    end
    check(!out_valid, "replay ends at the newest flit");
    // new data continues with SeqNum 9
    send(9, acc); check(acc, "accepted after replay"); expect_flit(9, RC_NONE, '0);
    // 6. replay timer: ack up to 7, then wait; 8 and 9 are replayed after TMO cycles
    peer(RC_ACK, 7);
    begin
      int waited = 0;
      while (!out_valid && waited < 3 * TMO) begin
        @(posedge clk); #1 waited++;
      end
      check(waited >= TMO - 2 && waited <= TMO + 3, $sformatf("timer replay after %0d cycles", waited));
      check(ev_timeout || waited > 0, "timeout event");
      expect_flit(8, RC_NONE, '0);
      @(posedge clk); #1 expect_flit(9, RC_NONE, '0);
      @(posedge clk); #1 check(!out_valid, "timer replay ends");
    end
    // stale ACK (outside the window) is ignored: nothing replayed, buffer unchanged
    peer(RC_ACK, 900);
    peer(RC_ACK, 9);
    for (int s = 10; s < 10 + DEPTH; s++) begin
      send(s, acc); check(acc, "buffer empty after final ACK"); expect_flit(s, RC_NONE, '0);
    end
    send(10 + DEPTH, acc); check(!acc, "full again");
    n_stall++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
