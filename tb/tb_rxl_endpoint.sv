// tb_rxl_endpoint: two RXL endpoints wired back to back (no switch).
// Both send random payloads at random times. The links between them are disturbed:
// flits are silently dropped (valid removed, as a switch would do), hit by correctable
// bursts, or hit by uncorrectable errors. Every payload must arrive exactly once, intact
// and in order; the first flit's latency must be two cycles. Dropped flits must be caught
// by the implicit sequence number (reject events) and recovered by replay. A progress
// watchdog fails the test if nothing is delivered for 4000 cycles while payloads are
// outstanding.
module tb_rxl_endpoint;
  import tb_rxl_ref_pkg::*;

  localparam int N = 150;   // payloads per direction

  logic clk = 0, rst_n = 0;
  logic a_in_valid = 0, b_in_valid = 0, a_in_ready, b_in_ready;
  logic [3:0] a_in_types = 4'h1, b_in_types = 4'h1;
  logic [PAYLOAD_W-1:0] a_in_payload = '0, b_in_payload = '0;
  logic a_out_valid, b_out_valid;
  logic [3:0] a_out_types, b_out_types;
  logic [PAYLOAD_W-1:0] a_out_payload, b_out_payload;
  logic a_tx_v, b_tx_v;
  logic [FLIT_W-1:0] a_tx_f, b_tx_f;
  logic ab_kill = 0, ba_kill = 0;
  logic [FLIT_W-1:0] ab_err = '0, ba_err = '0;
  logic [1:0] ev_replay, ev_timeout, ev_stall, ev_accept, ev_reject, ev_corr, ev_unc;

  int checks = 0, failures = 0, cycle = 0;
  logic [PAYLOAD_W-1:0] ab_q [$], ba_q [$];
  int a_sent = 0, b_sent = 0, a_got = 0, b_got = 0;
  int n_drop = 0, n_reject = 0, n_replay = 0, n_corr = 0, n_unc = 0, n_timeout = 0;

  rxl_endpoint #(.REPLAY_TIMEOUT(64), .NACK_TIMEOUT(128)) u_a (
    .clk, .rst_n,
    .in_valid (a_in_valid), .in_ready (a_in_ready), .in_types (a_in_types), .in_payload (a_in_payload),
    .out_valid (a_out_valid), .out_types (a_out_types), .out_payload (a_out_payload),
    .link_tx_valid (a_tx_v), .link_tx_flit (a_tx_f),
    .link_rx_valid (b_tx_v && !ba_kill), .link_rx_flit (b_tx_f ^ ba_err),
    .ev_replay (ev_replay[0]), .ev_timeout (ev_timeout[0]), .ev_stall (ev_stall[0]),
    .ev_accept (ev_accept[0]), .ev_reject (ev_reject[0]),
    .ev_fec_corrected (ev_corr[0]), .ev_fec_uncorrectable (ev_unc[0])
  );

  rxl_endpoint #(.REPLAY_TIMEOUT(64), .NACK_TIMEOUT(128)) u_b (
    .clk, .rst_n,
    .in_valid (b_in_valid), .in_ready (b_in_ready), .in_types (b_in_types), .in_payload (b_in_payload),
    .out_valid (b_out_valid), .out_types (b_out_types), .out_payload (b_out_payload),
    .link_tx_valid (b_tx_v), .link_tx_flit (b_tx_f),
    .link_rx_valid (a_tx_v && !ab_kill), .link_rx_flit (a_tx_f ^ ab_err),
    .ev_replay (ev_replay[1]), .ev_timeout (ev_timeout[1]), .ev_stall (ev_stall[1]),
    .ev_accept (ev_accept[1]), .ev_reject (ev_reject[1]),
    .ev_fec_corrected (ev_corr[1]), .ev_fec_uncorrectable (ev_unc[1])
  );

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog (a_got=%0d b_got=%0d)", a_got, b_got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random link disturbance for the current cycle
  function automatic logic [FLIT_W-1:0] disturb(output logic kill, input bit on);
    logic [FLIT_W-1:0] e;
    int r;
    e = '0; kill = 0;
    r = $urandom % 100;
    if (!on) return e;
    if (r < 4) kill = 1;                                   // silent drop
    else if (r < 8) begin                                  // correctable burst
      int st; st = $urandom % 254;
      for (int k = st; k < st + 3; k++) e[8*k +: 8] = 8'(1 + ($urandom % 255));
    end else if (r < 10) begin                             // uncorrectable: S0 = 0
      logic [7:0] v; v = 8'(1 + ($urandom % 255));
      e[8*3 +: 8] = v; e[8*30 +: 8] = v;
    end
    return e;
  endfunction

  bit noisy = 1;
  always @(negedge clk) begin
    ab_err = disturb(ab_kill, noisy);
    ba_err = disturb(ba_kill, noisy);
  end

  // scoreboard and event counters
  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      if (a_tx_v && ab_kill) n_drop++;
      if (b_tx_v && ba_kill) n_drop++;
      n_reject  += int'(ev_reject[0]) + int'(ev_reject[1]);
      n_replay  += int'(ev_replay[0]) + int'(ev_replay[1]);
      n_timeout += int'(ev_timeout[0]) + int'(ev_timeout[1]);
      n_corr    += int'(ev_corr[0]) + int'(ev_corr[1]);
      n_unc     += int'(ev_unc[0]) + int'(ev_unc[1]);
    end
    if (rst_n && b_out_valid) begin
      check(ab_q.size() > 0 && b_out_payload == ab_q[0], $sformatf("A->B payload %0d in order", b_got));
      if (ab_q.size() > 0) void'(ab_q.pop_front());
      b_got++;
    end
    if (rst_n && a_out_valid) begin
      check(ba_q.size() > 0 && a_out_payload == ba_q[0], $sformatf("B->A payload %0d in order", a_got));
      if (ba_q.size() > 0) void'(ba_q.pop_front());
      a_got++;
    end
  end

  // progress watchdog: a protocol that stops delivering fails after STALL_LIMIT cycles
  localparam int STALL_LIMIT = 4000;
  int quiet = 0;
  always @(posedge clk) begin
    if (!rst_n || a_out_valid || b_out_valid ||
        (a_sent == N && b_sent == N && ab_q.size() == 0 && ba_q.size() == 0)) quiet <= 0;
    else quiet <= quiet + 1;
    if (quiet == STALL_LIMIT) begin
      failures++;
      $display("FAIL: no delivery for %0d cycles (a_sent=%0d b_sent=%0d a_got=%0d b_got=%0d)",
               STALL_LIMIT, a_sent, b_sent, a_got, b_got);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // sources
  logic [PAYLOAD_W-1:0] a_next, b_next;
  initial begin
    a_next = rand_payload(); b_next = rand_payload();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // latency of the first flit on a clean link
    noisy = 0;
    @(negedge clk);
    a_in_valid = 1; a_in_payload = a_next;
    @(posedge clk); #1;
    ab_q.push_back(a_next); a_sent++; a_next = rand_payload();
    a_in_valid = 0;
    @(posedge clk); #1 check(b_out_valid, "two-cycle latency endpoint to endpoint");
    noisy = 1;
    while (a_sent < N || b_sent < N) begin
      @(negedge clk);
      a_in_valid = (a_sent < N) && ($urandom % 3 != 0);
      a_in_payload = a_next; a_in_types = 4'(1 + $urandom % 15);
      b_in_valid = (b_sent < N) && ($urandom % 3 != 0);
      b_in_payload = b_next; b_in_types = 4'(1 + $urandom % 15);
      @(posedge clk);
      if (a_in_valid && a_in_ready) begin ab_q.push_back(a_next); a_sent++; a_next = rand_payload(); end
      if (b_in_valid && b_in_ready) begin ba_q.push_back(b_next); b_sent++; b_next = rand_payload(); end
    end
    @(negedge clk);
    a_in_valid = 0; b_in_valid = 0;
    noisy = 0;
    while (a_got < N || b_got < N) @(posedge clk);
    repeat (20) @(posedge clk);
    $display("drops=%0d rejects=%0d replays=%0d timeouts=%0d fec_corrected=%0d fec_uncorrectable=%0d cycles=%0d",
             n_drop, n_reject, n_replay, n_timeout, n_corr, n_unc, cycle);
    check(a_got == N && b_got == N && ab_q.size() == 0 && ba_q.size() == 0, "all delivered exactly once");
    check(n_drop > 0 && n_reject > 0 && n_replay > 0 && n_corr > 0 && n_unc > 0, "mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
