// tb_rxl_top: end-to-end test of host - switch - device at the default parameters.
//
// Host and device both send random payloads at random times. On every one of the four
// link hops the testbench injects, at random: correctable bursts of up to three bytes,
// uncorrectable double-byte errors (the switch then discards the flit silently, or the
// endpoint's FEC rejects it), and long random bursts that the FEC may miscorrect. It
// also corrupts flits inside the switch, after FEC decoding, where only the end-to-end
// CRC can see the damage. A final quiet phase lets the replay machinery deliver the tail.
//
// Checked: every payload arrives exactly once, intact and in order, in both directions;
// the error-free latency host -> device is four cycles. Counted, and required to happen
// at least once each: FEC correction at the switch and at the endpoints, switch drops,
// FEC-uncorrectable flits at the endpoints, flits rejected by the ISN check, NACK replays,
// timer replays, upstream stalls, switch-internal corruption, piggybacked ACKs and idle
// ACK flits. A final bandwidth phase streams host -> device back to back while the switch
// drops about one flit in 100, and measures the cycles each go-back-N retry costs (at most
// 24 allowed), reporting the resulting bandwidth loss. A progress watchdog fails the test if nothing is delivered for 4000 cycles
// while payloads are outstanding.
module tb_rxl_top;
  import tb_rxl_ref_pkg::*;

  localparam int N = 1500;   // payloads per direction

  logic clk = 0, rst_n = 0;
  logic h_in_valid = 0, d_in_valid = 0, h_in_ready, d_in_ready;
  logic [3:0] h_in_types = 4'h1, d_in_types = 4'h1;
  logic [PAYLOAD_W-1:0] h_in_payload = '0, d_in_payload = '0;
  logic h_out_valid, d_out_valid;
  logic [3:0] h_out_types, d_out_types;
  logic [PAYLOAD_W-1:0] h_out_payload, d_out_payload;
  logic [FLIT_W-1:0] err_h2s = '0, err_s2d = '0, err_d2s = '0, err_s2h = '0;
  logic [DATA_W-1:0] sw_dn_int_err = '0, sw_up_int_err = '0;
  logic [1:0] ev_replay, ev_timeout, ev_stall, ev_accept, ev_reject;
  logic [1:0] ev_fec_corrected, ev_fec_uncorrectable;
  logic sw_dn_drop, sw_up_drop, sw_dn_corrected, sw_up_corrected;

  rxl_top dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  logic [PAYLOAD_W-1:0] hd_q [$], dh_q [$];
  int h_sent = 0, d_sent = 0, h_got = 0, d_got = 0;
  int n_sw_corr = 0, n_sw_drop = 0, n_ep_corr = 0, n_ep_unc = 0, n_reject = 0;
  int n_replay = 0, n_timeout = 0, n_stall = 0, n_internal = 0, n_piggy = 0, n_idle = 0;

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog (h_got=%0d d_got=%0d h_sent=%0d d_sent=%0d)", h_got, d_got, h_sent, d_sent);
    $display("host tx ack=%0d snd=%0d wr=%0d  dev rx eseq=%0d wait=%0d", dut.u_host.u_tx.ack_seq, dut.u_host.u_tx.snd_seq, dut.u_host.u_tx.wr_seq, dut.u_device.u_rx.eseq, dut.u_device.u_rx.retry_wait);
    $display("dev tx ack=%0d snd=%0d wr=%0d  host rx eseq=%0d wait=%0d", dut.u_device.u_tx.ack_seq, dut.u_device.u_tx.snd_seq, dut.u_device.u_tx.wr_seq, dut.u_host.u_rx.eseq, dut.u_host.u_rx.retry_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // progress watchdog: a protocol that stops delivering fails after STALL_LIMIT cycles
  localparam int STALL_LIMIT = 4000;
  int quiet = 0;
  always @(posedge clk) begin
    if (!rst_n || h_out_valid || d_out_valid ||
        (h_sent == N && d_sent == N && hd_q.size() == 0 && dh_q.size() == 0)) quiet <= 0;
    else quiet <= quiet + 1;
    if (quiet == STALL_LIMIT) begin
      failures++;
      $display("FAIL: no delivery for %0d cycles (h_sent=%0d d_sent=%0d h_got=%0d d_got=%0d)",
               STALL_LIMIT, h_sent, d_sent, h_got, d_got);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  function automatic logic [FLIT_W-1:0] link_error(bit on);
    logic [FLIT_W-1:0] e;
    int r;
    e = '0;
    if (!on) return e;
    r = $urandom % 1000;
    if (r < 30) begin                                      // correctable burst, 1..3 bytes
      int st, len; len = 1 + ($urandom % 3); st = $urandom % (256 - len + 1);
      for (int k = st; k < st + len; k++) e[8*k +: 8] = 8'(1 + ($urandom % 255));
    end else if (r < 45) begin                             // double error, same value: S0 = 0
      logic [7:0] v; int w, p1, p2;
      v = 8'(1 + ($urandom % 255)); w = $urandom % 3;
      p1 = $urandom % 85; p2 = (p1 + 1 + ($urandom % 84)) % 85;
      e[8*ref_pos_byte(w, p1) +: 8] = v; e[8*ref_pos_byte(w, p2) +: 8] = v;
    end else if (r < 50) begin                             // long random burst
      int st; st = $urandom % 240;
      for (int k = st; k < st + 16; k++) e[8*k +: 8] = 8'($urandom);
    end
    return e;
  endfunction

  // an error the switch FEC always flags: the same value in two bytes of one sub-block
  // gives S0 = 0 with S1 != 0
  function automatic logic [FLIT_W-1:0] drop_error();
    logic [FLIT_W-1:0] e;
    logic [7:0] v; int w, p1, p2;
    e = '0;
    v = 8'(1 + ($urandom % 255)); w = $urandom % 3;
    p1 = $urandom % 85; p2 = (p1 + 1 + ($urandom % 84)) % 85;
    e[8*ref_pos_byte(w, p1) +: 8] = v; e[8*ref_pos_byte(w, p2) +: 8] = v;
    return e;
  endfunction

  localparam int BW_Q = 100;   // bandwidth phase: one flit in BW_Q dropped by the switch
  bit noisy = 0, bw_phase = 0;
  always @(negedge clk) begin
    err_h2s = link_error(noisy);
    if (bw_phase && ($urandom % BW_Q == 0)) err_h2s = drop_error();
    err_s2d = link_error(noisy);
    err_d2s = link_error(noisy);
    err_s2h = link_error(noisy);
    sw_dn_int_err = '0; sw_up_int_err = '0;
    if (noisy && ($urandom % 200 == 0)) sw_dn_int_err[8*($urandom % 250) +: 8] = 8'(1 + ($urandom % 255));
    if (noisy && ($urandom % 200 == 0)) sw_up_int_err[8*($urandom % 250) +: 8] = 8'(1 + ($urandom % 255));
  end

  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      n_sw_corr += int'(sw_dn_corrected) + int'(sw_up_corrected);
      n_sw_drop += int'(sw_dn_drop) + int'(sw_up_drop);
      n_ep_corr += int'(ev_fec_corrected[0]) + int'(ev_fec_corrected[1]);
      n_ep_unc  += int'(ev_fec_uncorrectable[0]) + int'(ev_fec_uncorrectable[1]);
      n_reject  += int'(ev_reject[0]) + int'(ev_reject[1]);
      n_replay  += int'(ev_replay[0]) + int'(ev_replay[1]);
      n_timeout += int'(ev_timeout[0]) + int'(ev_timeout[1]);
      n_stall   += int'(ev_stall[0]) + int'(ev_stall[1]);
      if (dut.u_switch.u_dn.v_q && sw_dn_int_err != '0) n_internal++;
      if (dut.u_switch.u_up.v_q && sw_up_int_err != '0) n_internal++;
      if (dut.u_host.u_tx.fb_taken && dut.u_host.u_tx.sel != dut.u_host.u_tx.SEL_IDLE) n_piggy++;
      if (dut.u_device.u_tx.fb_taken && dut.u_device.u_tx.sel != dut.u_device.u_tx.SEL_IDLE) n_piggy++;
      if (dut.u_host.u_tx.sel == dut.u_host.u_tx.SEL_IDLE) n_idle++;
      if (dut.u_device.u_tx.sel == dut.u_device.u_tx.SEL_IDLE) n_idle++;
    end
    if (rst_n && d_out_valid) begin
      check(hd_q.size() > 0 && d_out_payload == hd_q[0], $sformatf("host->device payload %0d", d_got));
      if (hd_q.size() > 0) void'(hd_q.pop_front());
      d_got++;
    end
    if (rst_n && h_out_valid) begin
      check(dh_q.size() > 0 && h_out_payload == dh_q[0], $sformatf("device->host payload %0d", h_got));
      if (dh_q.size() > 0) void'(dh_q.pop_front());
      h_got++;
    end
  end

  logic [PAYLOAD_W-1:0] h_next, d_next;
  initial begin
    h_next = rand_payload(); d_next = rand_payload();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // error-free latency
    @(negedge clk);
    h_in_valid = 1; h_in_payload = h_next;
    @(posedge clk); #1;
    hd_q.push_back(h_next); h_sent++; h_next = rand_payload();
    h_in_valid = 0;
    repeat (2) @(posedge clk);
    #1 check(!d_out_valid, "not before four cycles");
    @(posedge clk); #1 check(d_out_valid, "host to device latency four cycles");
    noisy = 1;
    while (h_sent < N || d_sent < N) begin
      @(negedge clk);
      // bursts of back-to-back traffic alternate with lighter phases
      h_in_valid = (h_sent < N) && (((cycle / 200) % 2 == 0) || ($urandom % 4 == 0));
      h_in_payload = h_next; h_in_types = 4'(1 + $urandom % 15);
      d_in_valid = (d_sent < N) && ($urandom % 3 == 0);
      d_in_payload = d_next; d_in_types = 4'(1 + $urandom % 15);
      @(posedge clk);
      if (h_in_valid && h_in_ready) begin hd_q.push_back(h_next); h_sent++; h_next = rand_payload(); end
      if (d_in_valid && d_in_ready) begin dh_q.push_back(d_next); d_sent++; d_next = rand_payload(); end
    end
    @(negedge clk);
    h_in_valid = 0; d_in_valid = 0;
    noisy = 0;
    while (h_got < N || d_got < N) @(posedge clk);
    repeat (50) @(posedge clk);
    $display("cycles=%0d sw_corrected=%0d sw_drops=%0d ep_corrected=%0d ep_uncorrectable=%0d isn_rejects=%0d",
             cycle, n_sw_corr, n_sw_drop, n_ep_corr, n_ep_unc, n_reject);
    $display("nack_replays=%0d timer_replays=%0d stalls=%0d internal_errors=%0d piggybacked_acks=%0d idle_ack_flits=%0d",
             n_replay, n_timeout, n_stall, n_internal, n_piggy, n_idle);
    check(h_got == N && d_got == N && hd_q.size() == 0 && dh_q.size() == 0, "all delivered exactly once");
    check(n_sw_corr > 0, "switch FEC correction happened");
    check(n_sw_drop > 0, "switch drop happened");
    check(n_ep_corr > 0, "endpoint FEC correction happened");
    check(n_ep_unc > 0, "endpoint FEC-uncorrectable flit happened");
    check(n_reject > 0, "ISN/ECRC reject happened");
    check(n_replay > 0, "NACK replay happened");
    check(n_timeout > 0, "timer replay happened");
    check(n_stall > 0, "stall happened");
    check(n_internal > 0, "switch-internal corruption happened");
    check(n_piggy > 0, "piggybacked ACK happened");
    check(n_idle > 0, "idle ACK flit happened");

    // Bandwidth phase: the host streams back to back, the device only acknowledges, and
    // the switch drops about one flit in BW_Q. Every drop costs one go-back-N round trip;
    // the measured cost per drop gives the bandwidth loss this design would have at the
    // uncorrectable flit rate 3e-5 per link, over the two links of a single switch level.
    begin
      int m, sent, c0, d0, drops0, stalls0, drops, lost;
      real cost, loss, loss_paper;
      m = 4000; sent = 0; d0 = d_got; drops0 = n_sw_drop; stalls0 = n_stall;
      bw_phase = 1;
      c0 = cycle;
      while (d_got < d0 + m) begin
        @(negedge clk);
        h_in_valid = (sent < m); h_in_payload = h_next; h_in_types = 4'h1;
        @(posedge clk);
        if (h_in_valid && h_in_ready) begin
          hd_q.push_back(h_next); h_sent++; sent++; h_next = rand_payload();
        end
      end
      bw_phase = 0;
      @(negedge clk) h_in_valid = 0;
      drops = n_sw_drop - drops0;
      lost  = (cycle - c0) - m - 4;             // cycles not delivering, less the pipeline
      cost  = (drops > 0) ? real'(lost) / drops : 0.0;
      loss  = 1.0 - real'(m) / real'(cycle - c0 - 4);
      loss_paper = 1.0 - 1.0 / ((1.0 - 2 * 3.0e-5) + 2 * 3.0e-5 * (1.0 + cost));
      $display("bandwidth: %0d flits in %0d cycles, %0d switch drops, %0.1f cycles lost per drop, loss %0.4f; at FER_UC 3e-5 on 2 links: loss %0.6f",
               m, cycle - c0, drops, cost, loss, loss_paper);
      check(drops > 0, "bandwidth phase: switch drops happened");
      check(cost <= 24.0, "bandwidth phase: go-back-N costs at most 24 cycles per drop");
      check(hd_q.size() == 0, "bandwidth phase: all delivered");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
