// rxl_tx: originator side of an RXL endpoint (sequence numbering, retry buffer, ECRC).
//
// Every flit that leaves this block gets the next 10-bit SeqNum. The SeqNum is never
// written into the flit: it is folded into the 64-bit ECRC by isn_ecrc_gen, so the header's
// FSN field is free to carry an acknowledgment for the opposite direction (piggybacking).
// With no acknowledgment to send, ReplayCmd and FSN are zero.
//
// Flits stay in a circular retry buffer, indexed by SeqNum mod RETRY_DEPTH, until the peer
// acknowledges them. Three pointers describe it: ack_seq (oldest unacknowledged flit),
// snd_seq (next flit to put on the link) and wr_seq (next new SeqNum). Replay is go-back-N:
// a NACK carrying "last good SeqNum n" acknowledges everything up to n and moves snd_seq
// back to n+1, after which the buffered flits are sent again, in order, with their
// original SeqNums and a freshly built header. A replay timer does the same when data
// flits have been waiting for an acknowledgment for REPLAY_TIMEOUT cycles, which covers
// a lost last flit, a lost NACK or a lost ACK.
//
// Flits of type TYPE_IDLE carry no upper-layer payload, only an acknowledgment. They are
// sent when the local receiver must return an acknowledgment urgently and there is no
// data flit to carry it. An idle flit is ECRC-encoded with the SeqNum the next data flit
// will get (wr_seq) but does not use it up and is not buffered: the peer accepts it only
// if it has received every earlier flit, and does not advance its ESeqNum. Idle flits can
// therefore always be sent, even with a full retry buffer, and a lost one costs only a
// delayed acknowledgment. (An idle flit that had to be buffered and acknowledged itself
// can deadlock two endpoints whose retry buffers are both full.)
//
// Interface: in_valid/in_ready handshake for 240-byte payloads (in_types must not be
// TYPE_IDLE); fb_* is the acknowledgment the local receiver wants sent, fb_taken pulses
// when a header carries it; peer_* is an ACK/NACK received from the peer. The output
// out_data (header, payload, ECRC = 250 bytes) is registered: a flit accepted in cycle t
// is on out_data in cycle t+1. One flit per cycle at most; the link never back-pressures.
//
// The numbering, the ISN encoding, the header use and go-back-N follow the paper; the
// buffer organisation, the timer, the idle flits and the sizes are this design's choices.
module rxl_tx
  import rxl_pkg::*;
#(
  parameter int unsigned RETRY_DEPTH    = 64,   // flits kept for replay (power of 2, < 1024)
  parameter int unsigned REPLAY_TIMEOUT = 256   // cycles without ACK before a replay
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // upper layer
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [3:0]           in_types,
  input  logic [PAYLOAD_W-1:0] in_payload,
  // acknowledgment to piggyback (from the local receiver)
  input  logic                 fb_valid,
  input  logic                 fb_urgent,
  input  replay_cmd_e          fb_cmd,
  input  logic [SEQ_W-1:0]     fb_num,
  output logic                 fb_taken,
  // acknowledgment received from the peer (from the local receiver)
  input  logic                 peer_valid,
  input  replay_cmd_e          peer_cmd,
  input  logic [SEQ_W-1:0]     peer_num,
  // to the link layer
  output logic                 out_valid,
  output logic [DATA_W-1:0]    out_data,
  // events, one-cycle pulses
  output logic                 ev_replay,   // go-back-N started by a NACK
  output logic                 ev_timeout,  // go-back-N started by the replay timer
  output logic                 ev_stall     // payload waiting, retry buffer full or replaying
);

  localparam int AW = $clog2(RETRY_DEPTH);
  localparam int TW = $clog2(REPLAY_TIMEOUT + 1);

  typedef struct packed {
    logic [3:0]           types;
    logic [PAYLOAD_W-1:0] payload;
  } entry_t;

  entry_t            buffer [RETRY_DEPTH];
  logic [SEQ_W-1:0]  ack_seq, snd_seq, wr_seq;
  logic [SEQ_W-1:0]  last_data_seq;
  logic              data_seen;
  logic [TW-1:0]     timer;

  logic [SEQ_W-1:0]  count;          // flits in the buffer
  logic              full;
  logic              replaying;
  logic              data_unacked;
  assign count        = wr_seq - ack_seq;
  assign full         = (count >= SEQ_W'(RETRY_DEPTH));
  assign replaying    = (snd_seq != wr_seq);
  assign data_unacked = data_seen && ((last_data_seq - ack_seq) < count);

  // ---------------- peer feedback ----------------
  logic             fb_ok, ack_adv, do_nack;
  logic [SEQ_W-1:0] fb_next;        // peer_num + 1
  assign fb_next = peer_num + SEQ_W'(1);
  // the acknowledged flit must lie in [ack_seq-1, wr_seq)
  assign fb_ok   = peer_valid && (peer_cmd == RC_ACK || peer_cmd == RC_NACK) &&
                   ((fb_next - ack_seq) <= count);
  assign ack_adv = fb_ok && (fb_next != ack_seq);
  assign do_nack = fb_ok && (peer_cmd == RC_NACK);

  logic timeout;
  assign timeout = data_unacked && !replaying && (timer == TW'(REPLAY_TIMEOUT));

  // ---------------- send selection ----------------
  typedef enum logic [1:0] {SEL_NONE, SEL_REPLAY, SEL_NEW, SEL_IDLE} sel_e;
  sel_e             sel;
  logic [SEQ_W-1:0] send_seq;
  entry_t           send_entry;
  flit_hdr_t        hdr;
  logic [CRC_W-1:0] crc;

  always_comb begin
    sel = SEL_NONE;
    if (replaying)                        sel = SEL_REPLAY;
    else if (in_valid && !full)           sel = SEL_NEW;
    else if (fb_valid && fb_urgent)       sel = SEL_IDLE;
  end

  assign in_ready = !replaying && !full;
  assign send_seq = snd_seq;

  always_comb begin
    unique case (sel)
      SEL_REPLAY: send_entry = buffer[snd_seq[AW-1:0]];
      SEL_NEW:    send_entry = '{types: in_types, payload: in_payload};
      default:    send_entry = '{types: TYPE_IDLE, payload: '0};
    endcase
  end

  assign fb_taken = (sel != SEL_NONE) && fb_valid;
  assign hdr      = fb_taken ? make_hdr(fb_cmd, send_entry.types, fb_num)
                             : make_hdr(RC_NONE, send_entry.types, '0);

  isn_ecrc_gen u_ecrc (
    .hdr     (hdr),
    .payload (send_entry.payload),
    .seq     (send_seq),
    .crc     (crc)
  );

  // ---------------- state ----------------
  always_ff @(posedge clk) begin
    if (sel == SEL_NEW) buffer[wr_seq[AW-1:0]] <= send_entry;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_seq       <= '0;
      snd_seq       <= '0;
      wr_seq        <= '0;
      last_data_seq <= '0;
      data_seen     <= 1'b0;
      timer         <= '0;
      out_valid     <= 1'b0;
      out_data      <= '0;
      ev_replay     <= 1'b0;
      ev_timeout    <= 1'b0;
      ev_stall      <= 1'b0;
    end else begin
      out_valid  <= (sel != SEL_NONE);
      out_data   <= {crc, send_entry.payload, hdr};
      ev_replay  <= do_nack;
      ev_timeout <= timeout && !do_nack;
      ev_stall   <= in_valid && !in_ready;

      if (sel == SEL_NEW) begin
        wr_seq        <= wr_seq + SEQ_W'(1);
        last_data_seq <= wr_seq;
        data_seen     <= 1'b1;
      end

      if (ack_adv) ack_seq <= fb_next;

      if (do_nack)                snd_seq <= fb_next;
      else if (timeout)           snd_seq <= ack_adv ? fb_next : ack_seq;
      else if (ack_adv && ((snd_seq - ack_seq) < (fb_next - ack_seq)))
                                  snd_seq <= fb_next;   // replay overtaken by an ACK
      else if (sel == SEL_REPLAY || sel == SEL_NEW)
                                  snd_seq <= snd_seq + SEQ_W'(1);

      if (ack_adv || do_nack || timeout || !data_unacked) timer <= '0;
      else if (!replaying && timer != TW'(REPLAY_TIMEOUT)) timer <= timer + TW'(1);
    end
  end

  // ---------------- rules ----------------
  initial begin
    assert (RETRY_DEPTH >= 2 && RETRY_DEPTH < (1 << SEQ_W) && (RETRY_DEPTH & (RETRY_DEPTH - 1)) == 0)
      else $error("RETRY_DEPTH must be a power of two below 2^SEQ_W");
  end
  a_types: assert property (@(posedge clk) disable iff (!rst_n)
                            in_valid && in_ready |-> in_types != TYPE_IDLE);
  a_count: assert property (@(posedge clk) disable iff (!rst_n)
                            count <= SEQ_W'(RETRY_DEPTH));

endmodule
