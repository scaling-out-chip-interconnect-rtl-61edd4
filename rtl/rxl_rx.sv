// rxl_rx: final-destination side of an RXL endpoint (ESeqNum, ECRC check, ACK/NACK).
//
// The receiver keeps the expected sequence number ESeqNum. Each flit coming out of the
// link-layer FEC decoder is checked by isn_ecrc_check against ESeqNum. On a match the flit
// is intact and is the next one in order: its payload is forwarded (unless it is an idle
// flit), an ACK/NACK carried in its header is handed to the local transmitter, and
// ESeqNum is incremented. On a mismatch, or when the FEC decoder already flagged the flit
// as uncorrectable, the flit is discarded and the receiver asks for a go-back-N replay
// with a NACK whose FSN is the last good SeqNum (ESeqNum-1). It then discards everything
// until the replayed flit arrives with a matching CRC. Because a dropped flit makes the
// CRC of every later flit mismatch, a silently dropped flit is caught by the very next
// flit, and nothing is ever forwarded out of order.
//
// An idle flit (Types = TYPE_IDLE) carries only an acknowledgment. It is checked against
// ESeqNum like any flit, so it is accepted only when no earlier flit is missing, but it
// does not advance ESeqNum, is not forwarded and is not acknowledged. Accepting one also
// ends a wait for a replay: the peer has nothing this receiver lacks.
//
// Acknowledgments are coalesced: every accepted data flit makes an ACK pending, and the local
// transmitter piggybacks it on its next outgoing flit. The ACK becomes urgent (the
// transmitter then sends an idle flit just for it) once ACK_COALESCE data flits are
// unacknowledged or data flits have waited ACK_TIMEOUT cycles; a NACK is always urgent.
// While waiting for a replay the NACK is repeated every NACK_TIMEOUT cycles, in case the
// flit that carried it was lost.
//
// Timing: in_* to out_* and peer_* is one cycle (registered). fb_* is combinational from
// registers and is cleared by fb_taken at the next clock edge.
//
// ISN checking, forwarding only in order and NACK-based go-back-N follow the paper;
// the coalescing thresholds, timeouts and idle flits are this design's choices.
module rxl_rx
  import rxl_pkg::*;
#(
  parameter int unsigned ACK_COALESCE = 10,   // data flits per standalone ACK (p_coalescing = 0.1)
  parameter int unsigned ACK_TIMEOUT  = 64,   // cycles before a pending data ACK turns urgent
  parameter int unsigned NACK_TIMEOUT = 512   // cycles between repeated NACKs
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // from the link-layer FEC decoder
  input  logic                 in_valid,
  input  logic [DATA_W-1:0]    in_data,
  input  logic                 in_uncorrectable,
  // to the upper layer, in order
  output logic                 out_valid,
  output logic [3:0]           out_types,
  output logic [PAYLOAD_W-1:0] out_payload,
  // ACK/NACK received from the peer, for the local transmitter
  output logic                 peer_valid,
  output replay_cmd_e          peer_cmd,
  output logic [SEQ_W-1:0]     peer_num,
  // ACK/NACK to send to the peer, through the local transmitter
  output logic                 fb_valid,
  output logic                 fb_urgent,
  output replay_cmd_e          fb_cmd,
  output logic [SEQ_W-1:0]     fb_num,
  input  logic                 fb_taken,
  // state and events
  output logic [SEQ_W-1:0]     eseq,
  output logic                 ev_accept,    // flit accepted in order
  output logic                 ev_reject     // flit discarded (CRC/sequence mismatch or FEC)
);

  localparam int CW = $clog2(ACK_COALESCE + 1);
  localparam int AT = $clog2(ACK_TIMEOUT + 1);
  localparam int NT = $clog2(NACK_TIMEOUT + 1);

  flit_hdr_t        hdr;
  logic             crc_match;
  logic             accept, reject;

  assign hdr = flit_hdr_t'(in_data[HDR_W-1:0]);

  isn_ecrc_check u_check (
    .hdr     (in_data[HDR_W-1:0]),
    .payload (in_data[PAYLOAD_LSB +: PAYLOAD_W]),
    .rx_crc  (in_data[MSG_W +: CRC_W]),
    .eseq    (eseq),
    .match   (crc_match)
  );

  assign accept = in_valid && !in_uncorrectable && crc_match;
  assign reject = in_valid && !accept;

  logic          retry_wait;      // NACK sent, waiting for the replayed flit
  logic          nack_pending;
  logic          ack_pending;     // some accepted flit not yet acknowledged
  logic [CW-1:0] ack_data_cnt;    // accepted data flits not yet acknowledged
  logic [AT-1:0] ack_timer;
  logic [NT-1:0] nack_timer;

  assign fb_valid  = nack_pending || ack_pending;
  assign fb_cmd    = nack_pending ? RC_NACK : RC_ACK;
  assign fb_num    = eseq - SEQ_W'(1);
  assign fb_urgent = nack_pending ||
                     (ack_data_cnt >= CW'(ACK_COALESCE)) ||
                     (ack_data_cnt != '0 && ack_timer == AT'(ACK_TIMEOUT));

  logic is_data;
  assign is_data = (hdr.types != TYPE_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eseq         <= '0;
      retry_wait   <= 1'b0;
      nack_pending <= 1'b0;
      ack_pending  <= 1'b0;
      ack_data_cnt <= '0;
      ack_timer    <= '0;
      nack_timer   <= '0;
      out_valid    <= 1'b0;
      out_types    <= '0;
      out_payload  <= '0;
      peer_valid   <= 1'b0;
      peer_cmd     <= RC_NONE;
      peer_num     <= '0;
      ev_accept    <= 1'b0;
      ev_reject    <= 1'b0;
    end else begin
      out_valid   <= accept && is_data;
      out_types   <= hdr.types;
      out_payload <= in_data[PAYLOAD_LSB +: PAYLOAD_W];
      peer_valid  <= accept && (hdr.replay_cmd == RC_ACK || hdr.replay_cmd == RC_NACK);
      peer_cmd    <= hdr.replay_cmd;
      peer_num    <= hdr_fsn(hdr);
      ev_accept   <= accept;
      ev_reject   <= reject;

      if (accept && is_data) eseq <= eseq + SEQ_W'(1);

      // go-back-N request
      if (accept) begin
        retry_wait <= 1'b0;
        nack_timer <= '0;
      end else if (reject && !retry_wait) begin
        retry_wait <= 1'b1;
        nack_timer <= '0;
      end else if (retry_wait) begin
        nack_timer <= (nack_timer == NT'(NACK_TIMEOUT)) ? '0 : nack_timer + NT'(1);
      end

      if (reject && !retry_wait)
        nack_pending <= 1'b1;
      else if (retry_wait && !accept && nack_timer == NT'(NACK_TIMEOUT))
        nack_pending <= 1'b1;
      else if (fb_taken || accept)
        nack_pending <= 1'b0;

      // acknowledgment coalescing; a NACK also acknowledges up to ESeqNum-1
      if (accept && is_data) begin
        ack_pending  <= 1'b1;
        if (fb_taken) ack_data_cnt <= CW'(1);
        else if (ack_data_cnt != CW'(ACK_COALESCE)) ack_data_cnt <= ack_data_cnt + CW'(1);
      end else if (fb_taken) begin
        ack_pending  <= 1'b0;
        ack_data_cnt <= '0;
      end

      if (fb_taken || ack_data_cnt == '0) ack_timer <= '0;
      else if (ack_timer != AT'(ACK_TIMEOUT)) ack_timer <= ack_timer + AT'(1);
    end
  end

  a_fb_cmd: assert property (@(posedge clk) disable iff (!rst_n)
                             fb_valid |-> (fb_cmd == RC_ACK || fb_cmd == RC_NACK));

endmodule
