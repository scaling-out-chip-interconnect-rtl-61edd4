// rxl_endpoint: one RXL host or device port, both directions.
//
// Transmit path: upper-layer payload -> rxl_tx (SeqNum, retry buffer, header with
// piggybacked ACK/NACK, ISN ECRC; registered) -> fec_enc (6 FEC bytes) -> link.
// Receive path: link -> fec_dec (corrects up to one byte per interleaved sub-block, flags
// uncorrectable flits) -> rxl_rx (ESeqNum ECRC check, in-order delivery; registered) ->
// upper layer. The receiver hands ACK/NACKs found in incoming headers to the transmitter,
// and the transmitter carries the receiver's own ACK/NACKs back to the peer.
//
// This is the paper's layering: CRC with the implicit sequence number at the transport
// layer, evaluated only at the two endpoints, with FEC underneath it at the link layer.
//
// Timing: a payload accepted on in_* leaves on link_tx_* one cycle later; a flit arriving on
// link_rx_* appears on out_* one cycle later. The link input is not back-pressured.
module rxl_endpoint
  import rxl_pkg::*;
#(
  parameter int unsigned RETRY_DEPTH    = 64,
  parameter int unsigned REPLAY_TIMEOUT = 256,
  parameter int unsigned ACK_COALESCE   = 10,
  parameter int unsigned ACK_TIMEOUT    = 64,
  parameter int unsigned NACK_TIMEOUT   = 512
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // upper layer, transmit
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [3:0]           in_types,
  input  logic [PAYLOAD_W-1:0] in_payload,
  // upper layer, receive
  output logic                 out_valid,
  output logic [3:0]           out_types,
  output logic [PAYLOAD_W-1:0] out_payload,
  // link
  output logic                 link_tx_valid,
  output logic [FLIT_W-1:0]    link_tx_flit,
  input  logic                 link_rx_valid,
  input  logic [FLIT_W-1:0]    link_rx_flit,
  // events
  output logic                 ev_replay,
  output logic                 ev_timeout,
  output logic                 ev_stall,
  output logic                 ev_accept,
  output logic                 ev_reject,
  output logic                 ev_fec_corrected,
  output logic                 ev_fec_uncorrectable
);

  logic              fb_valid, fb_urgent, fb_taken;
  replay_cmd_e       fb_cmd;
  logic [SEQ_W-1:0]  fb_num;
  logic              peer_valid;
  replay_cmd_e       peer_cmd;
  logic [SEQ_W-1:0]  peer_num;
  logic [DATA_W-1:0] tx_data, rx_data;
  logic              rx_corr, rx_unc;

  rxl_tx #(
    .RETRY_DEPTH    (RETRY_DEPTH),
    .REPLAY_TIMEOUT (REPLAY_TIMEOUT)
  ) u_tx (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_types, .in_payload,
    .fb_valid, .fb_urgent, .fb_cmd, .fb_num, .fb_taken,
    .peer_valid, .peer_cmd, .peer_num,
    .out_valid  (link_tx_valid),
    .out_data   (tx_data),
    .ev_replay, .ev_timeout, .ev_stall
  );

  fec_enc u_fec_enc (
    .data_in  (tx_data),
    .flit_out (link_tx_flit)
  );

  fec_dec u_fec_dec (
    .flit_in       (link_rx_flit),
    .data_out      (rx_data),
    .corrected     (rx_corr),
    .uncorrectable (rx_unc)
  );

  assign ev_fec_corrected     = link_rx_valid && rx_corr;
  assign ev_fec_uncorrectable = link_rx_valid && rx_unc;

  rxl_rx #(
    .ACK_COALESCE (ACK_COALESCE),
    .ACK_TIMEOUT  (ACK_TIMEOUT),
    .NACK_TIMEOUT (NACK_TIMEOUT)
  ) u_rx (
    .clk, .rst_n,
    .in_valid         (link_rx_valid),
    .in_data          (rx_data),
    .in_uncorrectable (rx_unc),
    .out_valid, .out_types, .out_payload,
    .peer_valid, .peer_cmd, .peer_num,
    .fb_valid, .fb_urgent, .fb_cmd, .fb_num, .fb_taken,
    .eseq             (),
    .ev_accept, .ev_reject
  );

endmodule
