// rxl_top: a host and a device connected through a single-level RXL switch.
//
//   host endpoint --link h2s--> switch --link s2d--> device endpoint
//   host endpoint <--link s2h-- switch <--link d2s-- device endpoint
//
// Each endpoint numbers its outgoing flits, folds the SeqNum into the 64-bit ECRC (ISN),
// protects the flit with 3-way interleaved FEC, and checks incoming flits against its
// ESeqNum after FEC decoding. The switch only corrects or discards flits with FEC and
// re-encodes them. A flit the switch discards is therefore detected at the destination by
// the ECRC mismatch of the flit that follows it, and recovered by go-back-N replay.
//
// The physical links are not modelled: each of the four link hops is a wire on which the
// corresponding err_* mask is XORed, standing in for bit errors of the SerDes. sw_*_int_err
// injects corruption inside the switch. All error inputs are zero in normal operation.
// The transaction layer is outside: payloads enter and leave as 240-byte vectors.
//
// Latency (no errors): host in_* to device out_* is 1 (TX) + 2 (switch) + 1 (RX) = 4 cycles,
// and the same from device to host.
//
// The topology (one switch level between host and device, ECRC only at the endpoints, FEC
// only in the switch) follows the paper; the error-injection ports, the event outputs and
// the latencies are this design's choices.
module rxl_top
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
  // host upper layer
  input  logic                 h_in_valid,
  output logic                 h_in_ready,
  input  logic [3:0]           h_in_types,
  input  logic [PAYLOAD_W-1:0] h_in_payload,
  output logic                 h_out_valid,
  output logic [3:0]           h_out_types,
  output logic [PAYLOAD_W-1:0] h_out_payload,
  // device upper layer
  input  logic                 d_in_valid,
  output logic                 d_in_ready,
  input  logic [3:0]           d_in_types,
  input  logic [PAYLOAD_W-1:0] d_in_payload,
  output logic                 d_out_valid,
  output logic [3:0]           d_out_types,
  output logic [PAYLOAD_W-1:0] d_out_payload,
  // physical-layer error injection, one mask per link hop
  input  logic [FLIT_W-1:0]    err_h2s,
  input  logic [FLIT_W-1:0]    err_s2d,
  input  logic [FLIT_W-1:0]    err_d2s,
  input  logic [FLIT_W-1:0]    err_s2h,
  // corruption inside the switch
  input  logic [DATA_W-1:0]    sw_dn_int_err,
  input  logic [DATA_W-1:0]    sw_up_int_err,
  // events (one-cycle pulses): [0] host, [1] device
  output logic [1:0]           ev_replay,
  output logic [1:0]           ev_timeout,
  output logic [1:0]           ev_stall,
  output logic [1:0]           ev_accept,
  output logic [1:0]           ev_reject,
  output logic [1:0]           ev_fec_corrected,
  output logic [1:0]           ev_fec_uncorrectable,
  output logic                 sw_dn_drop,
  output logic                 sw_up_drop,
  output logic                 sw_dn_corrected,
  output logic                 sw_up_corrected
);

  logic              h_tx_v, d_tx_v, s_dn_v, s_up_v;
  logic [FLIT_W-1:0] h_tx_f, d_tx_f, s_dn_f, s_up_f;

  rxl_endpoint #(
    .RETRY_DEPTH (RETRY_DEPTH), .REPLAY_TIMEOUT (REPLAY_TIMEOUT),
    .ACK_COALESCE (ACK_COALESCE), .ACK_TIMEOUT (ACK_TIMEOUT), .NACK_TIMEOUT (NACK_TIMEOUT)
  ) u_host (
    .clk, .rst_n,
    .in_valid    (h_in_valid),
    .in_ready    (h_in_ready),
    .in_types    (h_in_types),
    .in_payload  (h_in_payload),
    .out_valid   (h_out_valid),
    .out_types   (h_out_types),
    .out_payload (h_out_payload),
    .link_tx_valid (h_tx_v),
    .link_tx_flit  (h_tx_f),
    .link_rx_valid (s_up_v),
    .link_rx_flit  (s_up_f ^ err_s2h),
    .ev_replay   (ev_replay[0]),
    .ev_timeout  (ev_timeout[0]),
    .ev_stall    (ev_stall[0]),
    .ev_accept   (ev_accept[0]),
    .ev_reject   (ev_reject[0]),
    .ev_fec_corrected     (ev_fec_corrected[0]),
    .ev_fec_uncorrectable (ev_fec_uncorrectable[0])
  );

  rxl_switch u_switch (
    .clk, .rst_n,
    .dn_in_valid  (h_tx_v),
    .dn_in_flit   (h_tx_f ^ err_h2s),
    .dn_out_valid (s_dn_v),
    .dn_out_flit  (s_dn_f),
    .up_in_valid  (d_tx_v),
    .up_in_flit   (d_tx_f ^ err_d2s),
    .up_out_valid (s_up_v),
    .up_out_flit  (s_up_f),
    .dn_int_err   (sw_dn_int_err),
    .up_int_err   (sw_up_int_err),
    .dn_drop      (sw_dn_drop),
    .up_drop      (sw_up_drop),
    .dn_corrected (sw_dn_corrected),
    .up_corrected (sw_up_corrected)
  );

  rxl_endpoint #(
    .RETRY_DEPTH (RETRY_DEPTH), .REPLAY_TIMEOUT (REPLAY_TIMEOUT),
    .ACK_COALESCE (ACK_COALESCE), .ACK_TIMEOUT (ACK_TIMEOUT), .NACK_TIMEOUT (NACK_TIMEOUT)
  ) u_device (
    .clk, .rst_n,
    .in_valid    (d_in_valid),
    .in_ready    (d_in_ready),
    .in_types    (d_in_types),
    .in_payload  (d_in_payload),
    .out_valid   (d_out_valid),
    .out_types   (d_out_types),
    .out_payload (d_out_payload),
    .link_tx_valid (d_tx_v),
    .link_tx_flit  (d_tx_f),
    .link_rx_valid (s_dn_v),
    .link_rx_flit  (s_dn_f ^ err_s2d),
    .ev_replay   (ev_replay[1]),
    .ev_timeout  (ev_timeout[1]),
    .ev_stall    (ev_stall[1]),
    .ev_accept   (ev_accept[1]),
    .ev_reject   (ev_reject[1]),
    .ev_fec_corrected     (ev_fec_corrected[1]),
    .ev_fec_uncorrectable (ev_fec_uncorrectable[1])
  );

endmodule
