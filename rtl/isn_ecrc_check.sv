// isn_ecrc_check: end-to-end CRC checker with an implicit sequence number.
//
// At the final destination the CRC is regenerated from the received header and payload
// and the receiver's own expected sequence number (ESeqNum), using the same encoder as
// the sender, and compared with the received CRC. A match means both that the header and
// payload are intact and that the flit carries the sequence number the receiver expected.
// A mismatch cannot tell a corrupted flit from a missing (dropped) earlier flit; either
// way the receiver must ask for a replay. Purely combinational.
module isn_ecrc_check
  import rxl_pkg::*;
(
  input  logic [HDR_W-1:0]     hdr,      // received header
  input  logic [PAYLOAD_W-1:0] payload,  // received payload
  input  logic [CRC_W-1:0]     rx_crc,   // received ECRC
  input  logic [SEQ_W-1:0]     eseq,     // ESeqNum
  output logic                 match     // 1: payload intact and in sequence
);

  logic [CRC_W-1:0] crc_calc;

  isn_ecrc_gen u_gen (
    .hdr     (hdr),
    .payload (payload),
    .seq     (eseq),
    .crc     (crc_calc)
  );

  assign match = (crc_calc == rx_crc);

endmodule
