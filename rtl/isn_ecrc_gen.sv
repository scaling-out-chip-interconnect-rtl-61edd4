// isn_ecrc_gen: end-to-end CRC encoder with an implicit sequence number (ISN).
//
// The 64-bit CRC is computed over the 2-byte header and the 240-byte payload, exactly as
// a plain flit CRC, except that the 10-bit sequence number is first XORed into the lowest
// 10 bits of the payload. The sequence number is therefore never sent; it is folded into
// the checksum, and a receiver that checks with a different sequence number sees a CRC
// mismatch. Cost over a plain CRC encoder: 10 XOR gates and one extra logic level.
//
// The CRC is the plain polynomial remainder of message(x) * x^64 modulo CRC64_POLY
// (zero initial value, no final inversion), shifting the message in from its most
// significant bit (payload byte 239, bit 7) down to bit 0 (header bit 0). The
// polynomial and bit order are this design's choice; the XOR of SeqNum into the low
// payload bits follows the paper's hardware description.
//
// Purely combinational: crc is valid in the same cycle as hdr, payload and seq.
module isn_ecrc_gen
  import rxl_pkg::*;
(
  input  logic [HDR_W-1:0]     hdr,      // flit header (FSN / ReplayCmd / Types)
  input  logic [PAYLOAD_W-1:0] payload,  // 240-byte payload, byte k at [8*k +: 8]
  input  logic [SEQ_W-1:0]     seq,      // SeqNum (sender) or ESeqNum (receiver)
  output logic [CRC_W-1:0]     crc       // 64-bit ECRC
);

  logic [MSG_W-1:0] msg;

  always_comb begin
    msg = {payload, hdr};
    msg[PAYLOAD_LSB +: SEQ_W] = payload[SEQ_W-1:0] ^ seq;   // the ISN XOR gates
  end

  always_comb begin
    logic [CRC_W-1:0] r;
    r = '0;
    for (int i = MSG_W - 1; i >= 0; i--) begin
      r = (r[CRC_W-1] ^ msg[i]) ? ((r << 1) ^ CRC64_POLY) : (r << 1);
    end
    crc = r;
  end

endmodule
