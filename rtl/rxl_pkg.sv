// rxl_pkg: shared constants, types and Galois-field helpers of the RXL link.
//
// RXL carries CXL-style 256-byte flits. A flit is a flat 2048-bit vector in which
// byte i occupies bits [8*i +: 8]:
//   bytes   0..1    header (FSN[9:8], ReplayCmd[1:0], Types[3:0], FSN[7:0])
//   bytes   2..241  240-byte payload
//   bytes 242..249  64-bit end-to-end CRC (ECRC), which implicitly carries SeqNum
//   bytes 250..255  6 FEC bytes: two RS check symbols for each of 3 interleaved sub-blocks
// The field sizes and the header field order are those of the CXL 256B flit. The bit
// placement of the header fields inside the 16-bit header, the CRC polynomial and the
// Galois field of the FEC are this design's choices (the CXL values are not reproduced).
package rxl_pkg;

  localparam int FLIT_BYTES    = 256;
  localparam int HDR_BYTES     = 2;
  localparam int PAYLOAD_BYTES = 240;
  localparam int CRC_BYTES     = 8;
  localparam int FEC_BYTES     = 6;
  localparam int FEC_WAYS      = 3;
  localparam int SEQ_W         = 10;           // FSN / SeqNum / ESeqNum width

  localparam int FLIT_W    = FLIT_BYTES * 8;                          // 2048
  localparam int HDR_W     = HDR_BYTES * 8;                           // 16
  localparam int PAYLOAD_W = PAYLOAD_BYTES * 8;                       // 1920
  localparam int MSG_W     = HDR_W + PAYLOAD_W;                       // 1936, CRC input
  localparam int CRC_W     = CRC_BYTES * 8;                           // 64
  localparam int DATA_BYTES = HDR_BYTES + PAYLOAD_BYTES + CRC_BYTES;  // 250, FEC input
  localparam int DATA_W    = DATA_BYTES * 8;                          // 2000
  localparam int FEC_W     = FEC_BYTES * 8;                           // 48

  // Bit offsets inside the flit vector
  localparam int HDR_LSB     = 0;
  localparam int PAYLOAD_LSB = HDR_W;
  localparam int CRC_LSB     = MSG_W;
  localparam int FEC_LSB     = DATA_W;

  // 64-bit CRC generator polynomial (CRC-64/ECMA-182, x^64 term implied).
  localparam logic [63:0] CRC64_POLY = 64'h42F0_E1EB_A9EA_3693;

  // ReplayCmd encoding (CXL 256B flit)
  typedef enum logic [1:0] {
    RC_NONE   = 2'd0,   // no piggybacked acknowledgment, FSN is zero
    RC_ACK    = 2'd1,   // FSN = AckNum
    RC_NACK   = 2'd2,   // FSN = last good SeqNum, go-back-N replay
    RC_NACK_1 = 2'd3    // single-flit replay, never generated by this design
  } replay_cmd_e;

  // Flit type carried in the Types field. Only the distinction between a flit that
  // carries upper-layer payload and one that carries only an acknowledgment matters here.
  localparam logic [3:0] TYPE_IDLE = 4'h0;

  typedef struct packed {
    logic [1:0]  fsn_hi;      // FSN[9:8]
    replay_cmd_e replay_cmd;  // ReplayCmd[1:0]
    logic [3:0]  types;       // Types[3:0]
    logic [7:0]  fsn_lo;      // FSN[7:0]
  } flit_hdr_t;

  function automatic flit_hdr_t make_hdr(replay_cmd_e cmd, logic [3:0] types,
                                         logic [SEQ_W-1:0] fsn);
    flit_hdr_t h;
    h.fsn_hi     = fsn[9:8];
    h.replay_cmd = cmd;
    h.types      = types;
    h.fsn_lo     = fsn[7:0];
    return h;
  endfunction

  function automatic logic [SEQ_W-1:0] hdr_fsn(flit_hdr_t h);
    return {h.fsn_hi, h.fsn_lo};
  endfunction

  // ---- GF(2^8), primitive polynomial x^8+x^4+x^3+x^2+1 (0x11D), alpha = 0x02 ----
  function automatic logic [7:0] gf_mul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p;
    logic [7:0] aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= aa;
      aa = aa[7] ? ((aa << 1) ^ 8'h1D) : (aa << 1);
    end
    return p;
  endfunction

  // multiply by alpha (x): one shift and a conditional XOR
  function automatic logic [7:0] gf_xtime(logic [7:0] a);
    return a[7] ? ((a << 1) ^ 8'h1D) : (a << 1);
  endfunction

  // 1/(1+alpha) = 1/0x03 in this field
  localparam logic [7:0] GF_INV_1PA = 8'hF4;

  // Number of data bytes (header+payload+CRC) in FEC sub-block w: byte i of the flit
  // belongs to sub-block i mod 3, giving 84, 83 and 83 data bytes.
  function automatic int sub_data_len(int w);
    return (DATA_BYTES - w + FEC_WAYS - 1) / FEC_WAYS;
  endfunction

endpackage
