// fec_enc: 3-way interleaved single-symbol-correcting Reed-Solomon encoder for 256B flits.
//
// The 250 bytes of header, payload and CRC are split into three interleaved sub-blocks:
// flit byte i belongs to sub-block i mod 3, which gives 84, 83 and 83 data bytes. Each
// sub-block is a shortened RS code over GF(2^8) with two check symbols, so it can correct
// one byte error; with the interleave, any burst of up to three bytes is corrected. The
// six check bytes are flit bytes 250..255 and follow the same i mod 3 rule (sub-block 1
// owns bytes 250 and 253, sub-block 2 bytes 251 and 254, sub-block 0 bytes 252 and 255).
//
// Code construction (this design's choice; the paper gives only the code family): the
// codeword polynomial c(x) has the first check byte of the sub-block at position 0, the
// second at position 1 and the sub-block's j-th data byte at position j+2, and c(x) has
// roots alpha^0 and alpha^1 (GF polynomial 0x11D). With A = sum d_j and
// B = sum d_j*alpha^(j+2): p1 = (A+B)/(1+alpha), p0 = A+p1.
//
// The code is systematic: flit bytes 0..249 are data_in unchanged (wires, no logic), and
// only bytes 250..255 are computed.
//
// Purely combinational: flit_out is valid in the same cycle as data_in.
module fec_enc
  import rxl_pkg::*;
(
  input  logic [DATA_W-1:0] data_in,   // bytes 0..249: header, payload, CRC
  output logic [FLIT_W-1:0] flit_out   // full 256-byte flit with FEC bytes appended
);

  always_comb begin
    logic [7:0] a, b, p0, p1;
    flit_out = '0;
    flit_out[DATA_W-1:0] = data_in;
    for (int k = 0; k < FEC_WAYS; k++) begin
      // Horner evaluation from the last data byte (highest position) down to position 2:
      // b = sum d_j * alpha^j, then two more multiplications by alpha give alpha^(j+2).
      a = '0;
      b = '0;
      for (int j = sub_data_len(k) - 1; j >= 0; j--) begin
        a ^= data_in[8*(k + FEC_WAYS*j) +: 8];
        b  = gf_xtime(b) ^ data_in[8*(k + FEC_WAYS*j) +: 8];
      end
      b  = gf_xtime(gf_xtime(b));
      p1 = gf_mul(a ^ b, GF_INV_1PA);
      p0 = a ^ p1;
      // first and second check byte owned by sub-block k
      flit_out[8*(DATA_BYTES + ((k + 2) % FEC_WAYS)) +: 8]            = p0;
      flit_out[8*(DATA_BYTES + ((k + 2) % FEC_WAYS) + FEC_WAYS) +: 8] = p1;
    end
  end

endmodule
