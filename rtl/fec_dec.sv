// fec_dec: decoder for the 3-way interleaved single-symbol-correcting RS code of fec_enc.
//
// For each of the three sub-blocks the decoder forms the two syndromes
// S0 = c(alpha^0) and S1 = c(alpha^1). Both zero: no error. Both non-zero: a single
// byte error of value S0 at the position pos where S0*alpha^pos = S1. The search compares
// S1 with S0*alpha^pos for every position of the sub-block in parallel. If no position
// of the real (shortened) codeword matches, the error would have to lie in one of the
// zero-padded positions that are never sent, so the decoder reports it as uncorrectable
// instead of miscorrecting; the same holds when exactly one syndrome is zero. This is the
// extra detection that shortened RS codes give and that the link layer relies on to drop
// most uncorrectable flits early.
//
// Purely combinational. data_out is the corrected header+payload+CRC (250 bytes);
// corrected says at least one byte was repaired; uncorrectable says at least one
// sub-block held an error the code could not correct (data_out is then meaningless).
module fec_dec
  import rxl_pkg::*;
(
  input  logic [FLIT_W-1:0] flit_in,
  output logic [DATA_W-1:0] data_out,
  output logic              corrected,
  output logic              uncorrectable
);

  // byte index in the flit of codeword position pos of sub-block w
  function automatic int pos_to_byte(int w, int pos);
    if (pos == 0) return DATA_BYTES + ((w + 2) % FEC_WAYS);
    if (pos == 1) return DATA_BYTES + ((w + 2) % FEC_WAYS) + FEC_WAYS;
    return w + FEC_WAYS * (pos - 2);
  endfunction

  always_comb begin
    logic [7:0] s0, s1, t;
    logic       found;
    s0            = '0;
    s1            = '0;
    t             = '0;
    found         = 1'b0;
    data_out      = flit_in[DATA_W-1:0];
    corrected     = 1'b0;
    uncorrectable = 1'b0;
    for (int w = 0; w < FEC_WAYS; w++) begin
      // syndromes; S1 by Horner evaluation from the highest position down
      s0 = '0;
      s1 = '0;
      for (int pos = sub_data_len(w) + 1; pos >= 0; pos--) begin
        s0 ^= flit_in[8*pos_to_byte(w, pos) +: 8];
        s1  = gf_xtime(s1) ^ flit_in[8*pos_to_byte(w, pos) +: 8];
      end
      found = 1'b0;
      if (s0 != 8'h00 && s1 != 8'h00) begin
        // parallel search: t runs through S0*alpha^pos
        t = s0;
        for (int pos = 0; pos < sub_data_len(w) + 2; pos++) begin
          if (t == s1) begin
            found = 1'b1;
            // check bytes need no repair: they are not passed on
            if (pos >= 2) data_out[8*pos_to_byte(w, pos) +: 8] ^= s0;
          end
          t = gf_xtime(t);
        end
        if (found) corrected = 1'b1;
        else       uncorrectable = 1'b1;
      end else if (s0 != 8'h00 || s1 != 8'h00) begin
        uncorrectable = 1'b1;
      end
    end
  end

endmodule
