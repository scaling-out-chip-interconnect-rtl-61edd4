// tb_rxl_ref_pkg: reference models used by the RXL testbenches.
//
// These functions recompute the flit format independently of the RTL: the ECRC as a
// bit-at-a-time polynomial division of the message, with SeqNum XORed into the low
// payload bits, and the interleaved RS check bytes from a carry-less multiply followed by
// reduction modulo 0x11D (a different GF(2^8) multiplication algorithm from the RTL's).
package tb_rxl_ref_pkg;

  localparam int PAYLOAD_W = 1920;
  localparam int MSG_W     = 1936;
  localparam int DATA_W    = 2000;
  localparam int FLIT_W    = 2048;

  function automatic logic [63:0] ref_crc(logic [MSG_W-1:0] msg);
    logic [63:0] r;
    logic        fb;
    r = '0;
    for (int i = MSG_W - 1; i >= 0; i--) begin
      fb = r[63] ^ msg[i];
      r  = {r[62:0], 1'b0};
      if (fb) r ^= 64'h42F0E1EBA9EA3693;
    end
    return r;
  endfunction

  function automatic logic [63:0] ref_isn_crc(logic [15:0] hdr, logic [PAYLOAD_W-1:0] payload,
                                              logic [9:0] seq);
    logic [PAYLOAD_W-1:0] p;
    p = payload;
    p[9:0] ^= seq;
    return ref_crc({p, hdr});
  endfunction

  // header: {FSN[9:8], ReplayCmd, Types, FSN[7:0]}
  function automatic logic [15:0] ref_hdr(logic [1:0] cmd, logic [3:0] types, logic [9:0] fsn);
    return {fsn[9:8], cmd, types, fsn[7:0]};
  endfunction

  function automatic logic [DATA_W-1:0] ref_data(logic [15:0] hdr, logic [PAYLOAD_W-1:0] payload,
                                                 logic [9:0] seq);
    return {ref_isn_crc(hdr, payload, seq), payload, hdr};
  endfunction

  function automatic logic [PAYLOAD_W-1:0] rand_payload();
    logic [PAYLOAD_W-1:0] p;
    for (int i = 0; i < PAYLOAD_W / 32; i++) p[32*i +: 32] = $urandom;
    return p;
  endfunction

  // GF(2^8) multiply: carry-less product, then reduction by x^8+x^4+x^3+x^2+1
  function automatic logic [7:0] ref_gf_mul(logic [7:0] a, logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 16'(a) << i;
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= 16'h11D << (i - 8);
    return p[7:0];
  endfunction

  function automatic logic [7:0] ref_alpha_pow(int e);
    logic [7:0] r;
    r = 8'h01;
    for (int i = 0; i < e; i++) r = ref_gf_mul(r, 8'h02);
    return r;
  endfunction

  // flit byte index of RS codeword position pos in sub-block w (see fec_enc)
  function automatic int ref_pos_byte(int w, int pos);
    int fec0;
    fec0 = 250 + ((w + 2) % 3);
    if (pos == 0) return fec0;
    if (pos == 1) return fec0 + 3;
    return w + 3 * (pos - 2);
  endfunction

  function automatic int ref_sub_len(int w);   // data bytes in sub-block w
    return (w == 0) ? 84 : 83;
  endfunction

  // syndromes of the three sub-blocks, {S1, S0} per sub-block
  function automatic logic [47:0] ref_syndromes(logic [FLIT_W-1:0] f);
    logic [47:0] s;
    logic [7:0]  s0, s1, apow;
    s = '0;
    for (int w = 0; w < 3; w++) begin
      s0 = '0; s1 = '0; apow = 8'h01;
      for (int pos = 0; pos < ref_sub_len(w) + 2; pos++) begin
        s0 ^= f[8*ref_pos_byte(w, pos) +: 8];
        s1 ^= ref_gf_mul(f[8*ref_pos_byte(w, pos) +: 8], apow);
        apow = ref_gf_mul(apow, 8'h02);
      end
      s[16*w +: 16] = {s1, s0};
    end
    return s;
  endfunction

  function automatic logic [FLIT_W-1:0] ref_fec_encode(logic [DATA_W-1:0] d);
    logic [FLIT_W-1:0] f;
    logic [7:0] a, b, p0, p1, inv3, apow;
    inv3 = '0;
    for (int i = 1; i < 256; i++) if (ref_gf_mul(8'h03, 8'(i)) == 8'h01) inv3 = 8'(i);
    f = '0;
    f[DATA_W-1:0] = d;
    for (int w = 0; w < 3; w++) begin
      a = '0; b = '0; apow = 8'h04;   // alpha^2 for the first data byte
      for (int j = 0; j < ref_sub_len(w); j++) begin
        a ^= d[8*(w + 3*j) +: 8];
        b ^= ref_gf_mul(d[8*(w + 3*j) +: 8], apow);
        apow = ref_gf_mul(apow, 8'h02);
      end
      p1 = ref_gf_mul(a ^ b, inv3);
      p0 = a ^ p1;
      f[8*ref_pos_byte(w, 0) +: 8] = p0;
      f[8*ref_pos_byte(w, 1) +: 8] = p1;
    end
    return f;
  endfunction

endpackage
