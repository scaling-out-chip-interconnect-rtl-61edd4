// rxl_switch_port: one forwarding direction of an RXL switch.
//
// The switch works at the link layer only and keeps no per-connection state: it never
// looks at sequence numbers or the ECRC. Each incoming flit is registered, FEC-decoded
// (fec_dec corrects up to one byte per interleaved sub-block, so any 3-byte burst), and,
// if the decoder found it correctable, re-encoded with fresh FEC bytes (fec_enc) and sent
// on, registered again. A flit the FEC decoder flags as uncorrectable is discarded and
// reported on drop_report (a one-cycle pulse, for the diagnostic report to the
// originator); the endpoint's ISN check will notice the missing flit.
//
// int_err is a fault-injection input XORed into the decoded flit between decoder and
// encoder. It models corruption inside the switch (a buffer or logic error), which FEC
// cannot see because it is re-encoded afterwards; only the endpoint ECRC can catch it.
// Tie it to zero in normal use.
//
// Latency: two cycles from flit_in to flit_out.
module rxl_switch_port
  import rxl_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [FLIT_W-1:0] flit_in,
  input  logic [DATA_W-1:0] int_err,
  output logic              out_valid,
  output logic [FLIT_W-1:0] flit_out,
  output logic              drop_report,
  output logic              corrected
);

  logic              v_q;
  logic [FLIT_W-1:0] f_q;
  logic [DATA_W-1:0] dec_data;
  logic              dec_corr, dec_unc;
  logic [FLIT_W-1:0] enc_flit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0;
      f_q <= '0;
    end else begin
      v_q <= in_valid;
      f_q <= flit_in;
    end
  end

  fec_dec u_dec (
    .flit_in       (f_q),
    .data_out      (dec_data),
    .corrected     (dec_corr),
    .uncorrectable (dec_unc)
  );

  fec_enc u_enc (
    .data_in  (dec_data ^ int_err),
    .flit_out (enc_flit)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      flit_out    <= '0;
      drop_report <= 1'b0;
      corrected   <= 1'b0;
    end else begin
      out_valid   <= v_q && !dec_unc;
      flit_out    <= enc_flit;
      drop_report <= v_q && dec_unc;
      corrected   <= v_q && dec_corr && !dec_unc;
    end
  end

endmodule
