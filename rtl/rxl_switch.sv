// rxl_switch: a two-port RXL switching device (single-level switching).
//
// One rxl_switch_port per direction: downstream (host side to device side) and upstream
// (device side to host side). Each direction FEC-checks, corrects or discards, and
// FEC-re-encodes every flit, without any sequence tracking: sequence and end-to-end data
// integrity are checked only at the endpoints. Only two ports and a fixed route are
// modelled; the paper's argument concerns what a switch does to a flit, not how it
// routes, so routing tables and arbitration are left out.
//
// Latency: two cycles per direction. drop_* pulse when a flit is discarded.
module rxl_switch
  import rxl_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              dn_in_valid,
  input  logic [FLIT_W-1:0] dn_in_flit,
  output logic              dn_out_valid,
  output logic [FLIT_W-1:0] dn_out_flit,
  input  logic              up_in_valid,
  input  logic [FLIT_W-1:0] up_in_flit,
  output logic              up_out_valid,
  output logic [FLIT_W-1:0] up_out_flit,
  input  logic [DATA_W-1:0] dn_int_err,    // fault injection, tie to zero
  input  logic [DATA_W-1:0] up_int_err,    // fault injection, tie to zero
  output logic              dn_drop,
  output logic              up_drop,
  output logic              dn_corrected,
  output logic              up_corrected
);

  rxl_switch_port u_dn (
    .clk, .rst_n,
    .in_valid    (dn_in_valid),
    .flit_in     (dn_in_flit),
    .int_err     (dn_int_err),
    .out_valid   (dn_out_valid),
    .flit_out    (dn_out_flit),
    .drop_report (dn_drop),
    .corrected   (dn_corrected)
  );

  rxl_switch_port u_up (
    .clk, .rst_n,
    .in_valid    (up_in_valid),
    .flit_in     (up_in_flit),
    .int_err     (up_int_err),
    .out_valid   (up_out_valid),
    .flit_out    (up_out_flit),
    .drop_report (up_drop),
    .corrected   (up_corrected)
  );

endmodule
