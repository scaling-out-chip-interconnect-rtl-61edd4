// tb_rxl_switch: checks the two-port FEC-only switch.
// Flits are FEC-encoded by the reference and sent in both directions with: no error; a
// random burst of up to three bytes (must leave the switch corrected and freshly
// re-encoded, two cycles later); a double error in one sub-block with equal error values
// (S0 = 0, always uncorrectable: must be discarded and reported); an internal switch
// error (must leave as a valid codeword of the corrupted data, invisible to the next FEC).
module tb_rxl_switch;
  import tb_rxl_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic dn_in_valid = 0, up_in_valid = 0;
  logic [FLIT_W-1:0] dn_in_flit = '0, up_in_flit = '0;
  logic dn_out_valid, up_out_valid;
  logic [FLIT_W-1:0] dn_out_flit, up_out_flit;
  logic [DATA_W-1:0] dn_int_err = '0, up_int_err = '0;
  logic dn_drop, up_drop, dn_corrected, up_corrected;

  int checks = 0, failures = 0, cycle = 0;
  int n_corr = 0, n_drop = 0, n_int = 0;

  rxl_switch dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  initial begin
    #500000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [DATA_W-1:0] rand_data();
    logic [DATA_W-1:0] d;
    for (int k = 0; k < DATA_W / 8; k++) d[8*k +: 8] = 8'($urandom);
    return d;
  endfunction

  initial begin
    logic [DATA_W-1:0] d, ie;
    logic [FLIT_W-1:0] f;
    int kind;
    bit up;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 120; i++) begin
      d = rand_data(); f = ref_fec_encode(d);
      kind = i % 4; up = (i / 4) % 2;
      ie = '0;
      if (kind == 1) begin
        int len, st;
        len = 1 + ($urandom % 3); st = $urandom % (256 - len + 1);
        for (int k = st; k < st + len; k++) f[8*k +: 8] ^= 8'(1 + ($urandom % 255));
      end else if (kind == 2) begin
        int w, p1, p2;
        logic [7:0] e;
        w = $urandom % 3; e = 8'(1 + ($urandom % 255));
        p1 = $urandom % 85; p2 = (p1 + 1 + ($urandom % 84)) % 85;
        f[8*ref_pos_byte(w, p1) +: 8] ^= e;
        f[8*ref_pos_byte(w, p2) +: 8] ^= e;
      end else if (kind == 3) begin
        ie[8*($urandom % 250) +: 8] = 8'(1 + ($urandom % 255));
      end
      if (up) begin up_in_valid = 1; up_in_flit = f; up_int_err = ie; end
      else    begin dn_in_valid = 1; dn_in_flit = f; dn_int_err = ie; end
      @(posedge clk); #1;
      dn_in_valid = 0; up_in_valid = 0;
      check(!(dn_out_valid || up_out_valid), "nothing out after one cycle");
      @(posedge clk); #1;
      dn_int_err = '0; up_int_err = '0;
      if (kind == 2) begin
        check(!(dn_out_valid || up_out_valid), "uncorrectable flit discarded");
        check(up ? up_drop : dn_drop, "drop reported");
        n_drop++;
      end else begin
        check(up ? up_out_valid : dn_out_valid, "flit forwarded after two cycles");
        check((up ? up_out_flit : dn_out_flit) == ref_fec_encode(d ^ ie), "re-encoded flit");
        check(!(up ? up_drop : dn_drop), "no drop report");
        if (kind == 1) begin
          check(up ? up_corrected : dn_corrected, "correction reported");
          n_corr++;
        end
        if (kind == 3) begin
          check(ref_syndromes(up ? up_out_flit : dn_out_flit) == '0, "internal error invisible to FEC");
          n_int++;
        end
      end
    end
    check(n_corr > 0 && n_drop > 0 && n_int > 0, "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
