// tb_fec_dec: checks the 3-way interleaved SSC RS decoder.
// Flits are encoded by the reference encoder. Checked: clean flits pass with no flags;
// one byte error in every sub-block at once, and any burst of up to three bytes, is
// corrected; errors confined to check bytes are corrected without touching data; two
// byte errors in one sub-block are never silently passed as clean, and roughly two thirds
// of them are flagged uncorrectable thanks to the shortened positions (the paper's figure
// for one sub-block is about 2/3; the test requires at least half over 300 trials).
module tb_fec_dec;
  import tb_rxl_ref_pkg::*;

  logic [FLIT_W-1:0] flit_in;
  logic [DATA_W-1:0] data_out;
  logic              corrected, uncorrectable;
  int checks = 0, failures = 0;

  fec_dec dut (.flit_in, .data_out, .corrected, .uncorrectable);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #1000000;
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

  function automatic logic [7:0] nz8();
    return 8'(1 + ($urandom % 255));
  endfunction

  initial begin
    logic [DATA_W-1:0] d;
    logic [FLIT_W-1:0] f;
    int detected, trials;
    for (int i = 0; i < 40; i++) begin
      d = rand_data(); f = ref_fec_encode(d);
      flit_in = f;
      #1 check(data_out == d && !corrected && !uncorrectable, "clean flit");
      // burst of 1..3 bytes anywhere in the flit
      begin
        int len, st;
        len = 1 + ($urandom % 3);
        st  = $urandom % (256 - len + 1);
        flit_in = f;
        for (int k = st; k < st + len; k++) flit_in[8*k +: 8] ^= nz8();
        #1 check(data_out == d && !uncorrectable && corrected,
                 $sformatf("burst of %0d at byte %0d corrected", len, st));
      end
      // one error in each sub-block at random positions
      flit_in = f;
      for (int w = 0; w < 3; w++) begin
        int pos;
        pos = $urandom % (ref_sub_len(w) + 2);
        flit_in[8*ref_pos_byte(w, pos) +: 8] ^= nz8();
      end
      #1 check(data_out == d && !uncorrectable && corrected, "one error per sub-block corrected");
      // errors in check bytes only
      flit_in = f;
      flit_in[8*(250 + ($urandom % 6)) +: 8] ^= nz8();
      #1 check(data_out == d && !uncorrectable, "check-byte error leaves data intact");
    end
    detected = 0; trials = 300;
    for (int i = 0; i < trials; i++) begin
      int w, p1, p2;
      d = rand_data(); f = ref_fec_encode(d);
      w  = $urandom % 3;
      p1 = $urandom % (ref_sub_len(w) + 2);
      do p2 = $urandom % (ref_sub_len(w) + 2); while (p2 == p1);
      flit_in = f;
      flit_in[8*ref_pos_byte(w, p1) +: 8] ^= nz8();
      flit_in[8*ref_pos_byte(w, p2) +: 8] ^= nz8();
      #1;
      check(uncorrectable || corrected, "double error never looks clean");
      if (uncorrectable) detected++;
    end
    $display("double-error detection: %0d of %0d", detected, trials);
    check(detected * 2 > trials, "shortened-code detection of double errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
