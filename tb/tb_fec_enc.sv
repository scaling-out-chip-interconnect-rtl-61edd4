// tb_fec_enc: checks the 3-way interleaved SSC RS encoder.
// The data bytes must pass unchanged, every sub-block of the encoded flit must have zero
// syndromes, and the check bytes must equal the reference encoder's.
module tb_fec_enc;
  import tb_rxl_ref_pkg::*;

  logic [DATA_W-1:0] data_in;
  logic [FLIT_W-1:0] flit_out;
  int checks = 0, failures = 0;

  fec_enc dut (.data_in, .flit_out);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 100; i++) begin
      for (int k = 0; k < DATA_W / 8; k++) data_in[8*k +: 8] = 8'($urandom);
      if (i == 0) data_in = '0;
      #1;
      check(flit_out[DATA_W-1:0] == data_in, "data bytes pass through");
      check(ref_syndromes(flit_out) == '0, $sformatf("zero syndromes, vector %0d", i));
      check(flit_out == ref_fec_encode(data_in), "check bytes equal reference");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
