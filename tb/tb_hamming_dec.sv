// tb_hamming_dec: encodes random words with a reference encoder, flips zero,
// one or two random bits and checks the decoder's error mask and flags:
// no error -> empty mask; one error anywhere in the 72 bits -> a mask with
// exactly that bit; two errors -> uncorrectable, empty mask.
module tb_hamming_dec;
  import cirm_pkg::*;

  logic [HAM_CW_W-1:0] cw, mask;
  logic err, unc;
  int checks = 0, failures = 0;

  hamming_dec dut (.cw_i(cw), .err_mask_o(mask), .err_o(err), .uncorrectable_o(unc));

  function automatic logic [HAM_CW_W-1:0] ref_enc(logic [DATA_W-1:0] x);
    logic [127:0] word = '0;
    logic [6:0]   chk  = '0;
    int j = 0;
    for (int p = 1; p <= 71; p++)
      if ((p & (p - 1)) != 0) begin word[p] = x[j]; j++; end
    for (int i = 0; i < 7; i++)
      for (int p = 1; p <= 71; p++)
        if (((p >> i) & 1) == 1 && (p & (p - 1)) != 0) chk[i] ^= word[p];
    return {^{chk, x}, chk, x};
  endfunction

  task automatic expect_(logic [HAM_CW_W-1:0] m, logic e, logic u, string what);
    checks++;
    if (mask !== m || err !== e || unc !== u) begin
      failures++;
      $display("FAIL %s: mask=%h err=%b unc=%b exp mask=%h err=%b unc=%b",
               what, mask, err, unc, m, e, u);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [HAM_CW_W-1:0] good, e1, e2;
    int p1, p2;
    for (int t = 0; t < 200; t++) begin
      good = ref_enc({$urandom, $urandom});
      cw = good; #1;
      expect_('0, 1'b0, 1'b0, "clean");
      // every single-bit position once per 72 iterations, then random
      p1 = (t < HAM_CW_W) ? t : int'($urandom_range(HAM_CW_W - 1));
      e1 = '0; e1[p1] = 1'b1;
      cw = good ^ e1; #1;
      expect_(e1, 1'b1, 1'b0, $sformatf("single @%0d", p1));
      p2 = int'($urandom_range(HAM_CW_W - 1));
      if (p2 == p1) p2 = (p1 + 1) % HAM_CW_W;
      e2 = e1; e2[p2] = 1'b1;
      cw = good ^ e2; #1;
      expect_('0, 1'b0, 1'b1, $sformatf("double @%0d,%0d", p1, p2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
