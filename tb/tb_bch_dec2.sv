// tb_bch_dec2: checks the (78,64) BCH encoder and decoder against a
// reference written from the code's definition: a word is a codeword when
// r(alpha) = r(alpha^3) = 0 in GF(2^7) with x^7 + x^3 + 1, evaluated here
// by Horner's rule bit by bit.  Encoded words must be codewords, and linear
// (the XOR of three codewords encodes the XOR of the data).  With one or
// two random bit flips the decoder must return exactly the flipped bits;
// with three flips it must either flag the word uncorrectable or name two
// bits whose flipping gives a codeword (a miscorrection a distance-5 code
// cannot avoid), never a mask that leaves a non-codeword.
module tb_bch_dec2;
  import cirm_pkg::*;

  logic [DATA_W-1:0]   d;
  logic [BCH_CW_W-1:0] cw, rx, mask;
  logic [1:0] nerr;
  logic unc;
  int checks = 0, failures = 0;

  bch_enc2 enc (.data_i(d), .cw_o(cw));
  bch_dec2 dec (.cw_i(rx), .err_mask_o(mask), .n_err_o(nerr), .uncorrectable_o(unc));

  // field arithmetic written independently of the design's package
  function automatic logic [6:0] mulx(logic [6:0] a);   // a * alpha
    return a[6] ? {a[5:0], 1'b0} ^ 7'h09 : {a[5:0], 1'b0};
  endfunction

  // evaluate r(beta) where beta = alpha^step, polynomial exponent of bit k
  // is k+14 for data bits and k-64 for check bits
  function automatic logic [6:0] eval(logic [BCH_CW_W-1:0] r, int step);
    logic [6:0] acc = '0;
    for (int k = 0; k < BCH_CW_W; k++)
      if (r[k]) begin
        logic [6:0] t = 7'd1;
        int e = ((k < 64) ? k + 14 : k - 64) * step;
        for (int i = 0; i < e; i++) t = mulx(t);
        acc ^= t;
      end
    return acc;
  endfunction

  function automatic bit is_cw(logic [BCH_CW_W-1:0] r);
    return eval(r, 1) == 0 && eval(r, 3) == 0;
  endfunction

  task automatic chk_(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial main();

  task automatic main();
    logic [BCH_CW_W-1:0] c0, e, ca, cb;
    logic [DATA_W-1:0] a, b;
    // order of alpha is 127: the field polynomial is primitive
    begin
      logic [6:0] t = 7'd1;
      int ord = 0;
      do begin t = mulx(t); ord++; end while (t != 7'd1);
      chk_(ord == 127, "alpha has order 127");
    end
    for (int t = 0; t < 120; t++) begin
      d = (t == 0) ? '0 : {$urandom, $urandom};
      #1;
      c0 = cw;
      chk_(c0[DATA_W-1:0] == d && is_cw(c0), "encoder output is a codeword");
      rx = c0; #1;
      chk_(mask == '0 && !unc && nerr == 0, "clean word");
      // one error, every position at least once
      e = '0; e[t % BCH_CW_W] = 1'b1;
      rx = c0 ^ e; #1;
      chk_(mask == e && !unc && nerr == 1, $sformatf("single error at %0d", t % BCH_CW_W));
      // two errors
      begin
        int p = int'($urandom_range(BCH_CW_W - 1));
        int q = (p + 1 + int'($urandom_range(BCH_CW_W - 2))) % BCH_CW_W;
        e = '0; e[p] = 1'b1; e[q] = 1'b1;
        rx = c0 ^ e; #1;
        chk_(mask == e && !unc && nerr == 2, $sformatf("double error at %0d,%0d", p, q));
        // three errors
        e[(q + 1 + int'($urandom_range(BCH_CW_W - 3))) % BCH_CW_W] ^= 1'b1;
        if ($countones(e) == 3) begin
          rx = c0 ^ e; #1;
          chk_(unc ? (mask == '0) : ($countones(mask) <= 2 && is_cw(rx ^ mask)),
               "triple error flagged or moved to a codeword");
        end
      end
    end
    // linearity
    for (int t = 0; t < 20; t++) begin
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      d = a; #1; ca = cw;
      d = b; #1; cb = cw;
      d = a ^ b; #1;
      chk_(cw == (ca ^ cb), "linearity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
