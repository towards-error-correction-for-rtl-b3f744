// tb_hamming_enc: checks the (72,64) SEC-DED encoder against a reference
// built from the textbook definition (data at the non-power-of-two positions
// 3..71 of a 71-bit Hamming word, check bit i = parity of all positions with
// bit i set, plus even overall parity), and checks that the code is linear:
// the XOR of three codewords is the codeword of the XOR of their data.
module tb_hamming_enc;
  import cirm_pkg::*;

  logic [DATA_W-1:0]   d;
  logic [HAM_CW_W-1:0] cw;
  int checks = 0, failures = 0;

  hamming_enc dut (.data_i(d), .cw_o(cw));

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

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DATA_W-1:0] a, b, c;
    logic [HAM_CW_W-1:0] ca, cb, cc;
    for (int t = 0; t < 300; t++) begin
      d = (t == 0) ? '0 : (t == 1) ? '1 : {$urandom, $urandom};
      #1;
      checks++;
      if (cw !== ref_enc(d)) begin
        failures++;
        $display("FAIL enc d=%h got %h exp %h", d, cw, ref_enc(d));
      end
      checks++;
      if (^cw !== 1'b0) begin failures++; $display("FAIL overall parity odd"); end
    end
    for (int t = 0; t < 100; t++) begin
      a = {$urandom, $urandom}; b = {$urandom, $urandom}; c = {$urandom, $urandom};
      d = a; #1; ca = cw;
      d = b; #1; cb = cw;
      d = c; #1; cc = cw;
      d = a ^ b ^ c; #1;
      checks++;
      if ((ca ^ cb ^ cc) !== cw) begin failures++; $display("FAIL linearity"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
