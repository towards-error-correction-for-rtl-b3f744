// bch_dec3: decoder of the shortened (85,64) triple-error-correcting BCH
// code, producing an error mask like hamming_dec.
//
// Syndromes S1, S3, S5 (r evaluated at alpha, alpha^3, alpha^5) are XOR
// trees with constant columns.  Peterson's closed form for t = 3 gives the
// locator X^3 + s1 X^2 + s2 X + s3 with D = S1^3 + S3:
//   s1 = S1,  s2 = (S1^2 S3 + S5) / D,  s3 = D + S1 s2      (D != 0)
// D != 0 holds for two or three errors (D = (X1+X2)(X1+X3)(X2+X3) for three,
// X1 X2 (X1+X2) for two, and then s3 = 0).  D = 0 with S5 = S1^5 != 0 is a
// single error at X = S1.  A parallel Chien search tests all 85 positions;
// if the roots found are fewer than the locator degree, or the syndromes fit
// no case, uncorrectable_o is raised with an empty mask.  Four or more
// errors may be miscorrected (distance-7 code).  Purely combinational.
// The paper evaluates 3-ECC but gives no code or decoder; this is the
// standard closed-form decoder for t = 3.
module bch_dec3
  import cirm_pkg::*;
(
  input  logic [BCH3_CW_W-1:0] cw_i,
  output logic [BCH3_CW_W-1:0] err_mask_o,
  output logic [1:0]           n_err_o,        // 0 to 3 errors corrected
  output logic                 uncorrectable_o
);

  logic [6:0] s1, s3, s5, s1_2, s1_3, s1_5, d, sg2, sg3;
  logic [BCH3_CW_W-1:0] root3, root1;

  for (genvar b = 0; b < 7; b++) begin : g_syn
    logic [BCH3_CW_W-1:0] c1, c3, c5;
    for (genvar k = 0; k < BCH3_CW_W; k++) begin : g_col
      localparam logic [6:0] A1 = gf_exp(bch3_pos(k));
      localparam logic [6:0] A3 = gf_exp(3 * bch3_pos(k));
      localparam logic [6:0] A5 = gf_exp(5 * bch3_pos(k));
      assign c1[k] = A1[b];
      assign c3[k] = A3[b];
      assign c5[k] = A5[b];
    end
    assign s1[b] = ^(cw_i & c1);
    assign s3[b] = ^(cw_i & c3);
    assign s5[b] = ^(cw_i & c5);
  end

  assign s1_2 = gf_mul(s1, s1);
  assign s1_3 = gf_mul(s1_2, s1);
  assign s1_5 = gf_mul(s1_3, s1_2);
  assign d    = s1_3 ^ s3;
  assign sg2  = gf_mul(gf_mul(s1_2, s3) ^ s5, gf_inv(d));
  assign sg3  = d ^ gf_mul(s1, sg2);

  for (genvar k = 0; k < BCH3_CW_W; k++) begin : g_chien
    localparam logic [6:0] X  = gf_exp(bch3_pos(k));
    localparam logic [6:0] X2 = gf_mul(X, X);
    localparam logic [6:0] X3 = gf_mul(X2, X);
    assign root3[k] = ((X3 ^ gf_mul(s1, X2) ^ gf_mul(sg2, X) ^ sg3) == 7'd0);
    assign root1[k] = (X == s1);
  end

  always_comb begin
    int unsigned n3, n1;
    n3 = 0;
    n1 = 0;
    for (int k = 0; k < BCH3_CW_W; k++) begin
      n3 += int'(root3[k]);
      n1 += int'(root1[k]);
    end
    err_mask_o      = '0;
    n_err_o         = '0;
    uncorrectable_o = 1'b0;
    if (s1 == '0 && s3 == '0 && s5 == '0) begin
      // clean
    end else if (d != '0) begin
      if (n3 == ((sg3 == '0) ? 2 : 3)) begin
        err_mask_o = root3;
        n_err_o    = 2'(n3);
      end else begin
        uncorrectable_o = 1'b1;
      end
    end else if (s1 != '0 && s5 == s1_5 && n1 == 1) begin
      err_mask_o = root1;
      n_err_o    = 2'd1;
    end else begin
      uncorrectable_o = 1'b1;
    end
  end

endmodule
