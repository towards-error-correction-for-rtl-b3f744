// bch_dec2: decoder of the shortened (78,64) double-error-correcting BCH
// code, producing an error mask like hamming_dec.
//
// Syndromes S1 = r(alpha) and S3 = r(alpha^3) are XOR trees over the received
// bits with constant GF(2^7) columns.  With the error-locator form
// X^2 + S1 X + s2 = 0, s2 = (S3 + S1^3) / S1, a position with field value
// X = alpha^pos is in error exactly when X solves it (a parallel Chien
// search over the 78 positions).  One error gives s2 = 0 and the single root
// X = S1; two errors give two roots.  If the roots found are fewer than the
// degree of the locator, or S1 = 0 while S3 != 0, more than two bits are in
// error and uncorrectable_o is raised with an empty mask.  Three or more
// errors may also be miscorrected, as with any distance-5 code.
// Purely combinational.  The decoding method is the standard closed form for
// t = 2; the paper names BCH codes but gives no decoder.
module bch_dec2
  import cirm_pkg::*;
(
  input  logic [BCH_CW_W-1:0] cw_i,
  output logic [BCH_CW_W-1:0] err_mask_o,
  output logic [1:0]          n_err_o,        // 0, 1 or 2 errors corrected
  output logic                uncorrectable_o
);

  logic [6:0] s1, s3, s1_cube, s2;
  logic [BCH_CW_W-1:0] root;

  for (genvar b = 0; b < 7; b++) begin : g_syn
    logic [BCH_CW_W-1:0] c1, c3;
    for (genvar k = 0; k < BCH_CW_W; k++) begin : g_col
      localparam logic [6:0] A1 = gf_exp(bch_pos(k));
      localparam logic [6:0] A3 = gf_exp(3 * bch_pos(k));
      assign c1[k] = A1[b];
      assign c3[k] = A3[b];
    end
    assign s1[b] = ^(cw_i & c1);
    assign s3[b] = ^(cw_i & c3);
  end

  assign s1_cube = gf_mul(gf_mul(s1, s1), s1);
  assign s2      = gf_mul(s3 ^ s1_cube, gf_inv(s1));

  for (genvar k = 0; k < BCH_CW_W; k++) begin : g_chien
    localparam logic [6:0] X  = gf_exp(bch_pos(k));
    localparam logic [6:0] X2 = gf_mul(X, X);
    assign root[k] = ((X2 ^ gf_mul(s1, X) ^ s2) == 7'd0) && (s1 != 7'd0);
  end

  always_comb begin
    int unsigned n_roots;
    n_roots = 0;
    for (int k = 0; k < BCH_CW_W; k++) n_roots += int'(root[k]);
    err_mask_o      = '0;
    n_err_o         = '0;
    uncorrectable_o = 1'b0;
    if (s1 == '0) begin
      uncorrectable_o = (s3 != '0);
    end else if (n_roots == ((s2 == '0) ? 1 : 2)) begin
      err_mask_o = root;
      n_err_o    = 2'(n_roots);
    end else begin
      uncorrectable_o = 1'b1;
    end
  end

endmodule
