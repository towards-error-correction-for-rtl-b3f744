// bch_enc3: encoder of the shortened (85,64) triple-error-correcting BCH
// code used by the 3-ECC configuration.
//
// Systematic: cw[63:0] is the data word, cw[84:64] the 21 check bits, the
// remainder of x^21 d(x) divided by g(x) = m1(x) m3(x) m5(x) over GF(2^7)
// (see cirm_pkg).  Each check bit is an XOR tree over a constant set of data
// bits.  The code is linear, as the XOR transverse read requires.  Purely
// combinational.  The paper evaluates a three-error-correcting code without
// naming one; the BCH construction is this design's choice.
module bch_enc3
  import cirm_pkg::*;
(
  input  logic [DATA_W-1:0]    data_i,
  output logic [BCH3_CW_W-1:0] cw_o
);

  logic [BCH3_CHK_W-1:0] chk;

  for (genvar i = 0; i < BCH3_CHK_W; i++) begin : g_chk
    logic [DATA_W-1:0] covered;
    for (genvar j = 0; j < DATA_W; j++) begin : g_col
      localparam logic [20:0] COL = bch_col_t(3, j);
      assign covered[j] = COL[i];
    end
    assign chk[i] = ^(data_i & covered);
  end

  assign cw_o = {chk, data_i};

endmodule
