// bch_enc2: encoder of the shortened (78,64) double-error-correcting BCH
// code used by the 2-ECC configuration.
//
// Systematic: cw[63:0] is the data word, cw[77:64] the 14 check bits, the
// remainder of x^14 d(x) divided by the generator polynomial g(x) =
// m1(x) m3(x) over GF(2^7) (see cirm_pkg).  Each check bit is therefore an
// XOR tree over a constant set of data bits (column j is x^(j+14) mod g).
// The code is linear, so the XOR of stored codewords is a codeword, which is
// what the XOR transverse read needs.  Purely combinational.  The paper
// applies BCH codes for 2-ECC without giving a construction; field
// polynomial, shortening and bit order are this design's choices.
module bch_enc2
  import cirm_pkg::*;
(
  input  logic [DATA_W-1:0]   data_i,
  output logic [BCH_CW_W-1:0] cw_o
);

  logic [BCH_CHK_W-1:0] chk;

  for (genvar i = 0; i < BCH_CHK_W; i++) begin : g_chk
    logic [DATA_W-1:0] covered;
    for (genvar j = 0; j < DATA_W; j++) begin : g_col
      localparam logic [BCH_CHK_W-1:0] COL = bch_col(j);
      assign covered[j] = COL[i];
    end
    assign chk[i] = ^(data_i & covered);
  end

  assign cw_o = {chk, data_i};

endmodule
