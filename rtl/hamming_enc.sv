// hamming_enc: (72,64) SEC-DED Hamming encoder.
//
// Produces the codeword stored on 72 nanowires for one 64-bit data word:
// cw[63:0] is the data, cw[70:64] the seven Hamming check bits and cw[71]
// the overall parity that extends the code to double-error detection.  Check
// bit i is the XOR of the data bits whose Hamming position (see
// cirm_pkg::ham_data_pos) has bit i set.  The code is linear, so the XOR of
// any number of codewords is the codeword of the XOR of their data words;
// this is the property the XOR transverse read relies on.
// Purely combinational.  The paper names a "64-72 Hamming code"; the bit
// placement is this design's choice.
module hamming_enc
  import cirm_pkg::*;
(
  input  logic [DATA_W-1:0]   data_i,
  output logic [HAM_CW_W-1:0] cw_o
);

  logic [HAM_CHK_W-1:0] chk;

  for (genvar i = 0; i < HAM_CHK_W; i++) begin : g_chk
    localparam logic [DATA_W-1:0] COVER = ham_cover(i);
    assign chk[i] = ^(data_i & COVER);
  end

  assign cw_o = {^{chk, data_i}, chk, data_i};

endmodule
