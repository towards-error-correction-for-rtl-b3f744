// hamming_dec: (72,64) SEC-DED Hamming decoder producing an error mask.
//
// In CIRM-ECC the decoder is applied to the XOR result of a transverse read,
// which is itself a codeword when the senses are right.  Instead of only
// correcting data, it reports *where* the single error is (err_mask_o, one
// bit per nanowire of the word), so the fault classifier can decide what that
// sensing fault means for AND/OR.  A nonzero syndrome with an odd overall
// parity is a single error at the syndrome's position; a zero syndrome with
// odd parity is an error in the overall parity bit; a nonzero syndrome with
// even parity, or a syndrome that points past bit 71, is flagged as
// uncorrectable (more faults than the code corrects).
// Codeword layout as in hamming_enc.  Purely combinational.
module hamming_dec
  import cirm_pkg::*;
(
  input  logic [HAM_CW_W-1:0] cw_i,
  output logic [HAM_CW_W-1:0] err_mask_o,     // one-hot (or zero) error position
  output logic                err_o,          // a correctable error was found
  output logic                uncorrectable_o // more errors than can be corrected
);

  logic [HAM_CHK_W-1:0] syn;
  logic                 par_odd;
  logic [DATA_W-1:0]    data_hit;   // data bit whose position equals the syndrome
  logic [HAM_CHK_W-1:0] chk_hit;    // check bit whose position equals the syndrome

  for (genvar i = 0; i < HAM_CHK_W; i++) begin : g_syn
    localparam logic [DATA_W-1:0] COVER = ham_cover(i);
    assign syn[i]     = cw_i[DATA_W+i] ^ (^(cw_i[DATA_W-1:0] & COVER));
    assign chk_hit[i] = (syn == HAM_CHK_W'(1 << i));
  end

  for (genvar j = 0; j < DATA_W; j++) begin : g_hit
    localparam int unsigned POS = ham_data_pos(j);
    assign data_hit[j] = (syn == HAM_CHK_W'(POS));
  end

  assign par_odd = ^cw_i;

  always_comb begin
    err_mask_o      = '0;
    err_o           = 1'b0;
    uncorrectable_o = 1'b0;
    if (par_odd) begin
      if (syn == '0) begin
        err_mask_o[HAM_CW_W-1] = 1'b1;
        err_o                  = 1'b1;
      end else if (|{data_hit, chk_hit}) begin
        err_mask_o = {1'b0, chk_hit, data_hit};
        err_o      = 1'b1;
      end else begin
        uncorrectable_o = 1'b1;
      end
    end else if (syn != '0) begin
      uncorrectable_o = 1'b1;
    end
  end

endmodule
