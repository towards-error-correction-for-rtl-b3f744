// fault_classifier: decides what each ECC-flagged sensing fault means for the
// requested bulk-bitwise operation, and corrects the result where it can.
//
// The ECC runs on the XOR result, which flips with every single-level sensing
// fault.  A flagged bit of an AND/OR result is then one of three cases, from
// the sensed count c and the operand count n = TRD:
//   AND/NAND: c == n    -> deterministic error (true count n-1): flip
//             c == n-1  -> ambiguous (true count n-2 or n): reissue
//             c <  n-1  -> deterministic non-error: keep
//   OR/NOR:   c == 0    -> deterministic error (true count 1): flip
//             c == 1    -> ambiguous (true count 0 or 2): reissue
//             c >  1    -> deterministic non-error: keep
//   XOR/XNOR: always a deterministic error: flip
// These rules are the paper's.  The module works on one W-bit word:
// res_i is the raw result of the operation, flag_i the ECC error mask.
// Purely combinational.
module fault_classifier
  import cirm_pkg::*;
#(
  parameter int unsigned W   = 64,
  parameter int unsigned TRD = 3,
  localparam int unsigned CNT_W = $clog2(TRD + 1)
) (
  input  cim_op_e                 op_i,
  input  logic [W-1:0][CNT_W-1:0] count_i,
  input  logic [W-1:0]            flag_i,
  input  logic [W-1:0]            res_i,
  output logic [W-1:0]            res_o,        // corrected result
  output fault_class_e [W-1:0]    class_o,
  output logic                    ambiguous_o,  // some bit must be recomputed
  output logic [$clog2(W+1)-1:0]  n_flip_o      // bits corrected
);

  localparam logic [CNT_W-1:0] FULL = CNT_W'(TRD);
  localparam logic [CNT_W-1:0] NM1  = CNT_W'(TRD - 1);

  always_comb begin
    ambiguous_o = 1'b0;
    n_flip_o    = '0;
    for (int b = 0; b < W; b++) begin
      class_o[b] = FC_NONE;
      if (flag_i[b]) begin
        unique case (op_i)
          OP_AND, OP_NAND:
            if (count_i[b] == FULL)     class_o[b] = FC_DET_ERROR;
            else if (count_i[b] == NM1) class_o[b] = FC_AMBIGUOUS;
            else                        class_o[b] = FC_NON_ERROR;
          OP_OR, OP_NOR:
            if (count_i[b] == '0)       class_o[b] = FC_DET_ERROR;
            else if (count_i[b] == 1)   class_o[b] = FC_AMBIGUOUS;
            else                        class_o[b] = FC_NON_ERROR;
          default:                      class_o[b] = FC_DET_ERROR;
        endcase
      end
      res_o[b] = res_i[b] ^ (class_o[b] == FC_DET_ERROR);
      if (class_o[b] == FC_AMBIGUOUS) ambiguous_o = 1'b1;
      if (class_o[b] == FC_DET_ERROR) n_flip_o++;
    end
  end

  initial assert (TRD >= 2) else $error("fault_classifier: TRD must be at least 2");

endmodule
