// tb_fault_classifier: exhaustive check of the fault classification for
// every operation, sensed count and flag value with n = 3 operands, the three
// operand example (AND ambiguous when two '1's are sensed, OR ambiguous when
// one is), and a random check with n = 4.  The reference follows the rule
// as stated: for n operands AND is ambiguous at n-1 sensed '1's and wrong at
// n; OR is ambiguous at one '1' and wrong at zero; XOR is always wrong.
module tb_fault_classifier;
  import cirm_pkg::*;

  localparam int W = 16;

  cim_op_e op;
  logic [W-1:0][1:0] cnt3;
  logic [W-1:0][2:0] cnt4;
  logic [W-1:0] flag, res, res3, res4;
  fault_class_e [W-1:0] cls3, cls4;
  logic amb3, amb4;
  logic [4:0] nf3, nf4;
  int checks = 0, failures = 0;

  fault_classifier #(.W(W), .TRD(3)) dut3 (.op_i(op), .count_i(cnt3), .flag_i(flag), .res_i(res),
    .res_o(res3), .class_o(cls3), .ambiguous_o(amb3), .n_flip_o(nf3));
  fault_classifier #(.W(W), .TRD(4)) dut4 (.op_i(op), .count_i(cnt4), .flag_i(flag), .res_i(res),
    .res_o(res4), .class_o(cls4), .ambiguous_o(amb4), .n_flip_o(nf4));

  function automatic fault_class_e ref_cls(cim_op_e o, int c, int n, logic f);
    if (!f) return FC_NONE;
    if (o == OP_AND || o == OP_NAND) begin
      if (c == n) return FC_DET_ERROR;
      if (c == n - 1) return FC_AMBIGUOUS;
      return FC_NON_ERROR;
    end
    if (o == OP_OR || o == OP_NOR) begin
      if (c == 0) return FC_DET_ERROR;
      if (c == 1) return FC_AMBIGUOUS;
      return FC_NON_ERROR;
    end
    return FC_DET_ERROR;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cim_op_e ops[6] = '{OP_AND, OP_NAND, OP_OR, OP_NOR, OP_XOR, OP_XNOR};
    // exhaustive, n = 3: bit b has count b%4 and flag b/4%2
    foreach (ops[i]) begin
      op = ops[i];
      for (int b = 0; b < W; b++) begin
        cnt3[b] = 2'(b % 4);
        cnt4[b] = 3'(b % 5);
        flag[b] = ((b / 4) % 2) == 1;
      end
      res = 16'hA5C3;
      #1;
      begin
        automatic logic exp_amb = 0;
        automatic int exp_nf = 0;
        for (int b = 0; b < W; b++) begin
          automatic fault_class_e e = ref_cls(op, b % 4, 3, flag[b]);
          checks++;
          if (cls3[b] !== e) begin
            failures++; $display("FAIL n=3 op=%s c=%0d f=%b cls=%s exp %s", op.name(), b % 4, flag[b], cls3[b].name(), e.name());
          end
          checks++;
          if (res3[b] !== (res[b] ^ (e == FC_DET_ERROR))) begin failures++; $display("FAIL n=3 res bit %0d", b); end
          if (e == FC_AMBIGUOUS) exp_amb = 1;
          if (e == FC_DET_ERROR) exp_nf++;
        end
        checks++;
        if (amb3 !== exp_amb || int'(nf3) != exp_nf) begin failures++; $display("FAIL n=3 summary op=%s", op.name()); end
      end
    end
    // the three-operand example: ambiguous AND at two '1's, OR at one '1'
    flag = '1;
    op = OP_AND; cnt3 = '0; cnt3[0] = 2'd2; #1;
    checks++; if (cls3[0] !== FC_AMBIGUOUS) begin failures++; $display("FAIL AND@2 not ambiguous"); end
    op = OP_OR;  cnt3[0] = 2'd1; #1;
    checks++; if (cls3[0] !== FC_AMBIGUOUS) begin failures++; $display("FAIL OR@1 not ambiguous"); end
    op = OP_OR;  cnt3[0] = 2'd0; res[0] = 1'b0; #1;
    checks++; if (res3[0] !== 1'b1) begin failures++; $display("FAIL OR@0 not corrected to 1"); end
    op = OP_AND; cnt3[0] = 2'd3; res[0] = 1'b1; #1;
    checks++; if (res3[0] !== 1'b0) begin failures++; $display("FAIL AND@3 not corrected to 0"); end
    // random, n = 4
    for (int t = 0; t < 300; t++) begin
      op = ops[$urandom_range(5)];
      for (int b = 0; b < W; b++) cnt4[b] = 3'($urandom_range(4));
      flag = W'($urandom); res = W'($urandom);
      #1;
      for (int b = 0; b < W; b++) begin
        automatic fault_class_e e = ref_cls(op, int'(cnt4[b]), 4, flag[b]);
        checks++;
        if (cls4[b] !== e || res4[b] !== (res[b] ^ (e == FC_DET_ERROR))) begin
          failures++; $display("FAIL n=4 op=%s c=%0d", op.name(), cnt4[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
