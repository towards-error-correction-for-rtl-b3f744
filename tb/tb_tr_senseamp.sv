// tb_tr_senseamp: drives random domain patterns and single-level faults into
// the sense-amplifier model and checks the thermometer code against the
// count of ones, moved by one for a fault and clamped to 0..TRD.
module tb_tr_senseamp;
  localparam int N = 40, TRD = 3;

  logic [N-1:0][TRD-1:0] dom, th;
  logic [N-1:0] up, dn;
  int checks = 0, failures = 0;

  tr_senseamp #(.N(N), .TRD(TRD)) dut (.domains_i(dom), .fault_up_i(up), .fault_dn_i(dn), .thermo_o(th));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int w = 0; w < N; w++) begin
        dom[w] = TRD'($urandom);
        up[w]  = ($urandom_range(3) == 0);
        dn[w]  = ($urandom_range(3) == 0);
      end
      #1;
      for (int w = 0; w < N; w++) begin
        int c;
        logic [TRD-1:0] exp_th;
        c = $countones(dom[w]);
        if (up[w] && !dn[w]) c = (c == TRD) ? TRD : c + 1;
        if (dn[w] && !up[w]) c = (c == 0) ? 0 : c - 1;
        exp_th = TRD'((1 << c) - 1);
        checks++;
        if (th[w] !== exp_th) begin
          failures++;
          $display("FAIL w=%0d dom=%b up=%b dn=%b th=%b exp %b", w, dom[w], up[w], dn[w], th[w], exp_th);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
