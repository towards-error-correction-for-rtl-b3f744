// tb_rtm_dbc: writes every row of a small DBC through the access port
// (shifting the port one domain per cycle), reads each row back, checks the
// transverse-read window of TRD consecutive rows (zeros past the end of the
// nanowire), the port position after each shift and saturation at both ends.
module tb_rtm_dbc;
  localparam int N = 24, DOMAINS = 8, TRD = 3;

  logic clk = 0, rst_n = 0;
  logic shift_en = 0, shift_up = 0, wr_en = 0;
  logic [N-1:0] wr_data, row;
  logic [2:0] pos;
  logic [N-1:0][TRD-1:0] win;
  logic [N-1:0] model [DOMAINS];
  int checks = 0, failures = 0, cycles = 0;

  rtm_dbc #(.N(N), .DOMAINS(DOMAINS), .TRD(TRD)) dut (.clk, .rst_n, .shift_en_i(shift_en),
    .shift_up_i(shift_up), .wr_en_i(wr_en), .wr_data_i(wr_data), .pos_o(pos), .row_o(row), .window_o(win));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(logic se, logic su, logic we, logic [N-1:0] wd);
    shift_en = se; shift_up = su; wr_en = we; wr_data = wd;
    @(posedge clk); #1;
    shift_en = 0; wr_en = 0;
  endtask

  task automatic check_window();
    for (int w = 0; w < N; w++)
      for (int k = 0; k < TRD; k++) begin
        logic e = (int'(pos) + k < DOMAINS) ? model[int'(pos) + k][w] : 1'b0;
        checks++;
        if (win[w][k] !== e) begin failures++; $display("FAIL window pos=%0d w=%0d k=%0d", pos, w, k); end
      end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    checks++; if (pos !== 0) begin failures++; $display("FAIL reset pos"); end
    // shift down at 0 saturates
    step(1, 0, 0, '0);
    checks++; if (pos !== 0) begin failures++; $display("FAIL saturate low"); end
    for (int d = 0; d < DOMAINS; d++) begin
      model[d] = N'({$urandom, $urandom});
      step(0, 0, 1, model[d]);
      checks++; if (row !== model[d]) begin failures++; $display("FAIL readback %0d", d); end
      if (d < DOMAINS - 1) begin
        step(1, 1, 0, '0);
        checks++; if (int'(pos) != d + 1) begin failures++; $display("FAIL shift up to %0d got %0d", d + 1, pos); end
      end
    end
    step(1, 1, 0, '0);
    checks++; if (int'(pos) != DOMAINS - 1) begin failures++; $display("FAIL saturate high"); end
    for (int d = DOMAINS - 1; d >= 0; d--) begin
      checks++; if (row !== model[d]) begin failures++; $display("FAIL reread %0d", d); end
      check_window();
      if (d > 0) step(1, 0, 0, '0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
