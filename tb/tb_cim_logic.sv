// tb_cim_logic: checks the six bulk-bitwise outputs and the count for every
// thermometer level, first on the eight-column three-operand example
// (A = 00001111, B = 00110011, C = 01010101, sensed counts 0,1,1,2,1,2,2,3),
// then on random operands with TRD = 3 and TRD = 5, computing the reference
// results directly from the operand bits.
module tb_cim_logic;
  localparam int N = 8;

  logic [N-1:0][2:0] th3;
  logic [N-1:0] or3, nor3, and3, nand3, xor3, xnor3;
  logic [N-1:0][1:0] cnt3;
  logic [N-1:0][4:0] th5;
  logic [N-1:0] or5, nor5, and5, nand5, xor5, xnor5;
  logic [N-1:0][2:0] cnt5;
  int checks = 0, failures = 0;

  cim_logic #(.N(N), .TRD(3)) dut3 (.thermo_i(th3), .or_o(or3), .nor_o(nor3), .and_o(and3),
    .nand_o(nand3), .xor_o(xor3), .xnor_o(xnor3), .count_o(cnt3));
  cim_logic #(.N(N), .TRD(5)) dut5 (.thermo_i(th5), .or_o(or5), .nor_o(nor5), .and_o(and5),
    .nand_o(nand5), .xor_o(xor5), .xnor_o(xnor5), .count_o(cnt5));

  task automatic chk(logic [N-1:0] got, logic [N-1:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %b exp %b", what, got, exp); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // column 0 is the leftmost column of the example
    logic [N-1:0] a, b, c, d, e;
    int cnt;
    a = 8'b11110000; b = 8'b11001100; c = 8'b10101010;  // bit 0 = leftmost column
    for (int w = 0; w < N; w++) begin
      cnt = int'(a[w]) + int'(b[w]) + int'(c[w]);
      th3[w] = 3'((1 << cnt) - 1);
    end
    #1;
    chk(xor3, 8'b10010110, "example XOR");
    chk(and3, 8'b10000000, "example AND");
    chk(or3,  8'b11111110, "example OR");
    checks++;
    if (cnt3 !== {2'd3, 2'd2, 2'd2, 2'd1, 2'd2, 2'd1, 2'd1, 2'd0}) begin
      failures++; $display("FAIL example counts");
    end
    for (int t = 0; t < 200; t++) begin
      a = N'($urandom); b = N'($urandom); c = N'($urandom); d = N'($urandom); e = N'($urandom);
      for (int w = 0; w < N; w++) begin
        th3[w] = 3'((1 << (int'(a[w]) + int'(b[w]) + int'(c[w]))) - 1);
        th5[w] = 5'((1 << (int'(a[w]) + int'(b[w]) + int'(c[w]) + int'(d[w]) + int'(e[w]))) - 1);
      end
      #1;
      chk(or3, a | b | c, "OR3");     chk(nor3, ~(a | b | c), "NOR3");
      chk(and3, a & b & c, "AND3");   chk(nand3, ~(a & b & c), "NAND3");
      chk(xor3, a ^ b ^ c, "XOR3");   chk(xnor3, ~(a ^ b ^ c), "XNOR3");
      chk(or5, a | b | c | d | e, "OR5");     chk(nor5, ~(a | b | c | d | e), "NOR5");
      chk(and5, a & b & c & d & e, "AND5");   chk(nand5, ~(a & b & c & d & e), "NAND5");
      chk(xor5, a ^ b ^ c ^ d ^ e, "XOR5");   chk(xnor5, ~(a ^ b ^ c ^ d ^ e), "XNOR5");
      for (int w = 0; w < N; w++) begin
        checks++;
        if (int'(cnt5[w]) != int'(a[w]) + int'(b[w]) + int'(c[w]) + int'(d[w]) + int'(e[w])) begin
          failures++; $display("FAIL count5 w=%0d", w);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
