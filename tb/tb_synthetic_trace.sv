// tb_synthetic_trace: the stochastic AND/OR workload.  Random 512-bit
// operands (eight 64-bit words), random AND/OR operations, and independent
// single-level sensing faults per sense amplifier at 1e-2 and 1e-3, run on
// the 1-ECC (Hamming), 2-ECC and 3-ECC (BCH) subarrays at default size.  Each run
// checks every result word against the fault count it actually suffered and
// prints the uncorrectable-row rate next to its binomial estimate and the
// share of reissued transverse reads.
module tb_synthetic_trace;
  logic clk = 0, start = 0;
  logic [2:0] done;
  int c [3], f [3];
  int cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  trace_runner #(.ECC_T(1), .RATE_PPM(10000), .OPS(300)) r_ham (.clk, .start, .done(done[0]), .checks(c[0]), .failures(f[0]));
  trace_runner #(.ECC_T(2), .RATE_PPM(10000), .OPS(300)) r_bch (.clk, .start, .done(done[1]), .checks(c[1]), .failures(f[1]));
  trace_runner #(.ECC_T(3), .RATE_PPM(10000), .OPS(300)) r_bch3 (.clk, .start, .done(done[2]), .checks(c[2]), .failures(f[2]));

  initial begin
    wait (cycles == 100000);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2] + 1);
    $finish;
  end

  initial begin
    #20 start = 1;
    wait (&done);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2]);
    $finish;
  end
endmodule
