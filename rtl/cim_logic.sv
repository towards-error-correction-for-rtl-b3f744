// cim_logic: per-nanowire bulk-bitwise logic after a transverse read.
//
// Input is the thermometer code of the comparators behind each sense
// amplifier (thermo_i[w][k] = "more than k ones").  With TRD operands:
//   OR  = more than 0 ones,        NOR  = its complement
//   AND = more than TRD-1 ones,    NAND = its complement
//   XOR = odd number of ones,      XNOR = its complement
// AND and OR come from the extreme comparators; XOR depends on every
// comparator and is computed here as the XOR of the thermometer bits, which is
// the parity of the count.  The count itself is also returned, because the
// fault classifier needs the sensed level.  Purely combinational.
// The output set and the comparators follow the paper's sense circuit; the
// XOR-of-thermometer realisation of its multiplexer is this design's choice.
module cim_logic #(
  parameter int unsigned N   = 576,
  parameter int unsigned TRD = 3,
  localparam int unsigned CNT_W = $clog2(TRD + 1)
) (
  input  logic [N-1:0][TRD-1:0]   thermo_i,
  output logic [N-1:0]            or_o,
  output logic [N-1:0]            nor_o,
  output logic [N-1:0]            and_o,
  output logic [N-1:0]            nand_o,
  output logic [N-1:0]            xor_o,
  output logic [N-1:0]            xnor_o,
  output logic [N-1:0][CNT_W-1:0] count_o
);

  for (genvar w = 0; w < N; w++) begin : g_wire
    assign or_o[w]   = thermo_i[w][0];
    assign nor_o[w]  = ~thermo_i[w][0];
    assign and_o[w]  = thermo_i[w][TRD-1];
    assign nand_o[w] = ~thermo_i[w][TRD-1];
    assign xor_o[w]  = ^thermo_i[w];
    assign xnor_o[w] = ~(^thermo_i[w]);

    always_comb begin
      count_o[w] = '0;
      for (int k = 0; k < TRD; k++) count_o[w] += CNT_W'(thermo_i[w][k]);
    end
  end

endmodule
