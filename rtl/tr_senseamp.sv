// tr_senseamp: behavioural model of the transverse-read sense amplifiers and
// their threshold comparators (not synthesizable logic in a real chip: the
// sensing is analog).
//
// One sense amplifier per nanowire measures the resistance of TRD domains
// between two access points, which encodes how many of them hold '1'.  The
// comparators against fixed thresholds (">0", ">1", ">2" for TRD = 3) give a
// thermometer code: thermo_o[w][k] is 1 when the sensed level exceeds k.
// A sensing fault is modelled as the paper characterises it: the sensed count
// is off by one, up (fault_up_i) or down (fault_dn_i), clamped to 0..TRD.
// The fault inputs stand for the physical fault source so that a testbench
// can inject faults at chosen nanowires.  Combinational; the controller
// samples the outputs in the cycle it fires the transverse read.
module tr_senseamp #(
  parameter int unsigned N   = 576,  // nanowires sensed in parallel
  parameter int unsigned TRD = 3     // domains covered by one transverse read
) (
  input  logic [N-1:0][TRD-1:0] domains_i,   // bits under the TR window
  input  logic [N-1:0]          fault_up_i,  // sense one '1' too many
  input  logic [N-1:0]          fault_dn_i,  // sense one '1' too few
  output logic [N-1:0][TRD-1:0] thermo_o     // level > k, k = 0..TRD-1
);

  for (genvar w = 0; w < N; w++) begin : g_wire
    int level;
    always_comb begin
      level = 0;
      for (int k = 0; k < TRD; k++) level += int'(domains_i[w][k]);
      if (fault_up_i[w] && !fault_dn_i[w] && level < int'(TRD)) level++;
      if (fault_dn_i[w] && !fault_up_i[w] && level > 0)         level--;
      for (int k = 0; k < TRD; k++) thermo_o[w][k] = (level > k);
    end
  end

endmodule
