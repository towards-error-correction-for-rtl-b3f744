// rtm_dbc: one domain-wall block cluster (DBC) of racetrack memory.
//
// A DBC is N nanowires of DOMAINS domains each, shifted in lock step, so a
// "row" is the set of N bits at the same domain index, one per nanowire.
// Only the domains aligned with the access port can be read or written; the
// model keeps the port position pos_o (the domain index currently under the
// port) and moves it by one domain per cycle while shift_en_i is high, which
// stands for one shift pulse moving every nanowire by one domain.
//   - wr_en_i writes wr_data_i into the row under the port.
//   - row_o is the row under the port (ordinary read).
//   - window_o[w][k] is domain pos+k of nanowire w for k < TRD: the domains a
//     transverse read between the port and a second port TRD-1 domains away
//     covers.  Domains past the end of the nanowire read as 0.
// Writes take effect at the clock edge, reads are combinational.  Memory
// contents are nonvolatile and not reset; pos resets to 0.  The lock-step
// nanowires, 32 domains and bit-interleaving of words follow the paper; the
// one-domain-per-cycle shift and the port-pointer view of shifting are this
// design's choices.
module rtm_dbc #(
  parameter int unsigned N       = 576,
  parameter int unsigned DOMAINS = 32,
  parameter int unsigned TRD     = 3,
  localparam int unsigned POS_W  = $clog2(DOMAINS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  shift_en_i,
  input  logic                  shift_up_i,   // 1: port moves to pos+1
  input  logic                  wr_en_i,
  input  logic [N-1:0]          wr_data_i,
  output logic [POS_W-1:0]      pos_o,
  output logic [N-1:0]          row_o,
  output logic [N-1:0][TRD-1:0] window_o
);

  logic [N-1:0] mem [DOMAINS];
  logic [POS_W-1:0] pos;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos <= '0;
    end else if (shift_en_i) begin
      if (shift_up_i && pos != POS_W'(DOMAINS - 1)) pos <= pos + 1'b1;
      else if (!shift_up_i && pos != '0)            pos <= pos - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en_i) mem[pos] <= wr_data_i;
  end

  assign pos_o = pos;
  assign row_o = mem[pos];

  for (genvar k = 0; k < TRD; k++) begin : g_win
    logic [N-1:0] dom;
    always_comb begin
      if (int'(pos) + k < int'(DOMAINS)) dom = mem[int'(pos) + k];
      else                              dom = '0;
    end
    for (genvar w = 0; w < N; w++) begin : g_w
      assign window_o[w][k] = dom[w];
    end
  end

  initial assert (TRD <= DOMAINS) else $error("rtm_dbc: TRD larger than a nanowire");

endmodule
