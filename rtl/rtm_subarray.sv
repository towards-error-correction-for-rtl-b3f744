// rtm_subarray: a racetrack-memory subarray of NUM_DBC independently
// shiftable DBCs sharing one set of sense amplifiers and one row buffer.
//
// dbc_sel_i chooses the DBC that shifts, is written and drives the shared
// outputs (row under its port, transverse-read window and port position).
// The other DBCs hold their data and their own port positions.  With the
// defaults (16 DBCs x 32 domains x 576 nanowires) this is the 512 x M
// subarray of the paper, M = 576 nanowires for 512 data bits plus Hamming
// check bits.  Timing as rtm_dbc: shifts and writes at the clock edge,
// outputs combinational.
module rtm_subarray #(
  parameter int unsigned N       = 576,
  parameter int unsigned DOMAINS = 32,
  parameter int unsigned NUM_DBC = 16,
  parameter int unsigned TRD     = 3,
  localparam int unsigned POS_W  = $clog2(DOMAINS),
  localparam int unsigned SEL_W  = (NUM_DBC > 1) ? $clog2(NUM_DBC) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [SEL_W-1:0]      dbc_sel_i,
  input  logic                  shift_en_i,
  input  logic                  shift_up_i,
  input  logic                  wr_en_i,
  input  logic [N-1:0]          wr_data_i,
  output logic [POS_W-1:0]      pos_o,
  output logic [N-1:0]          row_o,
  output logic [N-1:0][TRD-1:0] window_o
);

  logic [POS_W-1:0]          pos    [NUM_DBC];
  logic [N-1:0]              row    [NUM_DBC];
  logic [N-1:0][TRD-1:0]     window [NUM_DBC];

  for (genvar d = 0; d < NUM_DBC; d++) begin : g_dbc
    logic sel;
    assign sel = (int'(dbc_sel_i) == d);
    rtm_dbc #(.N(N), .DOMAINS(DOMAINS), .TRD(TRD)) u_dbc (
      .clk        (clk),
      .rst_n      (rst_n),
      .shift_en_i (shift_en_i && sel),
      .shift_up_i (shift_up_i),
      .wr_en_i    (wr_en_i && sel),
      .wr_data_i  (wr_data_i),
      .pos_o      (pos[d]),
      .row_o      (row[d]),
      .window_o   (window[d])
    );
  end

  always_comb begin
    pos_o    = pos[0];
    row_o    = row[0];
    window_o = window[0];
    for (int d = 1; d < NUM_DBC; d++) begin
      if (int'(dbc_sel_i) == d) begin
        pos_o    = pos[d];
        row_o    = row[d];
        window_o = window[d];
      end
    end
  end

endmodule
