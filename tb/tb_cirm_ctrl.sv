// tb_cirm_ctrl: runs the sequencer against a model of two DBCs (port
// positions that follow shift_en/shift_up) and scripted ECC verdicts.  Checks
// the latency of WRITE/READ (shift distance + 3 cycles) and CIM (shift
// distance + 4, plus 2 per reissue), one access pulse per access, a reissue
// per ambiguous verdict up to MAX_REISSUE, no reissue when a word is
// uncorrectable, and rejection of a CIM whose operands leave the DBC.
module tb_cirm_ctrl;
  import cirm_pkg::*;

  localparam int DOMAINS = 8, NUM_DBC = 2, TRD = 3, MAXR = 3;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  cmd_e cmd;
  logic [3:0] cmd_row;
  cim_op_e cmd_op;
  logic dbc_sel;
  logic [2:0] pos;
  logic shift_en, shift_up, wr_en, rd_cap, tr_fire, chk;
  cmd_e cmd_q;
  cim_op_e op_q;
  logic any_uncorr, any_ambig;
  logic resp_valid;
  logic [3:0] reissues;
  logic cmd_error;

  int mpos [NUM_DBC];
  int checks = 0, failures = 0, cycles = 0;
  int n_wr, n_rd, n_tr, n_shift;
  int ambig_until;   // verdict "ambiguous" for the first ambig_until sensings
  bit uncorr_v;

  cirm_ctrl #(.DOMAINS(DOMAINS), .NUM_DBC(NUM_DBC), .TRD(TRD), .MAX_REISSUE(MAXR)) dut (
    .clk, .rst_n, .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_i(cmd),
    .cmd_row_i(cmd_row), .cmd_op_i(cmd_op), .dbc_sel_o(dbc_sel), .pos_i(pos),
    .shift_en_o(shift_en), .shift_up_o(shift_up), .wr_en_o(wr_en), .cmd_o(cmd_q), .op_o(op_q),
    .rd_cap_o(rd_cap), .tr_fire_o(tr_fire), .chk_o(chk), .any_uncorr_i(any_uncorr),
    .any_ambig_i(any_ambig), .resp_valid_o(resp_valid), .reissues_o(reissues),
    .cmd_error_o(cmd_error));

  always #5 clk = ~clk;

  assign pos        = 3'(mpos[dbc_sel]);
  assign any_ambig  = chk && (n_tr <= ambig_until);
  assign any_uncorr = chk && uncorr_v;

  always @(posedge clk) begin
    cycles++;
    if (rst_n) begin
      if (shift_en) begin
        n_shift++;
        mpos[dbc_sel] = shift_up ? mpos[dbc_sel] + 1 : mpos[dbc_sel] - 1;
      end
      n_wr += int'(wr_en);
      n_rd += int'(rd_cap);
      n_tr += int'(tr_fire);
    end
  end

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk_(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // issue one command; returns cycles from the accepting edge to the edge
  // that samples resp_valid
  task automatic run(cmd_e c, int dbc, int dom, cim_op_e o, output int lat);
    n_wr = 0; n_rd = 0; n_tr = 0; n_shift = 0;
    cmd = c; cmd_row = 4'({dbc[0], dom[2:0]}); cmd_op = o; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!resp_valid);
    #1;
  endtask

  initial begin
    int lat, d;
    mpos[0] = 0; mpos[1] = 0;
    ambig_until = 0; uncorr_v = 0;
    cmd = CMD_READ; cmd_row = '0; cmd_op = OP_AND;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int t = 0; t < 40; t++) begin
      automatic int dbc = int'($urandom_range(1));
      automatic int dom = int'($urandom_range(DOMAINS - 1));
      automatic int k = int'($urandom_range(2));
      d = (dom > mpos[dbc]) ? dom - mpos[dbc] : mpos[dbc] - dom;
      if (k == 0) begin
        run(CMD_WRITE, dbc, dom, OP_AND, lat);
        chk_(lat == d + 3, $sformatf("WRITE latency %0d exp %0d", lat, d + 3));
        chk_(n_wr == 1 && n_rd == 0 && n_tr == 0, "WRITE pulses");
      end else if (k == 1) begin
        run(CMD_READ, dbc, dom, OP_AND, lat);
        chk_(lat == d + 3, $sformatf("READ latency %0d exp %0d", lat, d + 3));
        chk_(n_rd == 1 && n_wr == 0 && n_tr == 0, "READ pulses");
      end else begin
        if (dom + TRD > DOMAINS) dom = DOMAINS - TRD;
        d = (dom > mpos[dbc]) ? dom - mpos[dbc] : mpos[dbc] - dom;
        ambig_until = int'($urandom_range(2));
        run(CMD_CIM, dbc, dom, OP_OR, lat);
        chk_(lat == d + 4 + 2 * ambig_until,
             $sformatf("CIM latency %0d exp %0d", lat, d + 4 + 2 * ambig_until));
        chk_(n_tr == ambig_until + 1 && int'(reissues) == ambig_until, "CIM reissues");
        chk_(!cmd_error, "CIM no error");
      end
      chk_(mpos[dbc] == dom && n_shift == d, "port aligned");
    end
    // ambiguous forever: stops after MAX_REISSUE reissues
    ambig_until = 100;
    run(CMD_CIM, 0, 2, OP_AND, lat);
    chk_(n_tr == MAXR + 1 && int'(reissues) == MAXR, "reissue limit");
    // uncorrectable: no reissue even if ambiguous
    uncorr_v = 1;
    run(CMD_CIM, 0, 2, OP_AND, lat);
    chk_(n_tr == 1 && reissues == 0, "uncorrectable not reissued");
    uncorr_v = 0; ambig_until = 0;
    // operands past the end of the DBC
    run(CMD_CIM, 1, DOMAINS - 1, OP_XOR, lat);
    chk_(cmd_error && n_tr == 0 && n_shift == 0, "out-of-range CIM rejected");
    run(CMD_CIM, 1, DOMAINS - TRD, OP_XOR, lat);
    chk_(!cmd_error && n_tr == 1, "last legal CIM accepted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
