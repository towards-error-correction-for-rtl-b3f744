// tb_cirm_ecc_top: end-to-end test of the protected CIM subarray at its
// default size (16 DBCs x 32 domains x 576 nanowires, TRD = 3).
//
// Rows are written with random data and kept in a reference memory.  Each
// CIM command's expected result is computed from the reference rows, and the
// expected fault handling from the true per-column count of ones and the
// injected fault, independently of the design.  Faults are injected either
// for the first transverse read only (a transient sensing fault, cleared
// after tr_fire_o) or for every read (persistent).  Covered and counted:
// port shifts, fault-free results of all six operations, XOR correction,
// AND/NAND and OR/NOR deterministic errors, non-errors and ambiguous faults
// (with their reissue), faults on check-bit nanowires, double faults in a
// word (uncorrectable, not reissued), the reissue limit, READ correction of a
// corrupted stored bit and rejected commands.  Latency is checked on every
// command: shift distance + 3 cycles for WRITE/READ, + 4 + 2 per reissue for
// CIM.  A mechanism that never occurred counts as a failure.
module tb_cirm_ecc_top;
  import cirm_pkg::*;

  localparam int N = ROW_CW_W, DOMS = 32, NDBC = 16, TRD = 3, MAXR = 15;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  cmd_e cmd;
  logic [8:0] cmd_row;
  cim_op_e cmd_op;
  logic [ROW_DATA_W-1:0] wdata, rdata;
  logic [N-1:0] fault_up = '0, fault_dn = '0;
  logic tr_fire, resp_valid;
  status_t status;

  cirm_ecc_top dut (
    .clk, .rst_n, .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_i(cmd),
    .cmd_row_i(cmd_row), .cmd_op_i(cmd_op), .cmd_wdata_i(wdata),
    .fault_up_i(fault_up), .fault_dn_i(fault_dn), .tr_fire_o(tr_fire),
    .resp_valid_o(resp_valid), .resp_data_o(rdata), .resp_status_o(status));

  logic [ROW_DATA_W-1:0] ref_mem [NDBC*DOMS];
  bit   written [NDBC*DOMS];
  int   port [NDBC];
  int   checks = 0, failures = 0, cycles = 0, n_tr = 0;
  bit   transient = 1;

  typedef enum int {
    M_SHIFT, M_CLEAN, M_XOR_FIX, M_AND_DET, M_AND_NONERR, M_AND_AMB, M_OR_DET,
    M_OR_NONERR, M_OR_AMB, M_CHK_BIT, M_UNCORR, M_REISSUE_LIMIT, M_READ_FIX, M_CMD_ERR, M_NUM
  } mech_e;
  int mech [M_NUM];

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (tr_fire) begin
      n_tr++;
      if (transient) begin fault_up <= '0; fault_dn <= '0; end
    end
  end

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk_(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int nw_of(int bitpos);   // data bit -> nanowire
    return (bitpos / DATA_W) * HAM_CW_W + (bitpos % DATA_W);
  endfunction

  function automatic int true_count(int row, int bitpos);
    return int'(ref_mem[row][bitpos]) + int'(ref_mem[row + 1][bitpos]) + int'(ref_mem[row + 2][bitpos]);
  endfunction

  function automatic logic [ROW_DATA_W-1:0] ref_op(cim_op_e o, int row);
    logic [ROW_DATA_W-1:0] a = ref_mem[row], b = ref_mem[row + 1], c = ref_mem[row + 2];
    case (o)
      OP_AND:  return a & b & c;
      OP_NAND: return ~(a & b & c);
      OP_OR:   return a | b | c;
      OP_NOR:  return ~(a | b | c);
      OP_XOR:  return a ^ b ^ c;
      default: return ~(a ^ b ^ c);
    endcase
  endfunction

  // issue a command, wait for the response, check the latency
  task automatic issue(cmd_e c, int row, cim_op_e o, logic [ROW_DATA_W-1:0] wd, int exp_reissue);
    int dbc = row / DOMS, dom = row % DOMS, d, lat, exp_lat;
    bit bad = (c == CMD_CIM) && (dom + TRD > DOMS);
    d = bad ? 0 : ((dom > port[dbc]) ? dom - port[dbc] : port[dbc] - dom);
    if (d > 0) mech[M_SHIFT]++;
    exp_lat = bad ? 2 : (c == CMD_CIM) ? d + 4 + 2 * exp_reissue : d + 3;
    n_tr = 0;
    cmd = c; cmd_row = 9'(row); cmd_op = o; wdata = wd; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!resp_valid);
    #1;
    if (!bad) port[dbc] = dom;
    chk_(lat == exp_lat, $sformatf("latency %0d exp %0d (cmd %s row %0d)", lat, exp_lat, c.name(), row));
  endtask

  task automatic write_row(int row, logic [ROW_DATA_W-1:0] d);
    issue(CMD_WRITE, row, OP_AND, d, 0);
    ref_mem[row] = d;
    written[row] = 1;
  endtask

  // find a data column of rows row..row+2 holding exactly `cnt` ones
  function automatic int find_col(int row, int cnt, int skip_word);
    for (int i = 0; i < ROW_DATA_W; i++) begin
      int b = (i * 37 + row * 11) % ROW_DATA_W;    // spread the picks
      if (b / DATA_W != skip_word && true_count(row, b) == cnt) return b;
    end
    return -1;
  endfunction

  // a single-level fault on data column b that really changes the sensed
  // count (down unless the count is already 0)
  task automatic inject(int row, int b);
    if (true_count(row, b) > 0) fault_dn[nw_of(b)] = 1'b1;
    else                        fault_up[nw_of(b)] = 1'b1;
  endtask

  // reference Hamming encoder (textbook construction), used to know the
  // stored check bits
  function automatic logic [HAM_CW_W-1:0] ref_enc(logic [DATA_W-1:0] x);
    logic [127:0] word = '0;
    logic [6:0]   chk  = '0;
    int j = 0;
    for (int p = 1; p <= 71; p++)
      if ((p & (p - 1)) != 0) begin word[p] = x[j]; j++; end
    for (int i = 0; i < 7; i++)
      for (int p = 1; p <= 71; p++)
        if (((p >> i) & 1) == 1 && (p & (p - 1)) != 0) chk[i] ^= word[p];
    return {^{chk, x}, chk, x};
  endfunction

  // one CIM with a single injected fault on the data column with true count
  // `cnt`; `up` selects the direction; expected class given by the caller
  task automatic cim_fault(cim_op_e o, int row, int cnt, bit up, fault_class_e cls, mech_e m);
    int b = find_col(row, cnt, -1);
    logic [ROW_DATA_W-1:0] exp = ref_op(o, row);
    if (b < 0) begin chk_(0, "no suitable column"); return; end
    if (up) fault_up[nw_of(b)] = 1'b1; else fault_dn[nw_of(b)] = 1'b1;
    issue(CMD_CIM, row, o, '0, cls == FC_AMBIGUOUS ? 1 : 0);
    chk_(rdata == exp, $sformatf("%s result with %s fault (count %0d)", o.name(), up ? "up" : "down", cnt));
    chk_(int'(status.corrected) == (cls == FC_DET_ERROR ? 1 : 0), $sformatf("%s corrected count", o.name()));
    chk_(int'(status.reissues) == (cls == FC_AMBIGUOUS ? 1 : 0), $sformatf("%s reissues", o.name()));
    chk_(n_tr == (cls == FC_AMBIGUOUS ? 2 : 1), $sformatf("%s transverse reads", o.name()));
    chk_(status.uncorrectable == '0 && status.ambiguous == '0, $sformatf("%s status flags", o.name()));
    mech[m]++;
  endtask

  initial main();

  task automatic main();
    cim_op_e ops[6] = '{OP_AND, OP_NAND, OP_OR, OP_NOR, OP_XOR, OP_XNOR};
    int rows[4] = '{0, 3*DOMS + 10, 9*DOMS + 17, 15*DOMS + 29};
    foreach (port[i]) port[i] = 0;
    foreach (written[i]) written[i] = 0;
    foreach (mech[i]) mech[i] = 0;
    cmd = CMD_READ; cmd_row = '0; cmd_op = OP_AND; wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // ---- fill operand rows
    foreach (rows[r])
      for (int k = 0; k < TRD; k++) begin
        logic [ROW_DATA_W-1:0] d;
        for (int i = 0; i < ROW_DATA_W / 32; i++) d[i*32 +: 32] = $urandom;
        write_row(rows[r] + k, d);
      end

    // ---- READ back
    foreach (rows[r])
      for (int k = 0; k < TRD; k++) begin
        issue(CMD_READ, rows[r] + k, OP_AND, '0, 0);
        chk_(rdata == ref_mem[rows[r] + k] && status.uncorrectable == '0 && status.corrected == 0,
             $sformatf("READ row %0d", rows[r] + k));
      end

    // ---- fault-free CIM, every operation
    foreach (rows[r])
      foreach (ops[i]) begin
        issue(CMD_CIM, rows[r], ops[i], '0, 0);
        chk_(rdata == ref_op(ops[i], rows[r]), $sformatf("clean %s row %0d", ops[i].name(), rows[r]));
        chk_(status.corrected == 0 && status.reissues == 0 && status.uncorrectable == '0, "clean status");
        chk_(n_tr == 1, "clean: one transverse read");
        mech[M_CLEAN]++;
      end

    // ---- single transient faults, every class
    transient = 1;
    foreach (rows[r]) begin
      int row = rows[r];
      cim_fault(OP_XOR,  row, 1, 1'b1, FC_DET_ERROR, M_XOR_FIX);
      cim_fault(OP_XNOR, row, 2, 1'b0, FC_DET_ERROR, M_XOR_FIX);
      cim_fault(OP_AND,  row, 2, 1'b1, FC_DET_ERROR, M_AND_DET);     // sensed 3
      cim_fault(OP_NAND, row, 2, 1'b1, FC_DET_ERROR, M_AND_DET);
      cim_fault(OP_AND,  row, 1, 1'b0, FC_NON_ERROR, M_AND_NONERR);  // sensed 0
      cim_fault(OP_AND,  row, 3, 1'b0, FC_AMBIGUOUS, M_AND_AMB);     // sensed 2
      cim_fault(OP_NAND, row, 1, 1'b1, FC_AMBIGUOUS, M_AND_AMB);     // sensed 2
      cim_fault(OP_OR,   row, 1, 1'b0, FC_DET_ERROR, M_OR_DET);      // sensed 0
      cim_fault(OP_NOR,  row, 1, 1'b0, FC_DET_ERROR, M_OR_DET);
      cim_fault(OP_OR,   row, 2, 1'b1, FC_NON_ERROR, M_OR_NONERR);   // sensed 3
      cim_fault(OP_OR,   row, 0, 1'b1, FC_AMBIGUOUS, M_OR_AMB);      // sensed 1
      cim_fault(OP_NOR,  row, 2, 1'b0, FC_AMBIGUOUS, M_OR_AMB);      // sensed 1
    end

    // ---- fault on a check-bit nanowire: located, nothing to correct in data
    foreach (rows[r]) begin
      int w = int'($urandom_range(WORDS - 1));
      int c = DATA_W + int'($urandom_range(HAM_CW_W - DATA_W - 1));
      int cnt = 0;
      for (int k = 0; k < TRD; k++) begin
        logic [HAM_CW_W-1:0] cw = ref_enc(ref_mem[rows[r] + k][w*DATA_W +: DATA_W]);
        cnt += int'(cw[c]);
      end
      if (cnt > 0) fault_dn[w * HAM_CW_W + c] = 1'b1; else fault_up[w * HAM_CW_W + c] = 1'b1;
      issue(CMD_CIM, rows[r], OP_AND, '0, 0);
      chk_(rdata == ref_op(OP_AND, rows[r]) && status.reissues == 0 && status.uncorrectable == '0 &&
           status.corrected == 0, "check-bit fault");
      // the fault is really sensed: together with a data fault in the same
      // word it makes two, which SEC-DED flags
      if (cnt > 0) fault_dn[w * HAM_CW_W + c] = 1'b1; else fault_up[w * HAM_CW_W + c] = 1'b1;
      inject(rows[r], w * DATA_W + 9);
      issue(CMD_CIM, rows[r], OP_XNOR, '0, 0);
      chk_(status.uncorrectable == WORDS'(1 << w), "check-bit fault plus data fault flagged");
      mech[M_CHK_BIT]++;
    end

    // ---- two faults in one word: uncorrectable, flagged, not reissued
    foreach (rows[r]) begin
      int w = int'($urandom_range(WORDS - 1));
      int b0 = int'($urandom_range(DATA_W / 2 - 1));
      int b1 = DATA_W / 2 + int'($urandom_range(DATA_W / 2 - 1));
      logic [ROW_DATA_W-1:0] exp = ref_op(OP_OR, rows[r]);
      inject(rows[r], w * DATA_W + b0);
      inject(rows[r], w * DATA_W + b1);
      issue(CMD_CIM, rows[r], OP_OR, '0, 0);
      chk_(status.uncorrectable == WORDS'(1 << w) && n_tr == 1 && status.reissues == 0,
           $sformatf("double fault in word %0d: unc=%b", w, status.uncorrectable));
      // the other words are still right
      for (int v = 0; v < WORDS; v++)
        if (v != w) chk_(rdata[v*DATA_W +: DATA_W] == exp[v*DATA_W +: DATA_W], "other words intact");
      mech[M_UNCORR]++;
    end

    // ---- persistent ambiguous fault: reissued MAX_REISSUE times, then flagged
    transient = 0;
    begin
      int b = find_col(rows[1], 0, -1);
      fault_up[nw_of(b)] = 1'b1;
      issue(CMD_CIM, rows[1], OP_OR, '0, MAXR);
      chk_(int'(status.reissues) == MAXR && n_tr == MAXR + 1, "reissue limit reached");
      chk_(status.ambiguous == WORDS'(1 << (b / DATA_W)), "ambiguous word flagged");
      mech[M_REISSUE_LIMIT]++;
      fault_up = '0;
    end
    transient = 1;

    // ---- READ corrects a corrupted stored bit (row 0 of DBC 0)
    dut.u_sa.g_dbc[0].u_dbc.mem[1][nw_of(77)] ^= 1'b1;
    issue(CMD_READ, 1, OP_AND, '0, 0);
    chk_(rdata == ref_mem[1] && status.corrected == 1 && status.uncorrectable == '0, "READ correction");
    mech[M_READ_FIX]++;
    dut.u_sa.g_dbc[0].u_dbc.mem[1][nw_of(77)] ^= 1'b1;

    // ---- rejected command: operands would run past the DBC
    issue(CMD_CIM, 5*DOMS + DOMS - 1, OP_XOR, '0, 0);
    chk_(status.cmd_error && n_tr == 0, "out-of-range CIM rejected");
    mech[M_CMD_ERR]++;

    // ---- random mix of operations and transient single faults
    for (int t = 0; t < 40; t++) begin
      int row = rows[$urandom_range(3)];
      cim_op_e o = ops[$urandom_range(5)];
      int b = int'($urandom_range(ROW_DATA_W - 1));
      bit up = 1'($urandom);
      int c = true_count(row, b);
      int s = up ? ((c < TRD) ? c + 1 : c) : ((c > 0) ? c - 1 : c);
      bit amb = (s != c) && (((o == OP_AND || o == OP_NAND) && s == TRD - 1) ||
                             ((o == OP_OR || o == OP_NOR) && s == 1));
      if (up) fault_up[nw_of(b)] = 1'b1; else fault_dn[nw_of(b)] = 1'b1;
      issue(CMD_CIM, row, o, '0, amb ? 1 : 0);
      chk_(rdata == ref_op(o, row), $sformatf("random %s result", o.name()));
      fault_up = '0; fault_dn = '0;
    end

    foreach (mech[i]) begin
      mech_e m = mech_e'(i);
      $display("mechanism %-16s occurred %0d times", m.name(), mech[i]);
      chk_(mech[i] > 0, $sformatf("mechanism %s never occurred", m.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
