// tb_cirm_ecc_top_bch: end-to-end test of the subarray in its 2-ECC
// configuration (ECC_T = 2: eight (78,64) BCH words per row, 624
// nanowires), at the default subarray size.
//
// Covered and counted: fault-free operations; two faults in one word that
// are both deterministic errors (both corrected, no reissue); two faults of
// which one is ambiguous (one reissue); two faults in each of two words;
// three faults in one word whose syndrome matches no pattern of one or two
// errors (flagged uncorrectable, not reissued); READ correcting two
// corrupted stored bits of a word.  Which three-fault patterns are
// detectable is decided by the testbench's own GF(2^7) syndrome arithmetic.
// Expected results come from a reference memory; latency is checked on
// every command.  A mechanism that never occurred counts as a failure.
module tb_cirm_ecc_top_bch;
  import cirm_pkg::*;

  localparam int CW = 78, N = 8 * CW, DOMS = 32, TRD = 3;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  cmd_e cmd;
  logic [8:0] cmd_row;
  cim_op_e cmd_op;
  logic [ROW_DATA_W-1:0] wdata, rdata;
  logic [N-1:0] fault_up = '0, fault_dn = '0;
  logic tr_fire, resp_valid;
  status_t status;

  cirm_ecc_top #(.ECC_T(2)) dut (
    .clk, .rst_n, .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_i(cmd),
    .cmd_row_i(cmd_row), .cmd_op_i(cmd_op), .cmd_wdata_i(wdata),
    .fault_up_i(fault_up), .fault_dn_i(fault_dn), .tr_fire_o(tr_fire),
    .resp_valid_o(resp_valid), .resp_data_o(rdata), .resp_status_o(status));

  logic [ROW_DATA_W-1:0] ref_mem [512];
  int port [16];
  int checks = 0, failures = 0, cycles = 0, n_tr = 0;

  typedef enum int {M_CLEAN, M_DOUBLE_FIX, M_DOUBLE_AMB, M_TWO_WORDS, M_TRIPLE_UNC, M_READ_FIX2, M_NUM} mech_e;
  int mech [M_NUM];

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (tr_fire) begin
      n_tr++;
      fault_up <= '0; fault_dn <= '0;    // transient faults
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

  // ---- syndrome of a single flipped codeword bit, {S1, S3}
  function automatic logic [6:0] mulx(logic [6:0] a);
    return a[6] ? {a[5:0], 1'b0} ^ 7'h09 : {a[5:0], 1'b0};
  endfunction
  function automatic logic [13:0] syn_bit(int k);
    logic [6:0] t1 = 7'd1, t3 = 7'd1;
    int e = (k < 64) ? k + 14 : k - 64;
    for (int i = 0; i < e; i++) t1 = mulx(t1);
    for (int i = 0; i < 3 * e; i++) t3 = mulx(t3);
    return {t1, t3};
  endfunction
  // true when no pattern of at most two errors has this syndrome
  function automatic bit detectable(logic [13:0] s);
    logic [13:0] sb [CW];
    if (s == '0) return 0;
    for (int k = 0; k < CW; k++) sb[k] = syn_bit(k);
    for (int i = 0; i < CW; i++) begin
      if (sb[i] == s) return 0;
      for (int j = i + 1; j < CW; j++) if ((sb[i] ^ sb[j]) == s) return 0;
    end
    return 1;
  endfunction

  function automatic int true_count(int row, int b);
    return int'(ref_mem[row][b]) + int'(ref_mem[row + 1][b]) + int'(ref_mem[row + 2][b]);
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
  // data column of word w with the given true count, not `avoid`
  function automatic int col_in_word(int row, int w, int cnt, int avoid);
    for (int b = 0; b < DATA_W; b++)
      if (b != avoid && true_count(row, w * DATA_W + b) == cnt) return b;
    return -1;
  endfunction

  // a single-level fault on data column b of word w that really changes the
  // sensed count (down unless the count is already 0)
  task automatic inject(int row, int w, int b);
    if (true_count(row, w * DATA_W + b) > 0) fault_dn[w * CW + b] = 1'b1;
    else                                     fault_up[w * CW + b] = 1'b1;
  endtask

  task automatic issue(cmd_e c, int row, cim_op_e o, logic [ROW_DATA_W-1:0] wd, int exp_reissue);
    int dbc = row / DOMS, dom = row % DOMS, d, lat, exp_lat;
    d = (dom > port[dbc]) ? dom - port[dbc] : port[dbc] - dom;
    exp_lat = (c == CMD_CIM) ? d + 4 + 2 * exp_reissue : d + 3;
    n_tr = 0;
    cmd = c; cmd_row = 9'(row); cmd_op = o; wdata = wd; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!resp_valid);
    #1;
    port[dbc] = dom;
    chk_(lat == exp_lat, $sformatf("latency %0d exp %0d", lat, exp_lat));
  endtask

  initial main();

  task automatic main();
    cim_op_e ops[6] = '{OP_AND, OP_NAND, OP_OR, OP_NOR, OP_XOR, OP_XNOR};
    int rows[3] = '{2, 6*DOMS + 20, 12*DOMS + 1};
    foreach (port[i]) port[i] = 0;
    foreach (mech[i]) mech[i] = 0;
    cmd = CMD_READ; cmd_row = '0; cmd_op = OP_AND; wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    foreach (rows[r])
      for (int k = 0; k < TRD; k++) begin
        logic [ROW_DATA_W-1:0] d;
        for (int i = 0; i < ROW_DATA_W / 32; i++) d[i*32 +: 32] = $urandom;
        issue(CMD_WRITE, rows[r] + k, OP_AND, d, 0);
        ref_mem[rows[r] + k] = d;
      end

    foreach (rows[r])
      foreach (ops[i]) begin
        issue(CMD_CIM, rows[r], ops[i], '0, 0);
        chk_(rdata == ref_op(ops[i], rows[r]) && status.corrected == 0 && n_tr == 1,
             $sformatf("clean %s", ops[i].name()));
        mech[M_CLEAN]++;
      end

    foreach (rows[r]) begin
      int row = rows[r];
      int w = int'($urandom_range(WORDS - 1));
      int b0, b1;
      // AND: two columns with true count 2 read as 3 -> two deterministic errors
      b0 = col_in_word(row, w, 2, -1);
      b1 = col_in_word(row, w, 2, b0);
      fault_up[w * CW + b0] = 1'b1; fault_up[w * CW + b1] = 1'b1;
      issue(CMD_CIM, row, OP_AND, '0, 0);
      chk_(rdata == ref_op(OP_AND, row) && status.corrected == 2 && status.reissues == 0 &&
           status.uncorrectable == '0, "two deterministic AND errors corrected");
      mech[M_DOUBLE_FIX]++;
      // OR: one column count 1 read as 0 (error), one count 0 read as 1 (ambiguous)
      b0 = col_in_word(row, w, 1, -1);
      b1 = col_in_word(row, w, 0, b0);
      if (b1 >= 0) begin
        fault_dn[w * CW + b0] = 1'b1; fault_up[w * CW + b1] = 1'b1;
        issue(CMD_CIM, row, OP_OR, '0, 1);
        chk_(rdata == ref_op(OP_OR, row) && status.reissues == 1 && n_tr == 2,
             "double fault with an ambiguous OR reissued");
        mech[M_DOUBLE_AMB]++;
      end
      // XOR: two faults in each of two words
      begin
        int v = (w + 1) % WORDS;
        fault_up[w * CW + 3] = 1'b1;  fault_dn[w * CW + 40] = 1'b1;
        fault_up[v * CW + 70] = 1'b1; fault_up[v * CW + 11] = 1'b1;   // 70: a check bit
        issue(CMD_CIM, row, OP_XOR, '0, 0);
        chk_(rdata == ref_op(OP_XOR, row) && status.uncorrectable == '0 && status.reissues == 0,
             "two faults in each of two words");
        mech[M_TWO_WORDS]++;
      end
      // three data-bit faults, chosen so that no pattern of two or fewer matches
      begin
        int p, q, s;
        logic [ROW_DATA_W-1:0] exp = ref_op(OP_XOR, row);
        do begin
          p = int'($urandom_range(DATA_W - 1));
          q = int'($urandom_range(DATA_W - 1));
          s = int'($urandom_range(DATA_W - 1));
        end while (p == q || q == s || p == s || !detectable(syn_bit(p) ^ syn_bit(q) ^ syn_bit(s)));
        inject(row, w, p); inject(row, w, q); inject(row, w, s);
        issue(CMD_CIM, row, OP_XOR, '0, 0);
        chk_(status.uncorrectable == WORDS'(1 << w) && n_tr == 1, "triple fault flagged");
        for (int u = 0; u < WORDS; u++)
          if (u != w) chk_(rdata[u*DATA_W +: DATA_W] == exp[u*DATA_W +: DATA_W], "other words intact");
        mech[M_TRIPLE_UNC]++;
      end
    end

    // READ corrects two corrupted stored bits in one word
    dut.u_sa.g_dbc[0].u_dbc.mem[3][5] ^= 1'b1;
    dut.u_sa.g_dbc[0].u_dbc.mem[3][60] ^= 1'b1;
    issue(CMD_READ, 3, OP_AND, '0, 0);
    chk_(rdata == ref_mem[3] && status.corrected == 2 && status.uncorrectable == '0, "READ double correction");
    mech[M_READ_FIX2]++;

    foreach (mech[i]) begin
      mech_e m = mech_e'(i);
      $display("mechanism %-14s occurred %0d times", m.name(), mech[i]);
      chk_(mech[i] > 0, $sformatf("mechanism %s never occurred", m.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
