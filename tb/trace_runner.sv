// trace_runner: drives one CIRM-ECC subarray with a synthetic trace of
// AND/OR operations on random operands while every sense amplifier fails
// independently with probability RATE_PPM per million per transverse read
// (direction up or down at random).  Faults are redrawn for every
// transverse read, including reissues.
//
// Checking, per word of each response, from the faults that really changed a
// count in the final transverse read (a fault "up" at count TRD or "down" at
// count 0 changes nothing): with at most ECC_T such faults the word must not
// be flagged uncorrectable and, unless still ambiguous after the reissue
// limit, must equal the reference result; for the Hamming code two faults
// must be flagged uncorrectable.  More faults than that are not checked (a
// code may miscorrect them).  Per phase it also counts the transverse reads
// in which some word suffered more faults than the code corrects, and
// compares that with the binomial estimate, the quantity plotted as the
// row fault rate of an ECC level.  The fault bookkeeping reads the sensed window
// inside the subarray; results are checked against the runner's own
// reference memory.  It also reports the share of reissued transverse
// reads, the execution-time cost of the scheme.
module trace_runner #(
  parameter int unsigned ECC_T    = 1,
  parameter int unsigned RATE_PPM = 10000,   // first phase; second at a tenth
  parameter int unsigned OPS      = 300
) (
  input  logic clk,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  import cirm_pkg::*;

  localparam int CW = (ECC_T == 3) ? BCH3_CW_W : (ECC_T == 2) ? BCH_CW_W : HAM_CW_W;
  localparam int N = WORDS * CW, DOMS = 32, TRD = 3, NROWS = 8;

  logic rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  cmd_e cmd;
  logic [8:0] cmd_row;
  cim_op_e cmd_op;
  logic [ROW_DATA_W-1:0] wdata, rdata;
  logic [N-1:0] fault_up, fault_dn;
  logic tr_fire, resp_valid;
  status_t status;

  cirm_ecc_top #(.ECC_T(ECC_T)) dut (
    .clk, .rst_n, .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_i(cmd),
    .cmd_row_i(cmd_row), .cmd_op_i(cmd_op), .cmd_wdata_i(wdata),
    .fault_up_i(fault_up), .fault_dn_i(fault_dn), .tr_fire_o(tr_fire),
    .resp_valid_o(resp_valid), .resp_data_o(rdata), .resp_status_o(status));

  logic [ROW_DATA_W-1:0] ref_mem [2][NROWS];
  int eff_word [WORDS];           // effective faults of the last transverse read
  int n_tr = 0;
  int n_tr_over = 0;              // transverse reads with a word over capacity
  bit faults_on = 0;
  int unsigned rate_ppm = RATE_PPM;

  task automatic draw_faults();
    for (int w = 0; w < N; w++) begin
      bit f = faults_on && ($urandom_range(999999) < rate_ppm);
      bit up = 1'($urandom);
      fault_up[w] = f && up;
      fault_dn[w] = f && !up;
    end
  endtask

  always @(posedge clk) begin
    if (tr_fire) begin
      n_tr++;
      for (int v = 0; v < WORDS; v++) eff_word[v] = 0;
      for (int w = 0; w < N; w++) begin
        automatic int c = $countones(dut.window[w]);
        if ((fault_up[w] && c < TRD) || (fault_dn[w] && c > 0)) eff_word[w / CW]++;
      end
      begin
        automatic bit over = 0;
        for (int v = 0; v < WORDS; v++) if (eff_word[v] > int'(ECC_T)) over = 1;
        n_tr_over += int'(over);
      end
      #1 draw_faults();
    end
  end

  task automatic chk_(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL [ECC_T=%0d] %s", ECC_T, what); end
  endtask

  task automatic issue(cmd_e c, int row, cim_op_e o, logic [ROW_DATA_W-1:0] wd);
    cmd = c; cmd_row = 9'(row); cmd_op = o; wdata = wd; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #2 cmd_valid = 0;
    do @(posedge clk); while (!resp_valid);
    #2;
  endtask

  // probability that a word of CW nanowires has more than ECC_T faults
  function automatic real p_word_unc(real p);
    real s = 0.0, term;
    for (int k = 0; k <= int'(ECC_T); k++) begin
      term = 1.0;
      for (int i = 0; i < k; i++) term = term * real'(CW - i) / real'(i + 1);
      s += term * (p ** k) * ((1.0 - p) ** (CW - k));
    end
    return 1.0 - s;
  endfunction

  // one phase: OPS operations at the current fault rate
  task automatic phase();
    int unc_rows = 0, base_tr, base_over, extra = 0;
    real p_eff, exp_rows;
    draw_faults();
    base_tr = n_tr;
    base_over = n_tr_over;
    for (int t = 0; t < int'(OPS); t++) begin
      int d = int'($urandom_range(1));
      int r = int'($urandom_range(NROWS - TRD));
      cim_op_e o = ($urandom_range(1) != 0) ? OP_AND : OP_OR;
      logic [ROW_DATA_W-1:0] exp = (o == OP_AND) ? ref_mem[d][r] & ref_mem[d][r+1] & ref_mem[d][r+2]
                                                 : ref_mem[d][r] | ref_mem[d][r+1] | ref_mem[d][r+2];
      issue(CMD_CIM, d * DOMS + r, o, '0);
      extra += int'(status.reissues);
      if (status.uncorrectable != '0) unc_rows++;
      for (int v = 0; v < WORDS; v++) begin
        if (eff_word[v] <= int'(ECC_T)) begin
          chk_(!status.uncorrectable[v], $sformatf("op %0d word %0d: %0d faults flagged uncorrectable", t, v, eff_word[v]));
          if (!status.ambiguous[v])
            chk_(rdata[v*DATA_W +: DATA_W] == exp[v*DATA_W +: DATA_W],
                 $sformatf("op %0d word %0d: wrong result with %0d faults", t, v, eff_word[v]));
        end else if (ECC_T == 1 && eff_word[v] == 2) begin
          chk_(status.uncorrectable[v], $sformatf("op %0d word %0d: double fault not flagged", t, v));
        end
      end
    end
    // a fault is effective unless it pushes past 0 or TRD (1 in 2^TRD each)
    p_eff = real'(rate_ppm) * 1.0e-6 * (1.0 - 1.0 / real'(1 << TRD));
    exp_rows = real'(n_tr - base_tr) * (1.0 - (1.0 - p_word_unc(p_eff)) ** WORDS);
    $display("trace ECC_T=%0d rate=%0d ppm: %0d ops, %0d transverse reads (%0d reissued, %0.1f%% extra), reads with a word over capacity %0d (binomial estimate %0.1f), results flagged uncorrectable %0d",
             ECC_T, rate_ppm, OPS, n_tr - base_tr, extra, 100.0 * real'(extra) / real'(OPS),
             n_tr_over - base_over, exp_rows, unc_rows);
    if (exp_rows >= 30.0)
      chk_(real'(n_tr_over - base_over) > 0.7 * exp_rows && real'(n_tr_over - base_over) < 1.4 * exp_rows,
           "over-capacity read count far from the binomial estimate");
    // a result is only flagged when its read was over capacity
    chk_(unc_rows <= n_tr_over - base_over, "more rows flagged than reads over capacity");
  endtask

  task automatic main();
    checks = 0; failures = 0; done = 0;
    fault_up = '0; fault_dn = '0;
    cmd = CMD_READ; cmd_row = '0; cmd_op = OP_AND; wdata = '0;
    wait (start);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int d = 0; d < 2; d++)
      for (int r = 0; r < NROWS; r++) begin
        for (int i = 0; i < ROW_DATA_W / 32; i++) ref_mem[d][r][i*32 +: 32] = $urandom;
        issue(CMD_WRITE, d * DOMS + r, OP_AND, ref_mem[d][r]);
      end
    faults_on = 1;
    rate_ppm = RATE_PPM;
    phase();
    rate_ppm = RATE_PPM / 10;
    phase();
    done = 1;
  endtask

  initial main();
endmodule
