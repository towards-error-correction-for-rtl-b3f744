// cirm_ecc_top: a compute-in-memory racetrack-memory subarray whose bulk-
// bitwise operations are protected by CIRM-ECC.
//
// Rows are 512 data bits stored as eight codewords, in a subarray of NUM_DBC
// DBCs of DOMAINS domains.  ECC_T selects the code: 1 (default) the (72,64)
// SEC-DED Hamming code, 576 nanowires per row; 2 the (78,64) double-error-
// correcting BCH code, 624 nanowires per row; 3 the (85,64) triple-error-
// correcting BCH code, 680 nanowires per row.  A CIM
// command names the first of TRD consecutive rows of one DBC; one transverse
// read senses, per nanowire, how many of those rows hold '1'.  From that one
// sense the datapath computes AND/NAND/OR/NOR/XOR/XNOR together.  Because the
// code is linear, the XOR of the TRD stored codewords is again a codeword,
// so the decoder run on the XOR result locates the sensing
// faults (every single-level fault flips XOR).  The fault classifier turns
// each located fault into a correction, a no-op or an ambiguity for the
// requested operation; ambiguities make the controller repeat the transverse
// read, words with more faults than the code corrects are flagged in the
// status and not repeated.
//
// Interface: valid/ready command port (cmd_i WRITE/READ/CIM, cmd_row_i =
// {DBC, domain}, cmd_op_i, cmd_wdata_i for WRITE); a one-cycle resp_valid_o
// with resp_data_o (READ data or CIM result; unchanged for WRITE) and
// resp_status_o.  fault_up_i/fault_dn_i stand for the physical sensing-fault
// source of the sense amplifiers, one bit per nanowire, and are applied to
// every transverse read fired while they are set; tr_fire_o marks the cycle
// in which the sense amplifiers are sampled.  Timing: see cirm_ctrl.
// The XOR-based detection, the fault classification and the
// correct / reissue / record-uncorrectable policy follow the paper; the
// command interface, the pipeline stages and the reissue limit are this
// design's own.  The ECC decoders are shared between READ and CIM.
module cirm_ecc_top
  import cirm_pkg::*;
#(
  parameter int unsigned DOMAINS     = 32,
  parameter int unsigned NUM_DBC     = 16,
  parameter int unsigned TRD         = 3,
  parameter int unsigned MAX_REISSUE = 15,
  parameter int unsigned ECC_T       = 1,   // 1: (72,64) Hamming, 2/3: (78/85,64) BCH
  localparam int unsigned CW_W  = (ECC_T == 3) ? BCH3_CW_W :
                                 (ECC_T == 2) ? BCH_CW_W : HAM_CW_W,
  localparam int unsigned N     = WORDS * CW_W,
  localparam int unsigned POS_W = $clog2(DOMAINS),
  localparam int unsigned SEL_W = (NUM_DBC > 1) ? $clog2(NUM_DBC) : 1,
  localparam int unsigned ROW_W = POS_W + SEL_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cmd_valid_i,
  output logic                  cmd_ready_o,
  input  cmd_e                  cmd_i,
  input  logic [ROW_W-1:0]      cmd_row_i,
  input  cim_op_e               cmd_op_i,
  input  logic [ROW_DATA_W-1:0] cmd_wdata_i,
  input  logic [N-1:0]          fault_up_i,
  input  logic [N-1:0]          fault_dn_i,
  output logic                  tr_fire_o,
  output logic                  resp_valid_o,
  output logic [ROW_DATA_W-1:0] resp_data_o,
  output status_t               resp_status_o
);

  localparam int unsigned CNT_W = $clog2(TRD + 1);
  localparam int unsigned FLIP_W = $clog2(DATA_W + 1);

  // ---------------------------------------------------------------- control
  logic             shift_en, shift_up, wr_en, rd_cap, tr_fire, chk;
  logic [SEL_W-1:0] dbc_sel;
  logic [POS_W-1:0] pos;
  cmd_e             cmd_q;
  cim_op_e          op_q;
  logic             any_uncorr, any_ambig;
  logic [3:0]       reissues;
  logic             cmd_error;

  cirm_ctrl #(
    .DOMAINS(DOMAINS), .NUM_DBC(NUM_DBC), .TRD(TRD), .MAX_REISSUE(MAX_REISSUE)
  ) u_ctrl (
    .clk, .rst_n,
    .cmd_valid_i, .cmd_ready_o, .cmd_i, .cmd_row_i, .cmd_op_i,
    .dbc_sel_o   (dbc_sel),
    .pos_i       (pos),
    .shift_en_o  (shift_en),
    .shift_up_o  (shift_up),
    .wr_en_o     (wr_en),
    .cmd_o       (cmd_q),
    .op_o        (op_q),
    .rd_cap_o    (rd_cap),
    .tr_fire_o   (tr_fire),
    .chk_o       (chk),
    .any_uncorr_i(any_uncorr),
    .any_ambig_i (any_ambig),
    .resp_valid_o,
    .reissues_o  (reissues),
    .cmd_error_o (cmd_error)
  );

  assign tr_fire_o = tr_fire;

  // ------------------------------------------------------------ write path
  logic [ROW_DATA_W-1:0] wdata_q;
  logic [N-1:0]          wr_row;

  always_ff @(posedge clk) begin
    if (cmd_valid_i && cmd_ready_o) wdata_q <= cmd_wdata_i;
  end

  for (genvar w = 0; w < WORDS; w++) begin : g_enc
    if (ECC_T == 3) begin : g_bch3
      bch_enc3 u_enc (
        .data_i(wdata_q[w*DATA_W +: DATA_W]),
        .cw_o  (wr_row[w*CW_W +: CW_W])
      );
    end else if (ECC_T == 2) begin : g_bch
      bch_enc2 u_enc (
        .data_i(wdata_q[w*DATA_W +: DATA_W]),
        .cw_o  (wr_row[w*CW_W +: CW_W])
      );
    end else begin : g_ham
      hamming_enc u_enc (
        .data_i(wdata_q[w*DATA_W +: DATA_W]),
        .cw_o  (wr_row[w*CW_W +: CW_W])
      );
    end
  end

  // -------------------------------------------------------------- subarray
  logic [N-1:0]          row;
  logic [N-1:0][TRD-1:0] window;

  rtm_subarray #(.N(N), .DOMAINS(DOMAINS), .NUM_DBC(NUM_DBC), .TRD(TRD)) u_sa (
    .clk, .rst_n,
    .dbc_sel_i (dbc_sel),
    .shift_en_i(shift_en),
    .shift_up_i(shift_up),
    .wr_en_i   (wr_en),
    .wr_data_i (wr_row),
    .pos_o     (pos),
    .row_o     (row),
    .window_o  (window)
  );

  // ------------------------------------------- transverse read and CIM logic
  logic [N-1:0][TRD-1:0]   thermo, thermo_q;
  logic [N-1:0]            r_or, r_nor, r_and, r_nand, r_xor, r_xnor, r_sel;
  logic [N-1:0][CNT_W-1:0] count;

  tr_senseamp #(.N(N), .TRD(TRD)) u_sense (
    .domains_i (window),
    .fault_up_i(fault_up_i),
    .fault_dn_i(fault_dn_i),
    .thermo_o  (thermo)
  );

  always_ff @(posedge clk) begin
    if (tr_fire) thermo_q <= thermo;
  end

  cim_logic #(.N(N), .TRD(TRD)) u_logic (
    .thermo_i(thermo_q),
    .or_o(r_or), .nor_o(r_nor), .and_o(r_and), .nand_o(r_nand),
    .xor_o(r_xor), .xnor_o(r_xnor),
    .count_o(count)
  );

  always_comb begin
    unique case (op_q)
      OP_AND:  r_sel = r_and;
      OP_NAND: r_sel = r_nand;
      OP_OR:   r_sel = r_or;
      OP_NOR:  r_sel = r_nor;
      OP_XOR:  r_sel = r_xor;
      default: r_sel = r_xnor;
    endcase
  end

  // --------------------------------------- ECC check and fault classification
  logic [N-1:0]           dec_in, err_mask;
  logic [WORDS-1:0]       w_uncorr, w_ambig;
  logic [ROW_DATA_W-1:0]  cim_res, rd_res;
  logic [WORDS-1:0][FLIP_W-1:0] w_flip;
  logic [9:0]             n_flip_cim, n_flip_rd;

  // READ decodes the stored row, CIM the XOR of the sensed operands
  assign dec_in = (cmd_q == CMD_READ) ? row : r_xor;

  for (genvar w = 0; w < WORDS; w++) begin : g_word
    fault_class_e [DATA_W-1:0] cls;

    if (ECC_T == 3) begin : g_bch3
      bch_dec3 u_dec (
        .cw_i           (dec_in[w*CW_W +: CW_W]),
        .err_mask_o     (err_mask[w*CW_W +: CW_W]),
        .n_err_o        (),
        .uncorrectable_o(w_uncorr[w])
      );
    end else if (ECC_T == 2) begin : g_bch
      bch_dec2 u_dec (
        .cw_i           (dec_in[w*CW_W +: CW_W]),
        .err_mask_o     (err_mask[w*CW_W +: CW_W]),
        .n_err_o        (),
        .uncorrectable_o(w_uncorr[w])
      );
    end else begin : g_ham
      hamming_dec u_dec (
        .cw_i           (dec_in[w*CW_W +: CW_W]),
        .err_mask_o     (err_mask[w*CW_W +: CW_W]),
        .err_o          (),
        .uncorrectable_o(w_uncorr[w])
      );
    end

    fault_classifier #(.W(DATA_W), .TRD(TRD)) u_cls (
      .op_i       (op_q),
      .count_i    (count[w*CW_W +: DATA_W]),
      .flag_i     (err_mask[w*CW_W +: DATA_W]),
      .res_i      (r_sel[w*CW_W +: DATA_W]),
      .res_o      (cim_res[w*DATA_W +: DATA_W]),
      .class_o    (cls),
      .ambiguous_o(w_ambig[w]),
      .n_flip_o   (w_flip[w])
    );

    assign rd_res[w*DATA_W +: DATA_W] =
      row[w*CW_W +: DATA_W] ^ err_mask[w*CW_W +: DATA_W];
  end

  always_comb begin
    n_flip_cim = '0;
    n_flip_rd  = '0;
    for (int w = 0; w < WORDS; w++) begin
      n_flip_cim += 10'(w_flip[w]);
      n_flip_rd  += 10'($countones(err_mask[w*CW_W +: DATA_W]));
    end
  end

  assign any_uncorr = |w_uncorr;
  assign any_ambig  = |w_ambig;

  // ---------------------------------------------------------------- response
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_data_o <= '0;
      resp_status_o <= '0;
    end else if (cmd_valid_i && cmd_ready_o) begin
      resp_status_o <= '0;
    end else if (rd_cap) begin
      resp_data_o                 <= rd_res;
      resp_status_o.uncorrectable <= w_uncorr;
      resp_status_o.corrected     <= n_flip_rd;
    end else if (chk) begin
      resp_data_o                 <= cim_res;
      resp_status_o.uncorrectable <= w_uncorr;
      resp_status_o.ambiguous     <= w_ambig;
      resp_status_o.corrected     <= n_flip_cim;
      resp_status_o.reissues      <= reissues;
    end else if (resp_valid_o) begin
      resp_status_o.cmd_error     <= cmd_error;
    end
  end

endmodule
