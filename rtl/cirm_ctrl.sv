// cirm_ctrl: command sequencer of a CIRM-ECC protected subarray.
//
// Accepts one command at a time (valid/ready) and steers the subarray and the
// ECC datapath:
//   S_IDLE   ready; latches command, row and operation.
//   S_ALIGN  shifts the selected DBC one domain per cycle until the addressed
//            domain is under the access port.  A CIM command whose TRD
//            operand rows would run past the end of the DBC is rejected here
//            (cmd_error).
//   S_ACCESS WRITE: one write pulse.  READ: capture the row.  CIM: fire the
//            transverse read (tr_fire_o) and capture the sense amplifiers.
//   S_CHECK  (CIM only) the ECC/classifier verdict of the captured sense is
//            registered (chk_o).  If a word had more faults than the code
//            corrects, the result is returned with it flagged and the
//            operation is not repeated.  Otherwise, if some fault was
//            ambiguous, the transverse read is reissued (back to S_ACCESS),
//            at most MAX_REISSUE times.  Otherwise the corrected result is
//            final.
//   S_RESP   resp_valid_o for one cycle.
// Latency: a CIM with the port already aligned answers 4 cycles after the
// command is accepted (resp_valid_o high in the 4th cycle after the
// handshake), plus one cycle per domain shifted and two per reissue.  The
// correct / record-uncorrectable / reissue policy follows the paper's
// evaluation; the state sequence, the handshake and the reissue limit are
// this design's choices (the paper sets no limit).
module cirm_ctrl
  import cirm_pkg::*;
#(
  parameter int unsigned DOMAINS     = 32,
  parameter int unsigned NUM_DBC     = 16,
  parameter int unsigned TRD         = 3,
  parameter int unsigned MAX_REISSUE = 15,
  localparam int unsigned POS_W = $clog2(DOMAINS),
  localparam int unsigned SEL_W = (NUM_DBC > 1) ? $clog2(NUM_DBC) : 1,
  localparam int unsigned ROW_W = POS_W + SEL_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             cmd_valid_i,
  output logic             cmd_ready_o,
  input  cmd_e             cmd_i,
  input  logic [ROW_W-1:0] cmd_row_i,   // {DBC, domain}
  input  cim_op_e          cmd_op_i,
  // subarray
  output logic [SEL_W-1:0] dbc_sel_o,
  input  logic [POS_W-1:0] pos_i,
  output logic             shift_en_o,
  output logic             shift_up_o,
  output logic             wr_en_o,
  // datapath
  output cmd_e             cmd_o,
  output cim_op_e          op_o,
  output logic             rd_cap_o,
  output logic             tr_fire_o,
  output logic             chk_o,
  input  logic             any_uncorr_i,
  input  logic             any_ambig_i,
  // response
  output logic             resp_valid_o,
  output logic [3:0]       reissues_o,
  output logic             cmd_error_o
);

  typedef enum logic [2:0] {S_IDLE, S_ALIGN, S_ACCESS, S_CHECK, S_RESP} state_e;

  state_e           state;
  cmd_e             cmd_q;
  cim_op_e          op_q;
  logic [SEL_W-1:0] dbc_q;
  logic [POS_W-1:0] dom_q;
  logic [3:0]       reissues_q;
  logic             err_q;
  logic             too_far;

  // operand rows dom .. dom+TRD-1 must lie in one DBC
  assign too_far = (int'(dom_q) + int'(TRD) > int'(DOMAINS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cmd_q      <= CMD_READ;
      op_q       <= OP_AND;
      dbc_q      <= '0;
      dom_q      <= '0;
      reissues_q <= '0;
      err_q      <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid_i) begin
          cmd_q      <= cmd_i;
          op_q       <= cmd_op_i;
          dbc_q      <= cmd_row_i[ROW_W-1 -: SEL_W];
          dom_q      <= cmd_row_i[POS_W-1:0];
          reissues_q <= '0;
          err_q      <= 1'b0;
          state      <= S_ALIGN;
        end
        S_ALIGN: begin
          if (cmd_q == CMD_CIM && too_far) begin
            err_q <= 1'b1;
            state <= S_RESP;
          end else if (pos_i == dom_q) begin
            state <= S_ACCESS;
          end
        end
        S_ACCESS: state <= (cmd_q == CMD_CIM) ? S_CHECK : S_RESP;
        S_CHECK: begin
          if (!any_uncorr_i && any_ambig_i && int'(reissues_q) < int'(MAX_REISSUE)) begin
            reissues_q <= reissues_q + 1'b1;
            state      <= S_ACCESS;
          end else begin
            state <= S_RESP;
          end
        end
        S_RESP:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign cmd_ready_o  = (state == S_IDLE);
  assign dbc_sel_o    = dbc_q;
  assign shift_en_o   = (state == S_ALIGN) && !(cmd_q == CMD_CIM && too_far) && (pos_i != dom_q);
  assign shift_up_o   = (dom_q > pos_i);
  assign wr_en_o      = (state == S_ACCESS) && (cmd_q == CMD_WRITE);
  assign rd_cap_o     = (state == S_ACCESS) && (cmd_q == CMD_READ);
  assign tr_fire_o    = (state == S_ACCESS) && (cmd_q == CMD_CIM);
  assign chk_o        = (state == S_CHECK);
  assign cmd_o        = cmd_q;
  assign op_o         = op_q;
  assign resp_valid_o = (state == S_RESP);
  assign reissues_o   = reissues_q;
  assign cmd_error_o  = err_q;

  // A command is only taken while idle, and the reissue budget fits the
  // 4-bit status counter.
  initial assert (MAX_REISSUE <= 15) else $error("cirm_ctrl: MAX_REISSUE above 15");
  a_no_shift_outside_align: assert property (@(posedge clk) disable iff (!rst_n)
    shift_en_o |-> state == S_ALIGN);
  a_one_access: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({wr_en_o, rd_cap_o, tr_fire_o}));

endmodule
