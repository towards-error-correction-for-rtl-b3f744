// tb_rtm_subarray: fills every row of every DBC of a reduced subarray with
// distinct data, then checks that each DBC keeps its own data and its own
// port position while the others are shifted and written, and that the
// shared outputs follow the selected DBC.
module tb_rtm_subarray;
  localparam int N = 16, DOMAINS = 4, NUM_DBC = 4, TRD = 2;

  logic clk = 0, rst_n = 0;
  logic [1:0] sel;
  logic shift_en = 0, shift_up = 0, wr_en = 0;
  logic [N-1:0] wr_data, row;
  logic [1:0] pos;
  logic [N-1:0][TRD-1:0] win;
  logic [N-1:0] model [NUM_DBC][DOMAINS];
  int mpos [NUM_DBC];
  int checks = 0, failures = 0, cycles = 0;

  rtm_subarray #(.N(N), .DOMAINS(DOMAINS), .NUM_DBC(NUM_DBC), .TRD(TRD)) dut (.clk, .rst_n,
    .dbc_sel_i(sel), .shift_en_i(shift_en), .shift_up_i(shift_up), .wr_en_i(wr_en),
    .wr_data_i(wr_data), .pos_o(pos), .row_o(row), .window_o(win));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic goto_(int d, int dom);
    sel = 2'(d); #1;
    while (mpos[d] != dom) begin
      shift_en = 1; shift_up = (dom > mpos[d]);
      @(posedge clk); #1;
      mpos[d] += (dom > mpos[d]) ? 1 : -1;
      shift_en = 0;
    end
  endtask

  initial begin
    sel = 0;
    foreach (mpos[d]) mpos[d] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int d = 0; d < NUM_DBC; d++)
      for (int r = 0; r < DOMAINS; r++) begin
        goto_(d, r);
        model[d][r] = N'($urandom);
        wr_data = model[d][r]; wr_en = 1;
        @(posedge clk); #1; wr_en = 0;
      end
    for (int t = 0; t < 60; t++) begin
      automatic int d = int'($urandom_range(NUM_DBC - 1));
      automatic int r = int'($urandom_range(DOMAINS - 1));
      goto_(d, r);
      checks++;
      if (int'(pos) != r || row !== model[d][r]) begin
        failures++; $display("FAIL dbc %0d row %0d pos=%0d", d, r, pos);
      end
      for (int w = 0; w < N; w++) begin
        automatic logic e = (r + 1 < DOMAINS) ? model[d][r + 1][w] : 1'b0;
        checks++;
        if (win[w][0] !== model[d][r][w] || win[w][1] !== e) begin
          failures++; $display("FAIL window dbc %0d row %0d", d, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
