// tb_fim_cmd_gen: the command generator driving one rank of four x16 FIM
// chips, each with a behavioural cell array (a different seed per chip so
// that each 16-bit slice of an item is distinct).
//
// Sequence: a gather on a closed bank (must open the physical row first),
// a scatter to the same row, a gather that reads the scattered items back,
// and a gather to another row of the same bank (row switch). Checks the
// returned items, the array contents after the scatter, the number of DDR
// commands per operation, the exact gather latency with the rows already in
// place (WR, PRE, ACT, RD plus CL), that the bank's internal work always fits
// in the gap the generator leaves, and that no chip flags a protocol error.
//
// The expected command sequences and the tWR + tRP + tRCD gap follow the
// paper's timing figure; the exact latency depends on this design's
// DDR4-2400R values (tRCD = tRP = 16, tWR = 18, CL = 16 nCK).
module tb_fim_cmd_gen;
  import piccolo_pkg::*;
  localparam int NB = NUM_BANKS;
  logic clk = 0, rst_n = 0;
  logic op_valid = 0, op_ready;
  fim_op_t op = '0;
  logic cmd_valid; ddr_cmd_t cmd;
  logic [BUS_BURST_W-1:0] wdata, rd_data;
  logic rd_valid, res_valid, busy, act_x;
  logic [N_ITEMS-1:0][ITEM_W-1:0] res_data;

  fim_cmd_gen dut (.*);
  always #5 clk = ~clk;

  logic [CHIPS-1:0] c_rv, c_perr;
  logic [CHIPS-1:0][CHIP_BURST_W-1:0] c_rd;
  logic [CHIPS-1:0][NB-1:0] c_busy;

  for (genvar c = 0; c < CHIPS; c++) begin : g_chip
    logic [CHIP_BURST_W-1:0] cw;
    logic [NB-1:0] arr_act, arr_en, arr_we, op_done;
    logic [NB-1:0][ROW_W-1:0] arr_row;
    logic [NB-1:0][COL_W-4:0] arr_col;
    logic [NB-1:0][BURST_LEN-1:0] arr_wmask;
    logic [NB-1:0][CHIP_BURST_W-1:0] arr_wdata, arr_rdata;
    for (genvar k = 0; k < BURST_LEN; k++) begin : g_beat
      assign cw[k*DEV_W +: DEV_W] = wdata[k*ITEM_W + c*DEV_W +: DEV_W];
    end
    fim_chip u_chip (
      .clk, .rst_n, .cmd_valid(cmd_valid && cmd.rank == '0), .cmd, .wdata(cw),
      .rd_valid(c_rv[c]), .rd_data(c_rd[c]),
      .arr_act, .arr_row, .arr_en, .arr_we, .arr_col, .arr_wmask, .arr_wdata, .arr_rdata,
      .busy(c_busy[c]), .op_done, .protocol_err(c_perr[c])
    );
    dram_array_model #(.NB(NB), .SEED(c)) u_arr (
      .clk, .arr_act, .arr_row, .arr_en, .arr_we, .arr_col, .arr_wmask, .arr_wdata, .arr_rdata
    );
  end

  assign rd_valid = c_rv[0];
  always_comb
    for (int k = 0; k < BURST_LEN; k++)
      for (int c = 0; c < CHIPS; c++)
        rd_data[k*ITEM_W + c*DEV_W +: DEV_W] = c_rd[c][k*DEV_W +: DEV_W];

  int checks = 0, failures = 0, cyc = 0, perr = 0, ncmd = 0, n_actx = 0;
  int t_acc = 0, t_res = 0, t_lastwr = 0, gap_bad = 0;
  always @(posedge clk iff rst_n) begin
    cyc <= cyc + 1;
    if (rst_n && |c_perr) perr++;
    if (cmd_valid) ncmd++;
    if (act_x) n_actx++;
    if (op_valid && op_ready) t_acc = cyc;
    if (res_valid) t_res = cyc;
    if (cmd_valid && cmd.cmd == CMD_WR) t_lastwr = cyc;
    // any bank still busy when the generator touches its buffers again?
    if (cmd_valid && (cmd.cmd == CMD_RD || (cmd.cmd == CMD_WR && cmd.col == VCOL_OFS)) && c_busy[0][cmd.bank]) gap_bad++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [ITEM_W-1:0] init_item(int bank, int row, int col);
    for (int c = 0; c < CHIPS; c++)
      init_item[c*DEV_W +: DEV_W] = g_chip[0].u_arr.init_word(c, bank, row, col);
  endfunction
  function automatic logic [ITEM_W-1:0] peek_item(int bank, int row, int col);
    peek_item[0 +: DEV_W]       = g_chip[0].u_arr.peek(bank, row, col);
    peek_item[DEV_W +: DEV_W]   = g_chip[1].u_arr.peek(bank, row, col);
    peek_item[2*DEV_W +: DEV_W] = g_chip[2].u_arr.peek(bank, row, col);
    peek_item[3*DEV_W +: DEV_W] = g_chip[3].u_arr.peek(bank, row, col);
  endfunction

  task automatic run(input fim_op_t o);
    @(negedge clk);
    op_valid = 1; op = o;
    do @(posedge clk); while (!op_ready);
    @(negedge clk);
    op_valid = 0;
    if (o.op == FIM_GATHER) begin
      wait (res_valid); @(posedge clk); @(negedge clk);
    end
    wait (!busy); @(negedge clk);
  endtask

  fim_op_t g, s;
  int n0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    g = '0; g.op = FIM_GATHER; g.bank = 3'd2; g.row = 16'd500;
    for (int k = 0; k < 8; k++) g.offsets[k] = OFFSET_W'($urandom_range(0, 1023));
    // 1. gather, bank closed
    n0 = ncmd;
    run(g);
    for (int k = 0; k < 8; k++)
      check(res_data[k] == init_item(2, 500, g.offsets[k]), $sformatf("gather 1 item %0d", k));
    check(ncmd - n0 == 7, $sformatf("cold gather: ACT PRE ACT WR PRE ACT RD (got %0d)", ncmd - n0));
    check(n_actx == 1, "physical row opened once");
    // 2. scatter to the same row
    s = '0; s.op = FIM_SCATTER; s.bank = 3'd2; s.row = 16'd500;
    for (int k = 0; k < 8; k++) begin
      s.offsets[k] = OFFSET_W'(k * 128 + $urandom_range(0, 127));
      s.data[k] = {$urandom, $urandom};
    end
    n0 = ncmd;
    run(s);
    check(ncmd - n0 == 4, "scatter: WR WR PRE ACT");
    repeat (2 * 8 * T_CCD_L) @(negedge clk);
    for (int k = 0; k < 8; k++)
      check(peek_item(2, 500, s.offsets[k]) == s.data[k], $sformatf("scatter item %0d in array", k));
    // 3. gather back the scattered items, rows already in place
    g.offsets = s.offsets;
    n0 = ncmd;
    run(g);
    for (int k = 0; k < 8; k++)
      check(res_data[k] == s.data[k], $sformatf("gather-after-scatter item %0d", k));
    check(ncmd - n0 == 4, "warm gather: WR PRE ACT RD");
    check(t_res - t_acc == 1 + (T_BURST + T_WR + 1) + (T_RP + 1) + (T_RCD + 1) + T_CL + 1,
          $sformatf("warm gather latency %0d", t_res - t_acc));
    check(T_BURST + T_WR + 1 + T_RP + 1 + T_RCD + 1 >= 1 + 7 * T_CCD_L,
          "gap covers the eight internal accesses");
    // 4. another row in the same bank
    g.row = 16'd77;
    run(g);
    for (int k = 0; k < 8; k++)
      check(res_data[k] == init_item(2, 77, g.offsets[k]), $sformatf("row-switch gather item %0d", k));
    check(n_actx == 2, "second physical row opened");
    check(gap_bad == 0, "no buffer access while a bank was busy");
    check(perr == 0, "no protocol error in any chip");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
