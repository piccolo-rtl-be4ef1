// tb_fim_chip: one x16 device with all its banks and a behavioural array.
// Runs a gather in bank 1 and a scatter in bank 5 at the same time (bank
// parallelism), then reads the gathered items through the data buffer and
// checks them, checks that read data arrive exactly CL cycles after the RD,
// that the scattered words landed in bank 5 only, and that the banks'
// protocol checks stay quiet.
//
// Timing: the test issues commands one per cycle with the DDR4 waits of the
// command generator (tRAS, tRP, tRCD, tWR + tBURST). CL = 16 nCK is this
// design's DDR4-2400R choice; tCCD_L and the bank parallelism are the paper's.
module tb_fim_chip;
  import piccolo_pkg::*;
  localparam int NB = NUM_BANKS;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  ddr_cmd_t cmd = '0;
  logic [CHIP_BURST_W-1:0] wdata = '0;
  logic rd_valid; logic [CHIP_BURST_W-1:0] rd_data;
  logic [NB-1:0] arr_act, arr_en, arr_we, busy, op_done;
  logic [NB-1:0][ROW_W-1:0] arr_row;
  logic [NB-1:0][COL_W-4:0] arr_col;
  logic [NB-1:0][BURST_LEN-1:0] arr_wmask;
  logic [NB-1:0][CHIP_BURST_W-1:0] arr_wdata, arr_rdata;
  logic protocol_err;
  int checks = 0, failures = 0, cyc = 0, t_rd = 0, t_rv = 0, perr_seen = 0, dones = 0;

  fim_chip dut (.*);
  dram_array_model #(.NB(NB), .SEED(9)) u_arr (.*);

  always #5 clk = ~clk;
  always @(posedge clk iff rst_n) begin
    cyc <= cyc + 1;
    if (rst_n && protocol_err) perr_seen++;
    if (rd_valid) t_rv = cyc;
    if (cmd_valid && cmd.cmd == CMD_RD) t_rd = cyc;
    dones += $countones(op_done);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(input ddr_cmd_e c, input int bank, input logic [ROW_W-1:0] r,
                       input logic [COL_W-1:0] col, input logic [CHIP_BURST_W-1:0] wd, input int gap);
    @(negedge clk);
    cmd_valid = 1; cmd = '{cmd: c, rank: '0, bank: BANK_W'(bank), row: r, col: col}; wdata = wd;
    @(negedge clk);
    cmd_valid = 0; cmd = '0;
    repeat (gap) @(negedge clk);
  endtask

  logic [N_ITEMS-1:0][OFFSET_W-1:0] g_ofs, s_ofs;
  logic [N_ITEMS-1:0][DEV_W-1:0] s_dat;
  logic [CHIP_BURST_W-1:0] got;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 8; k++) begin
      g_ofs[k] = OFFSET_W'($urandom_range(0, 1023));
      s_ofs[k] = OFFSET_W'(k * 100 + $urandom_range(0, 99));
      s_dat[k] = DEV_W'($urandom);
    end
    // open target rows 300 (bank 1) and 301 (bank 5)
    issue(CMD_ACT, 1, 16'd300, '0, '0, 0);
    issue(CMD_ACT, 5, 16'd301, '0, '0, T_RAS);
    issue(CMD_PRE, 1, '0, '0, '0, 0);
    issue(CMD_PRE, 5, '0, '0, '0, T_RP);
    issue(CMD_ACT, 1, ROW_Y, '0, '0, 0);
    issue(CMD_ACT, 5, ROW_Y, '0, '0, T_RCD);
    // gather in bank 1, scatter in bank 5, interleaved
    issue(CMD_WR, 1, '0, VCOL_OFS, g_ofs, T_CCD_S - 1);
    issue(CMD_WR, 5, '0, VCOL_OFS, s_ofs, T_CCD_L - 1);
    issue(CMD_WR, 5, '0, VCOL_DATA, s_dat, T_BURST + T_WR);
    check(busy[1] && busy[5], "two banks busy at once");
    issue(CMD_PRE, 1, '0, '0, '0, 0);
    issue(CMD_PRE, 5, '0, '0, '0, T_RP);
    issue(CMD_ACT, 1, ROW_Z, '0, '0, 0);
    issue(CMD_ACT, 5, ROW_Z, '0, '0, T_RCD);
    check(busy == '0, "internal operations finished inside the PRE/ACT gap");
    issue(CMD_RD, 1, '0, VCOL_DATA, '0, 0);
    wait (rd_valid);
    got = rd_data;
    @(posedge clk);
    @(negedge clk);
    check(t_rv - t_rd == T_CL, $sformatf("read data %0d cycles after RD (want %0d)", t_rv - t_rd, T_CL));
    for (int k = 0; k < 8; k++)
      check(got[k*16 +: 16] == u_arr.init_word(9, 1, 300, g_ofs[k]), $sformatf("gathered item %0d", k));
    for (int k = 0; k < 8; k++) begin
      check(u_arr.peek(5, 301, s_ofs[k]) == s_dat[k], $sformatf("scattered item %0d", k));
      check(u_arr.peek(1, 300, s_ofs[k]) == u_arr.init_word(9, 1, 300, s_ofs[k]), "other bank untouched");
    end
    check(dones == 2, "two internal operations completed");
    check(perr_seen == 0, "no protocol violation flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
