// tb_fim_internal_ctrl: one bank (controller, both buffers, array model)
// driven with the DDR4 command sequences of a gather and a scatter.
// Checks: ACT/PRE to virtual rows leave the physical row open; a gather picks
// the eight addressed 16-bit words of the open row into the data buffer and
// takes exactly 1 + 7*tCCD_L cycles after the offset write; a scatter
// writes exactly the eight addressed words; normal RD/WR still work; the
// protocol flag rises for a buffer read during an internal operation.
//
// The command order and the tCCD_L spacing come from the paper; the array
// model, the virtual-row positions and the protocol rules are this design's
// own. A watchdog ends the run with a failure if it hangs.
module tb_fim_internal_ctrl;
  import piccolo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  ddr_cmd_e cmd = CMD_NOP;
  logic [ROW_W-1:0] cmd_row = '0;
  logic [COL_W-1:0] cmd_col = '0;
  logic [CHIP_BURST_W-1:0] cmd_wdata = '0;
  logic rd_valid; logic [CHIP_BURST_W-1:0] rd_data;
  logic ofs_we; logic [2:0] ofs_idx; logic [OFFSET_W-1:0] ofs_rdata;
  logic db_burst_we, db_word_we; logic [CHIP_BURST_W-1:0] db_burst_rdata;
  logic [2:0] db_word_idx; logic [DEV_W-1:0] db_word_wdata, db_word_rdata;
  logic arr_act, arr_en, arr_we; logic [ROW_W-1:0] arr_row; logic [COL_W-4:0] arr_col;
  logic [BURST_LEN-1:0] arr_wmask; logic [CHIP_BURST_W-1:0] arr_wdata, arr_rdata;
  logic busy, busy_scatter, op_done, protocol_err;
  int checks = 0, failures = 0;
  int cyc = 0;

  fim_internal_ctrl dut (.*);
  fim_offset_buffer u_ofs (.clk, .rst_n, .burst_we(ofs_we), .burst_wdata(cmd_wdata),
                           .rd_idx(ofs_idx), .rd_offset(ofs_rdata));
  fim_data_buffer u_db (.clk, .rst_n, .burst_we(db_burst_we), .burst_wdata(cmd_wdata),
                        .burst_rdata(db_burst_rdata), .word_we(db_word_we), .word_idx(db_word_idx),
                        .word_wdata(db_word_wdata), .word_rdata(db_word_rdata));
  dram_array_model #(.NB(1), .SEED(3)) u_arr (
    .clk, .arr_act(arr_act), .arr_row(arr_row), .arr_en(arr_en), .arr_we(arr_we),
    .arr_col(arr_col), .arr_wmask(arr_wmask), .arr_wdata(arr_wdata), .arr_rdata(arr_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Drive one command for one cycle, then idle for gap cycles.
  task automatic issue(input ddr_cmd_e c, input logic [ROW_W-1:0] r,
                       input logic [COL_W-1:0] col, input logic [CHIP_BURST_W-1:0] wd, input int gap);
    @(negedge clk);
    cmd_valid = 1; cmd = c; cmd_row = r; cmd_col = col; cmd_wdata = wd;
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NOP;
    repeat (gap) @(negedge clk);
  endtask

  localparam logic [ROW_W-1:0] ROWX = 16'd77;
  logic [N_ITEMS-1:0][OFFSET_W-1:0] ofs, ofs2;
  logic [N_ITEMS-1:0][DEV_W-1:0] sdata, want;
  int t_wr, t_done;

  // edges, counted the same way: the edge that takes the offset write and the
  // edge that performs the last internal column access
  always @(posedge clk) begin
    if (op_done) t_done = cyc;
    if (cmd_valid && cmd == CMD_WR && cmd_col == VCOL_OFS) t_wr = cyc;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // open the target row and read a column normally
    issue(CMD_ACT, ROWX, '0, '0, T_RCD);
    @(negedge clk); cmd_valid = 1; cmd = CMD_RD; cmd_col = 10'd40; #1;
    check(rd_valid, "normal RD gives data");
    for (int w = 0; w < 8; w++)
      check(rd_data[w*16 +: 16] == u_arr.init_word(3, 0, ROWX, 40 + w), "normal RD word");
    @(negedge clk); cmd_valid = 0;
    // PRE and ACT of virtual row y must not touch the array
    issue(CMD_PRE, '0, '0, '0, T_RP);
    @(negedge clk); cmd_valid = 1; cmd = CMD_ACT; cmd_row = ROW_Y; #1;
    check(!arr_act, "ACT to virtual row is a no-op for the array");
    @(negedge clk); cmd_valid = 0; repeat (T_RCD) @(negedge clk);
    // gather
    for (int k = 0; k < 8; k++) ofs[k] = OFFSET_W'($urandom_range(0, 1023));
    issue(CMD_WR, '0, VCOL_OFS, ofs, 0);
    wait (!busy);
    check(t_done - t_wr == 1 + 7 * T_CCD_L, $sformatf("gather ends %0d edges after the offset write (got %0d)", 1 + 7*T_CCD_L, t_done - t_wr));
    check(t_done - t_wr + 1 <= T_WR + T_RP + T_RCD, "gather fits in tWR+tRP+tRCD");
    issue(CMD_PRE, '0, '0, '0, T_RP);
    issue(CMD_ACT, ROW_Z, '0, '0, T_RCD);
    @(negedge clk); cmd_valid = 1; cmd = CMD_RD; cmd_col = VCOL_DATA; #1;
    check(rd_valid, "data buffer RD gives data");
    for (int k = 0; k < 8; k++)
      check(rd_data[k*16 +: 16] == u_arr.init_word(3, 0, ROWX, ofs[k] % 1024),
            $sformatf("gathered item %0d", k));
    @(negedge clk); cmd_valid = 0;
    // scatter: offsets then data into the same virtual row (z is open)
    for (int k = 0; k < 8; k++) begin
      ofs2[k] = OFFSET_W'(k * 128 + $urandom_range(0, 127));
      sdata[k] = DEV_W'($urandom);
    end
    issue(CMD_WR, '0, VCOL_OFS, ofs2, T_CCD_S - 1);
    issue(CMD_WR, '0, VCOL_DATA, sdata, 0);
    check(busy_scatter, "data-buffer write starts a scatter");
    // a buffer read now would collide with the running scatter
    @(negedge clk); cmd_valid = 1; cmd = CMD_RD; cmd_col = VCOL_DATA; #1;
    check(protocol_err, "buffer read during scatter is flagged");
    cmd_valid = 0; cmd = CMD_NOP;
    wait (!busy);
    for (int k = 0; k < 8; k++)
      check(u_arr.peek(0, ROWX, ofs2[k]) == sdata[k], $sformatf("scattered item %0d", k));
    check(u_arr.peek(0, ROWX, ofs2[0] ^ 1) == u_arr.init_word(3, 0, ROWX, ofs2[0] ^ 1),
          "neighbour word untouched by scatter");
    // back to the physical row: no re-activation needed, normal WR then RD
    issue(CMD_PRE, '0, '0, '0, T_RP);
    @(negedge clk); cmd_valid = 1; cmd = CMD_ACT; cmd_row = ROWX; #1;
    check(!arr_act, "row x still in the sense amplifiers");
    @(negedge clk); cmd_valid = 0; repeat (T_RCD) @(negedge clk);
    issue(CMD_WR, '0, 10'd512, {8{16'hbeef}}, T_CCD_L);
    @(negedge clk); cmd_valid = 1; cmd = CMD_RD; cmd_col = 10'd512; #1;
    check(rd_data == {8{16'hbeef}}, "normal WR then RD");
    @(negedge clk); cmd_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
