// fim_internal_ctrl: the in-DRAM controller of one bank under Piccolo-FIM.
//
// What it does. The memory controller only ever sends standard DDR4 commands.
// Two rows of every bank, y and z, do not exist: they are virtual rows whose
// columns map onto the bank's offset buffer (column 0..7) and data buffer
// (column 8..15). This controller watches the bank's commands and
//   * turns ACT and PRE aimed at a virtual row into no-ops, so the physical
//     target row x stays in the sense amplifiers,
//   * starts a gather when the offset buffer is written: for each of the
//     eight offsets it issues one internal column read of row x and drops the
//     addressed 16-bit word into the data buffer,
//   * starts a scatter when the data buffer is written (after the offsets):
//     for each offset it issues one internal column write of row x with a
//     one-word write mask,
//   * serves a RD of the data-buffer region from the data buffer, and passes
//     ordinary RD/WR to a physical row straight to the column path.
// Internal column accesses are spaced by tCCD_L (6 nCK): the eighth access
// takes place 1 + 7*6 = 43 nCK after the offset write, inside the
// tWR+tRP+tRCD = 50 nCK gap that the host's PRE/ACT to the other virtual row
// creates.
//
// Follows the paper: the virtual rows, the offset write triggering a gather,
// the eight column accesses at tCCD_L, the no-op PRE/ACT for virtual rows.
// Own choices: which columns hold which buffer; that a data-buffer write
// starts the scatter and aborts a gather started by the offset write just
// before it (the paper has the host write offsets and then data in the same
// virtual row, and the scatter follows the data write in its timing figure);
// and a lazy precharge: PRE only closes the row the controller sees, the
// physical row is replaced when an ACT to another physical row arrives.
//
// Interface. cmd_* is this bank's slice of the command bus (one command per
// cycle, write data arriving with the WR). The controller drives the
// buffers' control pins and the bank's column path (arr_*): arr_act opens a
// physical row; arr_en/arr_we access the 128-bit column arr_col of the open
// row with a per-word write mask; arr_rdata is combinational.
module fim_internal_ctrl
  import piccolo_pkg::*;
#(
  parameter int unsigned TCCD = T_CCD_L,
  parameter int unsigned TRCD = T_RCD
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // command slice for this bank
  input  logic                    cmd_valid,
  input  ddr_cmd_e                cmd,
  input  logic [ROW_W-1:0]        cmd_row,
  input  logic [COL_W-1:0]        cmd_col,
  input  logic [CHIP_BURST_W-1:0] cmd_wdata,
  // read data produced in the command's cycle (the chip adds the CAS latency)
  output logic                    rd_valid,
  output logic [CHIP_BURST_W-1:0] rd_data,
  // offset buffer
  output logic                    ofs_we,
  output logic [2:0]              ofs_idx,
  input  logic [OFFSET_W-1:0]     ofs_rdata,
  // data buffer
  output logic                    db_burst_we,
  input  logic [CHIP_BURST_W-1:0] db_burst_rdata,
  output logic                    db_word_we,
  output logic [2:0]              db_word_idx,
  output logic [DEV_W-1:0]        db_word_wdata,
  input  logic [DEV_W-1:0]        db_word_rdata,
  // bank column path (sense amplifiers / column decoder)
  output logic                    arr_act,
  output logic [ROW_W-1:0]        arr_row,
  output logic                    arr_en,
  output logic                    arr_we,
  output logic [COL_W-4:0]        arr_col,
  output logic [BURST_LEN-1:0]    arr_wmask,
  output logic [CHIP_BURST_W-1:0] arr_wdata,
  input  logic [CHIP_BURST_W-1:0] arr_rdata,
  // status
  output logic                    busy,
  output logic                    busy_scatter,
  output logic                    op_done,
  output logic                    protocol_err
);
  typedef enum logic [1:0] {S_IDLE, S_GATHER, S_SCATTER} state_e;

  state_e              state_q;
  logic [2:0]          idx_q;
  logic [$clog2(TCCD+1)-1:0] ccd_q;   // cycles until the next internal access
  logic                mc_open_q;     // a row is open as the controller sees it
  logic [ROW_W-1:0]    mc_row_q;
  logic                phys_open_q;   // a physical row is in the sense amps
  logic [ROW_W-1:0]    phys_row_q;
  logic [$clog2(TRCD+1)-1:0] rcd_q;   // cycles since the last ACT (saturating)

  // ---------------------------------------------------------- decode
  logic is_act, is_pre, is_rd, is_wr, mc_virtual, ofs_region, db_region;
  assign is_act = cmd_valid && (cmd == CMD_ACT);
  assign is_pre = cmd_valid && (cmd == CMD_PRE);
  assign is_rd  = cmd_valid && (cmd == CMD_RD);
  assign is_wr  = cmd_valid && (cmd == CMD_WR);
  assign mc_virtual = mc_open_q && (mc_row_q == ROW_Y || mc_row_q == ROW_Z);
  assign ofs_region = (cmd_col[COL_W-1:3] == VCOL_OFS[COL_W-1:3]);
  assign db_region  = (cmd_col[COL_W-1:3] == VCOL_DATA[COL_W-1:3]);

  logic start_gather, start_scatter, host_db_rd, normal_rd, normal_wr;
  assign start_gather  = is_wr && mc_virtual && ofs_region;
  assign start_scatter = is_wr && mc_virtual && db_region;
  assign host_db_rd    = is_rd && mc_virtual && db_region;
  assign normal_rd     = is_rd && mc_open_q && !mc_virtual;
  assign normal_wr     = is_wr && mc_open_q && !mc_virtual;

  logic act_physical;
  assign act_physical = is_act && (cmd_row != ROW_Y) && (cmd_row != ROW_Z);

  // internal step due this cycle
  logic step;
  assign step = (state_q != S_IDLE) && (ccd_q == '0);

  // ---------------------------------------------------------- datapath
  logic [2:0] pick;
  assign pick = ofs_rdata[2:0];

  always_comb begin
    ofs_we        = start_gather;
    ofs_idx       = idx_q;
    db_burst_we   = start_scatter;
    db_word_we    = 1'b0;
    db_word_idx   = idx_q;
    db_word_wdata = arr_rdata[pick*DEV_W +: DEV_W];
    arr_act       = act_physical && !(phys_open_q && phys_row_q == cmd_row);
    arr_row       = cmd_row;
    arr_en        = 1'b0;
    arr_we        = 1'b0;
    arr_col       = cmd_col[COL_W-1:3];
    arr_wmask     = '1;
    arr_wdata     = cmd_wdata;
    rd_valid      = 1'b0;
    rd_data       = '0;
    if (step) begin
      arr_en  = 1'b1;
      arr_col = ofs_rdata[COL_W-1:3];
      if (state_q == S_GATHER) begin
        db_word_we = 1'b1;
      end else begin
        arr_we    = 1'b1;
        arr_wmask = BURST_LEN'(1) << pick;
        arr_wdata = {BURST_LEN{db_word_rdata}};
      end
    end else if (normal_rd || normal_wr) begin
      arr_en = 1'b1;
      arr_we = normal_wr;
    end
    if (host_db_rd) begin
      rd_valid = 1'b1;
      rd_data  = db_burst_rdata;
    end else if (normal_rd) begin
      rd_valid = 1'b1;
      rd_data  = arr_rdata;
    end
  end

  // ---------------------------------------------------------- state
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      idx_q       <= '0;
      ccd_q       <= '0;
      mc_open_q   <= 1'b0;
      mc_row_q    <= '0;
      phys_open_q <= 1'b0;
      phys_row_q  <= '0;
      rcd_q       <= '0;
    end else begin
      if (is_act) begin
        mc_open_q <= 1'b1;
        mc_row_q  <= cmd_row;
        rcd_q     <= '0;
        if (act_physical) begin
          phys_open_q <= 1'b1;
          phys_row_q  <= cmd_row;
        end
      end else if (rcd_q != TRCD[$bits(rcd_q)-1:0]) begin
        rcd_q <= rcd_q + 1'b1;
      end
      if (is_pre) mc_open_q <= 1'b0;

      if (start_gather || start_scatter) begin
        state_q <= start_scatter ? S_SCATTER : S_GATHER;
        idx_q   <= '0;
        ccd_q   <= '0;
      end else if (state_q != S_IDLE) begin
        if (step) begin
          ccd_q <= ($bits(ccd_q))'(TCCD - 1);
          idx_q <= idx_q + 1'b1;
          if (idx_q == 3'd7) state_q <= S_IDLE;
        end else begin
          ccd_q <= ccd_q - 1'b1;
        end
      end
    end
  end

  assign busy         = (state_q != S_IDLE);
  assign busy_scatter = (state_q == S_SCATTER);
  assign op_done      = step && (idx_q == 3'd7);

  // ---------------------------------------------------------- protocol rules
  // A host command that the bank cannot serve right now: a normal column
  // access or buffer read while an internal operation runs, an ACT of a physical row while busy or to a bank
  // that is still open, RD/WR with no open row or before tRCD has elapsed.
  always_comb begin
    protocol_err = 1'b0;
    if ((normal_rd || normal_wr || host_db_rd || act_physical) && busy) protocol_err = 1'b1;
    if (start_gather && busy) protocol_err = 1'b1;
    if (is_act && mc_open_q) protocol_err = 1'b1;
    if ((is_rd || is_wr) && !mc_open_q) protocol_err = 1'b1;
    if ((is_rd || is_wr) && rcd_q < TRCD[$bits(rcd_q)-1:0]) protocol_err = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!protocol_err)
      else $error("fim_internal_ctrl: DDR command breaks the Piccolo-FIM protocol");
  end
endmodule
