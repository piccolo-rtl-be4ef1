// fim_chip: the Piccolo-FIM logic of one x16 DDR4 device.
//
// Every bank gets the three parts the paper adds to a DRAM: an offset buffer,
// a data buffer and an internal controller (fim_offset_buffer,
// fim_data_buffer, fim_internal_ctrl). This module decodes the bank address
// of the incoming command, hands the command to that bank's controller, and
// returns read data after the CAS latency, as a DDR4 device does. The cells,
// sense amplifiers and column decoder of each bank are outside this module:
// each bank's column path is a port (arr_*), and the chip I/O is abstracted
// to one 128-bit word per burst (8 beats x 16 DQ, beat k in bits 16k+15:16k).
//
// Because DDR interleaves a 64-bit item across the four chips of a rank,
// every chip receives the same eight offsets and handles its own 16-bit slice
// of each item; the four chips of a rank therefore act in lock-step.
//
// Timing: commands are taken one per clock (cmd_valid + cmd with write data
// alongside a WR). rd_valid/rd_data follow a RD by CL cycles. busy shows
// which banks are running an internal gather or scatter; protocol_err flags a
// command the addressed bank cannot accept (also asserted inside the bank).
module fim_chip
  import piccolo_pkg::*;
#(
  parameter int unsigned NB = NUM_BANKS,
  parameter int unsigned CL = T_CL
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            cmd_valid,   // chip select and a command
  input  ddr_cmd_t                        cmd,
  input  logic [CHIP_BURST_W-1:0]         wdata,
  output logic                            rd_valid,
  output logic [CHIP_BURST_W-1:0]         rd_data,
  // column paths of the banks
  output logic [NB-1:0]                   arr_act,
  output logic [NB-1:0][ROW_W-1:0]        arr_row,
  output logic [NB-1:0]                   arr_en,
  output logic [NB-1:0]                   arr_we,
  output logic [NB-1:0][COL_W-4:0]        arr_col,
  output logic [NB-1:0][BURST_LEN-1:0]    arr_wmask,
  output logic [NB-1:0][CHIP_BURST_W-1:0] arr_wdata,
  input  logic [NB-1:0][CHIP_BURST_W-1:0] arr_rdata,
  output logic [NB-1:0]                   busy,
  output logic [NB-1:0]                   op_done,
  output logic                            protocol_err
);
  logic [NB-1:0]                   b_rd_valid, b_perr;
  logic [NB-1:0][CHIP_BURST_W-1:0] b_rd_data;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic                    ofs_we, db_burst_we, db_word_we;
    logic [2:0]              ofs_idx, db_word_idx;
    logic [OFFSET_W-1:0]     ofs_rdata;
    logic [CHIP_BURST_W-1:0] db_burst_rdata;
    logic [DEV_W-1:0]        db_word_wdata, db_word_rdata;
    logic                    sel;

    assign sel = cmd_valid && (cmd.bank == b[BANK_W-1:0]);

    fim_offset_buffer u_ofs (
      .clk, .rst_n,
      .burst_we(ofs_we), .burst_wdata(wdata),
      .rd_idx(ofs_idx), .rd_offset(ofs_rdata)
    );

    fim_data_buffer u_db (
      .clk, .rst_n,
      .burst_we(db_burst_we), .burst_wdata(wdata), .burst_rdata(db_burst_rdata),
      .word_we(db_word_we), .word_idx(db_word_idx),
      .word_wdata(db_word_wdata), .word_rdata(db_word_rdata)
    );

    fim_internal_ctrl u_ctrl (
      .clk, .rst_n,
      .cmd_valid(sel), .cmd(cmd.cmd), .cmd_row(cmd.row), .cmd_col(cmd.col),
      .cmd_wdata(wdata),
      .rd_valid(b_rd_valid[b]), .rd_data(b_rd_data[b]),
      .ofs_we, .ofs_idx, .ofs_rdata,
      .db_burst_we, .db_burst_rdata, .db_word_we, .db_word_idx,
      .db_word_wdata, .db_word_rdata,
      .arr_act(arr_act[b]), .arr_row(arr_row[b]), .arr_en(arr_en[b]),
      .arr_we(arr_we[b]), .arr_col(arr_col[b]), .arr_wmask(arr_wmask[b]),
      .arr_wdata(arr_wdata[b]), .arr_rdata(arr_rdata[b]),
      .busy(busy[b]), .busy_scatter(), .op_done(op_done[b]),
      .protocol_err(b_perr[b])
    );
  end

  // CAS latency pipeline for read data
  logic [CL-1:0]                   rv_pipe;
  logic [CL-1:0][CHIP_BURST_W-1:0] rd_pipe;
  logic [CHIP_BURST_W-1:0]         rd_now;

  always_comb begin
    rd_now = '0;
    for (int b = 0; b < NB; b++) if (b_rd_valid[b]) rd_now = b_rd_data[b];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rv_pipe <= '0;
      rd_pipe <= '0;
    end else begin
      rv_pipe <= {rv_pipe[CL-2:0], |b_rd_valid};
      rd_pipe <= {rd_pipe[CL-2:0], rd_now};
    end
  end

  assign rd_valid     = rv_pipe[CL-1];
  assign rd_data      = rd_pipe[CL-1];
  assign protocol_err = |b_perr;
endmodule
