// fim_cmd_gen: the memory-controller side of Piccolo-FIM for one channel.
//
// It takes one collected gather or scatter at a time (eight 16-bit column
// offsets within one DRAM row, plus eight 64-bit items for a scatter) and
// issues it with standard DDR4 commands only. Each bank has two virtual rows,
// y and z (the two highest row addresses), whose column 0 burst is the offset
// buffer and whose column 8 burst is the data buffer.
//
//   gather : [ACT x, PRE]  [ACT v]  WR v.offsets  PRE  ACT v'  RD v'.data
//   scatter: [ACT x, PRE]  [ACT v]  WR v.offsets  WR v.data  PRE  ACT v'
//
// where x is the target row, v the virtual row the controller currently has
// open (y after reset) and v' the other one. The bracketed commands are
// issued only when needed: the physical row is opened only if another row
// sits in the bank's sense amplifiers, and the virtual row only if no virtual
// row is open. The PRE/ACT pair between the offset write and the next buffer
// access is what gives the bank tWR + tRP + tRCD (here 18 + 16 + 16 nCK) to run
// its eight internal column accesses; the DRAM treats PRE/ACT of virtual rows
// as no-ops. A scatter is closed the same way, so the next operation never
// reaches the bank before the scatter is done (the paper's dummy write plays
// this role when no command follows).
//
// Follows the paper (Fig. 8b/8c): the command order, the use of two virtual
// rows alternately, the tWR+tRP+tRCD gap. Own choices: one operation in
// flight per channel (no overlap between banks), fixed waits of tRAS after
// a physical ACT, tWR after a write burst and tRCD/tRP as in DDR4-2400R, and
// write data travelling in the WR cycle (the write latency is not modelled).
//
// Interfaces. op_valid/op_ready take a fim_op_t. The command bus is
// cmd_valid + cmd (one command per cycle) with wdata for a WR: 8 beats of
// 64 bits, beat k in wdata[64k +: 64], chip c driving bits 16c+15:16c of each
// beat. rd_valid/rd_data return a read burst in the same layout. A gather's
// eight items come out on res_valid/res_data (item k in res_data[k]) for one
// cycle, in operation order.
module fim_cmd_gen
  import piccolo_pkg::*;
#(
  parameter int unsigned TRCD  = T_RCD,
  parameter int unsigned TRP   = T_RP,
  parameter int unsigned TWR   = T_WR,
  parameter int unsigned TRAS  = T_RAS,
  parameter int unsigned TCCD  = T_CCD_L,
  parameter int unsigned TBURST = T_BURST
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          op_valid,
  output logic                          op_ready,
  input  fim_op_t                       op,
  output logic                          cmd_valid,
  output ddr_cmd_t                      cmd,
  output logic [BUS_BURST_W-1:0]        wdata,
  input  logic                          rd_valid,
  input  logic [BUS_BURST_W-1:0]        rd_data,
  output logic                          res_valid,
  output logic [N_ITEMS-1:0][ITEM_W-1:0] res_data,
  output logic                          busy,
  output logic                          act_x      // a physical row was opened
);
  localparam int unsigned NRB = NUM_RANKS * NUM_BANKS;

  typedef enum logic [3:0] {
    S_IDLE, S_ACTX, S_PREX, S_PREV, S_ACTV, S_WROFS, S_WRDATA,
    S_PRE, S_ACTO, S_RD, S_RDWAIT, S_WAIT
  } state_e;

  state_e state_q, after_q;
  logic [5:0] wait_q;
  fim_op_t op_q;

  // controller view of every bank
  logic [NRB-1:0]            mc_open_q, phys_open_q;
  logic [NRB-1:0][ROW_W-1:0] mc_row_q, phys_row_q;

  logic [RANK_W+BANK_W-1:0] rb;
  assign rb = {op_q.rank, op_q.bank};

  logic cur_virtual;
  assign cur_virtual = mc_open_q[rb] && (mc_row_q[rb] == ROW_Y || mc_row_q[rb] == ROW_Z);
  logic [ROW_W-1:0] vrow, orow;
  assign vrow = cur_virtual ? mc_row_q[rb] : ROW_Y;
  assign orow = (vrow == ROW_Y) ? ROW_Z : ROW_Y;

  // bus images of the offsets and the scatter data
  logic [BUS_BURST_W-1:0] ofs_burst, data_burst;
  always_comb begin
    for (int k = 0; k < N_ITEMS; k++) begin
      ofs_burst[k*ITEM_W +: ITEM_W]  = {CHIPS{op_q.offsets[k]}};
      data_burst[k*ITEM_W +: ITEM_W] = op_q.data[k];
    end
  end

  assign op_ready = (state_q == S_IDLE);
  assign busy     = (state_q != S_IDLE);

  always_comb begin
    cmd_valid = 1'b0;
    cmd       = '{cmd: CMD_NOP, rank: op_q.rank, bank: op_q.bank, row: '0, col: '0};
    wdata     = '0;
    act_x     = 1'b0;
    unique case (state_q)
      S_ACTX:   begin cmd_valid = 1'b1; cmd.cmd = CMD_ACT; cmd.row = op_q.row; act_x = 1'b1; end
      S_PREX,
      S_PREV,
      S_PRE:    begin cmd_valid = 1'b1; cmd.cmd = CMD_PRE; end
      S_ACTV:   begin cmd_valid = 1'b1; cmd.cmd = CMD_ACT; cmd.row = ROW_Y; end
      S_WROFS:  begin cmd_valid = 1'b1; cmd.cmd = CMD_WR; cmd.col = VCOL_OFS; wdata = ofs_burst; end
      S_WRDATA: begin cmd_valid = 1'b1; cmd.cmd = CMD_WR; cmd.col = VCOL_DATA; wdata = data_burst; end
      S_ACTO:   begin cmd_valid = 1'b1; cmd.cmd = CMD_ACT; cmd.row = orow; end
      S_RD:     begin cmd_valid = 1'b1; cmd.cmd = CMD_RD; cmd.col = VCOL_DATA; end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      after_q     <= S_IDLE;
      wait_q      <= '0;
      op_q        <= '0;
      mc_open_q   <= '0;
      phys_open_q <= '0;
      mc_row_q    <= '0;
      phys_row_q  <= '0;
      res_valid   <= 1'b0;
      res_data    <= '0;
    end else begin
      res_valid <= 1'b0;
      unique case (state_q)
        S_IDLE: if (op_valid) begin
          op_q <= op;
          if (!(phys_open_q[{op.rank, op.bank}] && phys_row_q[{op.rank, op.bank}] == op.row))
            state_q <= mc_open_q[{op.rank, op.bank}] ? S_PREX : S_ACTX;
          else if (!(mc_open_q[{op.rank, op.bank}] &&
                     (mc_row_q[{op.rank, op.bank}] == ROW_Y || mc_row_q[{op.rank, op.bank}] == ROW_Z)))
            state_q <= mc_open_q[{op.rank, op.bank}] ? S_PREV : S_ACTV;
          else
            state_q <= S_WROFS;
        end
        S_PREX: begin  // close whatever is open before opening row x
          mc_open_q[rb] <= 1'b0;
          wait_q <= 6'(TRP - 1); after_q <= S_ACTX; state_q <= S_WAIT;
        end
        S_ACTX: begin
          mc_open_q[rb] <= 1'b1; mc_row_q[rb] <= op_q.row;
          phys_open_q[rb] <= 1'b1; phys_row_q[rb] <= op_q.row;
          wait_q <= 6'(TRAS - 1); after_q <= S_PREV; state_q <= S_WAIT;
        end
        S_PREV: begin
          mc_open_q[rb] <= 1'b0;
          wait_q <= 6'(TRP - 1); after_q <= S_ACTV; state_q <= S_WAIT;
        end
        S_ACTV: begin
          mc_open_q[rb] <= 1'b1; mc_row_q[rb] <= ROW_Y;
          wait_q <= 6'(TRCD - 1); after_q <= S_WROFS; state_q <= S_WAIT;
        end
        S_WROFS: begin
          if (op_q.op == FIM_SCATTER) begin
            wait_q <= 6'(TCCD - 1); after_q <= S_WRDATA;
          end else begin
            wait_q <= 6'(TBURST + TWR - 1); after_q <= S_PRE;
          end
          state_q <= S_WAIT;
        end
        S_WRDATA: begin
          wait_q <= 6'(TBURST + TWR - 1); after_q <= S_PRE; state_q <= S_WAIT;
        end
        S_PRE: begin
          mc_open_q[rb] <= 1'b0;
          wait_q <= 6'(TRP - 1); after_q <= S_ACTO; state_q <= S_WAIT;
        end
        S_ACTO: begin
          mc_open_q[rb] <= 1'b1; mc_row_q[rb] <= orow;
          wait_q <= 6'(TRCD - 1);
          after_q <= (op_q.op == FIM_GATHER) ? S_RD : S_IDLE;
          state_q <= S_WAIT;
        end
        S_RD:     state_q <= S_RDWAIT;
        S_RDWAIT: if (rd_valid) begin
          for (int k = 0; k < N_ITEMS; k++) res_data[k] <= rd_data[k*ITEM_W +: ITEM_W];
          res_valid <= 1'b1;
          state_q   <= S_IDLE;
        end
        S_WAIT: begin
          if (wait_q == '0) state_q <= after_q;
          else wait_q <= wait_q - 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
