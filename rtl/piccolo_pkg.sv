// piccolo_pkg: types and constants shared by the Piccolo blocks.
//
// The design has two halves that meet at a standard DDR4 channel:
//   * the accelerator side (Piccolo-cache, collection-extended MSHR, FIM
//     command generator), clocked here in DRAM clock cycles (nCK), and
//   * the DRAM side (offset buffer, data buffer and internal controller in
//     every bank of every x16 DDR4 chip).
//
// Numbers that follow the paper: 48-bit addresses split as
// tag 21 / fg-tag 8 / set 12 / fg-offset 4 / byte 3, 8 items of 8 B per
// gather or scatter, 16-bit column offsets, x16 devices with 4 chips per
// rank, tCCD_L = 6, tCCD_S = 4, tRAS = 39 and tBURST = 4 nCK, and a gap
// tWR + tRP + tRCD that must cover 8 x tCCD_L.
// Own choices: tRCD = tRP = 16 and tWR = 18 nCK (DDR4-2400R values that add up
// to the 41.64 ns the paper quotes), the DRAM address map, the positions of the
// two virtual rows (the two highest rows of every bank) and of the two buffer
// regions inside them (column 0 for the offset buffer, column 8 for the data
// buffer), and a single clock for both halves.
package piccolo_pkg;

  // ---------------------------------------------------------------- items
  localparam int unsigned ITEM_BYTES = 8;   // one vertex property
  localparam int unsigned ITEM_W     = 64;
  localparam int unsigned N_ITEMS    = 8;   // items per gather/scatter
  localparam int unsigned OFFSET_W   = 16;  // column offset sent per item

  // ---------------------------------------------------------------- DRAM
  localparam int unsigned DEV_W       = 16;                 // x16 device
  localparam int unsigned CHIPS       = ITEM_W / DEV_W;     // 4 chips / rank
  localparam int unsigned BURST_LEN   = 8;                  // BL8
  localparam int unsigned CHIP_BURST_W = DEV_W * BURST_LEN; // 128 bits
  localparam int unsigned BUS_BURST_W  = ITEM_W * BURST_LEN; // 512 bits
  localparam int unsigned COL_W       = 10;  // 16-bit words per row per chip (2 KB row)
  localparam int unsigned BANK_W      = 3;   // 8 banks in an x16 DDR4 device
  localparam int unsigned NUM_BANKS   = 1 << BANK_W;
  localparam int unsigned RANK_W      = 2;   // four ranks
  localparam int unsigned NUM_RANKS   = 1 << RANK_W;
  localparam int unsigned ROW_W       = 16;

  localparam logic [ROW_W-1:0] ROW_Y = {{(ROW_W-1){1'b1}}, 1'b0}; // virtual row y
  localparam logic [ROW_W-1:0] ROW_Z = {ROW_W{1'b1}};             // virtual row z
  localparam logic [COL_W-1:0] VCOL_OFS  = COL_W'(0); // offset buffer region
  localparam logic [COL_W-1:0] VCOL_DATA = COL_W'(8); // data buffer region

  // ------------------------------------------------------- DDR4 timing (nCK)
  localparam int unsigned T_CCD_L = 6;
  localparam int unsigned T_CCD_S = 4;
  localparam int unsigned T_RAS   = 39;
  localparam int unsigned T_BURST = 4;
  localparam int unsigned T_RCD   = 16;
  localparam int unsigned T_RP    = 16;
  localparam int unsigned T_WR    = 18;
  localparam int unsigned T_CL    = 16;

  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_RD  = 3'd3,
    CMD_WR  = 3'd4
  } ddr_cmd_e;

  // One DDR4 command as the channel's command/address bus carries it.
  typedef struct packed {
    ddr_cmd_e              cmd;
    logic [RANK_W-1:0]     rank;
    logic [BANK_W-1:0]     bank;
    logic [ROW_W-1:0]      row;   // used by ACT
    logic [COL_W-1:0]      col;   // used by RD/WR, burst aligned
  } ddr_cmd_t;

  // ------------------------------------------------------- accelerator side
  localparam int unsigned ADDR_W  = 48;
  localparam int unsigned TAG_W   = 21;
  localparam int unsigned FGTAG_W = 8;
  localparam int unsigned SET_W   = 12;
  localparam int unsigned FGOFF_W = 4;
  localparam int unsigned BO_W    = 3;
  localparam int unsigned WADDR_W = ADDR_W - BO_W; // 8-byte item address
  localparam int unsigned ID_W    = 8;             // requester tag

  typedef enum logic {FIM_GATHER = 1'b0, FIM_SCATTER = 1'b1} fim_op_e;

  // DRAM row identity of an item: which row of which bank of which rank.
  localparam int unsigned ROWID_W = ROW_W + RANK_W + BANK_W;

  // A collected gather or scatter, as handed to the command generator.
  typedef struct packed {
    fim_op_e                             op;
    logic [RANK_W-1:0]                   rank;
    logic [BANK_W-1:0]                   bank;
    logic [ROW_W-1:0]                    row;
    logic [N_ITEMS-1:0][OFFSET_W-1:0]    offsets;
    logic [N_ITEMS-1:0][ITEM_W-1:0]      data;   // scatter payload
  } fim_op_t;

  // One-cycle event pulses of the whole design, for statistics.
  typedef struct packed {
    logic cache_hit;
    logic cache_miss;
    logic sector_evict;     // only one 8 B sector replaced
    logic line_evict;       // a whole 128 B line re-tagged
    logic fill_dropped;
    logic mshr_sc_hit;      // read served from write-back data
    logic mshr_ga_hit;      // read merged into a pending gather
    logic mshr_conflict;    // entry taken over by another DRAM row
    logic mshr_sub_full;    // subentries exhausted, gather sent early
    logic full_gather;      // eight offsets collected for a gather
    logic full_scatter;     // eight offsets collected for a scatter
    logic partial_op;       // fewer than eight offsets sent
    logic row_act;          // the command generator opened a physical row
  } piccolo_events_t;

  // Item address map (8-byte item address, low bit first):
  //   [COL_W-1:0] column word, then bank, then rank, then row.
  // A DRAM row therefore holds 1024 consecutive items (8 KB across the rank).
  function automatic logic [COL_W-1:0] waddr_col(input logic [WADDR_W-1:0] wa);
    return wa[COL_W-1:0];
  endfunction
  function automatic logic [BANK_W-1:0] waddr_bank(input logic [WADDR_W-1:0] wa);
    return wa[COL_W +: BANK_W];
  endfunction
  function automatic logic [RANK_W-1:0] waddr_rank(input logic [WADDR_W-1:0] wa);
    return wa[COL_W+BANK_W +: RANK_W];
  endfunction
  function automatic logic [ROW_W-1:0] waddr_row(input logic [WADDR_W-1:0] wa);
    return wa[COL_W+BANK_W+RANK_W +: ROW_W];
  endfunction
  // Row identity {row, rank, bank}; its low bits index the CE-MSHR.
  function automatic logic [ROWID_W-1:0] waddr_rowid(input logic [WADDR_W-1:0] wa);
    return wa[COL_W +: ROWID_W];
  endfunction
  function automatic logic [WADDR_W-1:0] make_waddr(input logic [ROWID_W-1:0] rowid,
                                                    input logic [COL_W-1:0] col);
    return WADDR_W'({rowid, col});
  endfunction

endpackage
