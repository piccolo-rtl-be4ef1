// piccolo_top: the memory side of a Piccolo graph accelerator, from the
// update engines' item requests down to the banks of the DRAM.
//
//   update engines --core_req--> piccolo_cache --misses, write-backs--> ce_mshr
//   ce_mshr --collected gather/scatter--> fim_cmd_gen --DDR4 commands--> ranks
//   each rank = CHIPS x16 devices, each device = fim_chip (per-bank offset
//   buffer, data buffer and internal controller)
//
// The cache keeps 8 B items; its misses and dirty evictions are grouped by
// DRAM row in the collection-extended MSHR; every group of (up to) eight is
// moved by one in-DRAM gather or scatter, which costs two bursts on the
// channel instead of eight. The DRAM cell arrays are not part of this RTL:
// every bank's column path is a port (arr_*), indexed [rank*CHIPS + chip][bank].
// The 64-bit item is split over the chips of a rank, chip c holding bits
// 16c+15:16c, and all chips of a rank get the same offsets.
//
// The rest of the accelerator (prefetcher, processing elements, crossbar,
// update engines) drives core_req_* and takes core_resp_*; flush drains the
// partial gathers and scatters that the MSHR still holds, e.g. at the end of
// a tile (it waits until the cache's request queue is empty, then scans the
// MSHR; flush_busy stays high until the scan is done); alloc_ways sets the
// equal way partitioning of the current tile.
// The DDR command bus is visible on ddr_cmd_valid/ddr_cmd for monitoring.
// One clock drives everything (the DRAM clock); the paper's accelerator runs
// at 1 GHz and the DDR4-2400 channel at 1.2 GHz, which this model does not
// separate.
module piccolo_top
  import piccolo_pkg::*;
#(
  parameter int unsigned NR = NUM_RANKS,
  parameter int unsigned NB = NUM_BANKS,
  parameter int unsigned CACHE_SETS = 1 << SET_W,
  parameter int unsigned MSHR_ENTRIES = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [3:0]           alloc_ways,
  input  logic                 core_req_valid,
  output logic                 core_req_ready,
  input  logic                 core_req_write,
  input  logic [ADDR_W-1:0]    core_req_addr,
  input  logic [ITEM_W-1:0]    core_req_wdata,
  input  logic [ID_W-1:0]      core_req_id,
  output logic                 core_resp_valid,
  output logic [ID_W-1:0]      core_resp_id,
  output logic [ITEM_W-1:0]    core_resp_data,
  input  logic                 flush,
  output logic                 flush_busy,
  output logic                 mem_idle,
  // DRAM bank column paths
  output logic [NR*CHIPS-1:0][NB-1:0]                   arr_act,
  output logic [NR*CHIPS-1:0][NB-1:0][ROW_W-1:0]        arr_row,
  output logic [NR*CHIPS-1:0][NB-1:0]                   arr_en,
  output logic [NR*CHIPS-1:0][NB-1:0]                   arr_we,
  output logic [NR*CHIPS-1:0][NB-1:0][COL_W-4:0]        arr_col,
  output logic [NR*CHIPS-1:0][NB-1:0][BURST_LEN-1:0]    arr_wmask,
  output logic [NR*CHIPS-1:0][NB-1:0][CHIP_BURST_W-1:0] arr_wdata,
  input  logic [NR*CHIPS-1:0][NB-1:0][CHIP_BURST_W-1:0] arr_rdata,
  // monitoring
  output logic                 ddr_cmd_valid,
  output ddr_cmd_t             ddr_cmd,
  output logic                 dram_protocol_err,
  output piccolo_events_t      ev
);
  // cache <-> MSHR
  logic               m_req_valid, m_req_ready, m_req_write;
  logic [WADDR_W-1:0] m_req_waddr;
  logic [ITEM_W-1:0]  m_req_wdata;
  logic [ID_W-1:0]    m_req_id;
  logic               m_resp_valid, m_resp_ready;
  logic [WADDR_W-1:0] m_resp_waddr;
  logic [ITEM_W-1:0]  m_resp_data;
  logic [ID_W-1:0]    m_resp_id;
  // MSHR <-> command generator
  logic               op_valid, op_ready;
  fim_op_t            op;
  logic               res_valid;
  logic [N_ITEMS-1:0][ITEM_W-1:0] res_data;
  // channel
  logic [BUS_BURST_W-1:0] bus_wdata, bus_rdata;
  logic                   bus_rvalid;
  logic                   cg_busy, mshr_idle, act_x;
  logic                   flush_wait_q, mshr_flush, mshr_flush_busy;

  piccolo_cache #(.SETS(CACHE_SETS)) u_cache (
    .clk, .rst_n, .alloc_ways,
    .core_req_valid, .core_req_ready, .core_req_write, .core_req_addr,
    .core_req_wdata, .core_req_id,
    .core_resp_valid, .core_resp_id, .core_resp_data,
    .mshr_req_valid(m_req_valid), .mshr_req_ready(m_req_ready),
    .mshr_req_write(m_req_write), .mshr_req_waddr(m_req_waddr),
    .mshr_req_wdata(m_req_wdata), .mshr_req_id(m_req_id),
    .mshr_resp_valid(m_resp_valid), .mshr_resp_ready(m_resp_ready),
    .mshr_resp_waddr(m_resp_waddr), .mshr_resp_data(m_resp_data),
    .mshr_resp_id(m_resp_id),
    .ev_hit(ev.cache_hit), .ev_miss(ev.cache_miss),
    .ev_sector_evict(ev.sector_evict), .ev_line_evict(ev.line_evict),
    .ev_fill_dropped(ev.fill_dropped)
  );

  ce_mshr #(.ENTRIES(MSHR_ENTRIES)) u_mshr (
    .clk, .rst_n,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req_write(m_req_write),
    .req_waddr(m_req_waddr), .req_wdata(m_req_wdata), .req_id(m_req_id),
    .resp_valid(m_resp_valid), .resp_ready(m_resp_ready),
    .resp_waddr(m_resp_waddr), .resp_data(m_resp_data), .resp_id(m_resp_id),
    .op_valid, .op_ready, .op, .res_valid, .res_data,
    .flush(mshr_flush), .flush_busy(mshr_flush_busy), .idle(mshr_idle),
    .ev_sc_hit(ev.mshr_sc_hit), .ev_ga_hit(ev.mshr_ga_hit),
    .ev_conflict(ev.mshr_conflict), .ev_sub_full(ev.mshr_sub_full),
    .ev_full_gather(ev.full_gather), .ev_full_scatter(ev.full_scatter),
    .ev_partial(ev.partial_op)
  );

  fim_cmd_gen u_cmdgen (
    .clk, .rst_n,
    .op_valid, .op_ready, .op,
    .cmd_valid(ddr_cmd_valid), .cmd(ddr_cmd), .wdata(bus_wdata),
    .rd_valid(bus_rvalid), .rd_data(bus_rdata),
    .res_valid, .res_data, .busy(cg_busy), .act_x
  );
  assign ev.row_act = act_x;

  // ranks of x16 devices
  logic [NR*CHIPS-1:0]                   chip_rvalid, chip_perr;
  logic [NR*CHIPS-1:0][CHIP_BURST_W-1:0] chip_rdata;

  for (genvar r = 0; r < NR; r++) begin : g_rank
    for (genvar c = 0; c < CHIPS; c++) begin : g_chip
      localparam int unsigned I = r * CHIPS + c;
      logic [CHIP_BURST_W-1:0] w;
      for (genvar k = 0; k < BURST_LEN; k++) begin : g_beat
        assign w[k*DEV_W +: DEV_W] = bus_wdata[k*ITEM_W + c*DEV_W +: DEV_W];
      end
      fim_chip #(.NB(NB)) u_chip (
        .clk, .rst_n,
        .cmd_valid(ddr_cmd_valid && ddr_cmd.rank == r[RANK_W-1:0]),
        .cmd(ddr_cmd), .wdata(w),
        .rd_valid(chip_rvalid[I]), .rd_data(chip_rdata[I]),
        .arr_act(arr_act[I]), .arr_row(arr_row[I]), .arr_en(arr_en[I]),
        .arr_we(arr_we[I]), .arr_col(arr_col[I]), .arr_wmask(arr_wmask[I]),
        .arr_wdata(arr_wdata[I]), .arr_rdata(arr_rdata[I]),
        .busy(), .op_done(), .protocol_err(chip_perr[I])
      );
    end
  end

  // read data back onto the 64-bit channel
  always_comb begin
    bus_rvalid = 1'b0;
    bus_rdata  = '0;
    for (int r = 0; r < NR; r++)
      if (chip_rvalid[r*CHIPS]) begin
        bus_rvalid = 1'b1;
        for (int c = 0; c < CHIPS; c++)
          for (int k = 0; k < BURST_LEN; k++)
            bus_rdata[k*ITEM_W + c*DEV_W +: DEV_W] = chip_rdata[r*CHIPS + c][k*DEV_W +: DEV_W];
      end
  end

  assign dram_protocol_err = |chip_perr;
  // A flush waits until the cache has handed every queued miss and
  // write-back to the MSHR, so that nothing sent before it is left behind.
  assign mshr_flush = flush_wait_q && m_resp_ready && !m_req_valid;
  always_ff @(posedge clk) begin
    if (!rst_n)          flush_wait_q <= 1'b0;
    else if (flush)      flush_wait_q <= 1'b1;
    else if (mshr_flush) flush_wait_q <= 1'b0;
  end
  assign flush_busy = flush_wait_q || mshr_flush_busy;

  assign mem_idle = mshr_idle && !cg_busy && !m_req_valid;
endmodule
