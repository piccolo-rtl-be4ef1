// tb_piccolo_top: the whole memory side at its real size - Piccolo-cache
// (4 MB, 8 ways), CE-MSHR (4096 entries), the FIM command generator and four
// ranks of four x16 FIM chips - with a behavioural cell array behind every
// chip. Nothing is overridden: every module runs with its default
// parameters.
//
// A scoreboard keeps the value of every 8-byte item (initial DRAM contents
// are known from the array models' fill pattern, writes update it when the
// request is accepted) and checks every read response by id. Phases:
//   1. reads and writes that hit and miss in the cache, a gather of eight
//      items of one DRAM row, repeated reads of one item (merge and a full
//      subentry list), two rows on one MSHR entry (conflict), flush;
//   2. sixteen-sector dirty lines evicted while reads are pending (full
//      scatters, reads served from write-back data, a fill returned without
//      being kept because the request queue is full);
//   3. random reads and writes over several rows and sets;
//   4. flush and drain; then every item ever written is read back.
// Every mechanism is counted through the event outputs and the DDR command
// bus, and the test fails if any of them never happened. It also checks that
// each in-DRAM operation costs exactly two data bursts on the channel and
// that no chip ever sees a command it cannot accept.
//
// Interface: the testbench plays the update engines on core_req_*/
// core_resp_* and the cell arrays on arr_*. The mechanisms counted are the
// paper's (fine-grained hits and misses, sector and line eviction, collection
// into full gathers and scatters, write-back forwarding, merge, conflict);
// the dropped fill, subentry overflow and flush are this design's own.
module tb_piccolo_top;
  import piccolo_pkg::*;
  localparam int NRC = NUM_RANKS * CHIPS;
  localparam int NB  = NUM_BANKS;
  logic clk = 0, rst_n = 0;
  logic [3:0] alloc_ways = 4'd2;
  logic core_req_valid = 0, core_req_ready, core_req_write = 0;
  logic [ADDR_W-1:0] core_req_addr = '0; logic [ITEM_W-1:0] core_req_wdata = '0;
  logic [ID_W-1:0] core_req_id = '0;
  logic core_resp_valid; logic [ID_W-1:0] core_resp_id; logic [ITEM_W-1:0] core_resp_data;
  logic flush = 0, flush_busy, mem_idle;
  logic [NRC-1:0][NB-1:0] arr_act, arr_en, arr_we;
  logic [NRC-1:0][NB-1:0][ROW_W-1:0] arr_row;
  logic [NRC-1:0][NB-1:0][COL_W-4:0] arr_col;
  logic [NRC-1:0][NB-1:0][BURST_LEN-1:0] arr_wmask;
  logic [NRC-1:0][NB-1:0][CHIP_BURST_W-1:0] arr_wdata, arr_rdata;
  logic ddr_cmd_valid; ddr_cmd_t ddr_cmd; logic dram_protocol_err;
  piccolo_events_t ev;

  piccolo_top dut (.*);
  always #5 clk = ~clk;

  for (genvar i = 0; i < NRC; i++) begin : g_arr
    dram_array_model #(.NB(NB), .SEED(i)) u_arr (
      .clk, .arr_act(arr_act[i]), .arr_row(arr_row[i]), .arr_en(arr_en[i]),
      .arr_we(arr_we[i]), .arr_col(arr_col[i]), .arr_wmask(arr_wmask[i]),
      .arr_wdata(arr_wdata[i]), .arr_rdata(arr_rdata[i])
    );
  end

  int checks = 0, failures = 0, cyc = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ counters
  localparam int NEV = $bits(piccolo_events_t);
  int evc [NEV];
  int n_rd = 0, n_wr = 0, n_ops = 0, n_perr = 0;
  always @(posedge clk iff rst_n) begin
    cyc <= cyc + 1;
    for (int i = 0; i < NEV; i++) evc[i] += ev[i];
    if (ddr_cmd_valid && ddr_cmd.cmd == CMD_RD) n_rd++;
    if (ddr_cmd_valid && ddr_cmd.cmd == CMD_WR) n_wr++;
    if (dut.op_valid && dut.op_ready) n_ops++;
    if (rst_n && dram_protocol_err) n_perr++;
  end

  // ------------------------------------------------------------ scoreboard
  function automatic logic [ITEM_W-1:0] init_item(logic [WADDR_W-1:0] wa);
    logic [ITEM_W-1:0] v;
    for (int c = 0; c < CHIPS; c++)
      v[c*DEV_W +: DEV_W] = g_arr[0].u_arr.init_word(int'(waddr_rank(wa)) * CHIPS + c,
                                                     waddr_bank(wa), waddr_row(wa), waddr_col(wa));
    return v;
  endfunction
  logic [ITEM_W-1:0] arch [logic [WADDR_W-1:0]];
  logic [ITEM_W-1:0] expv [int];
  int open_rd [logic [WADDR_W-1:0]];
  logic [WADDR_W-1:0] expa [int];
  int n_out = 0, n_resp = 0;
  function automatic logic [ITEM_W-1:0] arch_val(logic [WADDR_W-1:0] a);
    return arch.exists(a) ? arch[a] : init_item(a);
  endfunction
  always @(posedge clk iff rst_n) begin
    if (core_req_valid && core_req_ready) begin
      if (core_req_write) arch[core_req_addr[ADDR_W-1:BO_W]] = core_req_wdata;
      else begin
        expv[core_req_id] = arch_val(core_req_addr[ADDR_W-1:BO_W]);
        expa[core_req_id] = core_req_addr[ADDR_W-1:BO_W];
        open_rd[core_req_addr[ADDR_W-1:BO_W]] += 1;
        n_out++;
      end
    end
    if (core_resp_valid) begin
      n_resp++;
      check(expv.exists(core_resp_id) && core_resp_data == expv[core_resp_id],
            $sformatf("id %0d: got %h want %h", core_resp_id, core_resp_data, expv[core_resp_id]));
      if (expv.exists(core_resp_id)) begin
        open_rd[expa[core_resp_id]] -= 1;
        expv.delete(core_resp_id); n_out--;
      end
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog: outstanding %0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // item address -> byte address
  function automatic logic [ADDR_W-1:0] ba(logic [WADDR_W-1:0] wa);
    return {wa, 3'b000};
  endfunction
  function automatic logic [WADDR_W-1:0] wa(int row, int rank, int bank, int col);
    return make_waddr({ROW_W'(row), RANK_W'(rank), BANK_W'(bank)}, COL_W'(col));
  endfunction

  int idc = 0;
  task automatic req(input bit w, input logic [WADDR_W-1:0] a, input logic [ITEM_W-1:0] d);
    @(negedge clk);
    core_req_valid = 1; core_req_write = w; core_req_addr = ba(a); core_req_wdata = d;
    if (!w) begin
      while (expv.exists(idc % 256)) idc++;
      core_req_id = ID_W'(idc % 256); idc++;
    end
    #1;
    while (!core_req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    core_req_valid = 0;
  endtask
  task automatic do_flush();
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    do @(negedge clk); while (flush_busy || !mem_idle || n_out != 0);
    repeat (5) @(negedge clk);
  endtask

  logic [WADDR_W-1:0] a;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (core_req_ready && dut.u_mshr.req_ready);
    // ---- phase 1
    req(1, wa(10, 0, 1, 5), 64'h1234);
    req(0, wa(10, 0, 1, 5), '0);                     // cache hit
    // same tag, set and sector, other fg-tags: with two ways per tag the
    // third one evicts a single sector, whose write-back then serves a read
    req(1, wa(30, 0, 1, 5), 64'h30);
    req(1, wa(32, 0, 1, 5), 64'h32);
    req(1, wa(34, 0, 1, 5), 64'h34);
    repeat (100) @(negedge clk);
    req(0, wa(10, 0, 1, 5), '0);
    for (int k = 0; k < 8; k++) req(0, wa(20, 1, 3, 64 * k + 7), '0); // eight misses, one row
    req(0, wa(21, 2, 2, 9), '0);
    for (int i = 0; i < 5; i++) req(0, wa(21, 2, 2, 9), '0);        // merge, then list full
    req(0, wa(22, 0, 4, 1), '0);
    req(0, wa(22 + 128, 0, 4, 2), '0);                               // same MSHR entry
    do_flush();
    check(n_out == 0, "phase 1 reads all answered");
    // ---- phase 2: fully dirty lines in one cache set
    for (int t = 0; t < 8; t++)
      for (int s = 0; s < 16; s++)
        req(1, {13'd0, ROW_W'(512 * (t) + 7), RANK_W'(3), BANK_W'(6), 6'd40, 4'(s)}, {$urandom, $urandom});
    for (int rep = 0; rep < 4; rep++) begin
      for (int k = 0; k < 8; k++) req(0, wa(300 + rep, 2, 0, 64 * k), '0);  // gather in flight
      for (int t = 0; t < 3; t++)
        for (int s = 0; s < 16; s++)
          req(1, {13'd0, ROW_W'(512 * (8 + 3 * rep + t) + 7), RANK_W'(3), BANK_W'(6), 6'd40, 4'(s)},
              {$urandom, $urandom});
    end
    // read back evicted items, some still in the MSHR's write-back slots
    for (int t = 0; t < 8; t++) req(0, {13'd0, ROW_W'(512 * (t) + 7), RANK_W'(3), BANK_W'(6), 6'd40, 4'(t)}, '0);
    do_flush();
    check(n_out == 0, "phase 2 reads all answered");
    // ---- phase 3: random traffic
    for (int i = 0; i < 6000; i++) begin
      a = wa(500 + 128 * $urandom_range(0, 1) + $urandom_range(0, 2), $urandom_range(0, 3),
             $urandom_range(0, 7), $urandom_range(0, 63));
      if ($urandom_range(0, 2) != 0 || (open_rd.exists(a) && open_rd[a] > 0)) req(0, a, '0);
      else req(1, a, {$urandom, $urandom});
      if (i % 1500 == 1499) begin do_flush(); alloc_ways = 4'($urandom_range(1, 8)); end
    end
    do_flush();
    check(n_out == 0, "phase 3 reads all answered");
    // ---- phase 4: read back everything ever written
    foreach (arch[x]) req(0, x, '0);
    do_flush();
    check(n_out == 0, "final reads all answered");
    // ---- coverage of mechanisms
    begin
      string names [NEV] = '{"cache_hit", "cache_miss", "sector_evict", "line_evict", "fill_dropped",
                             "mshr_sc_hit", "mshr_ga_hit", "mshr_conflict", "mshr_sub_full",
                             "full_gather", "full_scatter", "partial_op", "row_act"};
      for (int i = 0; i < NEV; i++) begin
        $display("event %-13s %0d", names[i], evc[NEV - 1 - i]);
        check(evc[NEV - 1 - i] > 0, $sformatf("mechanism %s never happened", names[i]));
      end
    end
    check(n_rd + n_wr == 2 * n_ops, $sformatf("two data bursts per operation (%0d RD %0d WR %0d ops)",
                                                n_rd, n_wr, n_ops));
    check(n_perr == 0, "no DRAM protocol error");
    $display("cycles %0d, reads answered %0d, in-DRAM ops %0d", cyc, n_resp, n_ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
