// tb_piccolo_cache: Piccolo-cache at its full size (8 ways x 4096 sets x 16
// sectors) with a behavioural memory behind the MSHR port.
//
// The memory side stores write-backs in a sparse array and answers each read
// after a random delay; it can also hold back its responses and its request
// ready. A scoreboard keeps the architectural value of every item (writes
// update it when accepted) and checks every read response by id.
//
// Directed part: a write then a read hit (with the hit latency), a read
// miss, way partitioning (the same tag gets alloc_ways lines, after which
// only single sectors are evicted), a whole-line eviction that writes back
// sixteen dirty sectors, and a fill that arrives while the request queue is
// nearly full and must be returned without being kept. Random part: mixed
// reads and writes over a few sets, tags, fg-tags and sectors.
//
// The cache organisation and the replacement rules checked are the paper's;
// the hit latency of 3 cycles, the queue thresholds and the fill-drop rule
// are this design's own.
module tb_piccolo_cache;
  import piccolo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] alloc_ways = 4'd2;
  logic core_req_valid = 0, core_req_ready, core_req_write = 0;
  logic [ADDR_W-1:0] core_req_addr = '0;
  logic [ITEM_W-1:0] core_req_wdata = '0;
  logic [ID_W-1:0] core_req_id = '0;
  logic core_resp_valid; logic [ID_W-1:0] core_resp_id; logic [ITEM_W-1:0] core_resp_data;
  logic mshr_req_valid, mshr_req_ready, mshr_req_write;
  logic [WADDR_W-1:0] mshr_req_waddr; logic [ITEM_W-1:0] mshr_req_wdata; logic [ID_W-1:0] mshr_req_id;
  logic mshr_resp_valid = 0, mshr_resp_ready;
  logic [WADDR_W-1:0] mshr_resp_waddr; logic [ITEM_W-1:0] mshr_resp_data; logic [ID_W-1:0] mshr_resp_id;
  logic ev_hit, ev_miss, ev_sector_evict, ev_line_evict, ev_fill_dropped;

  piccolo_cache dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_hit = 0, n_miss = 0, n_sev = 0, n_lev = 0, n_drop = 0, n_wb = 0, n_resp = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ----------------------------------------------------------- memory side
  logic [ITEM_W-1:0] mem [logic [WADDR_W-1:0]];
  function automatic logic [ITEM_W-1:0] mem_val(logic [WADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : {20'h0, a[43:0]} ^ 64'hc0ffee;
  endfunction
  typedef struct { logic [WADDR_W-1:0] a; logic [ID_W-1:0] id; int t; } pend_t;
  pend_t pend[$];
  bit hold_resp = 0, block_req = 0;
  assign mshr_req_ready  = !block_req;
  // response outputs are recomputed after every clock edge and hold change
  always @(negedge clk) begin
    mshr_resp_valid = !hold_resp && pend.size() > 0 && pend[0].t <= cyc;
    mshr_resp_waddr = pend.size() > 0 ? pend[0].a : '0;
    mshr_resp_id    = pend.size() > 0 ? pend[0].id : '0;
    mshr_resp_data  = pend.size() > 0 ? mem_val(pend[0].a) : '0;
  end

  // ----------------------------------------------------------- scoreboard
  logic [ITEM_W-1:0] arch [logic [WADDR_W-1:0]];
  logic [ITEM_W-1:0] expv [int];
  int outstanding [logic [WADDR_W-1:0]];
  int t_acc = 0, t_resp = 0;
  function automatic logic [ITEM_W-1:0] arch_val(logic [WADDR_W-1:0] a);
    return arch.exists(a) ? arch[a] : mem_val(a);
  endfunction

  always @(posedge clk iff rst_n) begin
    cyc <= cyc + 1;
    n_hit += ev_hit; n_miss += ev_miss; n_sev += ev_sector_evict;
    n_lev += ev_line_evict; n_drop += ev_fill_dropped;
    if (mshr_req_valid && mshr_req_ready) begin
      if (mshr_req_write) begin mem[mshr_req_waddr] = mshr_req_wdata; n_wb++; end
      else pend.push_back('{mshr_req_waddr, mshr_req_id, cyc + $urandom_range(4, 30)});
    end
    if (mshr_resp_valid && mshr_resp_ready) begin
      void'(pend.pop_front());
      mshr_resp_valid <= 1'b0;
    end
    if (core_req_valid && core_req_ready) begin
      t_acc = cyc;
      if (core_req_write) arch[core_req_addr[ADDR_W-1:BO_W]] = core_req_wdata;
      else begin
        expv[core_req_id] = arch_val(core_req_addr[ADDR_W-1:BO_W]);
        outstanding[core_req_addr[ADDR_W-1:BO_W]] += 1;
      end
    end
    if (core_resp_valid) begin
      t_resp = cyc; n_resp++;
      check(expv.exists(core_resp_id) && core_resp_data == expv[core_resp_id],
            $sformatf("read data id %0d: got %h want %h", core_resp_id, core_resp_data, expv[core_resp_id]));
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] mk(int tag, int fg, int set, int sec);
    return {TAG_W'(tag), FGTAG_W'(fg), SET_W'(set), FGOFF_W'(sec), 3'b000};
  endfunction

  int idc = 0;
  task automatic req(input bit w, input logic [ADDR_W-1:0] a, input logic [ITEM_W-1:0] d);
    @(negedge clk);
    core_req_valid = 1; core_req_write = w; core_req_addr = a; core_req_wdata = d;
    core_req_id = ID_W'(idc); idc++;
    #1;
    while (!core_req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    core_req_valid = 0;
  endtask
  task automatic quiesce();
    do @(negedge clk); while (dut.state_q != dut.S_IDLE || pend.size() > 0 || mshr_req_valid);
    repeat (3) @(negedge clk);
  endtask

  int s0, m0, l0, d0, w0, r0;
  logic [ADDR_W-1:0] a;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (dut.state_q == dut.S_IDLE);
    // write then read: hit, latency 3 cycles (lookup, first fg compare, response)
    req(1, mk(5, 1, 10, 3), 64'h1111);
    req(0, mk(5, 1, 10, 3), '0);
    quiesce();
    check(n_hit == 1, "write-then-read hit");
    check(t_resp - t_acc == 3, $sformatf("hit latency %0d", t_resp - t_acc));
    // read miss
    m0 = n_miss;
    req(0, mk(6, 2, 11, 4), '0);
    quiesce();
    check(n_miss == m0 + 1, "read miss counted");
    req(0, mk(6, 2, 11, 4), '0);   // now present
    quiesce();
    check(n_hit == 2, "filled item hits");
    // way partitioning, alloc_ways = 2: third fg-tag of the same tag+sector
    s0 = n_sev; w0 = n_wb;
    req(1, mk(7, 1, 20, 0), 64'hA1);
    req(1, mk(7, 2, 20, 0), 64'hA2);
    req(1, mk(7, 3, 20, 0), 64'hA3);
    quiesce();
    check(n_sev == s0 + 1, "sector-only eviction once the tag owns alloc_ways lines");
    check(n_wb == w0 + 1, "one dirty sector written back");
    for (int f = 1; f <= 3; f++) req(0, mk(7, f, 20, 0), '0);
    quiesce();
    // whole-line eviction with 16 dirty sectors, then a fill with a full queue
    for (int s = 0; s < 16; s++) req(1, mk(100, 9, 30, s), 64'(s + 500));
    for (int t = 1; t < 8; t++) req(1, mk(100 + t, 9, 30, 0), 64'(t));
    quiesce();
    l0 = n_lev; d0 = n_drop; w0 = n_wb; r0 = n_resp;
    hold_resp = 1;
    req(0, mk(200, 1, 40, 0), '0);    // its fill is held back
    wait (pend.size() == 1);
    @(negedge clk); block_req = 1;
    repeat (3) @(negedge clk);
    req(0, mk(201, 1, 41, 0), '0);    // sits in the queue
    req(1, mk(108, 9, 30, 0), 64'h88); // evicts the 16-dirty line
    repeat (40) @(negedge clk);
    check(n_lev == l0 + 1, "whole line evicted");
    hold_resp = 0;                     // fill arrives with 17 entries queued
    repeat (10) @(negedge clk);
    check(n_drop == d0 + 1, "fill returned without being kept");
    block_req = 0;
    quiesce();
    check(n_wb == w0 + 16, $sformatf("sixteen write-backs (%0d)", n_wb - w0));
    check(n_resp == r0 + 2, "both reads answered");
    for (int s = 0; s < 16; s++) req(0, mk(100, 9, 30, s), '0);
    req(0, mk(200, 1, 40, 0), '0);
    quiesce();
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      a = mk($urandom_range(0, 11), $urandom_range(0, 3), $urandom_range(50, 52), $urandom_range(0, 3));
      if ($urandom_range(0, 1) == 0 || outstanding.exists(a[ADDR_W-1:BO_W]) &&
          outstanding[a[ADDR_W-1:BO_W]] > 0) req(0, a, '0);
      else req(1, a, {$urandom, $urandom});
      if (i % 64 == 63) begin quiesce(); outstanding.delete(); end
    end
    quiesce();
    alloc_ways = 4'd8;
    for (int i = 0; i < 500; i++) begin
      a = mk($urandom_range(0, 11), $urandom_range(0, 3), 60, $urandom_range(0, 1));
      req($urandom_range(0, 1) == 1, a, {$urandom, $urandom});
      quiesce();
    end
    check(n_hit > 0 && n_miss > 0 && n_sev > 0 && n_lev > 0 && n_drop > 0, "every event seen");
    check(n_resp > 1000, "read responses received");
    $display("hits %0d misses %0d sector-evicts %0d line-evicts %0d dropped %0d write-backs %0d",
             n_hit, n_miss, n_sev, n_lev, n_drop, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
