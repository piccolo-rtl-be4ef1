// tb_ce_mshr: the collection-extended MSHR at full size (4096 entries) with
// a behavioural FIM back end and a behavioural cache front end.
//
// The back end accepts operations with a random ready, applies scatters to a
// sparse item memory at once and answers gathers in order after a random
// delay with the memory contents seen when the gather was accepted. The
// front end sends reads (with ids) and write-backs; a scoreboard keeps the
// value of every item and checks each response's address and data, and that
// every read is answered exactly once.
//
// Directed part: eight reads of one row (full gather, one operation), eight
// write-backs of one row (full scatter), a read served from write-back data,
// a second read merged into a pending gather, NSUB+1 reads of one item
// (subentries full, gather issued early), a row conflict on one entry
// (partial operations issued), and flush. Random part: reads and write-backs
// over rows that share entries, then flush. The number of operations checks
// the collection: eight reads of one row must cost exactly one gather.
//
// Collection to eight, the SC/GA/new order of the controller flow and the
// partial issue on conflict are the paper's; NSUB = 4, flush and in-order
// gather returns are this design's own. A watchdog bounds the run.
module tb_ce_mshr;
  import piccolo_pkg::*;
  localparam int NSUB = 4;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_write = 0;
  logic [WADDR_W-1:0] req_waddr = '0; logic [ITEM_W-1:0] req_wdata = '0; logic [ID_W-1:0] req_id = '0;
  logic resp_valid, resp_ready = 1;
  logic [WADDR_W-1:0] resp_waddr; logic [ITEM_W-1:0] resp_data; logic [ID_W-1:0] resp_id;
  logic op_valid, op_ready = 0; fim_op_t op;
  logic res_valid = 0; logic [N_ITEMS-1:0][ITEM_W-1:0] res_data = '0;
  logic flush = 0, flush_busy, idle;
  logic ev_sc_hit, ev_ga_hit, ev_conflict, ev_sub_full, ev_full_gather, ev_full_scatter, ev_partial;

  ce_mshr dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_sc = 0, n_ga = 0, n_cf = 0, n_sf = 0, n_fg = 0, n_fs = 0, n_pa = 0, n_gops = 0, n_sops = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ----------------------------------------------------------- FIM back end
  logic [ITEM_W-1:0] mem [logic [WADDR_W-1:0]];
  function automatic logic [ITEM_W-1:0] mem_val(logic [WADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : {19'h0, a} ^ 64'h5eed_0000_0000;
  endfunction
  typedef struct { logic [N_ITEMS-1:0][ITEM_W-1:0] d; int t; } gres_t;
  gres_t gq[$];
  logic [ROWID_W-1:0] rid;
  always @(posedge clk iff rst_n) begin
    cyc <= cyc + 1;
    n_sc += ev_sc_hit; n_ga += ev_ga_hit; n_cf += ev_conflict; n_sf += ev_sub_full;
    n_fg += ev_full_gather; n_fs += ev_full_scatter; n_pa += ev_partial;
    if (op_valid && op_ready) begin
      rid = {op.row, op.rank, op.bank};
      if (op.op == FIM_SCATTER) begin
        n_sops++;
        for (int k = 0; k < N_ITEMS; k++) mem[make_waddr(rid, op.offsets[k][COL_W-1:0])] = op.data[k];
      end else begin
        gres_t g;
        n_gops++;
        for (int k = 0; k < N_ITEMS; k++) g.d[k] = mem_val(make_waddr(rid, op.offsets[k][COL_W-1:0]));
        g.t = cyc + $urandom_range(20, 80);
        gq.push_back(g);
      end
    end
  end
  bit slow_ops = 0;
  always @(negedge clk) begin
    op_ready  = slow_ops ? ($urandom_range(0, 3) == 0) : 1'b1;
    res_valid = 0;
    if (gq.size() > 0 && gq[0].t <= cyc) begin
      res_valid = 1; res_data = gq[0].d; void'(gq.pop_front());
    end
    resp_ready = ($urandom_range(0, 4) != 0);
  end

  // ----------------------------------------------------------- front end
  logic [ITEM_W-1:0] arch [logic [WADDR_W-1:0]];
  logic [ITEM_W-1:0] expv [int];
  logic [WADDR_W-1:0] expa [int];
  int open_rd [logic [WADDR_W-1:0]];
  int n_out = 0, n_resp = 0;
  function automatic logic [ITEM_W-1:0] arch_val(logic [WADDR_W-1:0] a);
    return arch.exists(a) ? arch[a] : mem_val(a);
  endfunction
  always @(posedge clk iff rst_n) begin
    if (req_valid && req_ready) begin
      if (req_write) arch[req_waddr] = req_wdata;
      else begin
        check(!expv.exists(req_id), "id reused while outstanding");
        expv[req_id] = arch_val(req_waddr); expa[req_id] = req_waddr; n_out++;
        open_rd[req_waddr] += 1;
      end
    end
    if (resp_valid && resp_ready) begin
      n_resp++;
      check(expv.exists(resp_id), $sformatf("response for unknown id %0d", resp_id));
      if (expv.exists(resp_id)) begin
        check(resp_data == expv[resp_id] && resp_waddr == expa[resp_id],
              $sformatf("id %0d data %h want %h", resp_id, resp_data, expv[resp_id]));
        open_rd[expa[resp_id]] -= 1;
        expv.delete(resp_id); n_out--;
      end
    end
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WADDR_W-1:0] wa(int row, int rank, int bank, int col);
    return make_waddr({ROW_W'(row), RANK_W'(rank), BANK_W'(bank)}, COL_W'(col));
  endfunction

  int idc = 0;
  task automatic req(input bit w, input logic [WADDR_W-1:0] a, input logic [ITEM_W-1:0] d);
    @(negedge clk);
    req_valid = 1; req_write = w; req_waddr = a; req_wdata = d;
    if (!w) begin
      while (expv.exists(idc % 256)) idc++;
      req_id = ID_W'(idc % 256); idc++;
    end
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0;
  endtask
  task automatic do_flush();
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    do @(negedge clk); while (!idle || gq.size() > 0);
    repeat (5) @(negedge clk);
  endtask

  int g0, s0;
  logic [WADDR_W-1:0] a;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (dut.state_q == dut.S_IDLE);
    // 1. eight reads of one row -> exactly one gather
    g0 = n_gops;
    for (int k = 0; k < 8; k++) req(0, wa(300, 1, 2, k * 37), '0);
    repeat (200) @(negedge clk);
    check(n_gops == g0 + 1 && n_fg == 1, "eight reads collected into one gather");
    check(n_out == 0, "all eight answered");
    // 2. eight write-backs of one row -> one scatter
    s0 = n_sops;
    for (int k = 0; k < 8; k++) req(1, wa(301, 0, 5, k * 100 + 3), 64'(k + 1000));
    repeat (20) @(negedge clk);
    check(n_sops == s0 + 1 && n_fs == 1, "eight write-backs collected into one scatter");
    for (int k = 0; k < 8; k++) check(mem_val(wa(301, 0, 5, k * 100 + 3)) == 64'(k + 1000), "scatter data");
    // 3. read served from write-back data
    req(1, wa(302, 2, 1, 9), 64'hABCD);
    req(0, wa(302, 2, 1, 9), '0);
    repeat (20) @(negedge clk);
    check(n_sc == 1, "read answered from SC-MSHR");
    // 4. second read of a pending item merges; 5. NSUB+1 reads of one item
    req(0, wa(303, 3, 3, 17), '0);
    for (int i = 0; i < NSUB; i++) req(0, wa(303, 3, 3, 17), '0);
    repeat (20) @(negedge clk);
    check(n_ga >= NSUB - 1, "reads merged into a pending gather");
    check(n_sf == 1, "subentry list full");
    // 6. another row on the same entry (row + 128 keeps the low 12 rowid bits)
    req(0, wa(304, 0, 0, 1), '0);
    req(0, wa(304 + 128, 0, 0, 2), '0);
    repeat (20) @(negedge clk);
    check(n_cf == 1, "row conflict on one entry");
    check(n_pa >= 1, "partial operation issued");
    do_flush();
    check(n_out == 0, "everything answered after flush");
    // random traffic over rows that share entries
    slow_ops = 1;
    for (int i = 0; i < 4000; i++) begin
      a = wa(400 + 128 * $urandom_range(0, 2), $urandom_range(0, 1), $urandom_range(0, 1),
             $urandom_range(0, 20));
      if ($urandom_range(0, 2) != 0 || (open_rd.exists(a) && open_rd[a] > 0)) req(0, a, '0);
      else req(1, a, {$urandom, $urandom});
      if (i % 500 == 499) do_flush();
    end
    do_flush();
    check(n_out == 0, "no read left unanswered");
    check(n_sc > 0 && n_ga > 0 && n_cf > 0 && n_sf > 0 && n_fg > 0 && n_fs > 0 && n_pa > 0,
          "every event seen");
    $display("ops: %0d gathers %0d scatters; sc-hit %0d ga-hit %0d conflict %0d sub-full %0d full-g %0d full-s %0d partial %0d",
             n_gops, n_sops, n_sc, n_ga, n_cf, n_sf, n_fg, n_fs, n_pa);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
