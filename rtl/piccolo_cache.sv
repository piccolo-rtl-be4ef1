// piccolo_cache: the fine-grained on-chip cache of Piccolo (Piccolo-cache).
//
// Idea. Graph vertex data are 8-byte items reached at random, so the cache
// keeps 8 B sectors rather than 64 B lines, but without an 8 B-line cache's
// tag cost. A 128 B line holds 16 sectors and one 21-bit tag; every sector
// carries its own 8-bit fine-grained tag (fg-tag). A 48-bit address splits
// as  tag[47:27] | fg-tag[26:19] | set[18:7] | fg-offset[6:3] | byte[2:0],
// so a line gathers 16 sectors from a 32 KB range that share the tag, and the
// fg-offset picks the sector. The same tag may own several ways of a set.
//
// Lookup. The tags of all ways of the set are compared at once; the ways
// whose tag matches are then examined one per cycle for a valid sector whose
// fg-tag matches (sequential fg search, as the paper chooses to save
// comparators). A hit costs 1 + (matching ways examined) cycles.
//
// Replacement (on a fine-grained miss). With equal way partitioning, every
// tag of the current tile may own alloc_ways ways of a set:
//   1. a matching-tag way whose sector slot is empty takes the item;
//   2. else, if the tag owns fewer than alloc_ways ways (or none), the least
//      recently used line of another tag (an invalid way first) is evicted
//      whole and re-tagged;
//   3. else only the sector in the LRU matching-tag line is evicted.
// Dirty sectors that leave are written back one 8 B item at a time.
//
// Misses and write-backs go to the collection-extended MSHR through an
// internal 32-entry queue (mshr_req_*). A read miss allocates nothing; the
// data come back on mshr_resp_* and are installed then, and returned to the
// requester. A write allocates without a fetch: the 8 B sector is the whole
// item. The cache starts a core request only when the queue has room for
// 17 entries, and a fill is installed only if it has room for 16 (otherwise
// the fill is returned without being kept), so neither can stall halfway
// and the cache always drains the MSHR's responses.
//
// Follows the paper: the address split, 8-way 4 MB with 128 B lines of 16
// 8 B sectors, 8-bit fg-tags, duplicated tags, sequential fg search, LRU,
// way partitioning and sector-only eviction. Own choices: the preference for
// an empty slot in step 1, LRU ages per way, the request/response handshakes,
// write-allocate without fetch, the queue and the rule of dropping a fill.
//
// Interfaces: core_req_* (valid/ready, byte address, write, data, id);
// core_resp_valid/id/data for read hits and returned misses (no back-pressure);
// mshr_req_* (valid/ready: write, item address, data, id); mshr_resp_*
// (valid/ready: item address, data, id); alloc_ways from the tile setup.
module piccolo_cache
  import piccolo_pkg::*;
#(
  parameter int unsigned WAYS  = 8,
  parameter int unsigned SETS  = 1 << SET_W,
  parameter int unsigned SECT  = 1 << FGOFF_W,
  parameter int unsigned QDEPTH = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [3:0]           alloc_ways,
  // requests from the update engines
  input  logic                 core_req_valid,
  output logic                 core_req_ready,
  input  logic                 core_req_write,
  input  logic [ADDR_W-1:0]    core_req_addr,
  input  logic [ITEM_W-1:0]    core_req_wdata,
  input  logic [ID_W-1:0]      core_req_id,
  output logic                 core_resp_valid,
  output logic [ID_W-1:0]      core_resp_id,
  output logic [ITEM_W-1:0]    core_resp_data,
  // misses and write-backs to the CE-MSHR
  output logic                 mshr_req_valid,
  input  logic                 mshr_req_ready,
  output logic                 mshr_req_write,
  output logic [WADDR_W-1:0]   mshr_req_waddr,
  output logic [ITEM_W-1:0]    mshr_req_wdata,
  output logic [ID_W-1:0]      mshr_req_id,
  // returned data
  input  logic                 mshr_resp_valid,
  output logic                 mshr_resp_ready,
  input  logic [WADDR_W-1:0]   mshr_resp_waddr,
  input  logic [ITEM_W-1:0]    mshr_resp_data,
  input  logic [ID_W-1:0]      mshr_resp_id,
  // events
  output logic                 ev_hit,
  output logic                 ev_miss,
  output logic                 ev_sector_evict,
  output logic                 ev_line_evict,
  output logic                 ev_fill_dropped
);
  localparam int unsigned WAY_W  = $clog2(WAYS);
  localparam int unsigned SIDX_W = $clog2(SETS);
  localparam int unsigned SEC_W  = $clog2(SECT);

  typedef struct packed {
    logic                            lv;
    logic [TAG_W-1:0]                tag;
    logic [WAY_W-1:0]                age;   // 0 = most recently used
    logic [SECT-1:0]                 sv;
    logic [SECT-1:0]                 sd;
    logic [SECT-1:0][FGTAG_W-1:0]    fg;
  } way_meta_t;
  typedef way_meta_t [WAYS-1:0] set_meta_t;

  set_meta_t          meta_mem [SETS];
  logic [ITEM_W-1:0]  data_mem [SETS*WAYS*SECT];

  // ------------------------------------------------------------ queue to MSHR
  typedef struct packed {
    logic               write;
    logic [WADDR_W-1:0] waddr;
    logic [ITEM_W-1:0]  data;
    logic [ID_W-1:0]    id;
  } mreq_t;
  localparam int unsigned QP_W = $clog2(QDEPTH);
  mreq_t            q_mem [QDEPTH];
  logic [QP_W-1:0]  q_rd, q_wr;
  logic [QP_W:0]    q_cnt;
  logic             q_push, q_pop;
  mreq_t            q_in;

  assign q_pop          = mshr_req_valid && mshr_req_ready;
  assign mshr_req_valid = (q_cnt != '0);
  assign mshr_req_write = q_mem[q_rd].write;
  assign mshr_req_waddr = q_mem[q_rd].waddr;
  assign mshr_req_wdata = q_mem[q_rd].data;
  assign mshr_req_id    = q_mem[q_rd].id;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q_rd <= '0; q_wr <= '0; q_cnt <= '0;
    end else begin
      if (q_push) begin q_mem[q_wr] <= q_in; q_wr <= q_wr + 1'b1; end
      if (q_pop) q_rd <= q_rd + 1'b1;
      q_cnt <= q_cnt + (QP_W+1)'(q_push) - (QP_W+1)'(q_pop);
    end
  end

  // ------------------------------------------------------------ request state
  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_FG, S_DECIDE, S_WB, S_INIT} state_e;
  state_e state_q;

  logic               r_fill, r_write;
  logic [TAG_W-1:0]   r_tag;
  logic [FGTAG_W-1:0] r_fg;
  logic [SIDX_W-1:0]  r_set;
  logic [SEC_W-1:0]   r_sec;
  logic [ITEM_W-1:0]  r_data;
  logic [ID_W-1:0]    r_id;
  logic [WAYS-1:0]    match_q;     // ways whose tag matches, still to examine
  logic [WAYS-1:0]    match_all_q; // all ways whose tag matches
  logic [WAY_W-1:0]   vway_q;      // chosen way
  logic               line_evict_q;
  logic [SEC_W:0]     wb_idx_q;
  logic [SIDX_W-1:0]  init_q;

  set_meta_t cur;
  assign cur = meta_mem[r_set];

  // parallel tag compare
  logic [WAYS-1:0] tag_match;
  always_comb
    for (int w = 0; w < WAYS; w++) tag_match[w] = cur[w].lv && (cur[w].tag == r_tag);

  // first matching way still to examine
  logic [WAY_W-1:0] fg_way;
  always_comb begin
    fg_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) if (match_q[w]) fg_way = WAY_W'(w);
  end
  logic fg_hit;
  assign fg_hit = cur[fg_way].sv[r_sec] && (cur[fg_way].fg[r_sec] == r_fg);

  // replacement choice (used in S_DECIDE)
  logic [WAY_W:0]   same_cnt;
  logic             have_free;
  logic [WAY_W-1:0] free_way, lru_same, lru_other;
  logic             have_invalid;
  logic [WAY_W-1:0] inv_way;
  logic [3:0]       alloc_eff;
  always_comb begin
    same_cnt = '0; have_free = 1'b0; free_way = '0; lru_same = '0; lru_other = '0;
    have_invalid = 1'b0; inv_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (match_all_q[w]) begin
        same_cnt = same_cnt + 1'b1;
        if (!cur[w].sv[r_sec] && !have_free) begin have_free = 1'b1; free_way = WAY_W'(w); end
        if (cur[w].age >= cur[lru_same].age || !match_all_q[lru_same]) lru_same = WAY_W'(w);
      end else begin
        if (!cur[w].lv && !have_invalid) begin have_invalid = 1'b1; inv_way = WAY_W'(w); end
        if (cur[w].age >= cur[lru_other].age || match_all_q[lru_other]) lru_other = WAY_W'(w);
      end
    end
    alloc_eff = (alloc_ways == 4'd0) ? 4'd1 : alloc_ways;
  end

  // writes into the set
  function automatic set_meta_t touch(input set_meta_t s, input logic [WAY_W-1:0] w);
    set_meta_t n = s;
    for (int i = 0; i < WAYS; i++)
      if (n[i].age < s[w].age) n[i].age = n[i].age + 1'b1;
    n[w].age = '0;
    return n;
  endfunction

  // next contents of the set for a hit, an install and after reset
  set_meta_t hit_set, install_set, init_set;
  always_comb begin
    hit_set = touch(cur, fg_way);
    if (r_write) hit_set[fg_way].sd[r_sec] = 1'b1;
    install_set = touch(cur, vway_q);
    if (line_evict_q) begin
      install_set[vway_q].lv  = 1'b1;
      install_set[vway_q].tag = r_tag;
      install_set[vway_q].sv  = '0;
      install_set[vway_q].sd  = '0;
    end
    install_set[vway_q].sv[r_sec] = 1'b1;
    install_set[vway_q].sd[r_sec] = r_write;
    install_set[vway_q].fg[r_sec] = r_fg;
    init_set = '0;
    for (int w = 0; w < WAYS; w++) init_set[w].age = WAY_W'(w);
  end

  logic [WAY_W-1:0] wb_way;
  assign wb_way = vway_q;

  always_ff @(posedge clk) begin
    core_resp_valid  <= 1'b0;
    ev_hit <= 1'b0; ev_miss <= 1'b0; ev_sector_evict <= 1'b0;
    ev_line_evict <= 1'b0; ev_fill_dropped <= 1'b0;
    if (!rst_n) begin
      state_q <= S_INIT;
      init_q  <= '0;
      core_resp_id   <= '0;
      core_resp_data <= '0;
    end else begin
      unique case (state_q)
        S_INIT: begin   // clear the tag store, one set per cycle
          meta_mem[init_q] <= init_set;
          init_q <= init_q + 1'b1;
          if (init_q == SIDX_W'(SETS - 1)) state_q <= S_IDLE;
        end
        S_IDLE: begin
          if (mshr_resp_valid) begin
            r_fill  <= 1'b1; r_write <= 1'b0;
            {r_tag, r_fg, r_set, r_sec} <= mshr_resp_waddr;
            r_data  <= mshr_resp_data; r_id <= mshr_resp_id;
            state_q <= S_LOOKUP;
          end else if (core_req_valid && core_req_ready) begin
            r_fill  <= 1'b0; r_write <= core_req_write;
            {r_tag, r_fg, r_set, r_sec} <= core_req_addr[ADDR_W-1:BO_W];
            r_data  <= core_req_wdata; r_id <= core_req_id;
            state_q <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          match_q     <= tag_match;
          match_all_q <= tag_match;
          state_q     <= (tag_match != '0) ? S_FG : S_DECIDE;
        end
        S_FG: begin
          if (fg_hit) begin
            // hit
            if (r_fill) begin
              // the item is already here (written meanwhile): keep the cache copy
              core_resp_valid <= 1'b1; core_resp_id <= r_id; core_resp_data <= r_data;
            end else begin
              meta_mem[r_set] <= hit_set;
              ev_hit <= 1'b1;
              if (r_write) begin
                data_mem[{r_set, fg_way, r_sec}] <= r_data;
              end else begin
                core_resp_valid <= 1'b1; core_resp_id <= r_id;
                core_resp_data  <= data_mem[{r_set, fg_way, r_sec}];
              end
            end
            state_q <= S_IDLE;
          end else begin
            match_q[fg_way] <= 1'b0;
            if ((match_q & ~(WAYS'(1) << fg_way)) == '0) state_q <= S_DECIDE;
          end
        end
        S_DECIDE: begin
          if (!r_fill) ev_miss <= 1'b1;
          if (!r_fill && !r_write) begin
            // read miss: hand it to the MSHR, allocate on return
            state_q <= S_IDLE;
          end else if (r_fill && ((QP_W+1)'(QDEPTH) - q_cnt) < (QP_W+1)'(SECT)) begin
            // no room for write-backs: return the data without keeping it
            ev_fill_dropped <= 1'b1;
            core_resp_valid <= 1'b1; core_resp_id <= r_id; core_resp_data <= r_data;
            state_q <= S_IDLE;
          end else if (have_free) begin
            vway_q <= free_way; line_evict_q <= 1'b0;
            state_q <= S_WB; wb_idx_q <= '0;
          end else if (same_cnt == '0 || same_cnt < (WAY_W+1)'(alloc_eff)) begin
            vway_q <= have_invalid ? inv_way : lru_other;
            line_evict_q <= 1'b1;
            if (!have_invalid) ev_line_evict <= 1'b1;
            state_q <= S_WB; wb_idx_q <= '0;
          end else begin
            vway_q <= lru_same; line_evict_q <= 1'b0;
            ev_sector_evict <= 1'b1;
            state_q <= S_WB; wb_idx_q <= '0;
          end
        end
        S_WB: begin
          // write back dirty sectors leaving the cache, then install
          if (wb_idx_q == (SEC_W+1)'(SECT)) begin
            meta_mem[r_set] <= install_set;
            data_mem[{r_set, vway_q, r_sec}] <= r_data;
            if (r_fill) begin
              core_resp_valid <= 1'b1; core_resp_id <= r_id; core_resp_data <= r_data;
            end
            state_q <= S_IDLE;
          end else begin
            wb_idx_q <= wb_idx_q + 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // which sector the write-back walk is looking at, and whether it leaves dirty
  logic [SEC_W-1:0] wb_sec;
  assign wb_sec = wb_idx_q[SEC_W-1:0];
  logic wb_leaves;
  assign wb_leaves = (state_q == S_WB) && (wb_idx_q != (SEC_W+1)'(SECT)) &&
                     cur[wb_way].lv && cur[wb_way].sv[wb_sec] && cur[wb_way].sd[wb_sec] &&
                     (line_evict_q || wb_sec == r_sec);

  always_comb begin
    q_push = 1'b0;
    q_in   = '0;
    if (wb_leaves) begin
      q_push   = 1'b1;
      q_in.write = 1'b1;
      q_in.waddr = {cur[wb_way].tag, cur[wb_way].fg[wb_sec], r_set, wb_sec};
      q_in.data  = data_mem[{r_set, wb_way, wb_sec}];
    end else if (state_q == S_DECIDE && !r_fill && !r_write) begin
      q_push   = 1'b1;
      q_in.write = 1'b0;
      q_in.waddr = {r_tag, r_fg, r_set, r_sec};
      q_in.id    = r_id;
    end
  end

  assign core_req_ready  = (state_q == S_IDLE) && !mshr_resp_valid &&
                           (((QP_W+1)'(QDEPTH) - q_cnt) > (QP_W+1)'(SECT));
  assign mshr_resp_ready = (state_q == S_IDLE);

  // a full queue must never be pushed
  always_ff @(posedge clk)
    if (rst_n) assert (!(q_push && q_cnt == (QP_W+1)'(QDEPTH)))
      else $error("piccolo_cache: MSHR queue overflow");
endmodule
