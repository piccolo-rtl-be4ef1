// ce_mshr: collection-extended MSHR, the miss-handling unit of Piccolo.
//
// Idea. An in-DRAM gather or scatter moves eight 8 B items that lie in one
// DRAM row. Cache misses and write-backs arrive from all sets of the cache in
// no useful order, so this unit collects them per DRAM row until eight are
// there and then issues one gather (for reads) or one scatter (for
// write-backs).
//
// Structure. A direct-mapped table indexed by the low 12 bits of the item's
// DRAM row identity ({row, rank, bank}) holds, per entry, the rest of the row
// identity, 8 gather column offsets (GA-MSHR) with up to NSUB waiting
// requester ids each (subentries), and 8 scatter column offsets (SC-MSHR) with
// their write-back data. A request is handled as in the paper's controller
// flow, comparing its column offset with the entry's offsets one per cycle:
//   * found in SC-MSHR: a read is answered from the write-back data, a
//     write-back replaces it;
//   * found in GA-MSHR (read): the requester id joins the subentries;
//   * found nowhere: a read takes a new GA slot, a write-back a new SC slot.
// Eight GA slots trigger a gather, eight SC slots a scatter. A request for
// another row that maps onto a busy entry first issues the entry's partial
// scatter and gather. flush issues every partial operation left (end of a
// tile). Partial operations repeat offset 0 in the unused slots.
//
// Returned gathers are matched to their in-flight record (gathers complete in
// issue order) and every subentry gets one response (resp_*).
//
// Follows the paper: direct mapping by DRAM row, 8 GA + 8 SC offsets per
// entry, subentries and write-back data stored with the entry, sequential
// offset compare, the order of the controller flow, issue when eight are
// collected, partial issue on eviction, 4K entries. Own choices: NSUB = 4
// subentries per offset (a full list issues the gather early, then the
// request is taken as new); a write-back that finds its offset in GA-MSHR is
// stored in SC-MSHR (the paper's flow lists only reads for this case), and a
// gather is always preceded by the entry's pending scatter so that it reads
// the written data; the flush input; four in-flight gathers; one forwarded
// response queue of depth four.
//
// Interfaces: req_* (valid/ready) from the cache, resp_* (valid/ready) back to
// it, op_* (valid/ready, fim_op_t) to the FIM command generator, res_* (one
// cycle, eight items) from it. Event pulses for statistics.
module ce_mshr
  import piccolo_pkg::*;
#(
  parameter int unsigned ENTRIES = 4096,
  parameter int unsigned NSUB    = 4,
  parameter int unsigned INFL    = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // from the cache
  input  logic                           req_valid,
  output logic                           req_ready,
  input  logic                           req_write,
  input  logic [WADDR_W-1:0]             req_waddr,
  input  logic [ITEM_W-1:0]              req_wdata,
  input  logic [ID_W-1:0]                req_id,
  // to the cache
  output logic                           resp_valid,
  input  logic                           resp_ready,
  output logic [WADDR_W-1:0]             resp_waddr,
  output logic [ITEM_W-1:0]              resp_data,
  output logic [ID_W-1:0]                resp_id,
  // to / from the FIM command generator
  output logic                           op_valid,
  input  logic                           op_ready,
  output fim_op_t                        op,
  input  logic                           res_valid,
  input  logic [N_ITEMS-1:0][ITEM_W-1:0] res_data,
  // drain all partial operations
  input  logic                           flush,
  output logic                           flush_busy,
  output logic                           idle,
  // events
  output logic                           ev_sc_hit,
  output logic                           ev_ga_hit,
  output logic                           ev_conflict,
  output logic                           ev_sub_full,
  output logic                           ev_full_gather,
  output logic                           ev_full_scatter,
  output logic                           ev_partial
);
  localparam int unsigned IDX_W  = $clog2(ENTRIES);
  localparam int unsigned TAGM_W = ROWID_W - IDX_W;
  localparam int unsigned SUB_W  = $clog2(NSUB + 1);
  localparam int unsigned IP_W   = $clog2(INFL);

  typedef struct packed {
    logic                                    valid;
    logic [TAGM_W-1:0]                       tag;
    logic [3:0]                              ga_cnt;
    logic [3:0]                              sc_cnt;
    logic [N_ITEMS-1:0][COL_W-1:0]           ga_off;
    logic [N_ITEMS-1:0][COL_W-1:0]           sc_off;
    logic [N_ITEMS-1:0][ITEM_W-1:0]          sc_data;
    logic [N_ITEMS-1:0][SUB_W-1:0]           sub_cnt;
    logic [N_ITEMS-1:0][NSUB-1:0][ID_W-1:0]  sub_id;
  } ent_t;

  typedef struct packed {
    logic [ROWID_W-1:0]                      rowid;
    logic [3:0]                              cnt;
    logic [N_ITEMS-1:0][COL_W-1:0]           off;
    logic [N_ITEMS-1:0][SUB_W-1:0]           sub_cnt;
    logic [N_ITEMS-1:0][NSUB-1:0][ID_W-1:0]  sub_id;
  } infl_t;

  ent_t  mem [ENTRIES];

  // ============================================================ request side
  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_CHECK, S_CMP_SC, S_CMP_GA, S_FWD, S_ADD, S_ISS_SC,
    S_ISS_GA, S_WRITE, S_FL_RD, S_FL_CHK
  } state_e;
  state_e state_q, ret_q;

  ent_t               ent_q;
  logic [IDX_W-1:0]   idx_q;
  logic [TAGM_W-1:0]  ent_rowtag;      // tag of the row the entry holds now
  logic               r_write;
  logic [ROWID_W-1:0] r_rowid;
  logic [COL_W-1:0]   r_col;
  logic [ITEM_W-1:0]  r_data;
  logic [ID_W-1:0]    r_id;
  logic [2:0]         j_q;
  logic               iss_ga_q;        // issue the gather after the scatter
  logic               flushing_q;
  logic               flush_pend_q;

  // forwarded responses (read served from write-back data)
  typedef struct packed {
    logic [WADDR_W-1:0] waddr;
    logic [ITEM_W-1:0]  data;
    logic [ID_W-1:0]    id;
  } resp_t;
  resp_t            fwd_mem [4];
  logic [1:0]       fwd_rd, fwd_wr;
  logic [2:0]       fwd_cnt;
  logic             fwd_push, fwd_pop;

  // in-flight gathers
  infl_t                          infl_mem [INFL];
  logic [N_ITEMS-1:0][ITEM_W-1:0] infl_data [INFL];
  logic [INFL-1:0]                infl_dv;
  logic [IP_W-1:0]                infl_rd, infl_wr, infl_res;
  logic [IP_W:0]                  infl_cnt;
  logic                           infl_push, infl_pop;

  logic [TAGM_W-1:0] r_tag;
  assign r_tag = r_rowid[ROWID_W-1:IDX_W];

  // the operation presented to the command generator
  logic [ROWID_W-1:0] op_rowid;
  assign op_rowid = {ent_rowtag, idx_q};
  always_comb begin
    op      = '0;
    op.rank = op_rowid[BANK_W +: RANK_W];
    op.bank = op_rowid[BANK_W-1:0];
    op.row  = op_rowid[BANK_W+RANK_W +: ROW_W];
    if (state_q == S_ISS_SC) begin
      op.op = FIM_SCATTER;
      for (int k = 0; k < N_ITEMS; k++) begin
        op.offsets[k] = OFFSET_W'((4'(k) < ent_q.sc_cnt) ? ent_q.sc_off[k] : ent_q.sc_off[0]);
        op.data[k]    = (4'(k) < ent_q.sc_cnt) ? ent_q.sc_data[k] : ent_q.sc_data[0];
      end
    end else begin
      op.op = FIM_GATHER;
      for (int k = 0; k < N_ITEMS; k++)
        op.offsets[k] = OFFSET_W'((4'(k) < ent_q.ga_cnt) ? ent_q.ga_off[k] : ent_q.ga_off[0]);
    end
  end
  assign op_valid = (state_q == S_ISS_SC) ||
                    (state_q == S_ISS_GA && infl_cnt != (IP_W+1)'(INFL));

  assign infl_push = (state_q == S_ISS_GA) && op_valid && op_ready;
  assign fwd_push  = (state_q == S_FWD) && (fwd_cnt != 3'd4);

  assign req_ready  = (state_q == S_IDLE) && !flush_pend_q;
  assign flush_busy = flush_pend_q || flushing_q;

  // entry after adding the request as a new slot
  ent_t added;
  always_comb begin
    added = ent_q;
    if (!r_write) begin
      added.ga_off[ent_q.ga_cnt[2:0]]     = r_col;
      added.sub_id[ent_q.ga_cnt[2:0]][0]  = r_id;
      added.sub_cnt[ent_q.ga_cnt[2:0]]    = SUB_W'(1);
      added.ga_cnt                        = ent_q.ga_cnt + 1'b1;
    end else begin
      added.sc_off[ent_q.sc_cnt[2:0]]     = r_col;
      added.sc_data[ent_q.sc_cnt[2:0]]    = r_data;
      added.sc_cnt                        = ent_q.sc_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    ev_sc_hit <= 1'b0; ev_ga_hit <= 1'b0; ev_conflict <= 1'b0; ev_sub_full <= 1'b0;
    ev_full_gather <= 1'b0; ev_full_scatter <= 1'b0; ev_partial <= 1'b0;
    if (!rst_n) begin
      state_q      <= S_INIT;
      ret_q        <= S_IDLE;
      idx_q        <= '0;
      ent_q        <= '0;
      ent_rowtag   <= '0;
      j_q          <= '0;
      iss_ga_q     <= 1'b0;
      flushing_q   <= 1'b0;
      flush_pend_q <= 1'b0;
      r_write <= 1'b0; r_rowid <= '0; r_col <= '0; r_data <= '0; r_id <= '0;
    end else begin
      if (flush) flush_pend_q <= 1'b1;
      unique case (state_q)
        S_INIT: begin       // invalidate the table, one entry per cycle
          mem[idx_q] <= '0;
          idx_q <= idx_q + 1'b1;
          if (idx_q == IDX_W'(ENTRIES - 1)) state_q <= S_IDLE;
        end
        S_IDLE: begin
          if (flush_pend_q) begin
            flush_pend_q <= 1'b0;
            flushing_q   <= 1'b1;
            idx_q        <= '0;
            state_q      <= S_FL_RD;
          end else if (req_valid) begin
            r_write <= req_write;
            r_rowid <= waddr_rowid(req_waddr);
            r_col   <= waddr_col(req_waddr);
            r_data  <= req_wdata;
            r_id    <= req_id;
            idx_q   <= waddr_rowid(req_waddr)[IDX_W-1:0];
            ent_q   <= mem[waddr_rowid(req_waddr)[IDX_W-1:0]];
            ent_rowtag <= mem[waddr_rowid(req_waddr)[IDX_W-1:0]].tag;
            state_q <= S_CHECK;
          end
        end
        S_CHECK: begin
          if (!ent_q.valid) begin
            ent_q        <= '0;
            ent_q.valid  <= 1'b1;
            ent_q.tag    <= r_tag;
            ent_rowtag   <= r_tag;
            state_q      <= S_ADD;
          end else if (ent_q.tag != r_tag) begin
            // another row holds the entry: issue what it collected
            ev_conflict <= 1'b1;
            ev_partial  <= (ent_q.sc_cnt != '0) || (ent_q.ga_cnt != '0);
            iss_ga_q    <= (ent_q.ga_cnt != '0);
            ret_q       <= S_CHECK;
            if (ent_q.sc_cnt != '0)      state_q <= S_ISS_SC;
            else if (ent_q.ga_cnt != '0) state_q <= S_ISS_GA;
            else begin ent_q.valid <= 1'b0; end
          end else begin
            j_q     <= '0;
            if (ent_q.sc_cnt != '0)      state_q <= S_CMP_SC;
            else if (ent_q.ga_cnt != '0) state_q <= S_CMP_GA;
            else                         state_q <= S_ADD;
          end
        end
        S_CMP_SC: begin
          if (ent_q.sc_off[j_q] == r_col) begin
            ev_sc_hit <= 1'b1;
            if (r_write) begin
              ent_q.sc_data[j_q] <= r_data;
              state_q <= S_WRITE;
            end else begin
              state_q <= S_FWD;
            end
          end else if (4'(j_q) + 4'd1 == ent_q.sc_cnt) begin
            j_q <= '0;
            state_q <= (ent_q.ga_cnt != '0) ? S_CMP_GA : S_ADD;
          end else begin
            j_q <= j_q + 1'b1;
          end
        end
        S_CMP_GA: begin
          if (!r_write && ent_q.ga_off[j_q] == r_col) begin
            if (ent_q.sub_cnt[j_q] != SUB_W'(NSUB)) begin
              ev_ga_hit <= 1'b1;
              ent_q.sub_id[j_q][ent_q.sub_cnt[j_q][$clog2(NSUB)-1:0]] <= r_id;
              ent_q.sub_cnt[j_q] <= ent_q.sub_cnt[j_q] + 1'b1;
              state_q <= S_WRITE;
            end else begin
              // subentries exhausted: send the gather now, then retry
              ev_sub_full <= 1'b1;
              ev_partial  <= 1'b1;
              iss_ga_q    <= 1'b1;
              ret_q       <= S_CHECK;
              state_q     <= (ent_q.sc_cnt != '0) ? S_ISS_SC : S_ISS_GA;
            end
          end else if (4'(j_q) + 4'd1 >= ent_q.ga_cnt) begin
            state_q <= S_ADD;
          end else begin
            j_q <= j_q + 1'b1;
          end
        end
        S_FWD: if (fwd_push) state_q <= S_IDLE;
        S_ADD: begin
          ent_q <= added;
          if (added.ga_cnt == 4'd8) begin
            ev_full_gather <= 1'b1;
            iss_ga_q <= 1'b1;
            ret_q    <= S_WRITE;
            state_q  <= (added.sc_cnt != '0) ? S_ISS_SC : S_ISS_GA;
          end else if (added.sc_cnt == 4'd8) begin
            ev_full_scatter <= 1'b1;
            iss_ga_q <= 1'b0;
            ret_q    <= S_WRITE;
            state_q  <= S_ISS_SC;
          end else begin
            state_q  <= S_WRITE;
          end
        end
        S_ISS_SC: if (op_ready) begin
          ent_q.sc_cnt <= '0;
          state_q <= iss_ga_q ? S_ISS_GA : ret_q;
          if (!iss_ga_q && ent_q.ga_cnt == '0 && ret_q != S_WRITE) ent_q.valid <= 1'b0;
        end
        S_ISS_GA: if (op_valid && op_ready) begin
          ent_q.ga_cnt  <= '0;
          ent_q.sub_cnt <= '0;
          iss_ga_q      <= 1'b0;
          state_q       <= ret_q;
          if (ret_q != S_WRITE) ent_q.valid <= 1'b0;
        end
        S_WRITE: begin
          mem[idx_q] <= ent_q;
          state_q <= flushing_q ? S_FL_RD : S_IDLE;
          if (flushing_q) idx_q <= idx_q + 1'b1;
          if (flushing_q && idx_q == IDX_W'(ENTRIES - 1)) begin
            flushing_q <= 1'b0;
            state_q    <= S_IDLE;
          end
        end
        S_FL_RD: begin
          ent_q      <= mem[idx_q];
          ent_rowtag <= mem[idx_q].tag;
          state_q    <= S_FL_CHK;
          ret_q      <= S_FL_RD;
        end
        S_FL_CHK: begin
          if (ret_q == S_FL_RD && ent_q.valid && (ent_q.sc_cnt != '0 || ent_q.ga_cnt != '0)) begin
            ev_partial <= 1'b1;
            iss_ga_q   <= (ent_q.ga_cnt != '0);
            ret_q      <= S_FL_CHK;
            state_q    <= (ent_q.sc_cnt != '0) ? S_ISS_SC : S_ISS_GA;
          end else if (ret_q == S_FL_CHK || ent_q.valid) begin
            ent_q.valid <= 1'b0;
            ret_q   <= S_FL_RD;
            state_q <= S_WRITE;
          end else begin
            ret_q   <= S_FL_RD;
            if (idx_q == IDX_W'(ENTRIES - 1)) begin
              flushing_q <= 1'b0;
              state_q    <= S_IDLE;
            end else begin
              idx_q   <= idx_q + 1'b1;
              state_q <= S_FL_RD;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ============================================================ response side
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fwd_rd <= '0; fwd_wr <= '0; fwd_cnt <= '0;
      infl_rd <= '0; infl_wr <= '0; infl_res <= '0; infl_cnt <= '0; infl_dv <= '0;
    end else begin
      if (fwd_push) begin
        fwd_mem[fwd_wr] <= '{waddr: make_waddr(r_rowid, r_col), data: ent_q.sc_data[j_q], id: r_id};
        fwd_wr <= fwd_wr + 1'b1;
      end
      if (fwd_pop) fwd_rd <= fwd_rd + 1'b1;
      fwd_cnt <= fwd_cnt + 3'(fwd_push) - 3'(fwd_pop);

      if (infl_push) begin
        infl_mem[infl_wr] <= '{rowid: op_rowid, cnt: ent_q.ga_cnt, off: ent_q.ga_off,
                               sub_cnt: ent_q.sub_cnt, sub_id: ent_q.sub_id};
        infl_wr <= infl_wr + 1'b1;
      end
      if (res_valid) begin
        infl_data[infl_res] <= res_data;
        infl_dv[infl_res]   <= 1'b1;
        infl_res <= infl_res + 1'b1;
      end
      if (infl_pop) begin
        infl_dv[infl_rd] <= 1'b0;
        infl_rd <= infl_rd + 1'b1;
      end
      infl_cnt <= infl_cnt + (IP_W+1)'(infl_push) - (IP_W+1)'(infl_pop);
    end
  end

  // walk over the subentries of the oldest returned gather
  logic [2:0]      rj_q;
  logic [SUB_W-1:0] rs_q;
  infl_t           head;
  assign head = infl_mem[infl_rd];
  logic head_ready;
  assign head_ready = (infl_cnt != '0) && infl_dv[infl_rd];

  logic use_fwd;
  assign use_fwd = (fwd_cnt != '0);
  logic head_emit;
  assign head_emit = !use_fwd && head_ready && (rs_q < head.sub_cnt[rj_q]);

  always_comb begin
    resp_valid = 1'b0;
    resp_waddr = '0;
    resp_data  = '0;
    resp_id    = '0;
    if (use_fwd) begin
      resp_valid = 1'b1;
      resp_waddr = fwd_mem[fwd_rd].waddr;
      resp_data  = fwd_mem[fwd_rd].data;
      resp_id    = fwd_mem[fwd_rd].id;
    end else if (head_emit) begin
      resp_valid = 1'b1;
      resp_waddr = make_waddr(head.rowid, head.off[rj_q]);
      resp_data  = infl_data[infl_rd][rj_q];
      resp_id    = head.sub_id[rj_q][rs_q[$clog2(NSUB)-1:0]];
    end
  end
  assign fwd_pop = use_fwd && resp_ready;

  // the head is done after its last slot's last subentry
  logic slot_done, last_slot;
  assign slot_done = !use_fwd && head_ready &&
                     (rs_q >= head.sub_cnt[rj_q] ||
                      (resp_ready && rs_q + 1'b1 == head.sub_cnt[rj_q]));
  assign last_slot = (4'(rj_q) + 4'd1 >= head.cnt);
  assign infl_pop  = slot_done && last_slot;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rj_q <= '0; rs_q <= '0;
    end else if (slot_done) begin
      rs_q <= '0;
      rj_q <= last_slot ? 3'd0 : rj_q + 1'b1;
    end else if (head_emit && resp_ready) begin
      rs_q <= rs_q + 1'b1;
    end
  end

  assign idle = (state_q == S_IDLE) && !flush_pend_q && (infl_cnt == '0) && (fwd_cnt == '0);

  always_ff @(posedge clk)
    if (rst_n) assert (!(res_valid && infl_cnt == '0))
      else $error("ce_mshr: gather result with no gather in flight");
endmodule
