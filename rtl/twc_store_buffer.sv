// twc_store_buffer -- a Transactional WaveCache StoreBuffer.
//
// The StoreBuffer orders the memory operations of the waves in its custody.
// Inside a wave it keeps WaveScalar's order: a request executes only when the
// <P,C,S> chain links it to the wave's previously executed request. Across
// waves it speculates, treating every wave as a nested transaction: requests of
// up to SPEC_WINDOW waves beyond the non-speculative wave (lastCommittedWave+1)
// execute out of order, each speculative operation being logged in the
// MemOp-History (MOH) and linked into its wave's Search Catalog list, and the
// operands that entered each speculative wave through Wave-Advance being kept
// in its Wave-Context-Table (WCT).
//
// When an operation B of wave Y executes, the MOH is searched for the closest
// logged operation A of a later wave X to the same address:
//   B Store, A Load   RAW: waves >= X read a stale value. They are rolled back
//                     (below) and B is then executed again from scratch.
//   B Store, A Store  WAW: memory already holds the later value, so B does not
//                     go to memory; A's backup becomes B's data and, if B is
//                     speculative, B is logged with A's old backup.
//   B Load, A Store   WAR: B gets the closest later Store's backup instead of
//                     reading memory.
// Otherwise B goes to memory; a speculative Store first reads the old value
// as its backup. Every executed request advances the wave's chain; the one with
// S = "." sets the wave's F bit.
//
// Commit: while the non-speculative wave has MOH entries they are released
// through its catalog list (its context is no longer needed); when its F bit is
// set the wave commits, lastCommittedWave advances and commit_valid pulses
// with the wave number and lastExeN (the message a remote StoreBuffer would
// receive when custody passes; ho_* is the receiving side).
//
// Rollback at wave X, following the paper's six steps: walk the catalog lists
// of waves from the youngest down to X, writing every Store backup back to
// memory and freeing the MOH entries; empty the WCTs of waves > X; purge the
// buffered requests of waves >= X; increment lastExeN and give all waves >= X
// that currentExeN, a clear F bit and an empty chain; re-send X's read set on
// the rs_* port with the new ExeN. A Wave-Advance copy that arrives later with
// an older ExeN for such a wave is stored with the new ExeN and also sent on
// rs_*, so that the new instance of the wave receives it.
//
// Interfaces (all valid/ready, transfer when both are high at a rising edge):
//   req_*[NPORTS]  memory requests from the PEs (Table 1: 4 input ports), one
//                  accepted per cycle, round-robin. The last free request-buffer
//                  entry is kept for the non-speculative wave.
//   wa_*           Wave-Advance operand copies.
//   rsp_*          load results, tagged with the load's destination and ExeN.
//   rs_*           re-sent operands.
//   mem_*          the data memory (L1 cache) port: one outstanding access;
//                  a read returns mem_rdata with mem_rsp_valid some cycles
//                  after the request was accepted.
// The paper gives 4 output ports; this StoreBuffer has the two result
// streams above. Buffer sizes are this design's choice (the paper did not
// limit them); SPEC_WINDOW defaults to 30, the window of the paper's best
// VECTOR-FULL-DEP result. The upper bits of stats.moh_peak stay zero when
// MOH_DEPTH is small; the counter is 16 bits like the others.
// The handshake assertions at the end disable on rst_n; Verilator notes that
// rst_n is then used both as asynchronous reset and as a sampled signal
// (SYNCASYNCNET), which concerns only the assertions.
module twc_store_buffer
  import twc_pkg::*;
#(
  parameter int NPORTS      = 4,
  parameter int NWAVES      = 32,
  parameter int SPEC_WINDOW = 30,
  parameter int REQ_DEPTH   = 16,
  parameter int MOH_DEPTH   = 64,
  parameter int WCT_DEPTH   = 8,
  localparam int SLOT_W = $clog2(NWAVES),
  localparam int MIDX_W = $clog2(MOH_DEPTH),
  localparam int LINE_W = $clog2(WCT_DEPTH),
  localparam int RIDX_W = $clog2(REQ_DEPTH),
  localparam int PW     = $clog2(NPORTS > 1 ? NPORTS : 2)
) (
  input  logic        clk,
  input  logic        rst_n,
  // memory requests from PEs
  input  logic        req_valid [NPORTS],
  output logic        req_ready [NPORTS],
  input  mem_req_t    req       [NPORTS],
  // Wave-Advance copies
  input  logic        wa_valid,
  output logic        wa_ready,
  input  operand_t    wa_op,
  // load results
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output operand_t    rsp_op,
  // re-sent operands
  output logic        rs_valid,
  input  logic        rs_ready,
  output operand_t    rs_op,
  // data memory
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_we,
  output addr_t       mem_addr,
  output data_t       mem_wdata,
  input  logic        mem_rsp_valid,
  input  data_t       mem_rdata,
  // custody hand-off between StoreBuffers
  input  logic        ho_valid,
  input  wave_t       ho_lcw,
  input  exen_t       ho_last_exen,
  output logic        commit_valid,
  output wave_t       commit_wave,
  output exen_t       last_exen,
  output wave_t       last_committed_wave,
  output sb_stats_t   stats
);

  typedef enum logic [3:0] {
    S_IDLE, S_PURGE, S_LD, S_ST_RD, S_ST_WR, S_RB_WALK, S_RB_WR, S_RB_FIN, S_RESEND
  } state_e;

  state_e state;

  // ---------------------------------------------------------------- wave table
  wave_t             lcw;
  exen_t             lexen;
  logic              w_fin [NWAVES], w_started [NWAVES];
  ann_t              w_lc  [NWAVES], w_ls [NWAVES];
  exen_t             w_exen[NWAVES];
  logic              wt_upd, wt_commit, wt_rb, wt_ho;
  logic [SLOT_W-1:0] wt_upd_slot, rb_off;
  ann_t              wt_upd_c, wt_upd_s;
  logic [SLOT_W-1:0] ns_slot;

  wave_table #(.NWAVES(NWAVES)) u_wt (
    .clk, .rst_n,
    .upd_i(wt_upd), .upd_slot(wt_upd_slot), .upd_c(wt_upd_c), .upd_s(wt_upd_s),
    .commit_i(wt_commit), .rb_i(wt_rb), .rb_off(rb_off),
    .ho_i(wt_ho), .ho_lcw(ho_lcw), .ho_last_exen(ho_last_exen),
    .lcw_o(lcw), .last_exen_o(lexen),
    .fin_o(w_fin), .started_o(w_started), .last_c_o(w_lc), .last_s_o(w_ls), .exen_o(w_exen)
  );

  assign ns_slot = SLOT_W'(lcw + 1'b1);

  // ---------------------------------------------------------------- MOH
  addr_t             s_addr;
  wave_t             s_off;
  logic              any_hit, any_store, st_hit, moh_free;
  logic [MIDX_W-1:0] any_idx, moh_fidx, moh_rd_idx;
  wave_t             any_wave;
  data_t             any_backup, st_backup;
  logic              moh_alloc, moh_setbk, moh_rel;
  wave_t             a_wave;
  ann_t              a_cur;
  logic              a_store;
  addr_t             a_addr;
  data_t             a_backup, setbk_val;
  logic [MIDX_W-1:0] setbk_idx;
  logic              rd_store;
  addr_t             rd_addr;
  data_t             rd_backup;
  logic [MIDX_W:0]   moh_count;

  moh #(.DEPTH(MOH_DEPTH)) u_moh (
    .clk, .rst_n, .lcw(lcw),
    .s_addr, .s_off, .any_hit, .any_idx, .any_store, .any_wave, .any_backup,
    .st_hit, .st_backup,
    .has_free(moh_free), .free_idx(moh_fidx),
    .alloc_i(moh_alloc), .a_wave, .a_cur, .a_store, .a_addr, .a_backup,
    .setbk_i(moh_setbk), .setbk_idx, .setbk_val,
    .free_i(moh_rel), .free_idx_i(moh_rd_idx),
    .rd_idx(moh_rd_idx), .rd_store, .rd_addr, .rd_backup, .count_o(moh_count)
  );

  // ---------------------------------------------------------------- catalog
  logic              cat_pop;
  logic [SLOT_W-1:0] cat_q;
  logic              cat_hvld;
  logic              cat_any [NWAVES];

  search_catalog #(.NWAVES(NWAVES), .MOH_DEPTH(MOH_DEPTH)) u_cat (
    .clk, .rst_n,
    .ins_i(moh_alloc), .ins_slot(a_wave[SLOT_W-1:0]), .ins_idx(moh_fidx),
    .pop_i(cat_pop), .pop_slot(cat_q), .clr_i(wt_ho),
    .q_slot(cat_q), .hvld_o(cat_hvld), .head_o(moh_rd_idx), .any_o(cat_any)
  );

  // ---------------------------------------------------------------- WCT
  logic              wct_ins, wct_ins_rdy, wct_clr, wct_clr_above;
  logic [SLOT_W-1:0] wct_rd_slot;
  logic [LINE_W:0]   rs_idx;
  operand_t          wct_rd_op, wct_ins_op;
  logic [LINE_W:0]   wct_cnt;

  wct #(.NWAVES(NWAVES), .DEPTH(WCT_DEPTH)) u_wct (
    .clk, .rst_n,
    .ins_i(wct_ins), .ins_slot(wa_op.wave[SLOT_W-1:0]), .ins_op(wct_ins_op),
    .ins_ready(wct_ins_rdy),
    .clr_i(wct_clr), .clr_slot(ns_slot),
    .clr_above_i(wct_clr_above), .ns_slot(ns_slot), .clr_off(rb_off),
    .rd_slot(wct_rd_slot), .rd_idx(rs_idx[LINE_W-1:0]), .rd_op(wct_rd_op), .cnt_o(wct_cnt)
  );

  // ---------------------------------------------------------------- requests
  logic              rb_push, rb_take, rb_purge, sel_valid, win_block, res_block;
  mem_req_t          push_req, sel_req;
  logic [RIDX_W:0]   rb_free;
  logic [15:0]       stale_cnt;

  req_buffer #(.DEPTH(REQ_DEPTH), .NWAVES(NWAVES), .SPEC_WINDOW(SPEC_WINDOW)) u_rb (
    .clk, .rst_n, .push_i(rb_push), .push_req(push_req), .lcw(lcw),
    .started(w_started), .last_c(w_lc), .last_s(w_ls), .wexen(w_exen),
    .spec_ok(moh_free), .sel_valid, .sel_req, .take_i(rb_take),
    .purge_i(rb_purge), .purge_off(rb_off), .free_o(rb_free), .drop_cnt_o(stale_cnt),
    .win_block_o(win_block), .res_block_o(res_block)
  );

  // input ports: round-robin, one request per cycle
  logic [PW-1:0] rr_ptr, grant_idx;
  logic grant_any;
  logic in_open;   // request intake open (closed during a rollback)

  always_comb begin
    grant_any = 1'b0;
    grant_idx = '0;
    for (int k = 0; k < NPORTS; k++) begin
      logic [PW-1:0] p;
      p = PW'((int'(rr_ptr) + k) % NPORTS);
      if (!grant_any && req_valid[p] &&
          (rb_free > (RIDX_W+1)'(1) ||
           (rb_free == (RIDX_W+1)'(1) && req[p].wave == lcw + 1'b1))) begin
        grant_any = 1'b1;
        grant_idx = PW'(p);
      end
    end
    grant_any = grant_any && in_open;
    for (int k = 0; k < NPORTS; k++) req_ready[k] = grant_any && grant_idx == PW'(k);
  end

  assign rb_push  = grant_any;
  assign push_req = req[grant_idx];

  // ---------------------------------------------------------------- controller
  mem_req_t          cur;          // request being executed
  logic              held;         // cur waits for the end of a rollback
  wave_t             cur_off;
  logic              mem_issued, got;
  data_t             ldata, bk;
  logic [SLOT_W-1:0] rb_o;         // rollback walk offset
  logic              rsp_free, rs_free;

  // the request considered this cycle in S_IDLE: a held one or the buffer's pick
  mem_req_t          ireq;
  logic              ivalid;
  wave_t             ioff;
  logic              ispec;

  assign rsp_free = !rsp_valid || rsp_ready;
  assign rs_free  = !rs_valid || rs_ready;
  assign ireq     = held ? cur : sel_req;
  assign ivalid   = held || sel_valid;
  assign ioff     = ireq.wave - lcw - 1'b1;
  assign ispec    = ioff != '0;

  // MOH search key: the request under decision, or cur while it executes
  assign s_addr = (state == S_IDLE) ? ireq.addr : cur.addr;
  assign s_off  = (state == S_IDLE) ? ioff : cur_off;

  // Wave-Advance copies
  wave_t wa_off;
  logic  wa_stale, wa_keep, wa_drop;
  assign wa_off   = wa_op.wave - lcw - 1'b1;
  assign wa_stale = wa_op.exen < w_exen[wa_op.wave[SLOT_W-1:0]];
  // non-speculative wave or a committed one: no context is kept
  assign wa_drop  = wa_off == '0 || wa_off[WAVE_W-1];
  assign wa_keep  = !wa_drop && wa_off < wave_t'(NWAVES);
  always_comb begin
    wct_ins_op      = wa_op;
    wct_ins_op.exen = wa_stale ? w_exen[wa_op.wave[SLOT_W-1:0]] : wa_op.exen;
  end
  assign wa_ready = in_open && state != S_RESEND &&
                    (wa_drop || (wa_keep && wct_ins_rdy && (!wa_stale || rs_free)));
  assign wct_ins  = wa_valid && wa_ready && wa_keep;

  assign in_open = !(state inside {S_RB_WALK, S_RB_WR, S_RB_FIN, S_RESEND});

  // combinational control
  logic idle_go;   // S_IDLE executes ireq this cycle
  always_comb begin
    wt_upd        = 1'b0;
    wt_upd_slot   = ireq.wave[SLOT_W-1:0];
    wt_upd_c      = ireq.c;
    wt_upd_s      = ireq.s;
    wt_commit     = 1'b0;
    wt_rb         = 1'b0;
    wt_ho         = 1'b0;
    moh_alloc     = 1'b0;
    a_wave        = ireq.wave;
    a_cur         = ireq.c;
    a_store       = ireq.op == OP_STORE;
    a_addr        = ireq.addr;
    a_backup      = st_backup;
    moh_setbk     = 1'b0;
    setbk_idx     = any_idx;
    setbk_val     = ireq.data;
    moh_rel       = 1'b0;
    cat_pop       = 1'b0;
    cat_q         = ns_slot;
    wct_clr       = 1'b0;
    wct_clr_above = 1'b0;
    wct_rd_slot   = SLOT_W'(ns_slot + rb_off);
    rb_take       = 1'b0;
    rb_purge      = 1'b0;
    idle_go       = 1'b0;
    mem_req_valid = 1'b0;
    mem_we        = 1'b0;
    mem_addr      = cur.addr;
    mem_wdata     = cur.data;

    unique case (state)
      S_IDLE: begin
        if (ho_valid) begin
          wt_ho = 1'b1;
        end else if (cat_any[ns_slot]) begin
          // handled by the S_PURGE walk
        end else if (w_fin[ns_slot]) begin
          wt_commit = 1'b1;
          wct_clr   = 1'b1;
        end else if (ivalid && !(ispec && !moh_free)) begin
          unique case (ireq.op)
            OP_NOP: begin
              idle_go = 1'b1;
              wt_upd  = 1'b1;
            end
            OP_LOAD: begin
              if (!st_hit) idle_go = 1'b1;                 // to S_LD
              else if (rsp_free) begin                      // WAR
                idle_go   = 1'b1;
                wt_upd    = 1'b1;
                moh_alloc = ispec;
              end
            end
            default: begin                                  // OP_STORE
              idle_go = 1'b1;
              if (any_hit && any_store) begin               // WAW
                wt_upd    = 1'b1;
                moh_setbk = 1'b1;
                moh_alloc = ispec;
                a_backup  = any_backup;
              end
            end
          endcase
          rb_take = idle_go && !held;
        end
      end
      S_PURGE: begin
        cat_pop = cat_hvld;
        moh_rel = cat_hvld;
      end
      S_LD: begin
        mem_req_valid = !mem_issued;
        if (got && rsp_free) begin
          wt_upd      = 1'b1;
          wt_upd_slot = cur.wave[SLOT_W-1:0];
          wt_upd_c    = cur.c;
          wt_upd_s    = cur.s;
          moh_alloc   = cur_off != '0;
          a_wave      = cur.wave;
          a_cur       = cur.c;
          a_store     = 1'b0;
          a_addr      = cur.addr;
          a_backup    = ldata;
        end
      end
      S_ST_RD: begin
        mem_req_valid = !mem_issued;
      end
      S_ST_WR: begin
        mem_req_valid = 1'b1;
        mem_we        = 1'b1;
        if (mem_req_ready) begin
          wt_upd      = 1'b1;
          wt_upd_slot = cur.wave[SLOT_W-1:0];
          wt_upd_c    = cur.c;
          wt_upd_s    = cur.s;
          moh_alloc   = cur_off != '0;
          a_wave      = cur.wave;
          a_cur       = cur.c;
          a_store     = 1'b1;
          a_addr      = cur.addr;
          a_backup    = bk;
        end
      end
      S_RB_WALK: begin
        cat_q = SLOT_W'(ns_slot + rb_o);
        if (cat_hvld && !rd_store) begin
          cat_pop = 1'b1;
          moh_rel = 1'b1;
        end
      end
      S_RB_WR: begin
        cat_q         = SLOT_W'(ns_slot + rb_o);
        mem_req_valid = 1'b1;
        mem_we        = 1'b1;
        mem_addr      = rd_addr;
        mem_wdata     = rd_backup;
        cat_pop       = mem_req_ready;
        moh_rel       = mem_req_ready;
      end
      S_RB_FIN: begin
        wt_rb         = 1'b1;
        rb_purge      = 1'b1;
        wct_clr_above = 1'b1;
      end
      S_RESEND: ;
      default: ;
    endcase
  end

  logic rs_from_wa;
  assign rs_from_wa = wct_ins && wa_stale;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cur          <= '0;
      cur_off      <= '0;
      held         <= 1'b0;
      mem_issued   <= 1'b0;
      got          <= 1'b0;
      ldata        <= '0;
      bk           <= '0;
      rb_off       <= '0;
      rb_o         <= '0;
      rs_idx       <= '0;
      rsp_valid    <= 1'b0;
      rsp_op       <= '0;
      rs_valid     <= 1'b0;
      rs_op        <= '0;
      rr_ptr       <= '0;
      commit_valid <= 1'b0;
      commit_wave  <= '0;
      stats        <= '0;
    end else begin
      commit_valid <= 1'b0;
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;
      if (rs_valid && rs_ready)   rs_valid  <= 1'b0;
      if (grant_any) rr_ptr <= PW'((int'(grant_idx) + 1) % NPORTS);
      stats.stale <= stale_cnt;
      if (moh_count > stats.moh_peak[MIDX_W:0]) stats.moh_peak <= 16'(moh_count);
      if (win_block) stats.win_wait <= stats.win_wait + 1'b1;
      if (res_block || (held && ispec && !moh_free && state == S_IDLE))
        stats.moh_full <= stats.moh_full + 1'b1;
      if (wa_valid && wa_keep && !wct_ins_rdy) stats.wct_full <= stats.wct_full + 1'b1;
      if (moh_alloc) stats.spec_ops <= stats.spec_ops + 1'b1;
      if (rs_from_wa) begin
        rs_valid     <= 1'b1;
        rs_op        <= wct_ins_op;
        stats.resent <= stats.resent + 1'b1;
      end

      unique case (state)
        S_IDLE: begin
          if (wt_commit) begin
            commit_valid  <= 1'b1;
            commit_wave   <= lcw + 1'b1;
            stats.commits <= stats.commits + 1'b1;
          end else if (!ho_valid && cat_any[ns_slot]) begin
            state <= S_PURGE;
          end else if (!ho_valid && ivalid && !(ispec && !moh_free)) begin
            if (idle_go) begin
              cur     <= ireq;
              cur_off <= ioff;
              held    <= 1'b0;
            end
            unique case (ireq.op)
              OP_NOP: ;
              OP_LOAD: begin
                if (!st_hit) begin
                  state      <= S_LD;
                  mem_issued <= 1'b0;
                  got        <= 1'b0;
                end else if (rsp_free) begin
                  rsp_valid <= 1'b1;
                  rsp_op    <= '{dest: ireq.dest, wave: ireq.wave, exen: ireq.exen,
                                 data: st_backup};
                  stats.war <= stats.war + 1'b1;
                end
              end
              default: begin
                if (any_hit && !any_store) begin           // RAW: roll back
                  held      <= 1'b1;
                  rb_off    <= SLOT_W'(any_wave - lcw - 1'b1);
                  rb_o      <= SLOT_W'(NWAVES - 1);
                  state     <= S_RB_WALK;
                  stats.raw <= stats.raw + 1'b1;
                end else if (any_hit) begin
                  stats.waw <= stats.waw + 1'b1;
                end else begin
                  state      <= ispec ? S_ST_RD : S_ST_WR;
                  mem_issued <= 1'b0;
                end
              end
            endcase
          end
        end
        S_PURGE: if (!cat_hvld) state <= S_IDLE;
        S_LD: begin
          if (mem_req_valid && mem_req_ready) mem_issued <= 1'b1;
          if (mem_issued && mem_rsp_valid) begin
            got   <= 1'b1;
            ldata <= mem_rdata;
          end
          if (got && rsp_free) begin
            rsp_valid <= 1'b1;
            rsp_op    <= '{dest: cur.dest, wave: cur.wave, exen: cur.exen, data: ldata};
            state     <= S_IDLE;
          end
        end
        S_ST_RD: begin
          if (mem_req_valid && mem_req_ready) mem_issued <= 1'b1;
          if (mem_issued && mem_rsp_valid) begin
            bk    <= mem_rdata;
            state <= S_ST_WR;
          end
        end
        S_ST_WR: if (mem_req_ready) state <= S_IDLE;
        S_RB_WALK: begin
          if (cat_hvld && rd_store) state <= S_RB_WR;
          else if (!cat_hvld) begin
            if (rb_o == rb_off) state <= S_RB_FIN;
            else                rb_o  <= rb_o - 1'b1;
          end
        end
        S_RB_WR: if (mem_req_ready) begin
          state          <= S_RB_WALK;
          stats.restores <= stats.restores + 1'b1;
        end
        S_RB_FIN: begin
          state           <= S_RESEND;
          rs_idx          <= '0;
          stats.rollbacks <= stats.rollbacks + 1'b1;
        end
        S_RESEND: begin
          if (rs_idx >= wct_cnt) begin
            state <= S_IDLE;
          end else if (rs_free) begin
            rs_valid     <= 1'b1;
            rs_op        <= wct_rd_op;
            rs_op.exen   <= lexen;
            rs_idx       <= rs_idx + 1'b1;
            stats.resent <= stats.resent + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign last_exen           = lexen;
  assign last_committed_wave = lcw;

  // ---------------------------------------------------------------- checks
  // A speculative operation is logged only when the MOH has room.
  a_moh_room: assert property (@(posedge clk) disable iff (!rst_n) moh_alloc |-> moh_free)
    else $error("MOH allocation with no free entry");
  // Result streams hold their word until it is taken.
  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp_op))
    else $error("rsp changed while stalled");
  a_rs_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              rs_valid && !rs_ready |=> rs_valid && $stable(rs_op))
    else $error("rs changed while stalled");
  // A memory request is held until accepted.
  a_mem_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               mem_req_valid && !mem_req_ready |=> mem_req_valid)
    else $error("memory request withdrawn");

endmodule
