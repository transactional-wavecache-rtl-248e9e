// moh -- MemOp-History of a Transactional StoreBuffer.
//
// The MOH is the memory log of the speculative waves. As in the paper each
// entry stores the wave number, the Current field of the operation's
// annotation, whether it is a Load or a Store, and the data backup of a Store
// (the value memory held before the store). This design also stores the address
// (needed to find hazards). The RAW rule's option of copying B's backup from
// A's value field is not used (the StoreBuffer re-reads memory after the
// rollback instead), so no value field is kept.
//
// Hazard search (combinational): given the address and wave offset of the
// operation B that is executing, find among the entries of later waves
// (offset > B's) to the same address
//   any_*  the closest one, ordered by (wave, Current) -- program order,
//          assuming Current numbers grow along a wave's chain as in Figure 1;
//          a Load here means RAW when B is a Store, a Store means WAW;
//   st_*   the closest Store -- its backup is what B, a Load, must read (WAR).
// Offsets are taken relative to the non-speculative wave lcw+1 so that wave
// numbers may wrap.
//
// Writes (registered, one of each per cycle): alloc_i fills the lowest free
// entry (free_idx), setbk_i overwrites one entry's backup (WAW rule), free_i
// releases an entry. rd_idx reads one entry for commit and rollback walks.
module moh
  import twc_pkg::*;
#(
  parameter int DEPTH = 64,
  localparam int IDX_W = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  wave_t            lcw,
  // search
  input  addr_t            s_addr,
  input  wave_t            s_off,
  output logic             any_hit,
  output logic [IDX_W-1:0] any_idx,
  output logic             any_store,
  output wave_t            any_wave,
  output data_t            any_backup,
  output logic             st_hit,
  output data_t            st_backup,
  // allocate
  output logic             has_free,
  output logic [IDX_W-1:0] free_idx,
  input  logic             alloc_i,
  input  wave_t            a_wave,
  input  ann_t             a_cur,
  input  logic             a_store,
  input  addr_t            a_addr,
  input  data_t            a_backup,
  // backup update and release
  input  logic             setbk_i,
  input  logic [IDX_W-1:0] setbk_idx,
  input  data_t            setbk_val,
  input  logic             free_i,
  input  logic [IDX_W-1:0] free_idx_i,
  // read
  input  logic [IDX_W-1:0] rd_idx,
  output logic             rd_store,
  output addr_t            rd_addr,
  output data_t            rd_backup,
  output logic [IDX_W:0]   count_o
);

  logic  vld    [DEPTH];
  wave_t wave   [DEPTH];
  ann_t  cur    [DEPTH];
  logic  store  [DEPTH];
  addr_t addr   [DEPTH];
  data_t backup [DEPTH];

  always_comb begin
    logic [WAVE_W+ANN_W-1:0] best_any, best_st, key;
    logic [IDX_W-1:0] st_idx;
    wave_t o;
    any_hit  = 1'b0;
    any_idx  = '0;
    st_hit   = 1'b0;
    st_idx   = '0;
    best_any = '1;
    best_st  = '1;
    for (int i = 0; i < DEPTH; i++) begin
      o   = wave[i] - lcw - 1'b1;
      key = {o, cur[i]};
      if (vld[i] && addr[i] == s_addr && o > s_off) begin
        if (!any_hit || key < best_any) begin
          any_hit  = 1'b1;
          any_idx  = IDX_W'(i);
          best_any = key;
        end
        if (store[i] && (!st_hit || key < best_st)) begin
          st_hit  = 1'b1;
          st_idx  = IDX_W'(i);
          best_st = key;
        end
      end
    end
    any_store  = store[any_idx];
    any_wave   = wave[any_idx];
    any_backup = backup[any_idx];
    st_backup  = backup[st_idx];
  end

  always_comb begin
    has_free = 1'b0;
    free_idx = '0;
    count_o  = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!vld[i]) begin
        has_free = 1'b1;
        free_idx = IDX_W'(i);
      end else begin
        count_o = count_o + 1'b1;
      end
    end
  end

  assign rd_store  = store[rd_idx];
  assign rd_addr   = addr[rd_idx];
  assign rd_backup = backup[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        vld[i]    <= 1'b0;
        wave[i]   <= '0;
        cur[i]    <= '0;
        store[i]  <= 1'b0;
        addr[i]   <= '0;
        backup[i] <= '0;
      end
    end else begin
      if (free_i) vld[free_idx_i] <= 1'b0;
      if (setbk_i) backup[setbk_idx] <= setbk_val;
      if (alloc_i && has_free) begin
        vld[free_idx]    <= 1'b1;
        wave[free_idx]   <= a_wave;
        cur[free_idx]    <= a_cur;
        store[free_idx]  <= a_store;
        addr[free_idx]   <= a_addr;
        backup[free_idx] <= a_backup;
      end
    end
  end

endmodule
