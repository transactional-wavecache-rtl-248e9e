// req_buffer -- the StoreBuffer's pool of waiting memory requests.
//
// The paper's StoreBuffer "inserts the request in a list for that wave" and
// executes it once the chain from the previously executed operation of the wave
// is established. Here the per-wave lists share one pool of DEPTH entries, each
// tagged with its wave; this is this design's choice. Every cycle the buffer
// offers the ready request of the oldest wave (lowest index among equals). A
// request is ready when
//   - its wave lies inside the wave table (offset < NWAVES) and inside the
//     Speculation Window (offset <= SPEC_WINDOW, offset 0 being the
//     non-speculative wave),
//   - it is non-speculative, or spec_ok is set (the controller clears it while
//     the MemOp-History is full, so speculative waves stall for resources),
//   - chain_ready() holds against the wave's last executed request.
// Requests of an old execution (ExeN below the wave's currentExeN) and requests
// of waves already committed are dropped as soon as they are seen. purge_i
// removes every request of the waves at offset purge_off and beyond (rollback
// step 4).
//
// Timing: sel_* is combinational from the registered pool; take_i removes the
// offered entry at the clock edge; push_i writes into the lowest free entry
// (the controller pushes only when free_o > 0).
module req_buffer
  import twc_pkg::*;
#(
  parameter int DEPTH       = 16,
  parameter int NWAVES      = 32,
  parameter int SPEC_WINDOW = 30,
  localparam int SLOT_W = $clog2(NWAVES),
  localparam int IDX_W  = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              push_i,
  input  mem_req_t          push_req,
  input  wave_t             lcw,
  input  logic              started [NWAVES],
  input  ann_t              last_c  [NWAVES],
  input  ann_t              last_s  [NWAVES],
  input  exen_t             wexen   [NWAVES],
  input  logic              spec_ok,
  output logic              sel_valid,
  output mem_req_t          sel_req,
  input  logic              take_i,
  input  logic              purge_i,
  input  logic [SLOT_W-1:0] purge_off,
  output logic [IDX_W:0]    free_o,
  output logic [15:0]       drop_cnt_o,
  output logic              win_block_o,  // a chain-ready request waits outside the window
  output logic              res_block_o   // a chain-ready request waits for spec_ok
);

  logic     vld [DEPTH];
  mem_req_t req [DEPTH];

  wave_t             off   [DEPTH];
  logic              stale [DEPTH];
  logic              rdy   [DEPTH];
  logic              chn   [DEPTH];
  logic [IDX_W-1:0]  sel_idx, free_idx;
  logic              has_free;
  logic [IDX_W:0]    ndrop;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      logic [SLOT_W-1:0] sl;
      off[i]   = req[i].wave - lcw - 1'b1;
      sl       = req[i].wave[SLOT_W-1:0];
      stale[i] = vld[i] && (off[i][WAVE_W-1] ||
                 (off[i] < wave_t'(NWAVES) && req[i].exen < wexen[sl]));
      chn[i]   = vld[i] && !stale[i] && off[i] < wave_t'(NWAVES) &&
                 chain_ready(started[sl], last_c[sl], last_s[sl], req[i].p, req[i].c);
      rdy[i]   = chn[i] && off[i] <= wave_t'(SPEC_WINDOW) && (off[i] == '0 || spec_ok);
    end
  end

  always_comb begin
    wave_t best;
    sel_valid = 1'b0;
    sel_idx   = '0;
    best      = '1;
    for (int i = 0; i < DEPTH; i++) begin
      if (rdy[i] && (!sel_valid || off[i] < best)) begin
        sel_valid = 1'b1;
        sel_idx   = IDX_W'(i);
        best      = off[i];
      end
    end
    sel_req = req[sel_idx];
  end

  always_comb begin
    win_block_o = 1'b0;
    res_block_o = 1'b0;
    for (int i = 0; i < DEPTH; i++) begin
      if (chn[i] && off[i] > wave_t'(SPEC_WINDOW)) win_block_o = 1'b1;
      if (chn[i] && off[i] <= wave_t'(SPEC_WINDOW) && off[i] != '0 && !spec_ok)
        res_block_o = 1'b1;
    end
  end

  always_comb begin
    has_free = 1'b0;
    free_idx = '0;
    free_o   = '0;
    ndrop    = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!vld[i]) begin
        has_free = 1'b1;
        free_idx = IDX_W'(i);
        free_o   = free_o + 1'b1;
      end
      if (stale[i]) ndrop = ndrop + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        vld[i] <= 1'b0;
        req[i] <= '0;
      end
      drop_cnt_o <= '0;
    end else begin
      drop_cnt_o <= drop_cnt_o + 16'(ndrop);
      for (int i = 0; i < DEPTH; i++) begin
        if (stale[i]) vld[i] <= 1'b0;
        if (purge_i && off[i] >= wave_t'(purge_off)) vld[i] <= 1'b0;
      end
      if (take_i && sel_valid) vld[sel_idx] <= 1'b0;
      if (push_i && has_free) begin
        vld[free_idx] <= 1'b1;
        req[free_idx] <= push_req;
      end
    end
  end

endmodule
