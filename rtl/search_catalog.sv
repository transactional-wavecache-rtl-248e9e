// search_catalog -- per-wave lists of MemOp-History entries.
//
// The paper's Search Catalog points, for each wave, to the list of all MOH
// operations of that wave, so that a commit or a rollback touches only that
// wave's entries instead of scanning the whole MOH. Here each wave slot holds a
// head pointer and each MOH entry a next pointer (a singly linked list kept
// beside the MOH). New entries are pushed at the head, so a walk from the head
// visits a wave's operations newest first -- the order in which Store backups
// must be written back to undo the wave.
//
// Operations (registered, one per cycle, never both on the same slot):
//   ins_i  link MOH entry ins_idx at the head of slot ins_slot
//   pop_i  unlink the head of slot pop_slot (the caller has read head_o)
//   clr_i  empty every list (StoreBuffer hand-off)
// head_o/hvld_o give the head of slot q_slot and whether the list is non-empty.
module search_catalog
  import twc_pkg::*;
#(
  parameter int NWAVES    = 32,
  parameter int MOH_DEPTH = 64,
  localparam int SLOT_W = $clog2(NWAVES),
  localparam int IDX_W  = $clog2(MOH_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ins_i,
  input  logic [SLOT_W-1:0] ins_slot,
  input  logic [IDX_W-1:0]  ins_idx,
  input  logic              pop_i,
  input  logic [SLOT_W-1:0] pop_slot,
  input  logic              clr_i,
  input  logic [SLOT_W-1:0] q_slot,
  output logic              hvld_o,
  output logic [IDX_W-1:0]  head_o,
  output logic              any_o [NWAVES]
);

  logic             hvld [NWAVES];
  logic [IDX_W-1:0] head [NWAVES];
  logic             nvld [MOH_DEPTH];
  logic [IDX_W-1:0] nxt  [MOH_DEPTH];

  assign hvld_o = hvld[q_slot];
  assign head_o = head[q_slot];
  always_comb for (int i = 0; i < NWAVES; i++) any_o[i] = hvld[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NWAVES; i++) begin
        hvld[i] <= 1'b0;
        head[i] <= '0;
      end
      for (int i = 0; i < MOH_DEPTH; i++) begin
        nvld[i] <= 1'b0;
        nxt[i]  <= '0;
      end
    end else if (clr_i) begin
      for (int i = 0; i < NWAVES; i++) hvld[i] <= 1'b0;
    end else begin
      if (pop_i) begin
        hvld[pop_slot] <= nvld[head[pop_slot]];
        head[pop_slot] <= nxt[head[pop_slot]];
      end
      if (ins_i) begin
        nvld[ins_idx]  <= hvld[ins_slot];
        nxt[ins_idx]   <= head[ins_slot];
        hvld[ins_slot] <= 1'b1;
        head[ins_slot] <= ins_idx;
      end
    end
  end

endmodule
