// wct -- Wave-Context-Tables of a Transactional StoreBuffer.
//
// A speculative wave's read set is the set of operands that entered it through
// Wave-Advance instructions; in the Transactional WaveCache each Wave-Advance
// also sends a copy of its operand to the StoreBuffer. The StoreBuffer keeps one
// WCT per wave slot, each line holding one such operand, and re-sends the whole
// table when the wave is rolled back. When a wave's table is full the copy is
// refused (ins_ready low) and the Wave-Advance stays blocked in the PE's output
// buffer, as the paper describes. DEPTH lines per table is this design's
// choice: the paper's simulator did not limit the structure.
//
// Operations (registered): ins_i appends an operand to slot ins_slot;
// clr_i empties slot clr_slot; clr_above_i empties every slot whose offset from
// the non-speculative slot ns_slot is greater than clr_off (rollback step 3).
// rd_slot/rd_idx read one line combinationally; cnt_o gives that slot's count.
module wct
  import twc_pkg::*;
#(
  parameter int NWAVES = 32,
  parameter int DEPTH  = 8,
  localparam int SLOT_W = $clog2(NWAVES),
  localparam int LINE_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ins_i,
  input  logic [SLOT_W-1:0] ins_slot,
  input  operand_t          ins_op,
  output logic              ins_ready,
  input  logic              clr_i,
  input  logic [SLOT_W-1:0] clr_slot,
  input  logic              clr_above_i,
  input  logic [SLOT_W-1:0] ns_slot,
  input  logic [SLOT_W-1:0] clr_off,
  input  logic [SLOT_W-1:0] rd_slot,
  input  logic [LINE_W-1:0] rd_idx,
  output operand_t          rd_op,
  output logic [LINE_W:0]   cnt_o
);

  operand_t        line [NWAVES][DEPTH];
  logic [LINE_W:0] cnt  [NWAVES];

  assign ins_ready = cnt[ins_slot] < (LINE_W+1)'(DEPTH);
  assign rd_op     = line[rd_slot][rd_idx];
  assign cnt_o     = cnt[rd_slot];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NWAVES; i++) cnt[i] <= '0;
    end else begin
      if (ins_i && ins_ready) cnt[ins_slot] <= cnt[ins_slot] + 1'b1;
      if (clr_i) cnt[clr_slot] <= '0;
      if (clr_above_i)
        for (int i = 0; i < NWAVES; i++)
          if (SLOT_W'(SLOT_W'(i) - ns_slot) > clr_off) cnt[i] <= '0;
    end
  end

  // Table lines need no reset: a line is read only below its slot's count.
  always_ff @(posedge clk)
    if (ins_i && ins_ready) line[ins_slot][LINE_W'(cnt[ins_slot])] <= ins_op;

endmodule
