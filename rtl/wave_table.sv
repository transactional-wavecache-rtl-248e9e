// wave_table -- per-wave transactional state of one StoreBuffer.
//
// Holds, for a window of NWAVES consecutive waves starting at the
// non-speculative wave lastCommittedWave+1, the state the Transactional
// WaveCache keeps per wave: the F bit (all memory operations of the wave have
// executed), currentExeN (the execution number a request must carry to be
// accepted) and the position of the wave's memory chain (whether any request
// executed yet and the C and S fields of the last one). It also holds the two
// StoreBuffer registers lastCommittedWave and lastExeN.
//
// Wave w lives in slot w mod NWAVES; a slot's offset is its distance from the
// non-speculative wave. Following the paper, lastCommittedWave resets to -1 so
// that wave 0 is the first non-speculative wave, and F resets to FALSE.
//
// Operations, one per cycle, chosen by the StoreBuffer controller:
//   upd_i     a request of slot upd_slot executed: chain position <- C,S, and
//             F is set when S is "." (last operation of the wave)
//   commit_i  the non-speculative wave committed: lastCommittedWave+1, its slot
//             is recycled for the wave NWAVES later, which inherits the
//             currentExeN of the youngest wave (a rollback at wave X sets all
//             waves >= X, including those not yet seen)
//   rb_i      rollback at offset rb_off: lastExeN+1 and every wave at that
//             offset or beyond gets currentExeN = new lastExeN, F = FALSE and an
//             empty chain, so it executes again
//   ho_i      hand-off from another StoreBuffer: load lastCommittedWave and
//             lastExeN and clear all waves (the wave map custody protocol
//             itself is not part of this design)
// All state changes on the rising clock edge; the outputs are registers.
module wave_table
  import twc_pkg::*;
#(
  parameter int NWAVES = 32,
  localparam int SLOT_W = $clog2(NWAVES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              upd_i,
  input  logic [SLOT_W-1:0] upd_slot,
  input  ann_t              upd_c,
  input  ann_t              upd_s,
  input  logic              commit_i,
  input  logic              rb_i,
  input  logic [SLOT_W-1:0] rb_off,
  input  logic              ho_i,
  input  wave_t             ho_lcw,
  input  exen_t             ho_last_exen,
  output wave_t             lcw_o,
  output exen_t             last_exen_o,
  output logic              fin_o     [NWAVES],
  output logic              started_o [NWAVES],
  output ann_t              last_c_o  [NWAVES],
  output ann_t              last_s_o  [NWAVES],
  output exen_t             exen_o    [NWAVES]
);

  wave_t lcw;
  exen_t last_exen;
  logic [SLOT_W-1:0] ns_slot, young_slot;

  assign ns_slot    = SLOT_W'(lcw + 1'b1);
  assign young_slot = SLOT_W'(lcw);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lcw       <= '1;   // lastCommittedWave = -1
      last_exen <= '0;
      for (int i = 0; i < NWAVES; i++) begin
        fin_o[i]     <= 1'b0;
        started_o[i] <= 1'b0;
        last_c_o[i]  <= '0;
        last_s_o[i]  <= '0;
        exen_o[i]    <= '0;
      end
    end else if (ho_i) begin
      lcw       <= ho_lcw;
      last_exen <= ho_last_exen;
      for (int i = 0; i < NWAVES; i++) begin
        fin_o[i]     <= 1'b0;
        started_o[i] <= 1'b0;
        exen_o[i]    <= ho_last_exen;
      end
    end else if (rb_i) begin
      last_exen <= last_exen + 1'b1;
      for (int i = 0; i < NWAVES; i++) begin
        if (SLOT_W'(SLOT_W'(i) - ns_slot) >= rb_off) begin
          fin_o[i]     <= 1'b0;
          started_o[i] <= 1'b0;
          exen_o[i]    <= last_exen + 1'b1;
        end
      end
    end else if (commit_i) begin
      lcw                <= lcw + 1'b1;
      fin_o[ns_slot]     <= 1'b0;
      started_o[ns_slot] <= 1'b0;
      exen_o[ns_slot]    <= exen_o[young_slot];
    end else if (upd_i) begin
      started_o[upd_slot] <= 1'b1;
      last_c_o[upd_slot]  <= upd_c;
      last_s_o[upd_slot]  <= upd_s;
      if (upd_s == ANN_NONE) fin_o[upd_slot] <= 1'b1;
    end
  end

  assign lcw_o       = lcw;
  assign last_exen_o = last_exen;

endmodule
