// exec_map -- Execution Map of a processing element.
//
// Each PE keeps a small table of <Wave, ExeN> pairs that tells which operands
// are still wanted: a pair <w, e> means that operands of wave w and later (up to
// the next pair) must carry ExeN >= e. With the pairs <0,0> and <5,1> waves 0..4
// accept any ExeN and waves >= 5 only ExeN >= 1 (the paper's example).
//
// For an arriving operand of wave w and execution e the governing pair is the
// valid pair with the largest wave <= w. The operand is accepted when there is
// no governing pair or e >= its ExeN; otherwise it belongs to an old execution
// and is dropped (acc_o low). An accepted operand with e above the governing
// ExeN shows that execution e began at or before wave w: every pair at wave >= w
// with ExeN <= e is removed and <w, e> is written in their place. This
// reproduces the paper's example, where <3,1> arriving replaces <5,1>. The
// update rule beyond that example, the table size and the behaviour when it is
// full (the new pair is then not recorded, so the map only filters less -- the
// paper notes the mechanism need not erase every old operand) are this
// design's choices. Wave numbers are compared without wrap-around.
//
// Timing: acc_o is combinational from in_*; the table updates at the clock edge
// when in_valid is high.
module exec_map
  import twc_pkg::*;
#(
  parameter int DEPTH = 8,
  localparam int IDX_W = $clog2(DEPTH)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  wave_t in_wave,
  input  exen_t in_exen,
  output logic  acc_o
);

  logic  vld  [DEPTH];
  wave_t pw   [DEPTH];
  exen_t pe   [DEPTH];

  logic  gov_hit;
  exen_t gov_exen;
  logic  kill [DEPTH];
  logic  ins_ok;
  logic [IDX_W-1:0] ins_idx;

  always_comb begin
    wave_t best;
    gov_hit  = 1'b0;
    gov_exen = '0;
    best     = '0;
    for (int i = 0; i < DEPTH; i++) begin
      if (vld[i] && pw[i] <= in_wave && (!gov_hit || pw[i] >= best)) begin
        gov_hit  = 1'b1;
        gov_exen = pe[i];
        best     = pw[i];
      end
    end
  end

  logic upd;
  assign acc_o = !gov_hit || in_exen >= gov_exen;
  assign upd   = in_valid && in_exen > gov_exen;

  always_comb begin
    ins_ok  = 1'b0;
    ins_idx = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      kill[i] = vld[i] && pw[i] >= in_wave && pe[i] <= in_exen;
      if (!vld[i] || kill[i]) begin
        ins_ok  = 1'b1;
        ins_idx = IDX_W'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        vld[i] <= 1'b0;
        pw[i]  <= '0;
        pe[i]  <= '0;
      end
    end else if (upd) begin
      for (int i = 0; i < DEPTH; i++) if (kill[i]) vld[i] <= 1'b0;
      if (ins_ok) begin
        vld[ins_idx] <= 1'b1;
        pw[ins_idx]  <= in_wave;
        pe[ins_idx]  <= in_exen;
      end
    end
  end

endmodule
