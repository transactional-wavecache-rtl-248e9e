// matching_table -- operand matching table of a PE, with MT Checkups.
//
// A dataflow instruction fires when all its input operands are present. The
// matching table holds the operands that have arrived for each instance
// (instruction slot, wave) until the last one comes, then emits the full set
// on the fire port and frees the entry. The Transactional WaveCache adds the
// execution number ExeN to the tag and to the firing rule, and the MT Checkup:
// when an operand arrives for an instance that already holds operands of a
// different ExeN, the older ones are erased and the newer operand kept; an
// arriving operand older than the stored ones is ignored; equal ExeN just
// joins the entry.
//
// The number of inputs of each of the 8 instruction slots comes from the PE's
// instruction buffer (arity_i, 1..3), which is outside this block. An
// instruction with one input fires at once. DEPTH entries is this design's
// choice (the paper's simulator used practically unbounded operand queues);
// the table refuses operands (in_ready low) when it is full and the operand
// would need a new entry, or while a fired set waits on fire_ready. Matching
// on thread and application is left out: the design runs one thread. Each
// (instruction, wave, ExeN, port) receives one operand; a second one
// overwrites the first.
//
// Timing: in_ready is combinational; the fire output is a register (one cycle
// after the completing operand).
module matching_table
  import twc_pkg::*;
#(
  parameter int DEPTH = 16,
  localparam int NINST = 1 << INST_W,
  localparam int IDX_W = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  arity_i [NINST],
  input  logic        in_valid,
  output logic        in_ready,
  input  operand_t    in_op,
  output logic        fire_valid,
  input  logic        fire_ready,
  output logic [INST_W-1:0] fire_inst,
  output wave_t       fire_wave,
  output exen_t       fire_exen,
  output data_t       fire_data [3],
  output logic [15:0] erased_cnt_o,
  output logic [15:0] ignored_cnt_o
);

  logic              vld  [DEPTH];
  logic [INST_W-1:0] inst [DEPTH];
  wave_t             wave [DEPTH];
  exen_t             exen [DEPTH];
  logic [2:0]        pres [DEPTH];
  data_t             dat  [DEPTH][3];

  logic             hit, has_free, out_free;
  logic [IDX_W-1:0] hidx, fidx, eidx;
  logic [2:0]       need, newp;
  logic [1:0]       port;

  assign port     = in_op.dest.port;
  assign out_free = !fire_valid || fire_ready;

  always_comb begin
    hit = 1'b0; hidx = '0; has_free = 1'b0; fidx = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (vld[i] && inst[i] == in_op.dest.inst && wave[i] == in_op.wave) begin
        hit = 1'b1; hidx = IDX_W'(i);
      end
      if (!vld[i]) begin
        has_free = 1'b1; fidx = IDX_W'(i);
      end
    end
    case (arity_i[in_op.dest.inst])
      2'd2:    need = 3'b011;
      2'd3:    need = 3'b111;
      default: need = 3'b001;
    endcase
    // operands present after this arrival, for the fire decision
    if (hit && in_op.exen == exen[hidx]) newp = pres[hidx] | (3'b001 << port);
    else                                 newp = 3'b001 << port;
    in_ready = out_free && (hit || has_free || newp == need);
    eidx     = hit ? hidx : fidx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        vld[i] <= 1'b0; inst[i] <= '0; wave[i] <= '0; exen[i] <= '0; pres[i] <= '0;
        for (int k = 0; k < 3; k++) dat[i][k] <= '0;
      end
      fire_valid    <= 1'b0;
      fire_inst     <= '0;
      fire_wave     <= '0;
      fire_exen     <= '0;
      for (int k = 0; k < 3; k++) fire_data[k] <= '0;
      erased_cnt_o  <= '0;
      ignored_cnt_o <= '0;
    end else begin
      if (fire_valid && fire_ready) fire_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (hit && in_op.exen < exen[hidx]) begin
          ignored_cnt_o <= ignored_cnt_o + 1'b1;           // older arrival: ignore
        end else begin
          if (hit && in_op.exen > exen[hidx]) erased_cnt_o <= erased_cnt_o + 1'b1;
          if (newp == need) begin                          // firing rule met
            vld[eidx]     <= 1'b0;
            fire_valid <= 1'b1;
            fire_inst  <= in_op.dest.inst;
            fire_wave  <= in_op.wave;
            fire_exen  <= in_op.exen;
            for (int k = 0; k < 3; k++)
              fire_data[k] <= (k == int'(port)) ? in_op.data
                            : (hit && in_op.exen == exen[hidx]) ? dat[hidx][k] : '0;
          end else begin
            vld[eidx]  <= 1'b1;
            inst[eidx] <= in_op.dest.inst;
            wave[eidx] <= in_op.wave;
            exen[eidx] <= in_op.exen;
            pres[eidx] <= newp;
            dat[eidx][port] <= in_op.data;
          end
        end
      end
    end
  end

endmodule
