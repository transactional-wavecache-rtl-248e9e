// twc_top -- a Transactional StoreBuffer with the operand front end of a PE.
//
// This is the part of a Transactional WaveCache cluster that the
// transactional mechanism changes: the StoreBuffer (ordering, speculation,
// hazard detection, commit and rollback) and, on the PE side, the Execution
// Map and the matching table with MT Checkups, which remove operands of old
// executions. The rest of the cluster -- the PEs' ALUs and instruction
// buffers, pods, domains, the cluster switch and the L1/L2 caches -- belongs to
// the baseline WaveCache and is outside this design; its connections are ports.
//
// Operands that reach a PE come from three sources: operands re-sent by the
// StoreBuffer after a rollback (highest priority), load results from the
// StoreBuffer, and operands from the operand network (pe_in_*). An operand
// whose destination is this PE (PE_ID) passes the Execution Map -- operands of
// an old execution are dropped there -- and enters the matching table, which
// fires instruction instances on fire_*. Operands for other PEs leave on
// net_out_*, where the operand network would carry them.
//
// Timing: the operand path is combinational from source to the matching
// table's input; the matching table's fire output is registered.
module twc_top
  import twc_pkg::*;
#(
  parameter int NPORTS      = 4,
  parameter int NWAVES      = 32,
  parameter int SPEC_WINDOW = 30,
  parameter int REQ_DEPTH   = 16,
  parameter int MOH_DEPTH   = 64,
  parameter int WCT_DEPTH   = 8,
  parameter int EM_DEPTH    = 8,
  parameter int MT_DEPTH    = 16,
  parameter logic [PE_W-1:0] PE_ID = '0,
  localparam int NINST = 1 << INST_W
) (
  input  logic        clk,
  input  logic        rst_n,
  // memory requests and Wave-Advance copies from the PEs
  input  logic        req_valid [NPORTS],
  output logic        req_ready [NPORTS],
  input  mem_req_t    req       [NPORTS],
  input  logic        wa_valid,
  output logic        wa_ready,
  input  operand_t    wa_op,
  // data memory (L1 cache) port
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_we,
  output addr_t       mem_addr,
  output data_t       mem_wdata,
  input  logic        mem_rsp_valid,
  input  data_t       mem_rdata,
  // custody hand-off
  input  logic        ho_valid,
  input  wave_t       ho_lcw,
  input  exen_t       ho_last_exen,
  output logic        commit_valid,
  output wave_t       commit_wave,
  output exen_t       last_exen,
  output wave_t       last_committed_wave,
  output sb_stats_t   stats,
  // operand network
  input  logic        pe_in_valid,
  output logic        pe_in_ready,
  input  operand_t    pe_in_op,
  output logic        net_out_valid,
  input  logic        net_out_ready,
  output operand_t    net_out_op,
  // PE instruction side
  input  logic [1:0]  arity [NINST],
  output logic        fire_valid,
  input  logic        fire_ready,
  output logic [INST_W-1:0] fire_inst,
  output wave_t       fire_wave,
  output exen_t       fire_exen,
  output data_t       fire_data [3],
  output logic [15:0] em_drop_cnt,
  output logic [15:0] mt_erased_cnt,
  output logic [15:0] mt_ignored_cnt
);

  logic     rsp_valid, rsp_ready, rs_valid, rs_ready;
  operand_t rsp_op, rs_op;

  twc_store_buffer #(
    .NPORTS(NPORTS), .NWAVES(NWAVES), .SPEC_WINDOW(SPEC_WINDOW),
    .REQ_DEPTH(REQ_DEPTH), .MOH_DEPTH(MOH_DEPTH), .WCT_DEPTH(WCT_DEPTH)
  ) u_sb (
    .clk, .rst_n,
    .req_valid, .req_ready, .req,
    .wa_valid, .wa_ready, .wa_op,
    .rsp_valid, .rsp_ready, .rsp_op,
    .rs_valid, .rs_ready, .rs_op,
    .mem_req_valid, .mem_req_ready, .mem_we, .mem_addr, .mem_wdata,
    .mem_rsp_valid, .mem_rdata,
    .ho_valid, .ho_lcw, .ho_last_exen,
    .commit_valid, .commit_wave, .last_exen, .last_committed_wave, .stats
  );

  // operand source selection: re-sent > load result > network
  logic     o_valid, o_ready, o_local, em_acc, mt_ready;
  operand_t o_op;

  always_comb begin
    o_valid = rs_valid || rsp_valid || pe_in_valid;
    o_op    = rs_valid ? rs_op : rsp_valid ? rsp_op : pe_in_op;
  end
  assign rs_ready    = o_ready;
  assign rsp_ready   = o_ready && !rs_valid;
  assign pe_in_ready = o_ready && !rs_valid && !rsp_valid;

  assign o_local       = o_op.dest.pe == PE_ID;
  assign net_out_valid = o_valid && !o_local;
  assign net_out_op    = o_op;
  // local operands: dropped by the Execution Map or taken by the matching table
  assign o_ready       = o_local ? (!em_acc || mt_ready) : net_out_ready;

  exec_map #(.DEPTH(EM_DEPTH)) u_em (
    .clk, .rst_n,
    .in_valid(o_valid && o_local && o_ready),
    .in_wave(o_op.wave), .in_exen(o_op.exen),
    .acc_o(em_acc)
  );

  matching_table #(.DEPTH(MT_DEPTH)) u_mt (
    .clk, .rst_n, .arity_i(arity),
    .in_valid(o_valid && o_local && em_acc), .in_ready(mt_ready), .in_op(o_op),
    .fire_valid, .fire_ready, .fire_inst, .fire_wave, .fire_exen, .fire_data,
    .erased_cnt_o(mt_erased_cnt), .ignored_cnt_o(mt_ignored_cnt)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) em_drop_cnt <= '0;
    else if (o_valid && o_local && !em_acc) em_drop_cnt <= em_drop_cnt + 1'b1;
  end

endmodule
