// tb_twc_loops -- the evaluated kernels' hazard patterns on the assembled
// design, 500 iterations each, at the design's default sizes.
//
// The evaluated programs themselves (determinants and line sums of 500
// matrices, a vector kernel) are not available as dataflow code, so this
// testbench runs loops with the same memory-hazard structure, one wave per
// iteration, in the PE model of tb_twc_top (requests per port in chain order,
// Wave-Advance copies, a two-input instruction, restarts on re-sent operands
// with a newer ExeN, late operands and requests of old executions):
//   run 0, like VECTOR-FULL-DEP: over a 500-element vector, every 16th
//     iteration stores the element the next one loads (RAW), every iteration
//     stores a shared scalar and every 8th loads it (WAR, WAW);
//   run 1, like MATRIX-DEP: 500 independent iterations except that iteration
//     249 writes what iteration 250 reads (the one RAW the kernels allow).
// Each iteration has four memory operations: x = V[i]; store x + 7; load y;
// store i. A fixed compute latency per iteration (long for iterations 8, 249)
// lets younger waves overtake. Each run resets the design and the memory and
// ends by comparing memory and every y with sequential execution; no
// instance of an old execution may fire, all 500 waves must commit, and the
// hazards each pattern forces must have been seen. The hazard counts are
// printed like the evaluation's hazard table. The loops are this
// testbench's; the rules checked are the Transactional WaveCache's.
module tb_twc_loops;
  import twc_pkg::*;
  localparam int NW = 500;         // iterations (waves)
  localparam int T  = 3000;        // the shared scalar's address
  localparam int NP = 4;
  localparam int POOL = 512;
  localparam int DOT = 255;
  localparam int CLAT = 24;        // cycles the PEs take to compute x + 7

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid [NP], req_ready [NP];
  mem_req_t req [NP];
  logic wa_valid, wa_ready;
  operand_t wa_op;
  logic mreq_v, mreq_r, mwe, mrsp_v;
  addr_t maddr;
  data_t mwdata, mrdata;
  logic commit_valid;
  wave_t commit_wave, lcw;
  exen_t lexen;
  sb_stats_t st;
  logic pe_in_valid, pe_in_ready, net_out_valid;
  operand_t pe_in_op, net_out_op;
  logic [1:0] arity [8];
  logic fire_valid;
  logic [INST_W-1:0] fire_inst;
  wave_t fire_wave;
  exen_t fire_exen;
  data_t fire_data [3];
  logic [15:0] em_drop, mt_erased, mt_ignored;

  twc_top dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .wa_valid, .wa_ready, .wa_op,
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_we(mwe), .mem_addr(maddr),
    .mem_wdata(mwdata), .mem_rsp_valid(mrsp_v), .mem_rdata(mrdata),
    .ho_valid(1'b0), .ho_lcw('0), .ho_last_exen('0),
    .commit_valid, .commit_wave, .last_exen(lexen), .last_committed_wave(lcw), .stats(st),
    .pe_in_valid, .pe_in_ready, .pe_in_op, .net_out_valid, .net_out_ready(1'b1), .net_out_op,
    .arity, .fire_valid, .fire_ready(1'b1), .fire_inst, .fire_wave, .fire_exen, .fire_data,
    .em_drop_cnt(em_drop), .mt_erased_cnt(mt_erased), .mt_ignored_cnt(mt_ignored));

  tb_mem #(.WORDS(4096), .LAT(2), .RAND_READY(1'b1)) mem_u (
    .clk, .req_valid(mreq_v), .req_ready(mreq_r), .we(mwe), .addr(maddr), .wdata(mwdata),
    .rsp_valid(mrsp_v), .rdata(mrdata));

  // ------------------------------------------------------------ testbench state
  logic     pool_v [POOL];
  mem_req_t pool   [POOL];
  int       pool_seq [POOL];   // position in the wave's chain, -1: any time
  int       nacc [NW];         // requests of the wave accepted so far
  int       pidx   [NP];
  operand_t waq [$], netq [$];
  int       wa_pick;
  typedef struct { int inst; int wave; int exen; int data; } fire_t;
  fire_t    fires [$];

  int  wexen [NW];
  bit  started [NW], got_x [NW], seen [NW], st3 [NW];
  int  x_val [NW], x_due [NW];
  int  y_val [NW];
  int  g_exen = 0;
  int  cyc = 0;
  int  stale_fire = 0;
  int  ncommit = 0, nfire2 = 0, nrestart = 0, ninject = 0;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic operand_t opnd(int inst, int port, int w, int e, int d);
    return '{dest: '{pe: '0, inst: INST_W'(inst), port: PORT_W'(port)},
             wave: wave_t'(w), exen: exen_t'(e), data: data_t'(d)};
  endfunction

  function automatic void add_req(memop_e op, int w, int p, int c, int s, int a, int d,
                                  int inst, int e, int seq);
    for (int k = 0; k < POOL; k++)
      if (!pool_v[k]) begin
        pool_v[k] = 1;
        pool_seq[k] = seq;
        pool[k] = '{op: op, wave: wave_t'(w), exen: exen_t'(e), p: ann_t'(p), c: ann_t'(c),
                    s: ann_t'(s), addr: addr_t'(a), data: data_t'(d),
                    dest: '{pe: '0, inst: INST_W'(inst), port: '0}};
        return;
      end
    $display("FAIL request pool overflow");
  endfunction

  // addresses of iteration i (see the header)
  int mode = 0;   // 0: vector pattern, 1: matrix pattern
  function automatic int a_d(int i);  // the store of x + 7
    if (mode == 0) return i % 16 == 15 ? i + 1 : 600 + i;
    return i == 249 ? 250 : 600 + i;
  endfunction
  function automatic int a_y(int i);  // the load of y
    if (mode == 0) return i % 8 == 0 ? T : 1200 + i;
    return 1200 + i;
  endfunction
  function automatic int a_t(int i);  // the store of i
    return mode == 0 ? T : 1800 + i;
  endfunction
  function automatic int clat(int i); // compute latency of x + 7
    return (mode == 0 && i == 8) || (mode == 1 && i == 249) ? 400 : CLAT;
  endfunction

  function automatic void start_wave(int w);
    started[w] = 1;
    got_x[w]   = 0;
    st3[w]     = 0;
    nacc[w]    = 0;
    add_req(OP_LOAD,  w, DOT, 0, 1, w, 0, 0, wexen[w], 0);
    begin
      add_req(OP_LOAD,  w, 1, 2, 3, a_y(w), 0, 3, wexen[w], 2);
      add_req(OP_STORE, w, 2, 3, DOT, a_t(w), w, 0, wexen[w], 3);
    end
    waq.push_back(opnd(1, 0, w, wexen[w], w));
    if (w == 5) for (int k = 0; k < 8; k++) waq.push_back(opnd(1, 0, w, wexen[w], 100 + k));
    netq.push_back(opnd(2, 0, w, wexen[w], w));
  endfunction

  function automatic void restart(int w, int e);
    nrestart++;
    if (e > g_exen) g_exen = e;
    for (int v = w; v < NW; v++) begin
      if (started[v]) begin
        int old;
        old = wexen[v];
        for (int k = 0; k < POOL; k++) if (pool_v[k] && int'(pool[k].wave) == v) pool_v[k] = 0;
        // late arrivals from the old execution
        if (ninject < 40) begin
          add_req(OP_LOAD, v, DOT, 0, 1, v, 0, 0, old, -1);
          netq.push_back(opnd(2, 1, v, old, 0));
          netq.push_back(opnd(3, 0, v, old, 0));
          ninject++;
        end
        wexen[v] = e;
        start_wave(v);
      end else begin
        wexen[v] = e;
      end
    end
  endfunction

  // ------------------------------------------------------------ edge sampling
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NP; p++)
      if (req_valid[p] && req_ready[p]) begin
        pool_v[pidx[p]] = 0;
        if (pool_seq[pidx[p]] >= 0) nacc[int'(req[p].wave)]++;
      end
    if (wa_valid && wa_ready) waq.delete(wa_pick);
    if (pe_in_valid && pe_in_ready) void'(netq.pop_front());
    if (fire_valid)
      fires.push_back('{inst: int'(fire_inst), wave: int'(fire_wave), exen: int'(fire_exen),
                        data: int'(fire_data[0])});
    if (commit_valid) ncommit++;
  end

  // ------------------------------------------------------------ PE behaviour
  always @(negedge clk) if (rst_n) begin
    while (fires.size() != 0) begin
      fire_t f;
      f = fires.pop_front();
      if (f.wave < NW) begin
        if (f.exen < wexen[f.wave]) stale_fire++;
        case (f.inst)
          0: if (f.exen == wexen[f.wave] && started[f.wave] && !got_x[f.wave]) begin
               got_x[f.wave] = 1;
               x_val[f.wave] = f.data;
               x_due[f.wave] = cyc + clat(f.wave);
               netq.push_back(opnd(2, 1, f.wave, wexen[f.wave], f.data));
             end
          1: if (f.exen > wexen[f.wave]) restart(f.wave, f.exen);
          2: nfire2++;
          3: if (f.exen == wexen[f.wave]) y_val[f.wave] = f.data;
          default: ;
        endcase
      end
    end
    // the dependent store leaves once x + 7 is computed
    for (int w = 0; w < NW; w++)
      if (started[w] && got_x[w] && !st3[w] && cyc >= x_due[w]) begin
        st3[w] = 1;
        add_req(OP_STORE, w, 0, 1, 2, a_d(w), x_val[w] + 7, 0, wexen[w], 1);
      end
    // start the waves that fit in the StoreBuffer's wave table
    for (int w = 0; w < NW; w++)
      if (!started[w] && !seen[w] && w - int'(signed'(lcw)) - 1 < 32) begin
        seen[w]  = 1;
        wexen[w] = g_exen > wexen[w] ? g_exen : wexen[w];
        start_wave(w);
      end
    // present requests: per port, the oldest wave's request
    for (int p = 0; p < NP; p++) begin
      int best;
      best = -1;
      for (int k = 0; k < POOL; k++)
        if (pool_v[k] && int'(pool[k].wave) % NP == p &&
            (pool_seq[k] < 0 || pool_seq[k] == nacc[int'(pool[k].wave)]) &&
            (best < 0 || pool[k].wave < pool[best].wave)) best = k;
      req_valid[p] = best >= 0;
      pidx[p] = best < 0 ? 0 : best;
      req[p] = best < 0 ? '0 : pool[best];
    end
    wa_pick = 0;
    for (int k = 1; k < waq.size(); k++) if (waq[k].wave < waq[wa_pick].wave) wa_pick = k;
    wa_valid = waq.size() != 0;
    wa_op = waq.size() != 0 ? waq[wa_pick] : '0;
    pe_in_valid = netq.size() != 0;
    pe_in_op = netq.size() != 0 ? netq[0] : '0;
  end

  always @(posedge clk) cyc++;

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired: lcw=%0d", lcw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (arity[i]) arity[i] = 2'd1;
    arity[2] = 2'd2;
    #1 rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      int c0, raw0;
      mode = m;
      rst_n = 0;    // an edge, so that the asynchronous resets act
      for (int k = 0; k < POOL; k++) pool_v[k] = 0;
      for (int p = 0; p < NP; p++) begin req_valid[p] = 0; req[p] = '0; pidx[p] = 0; end
      for (int w = 0; w < NW; w++) begin
        wexen[w] = 0; y_val[w] = -1; nacc[w] = 0; started[w] = 0; seen[w] = 0;
        got_x[w] = 0; st3[w] = 0;
      end
      waq.delete(); netq.delete(); fires.delete();
      g_exen = 0; stale_fire = 0; ncommit = 0; nfire2 = 0; nrestart = 0; ninject = 0;
      wa_valid = 0; wa_op = '0; pe_in_valid = 0; pe_in_op = '0;
      for (int a = 0; a < 4096; a++) mem_u.mem[a] = data_t'(1000 + a);
      repeat (3) @(posedge clk);
      #1 rst_n = 1;
      c0 = cyc;
      wait (lcw == wave_t'(NW - 1));
      repeat (20) @(posedge clk);
      $display("%s: %0d waves in %0d cycles: RAW %0d WAR %0d WAW %0d rollbacks %0d restores %0d",
               m == 0 ? "vector pattern" : "matrix pattern", NW, cyc - c0,
               st.raw, st.war, st.waw, st.rollbacks, st.restores);
      $display("  resent %0d spec_ops %0d stale %0d moh_full %0d wct_full %0d win_wait %0d moh_peak %0d EM drops %0d MT erased %0d",
               st.resent, st.spec_ops, st.stale, st.moh_full, st.wct_full, st.win_wait, st.moh_peak,
               em_drop, mt_erased);
      begin
        data_t rm [4096];
        int    ry [NW];
        for (int a = 0; a < 4096; a++) rm[a] = data_t'(1000 + a);
        for (int i = 0; i < NW; i++) begin
          data_t x;
          x = rm[i];
          rm[a_d(i)] = x + 7;
          ry[i] = int'(rm[a_y(i)]);
          rm[a_t(i)] = data_t'(i);
        end
        for (int a = 0; a < 4096; a++)
          chk(mem_u.mem[a] == rm[a], $sformatf("mem[%0d] = %0d, expected %0d", a, mem_u.mem[a], rm[a]));
        for (int i = 0; i < NW; i++)
          chk(y_val[i] == ry[i], $sformatf("y of iteration %0d = %0d, expected %0d", i, y_val[i], ry[i]));
      end
      chk(stale_fire == 0, $sformatf("%0d instances of an old execution fired", stale_fire));
      chk(ncommit == NW && st.commits == 16'(NW), "every wave committed once");
      chk(lexen == exen_t'(st.rollbacks), "lastExeN counts the rollbacks");
      chk(st.spec_ops > 0, "speculative execution happened");
      chk(st.raw > 0 && st.rollbacks > 0, "RAW rollback happened");
      if (m == 0) begin
        chk(st.war > 0, "WAR served from a backup happened");
        chk(st.waw > 0, "WAW absorbed in the MOH happened");
      end else begin
        chk(st.war == 0 && st.waw == 0, "no WAR or WAW in the matrix pattern");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
