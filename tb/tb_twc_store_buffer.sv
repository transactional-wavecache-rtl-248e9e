// tb_twc_store_buffer -- directed self-checking test of the Transactional
// StoreBuffer.
//
// Small sizes (8 wave slots, window of 4 speculative waves, 8 MOH entries, 4
// WCT lines) make every limit reachable. The phases, each checked against
// values worked out by hand for sequential execution of the waves:
//   A  non-speculative store and load, commit
//   B  a speculative wave writes first; the older wave's load gets the backup
//      (WAR) and its store is absorbed (WAW); memory ends with the younger
//      values
//   C  a speculative store meets a younger wave's load (RAW): the younger wave
//      is rolled back (its store's backup restored, its WCT re-sent with the
//      new ExeN), a late Wave-Advance copy is updated and re-sent, an
//      old-execution request is dropped, the wave re-executes
//   D  a wave beyond the Speculation Window waits until it is inside
//   E  a full MOH stalls a speculative wave; a full WCT blocks Wave-Advance
// Memory requests arrive on all four input ports.
module tb_twc_store_buffer;
  import twc_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid [NP], req_ready [NP];
  mem_req_t req [NP];
  logic wa_valid = 0, wa_ready;
  operand_t wa_op = '0;
  logic rsp_valid, rs_valid;
  operand_t rsp_op, rs_op;
  logic mreq_v, mreq_r, mwe, mrsp_v;
  addr_t maddr;
  data_t mwdata, mrdata;
  logic commit_valid;
  wave_t commit_wave, lcw;
  exen_t lexen;
  sb_stats_t st;

  twc_store_buffer #(.NPORTS(NP), .NWAVES(8), .SPEC_WINDOW(4), .REQ_DEPTH(8),
                     .MOH_DEPTH(8), .WCT_DEPTH(4)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .wa_valid, .wa_ready, .wa_op,
    .rsp_valid, .rsp_ready(1'b1), .rsp_op, .rs_valid, .rs_ready(1'b1), .rs_op,
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_we(mwe), .mem_addr(maddr),
    .mem_wdata(mwdata), .mem_rsp_valid(mrsp_v), .mem_rdata(mrdata),
    .ho_valid(1'b0), .ho_lcw('0), .ho_last_exen('0),
    .commit_valid, .commit_wave, .last_exen(lexen), .last_committed_wave(lcw), .stats(st));

  tb_mem #(.WORDS(256), .LAT(3), .RAND_READY(1'b1)) mem_u (
    .clk, .req_valid(mreq_v), .req_ready(mreq_r), .we(mwe), .addr(maddr), .wdata(mwdata),
    .rsp_valid(mrsp_v), .rdata(mrdata));

  operand_t rsps [$], rss [$];
  int ncommit = 0;
  always @(posedge clk) begin
    if (rst_n && rsp_valid) rsps.push_back(rsp_op);
    if (rst_n && rs_valid)  rss.push_back(rs_op);
    if (rst_n && commit_valid) ncommit++;
  end

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int DOT = 255;
  int port_rr = 0;

  task automatic send(input memop_e op, input int w, input int p, input int c, input int s,
                      input int a, input int d, input int e = 0, input int inst = 0);
    int pt;
    pt = port_rr; port_rr = (port_rr + 1) % NP;
    req[pt] = '{op: op, wave: wave_t'(w), exen: exen_t'(e), p: ann_t'(p), c: ann_t'(c),
                s: ann_t'(s), addr: addr_t'(a), data: data_t'(d),
                dest: '{pe: '0, inst: INST_W'(inst), port: '0}};
    req_valid[pt] = 1;
    do @(posedge clk); while (!req_ready[pt]);
    #1 req_valid[pt] = 0;
  endtask

  task automatic send_wa(input int w, input int e, input int d);
    wa_op = '{dest: '{pe: 7'd3, inst: 3'd5, port: 2'd1}, wave: wave_t'(w),
              exen: exen_t'(e), data: data_t'(d)};
    wa_valid = 1;
    do @(posedge clk); while (!wa_ready);
    #1 wa_valid = 0;
  endtask


  task automatic settle(input int n = 40);
    repeat (n) @(posedge clk);
    #1;
  endtask

  task automatic expect_rsp(input int w, input int d, input string msg);
    chk(rsps.size() != 0, {msg, ": a load result"});
    if (rsps.size() != 0) begin
      operand_t o;
      o = rsps.pop_front();
      chk(o.wave == wave_t'(w) && o.data == data_t'(d),
          $sformatf("%s: wave %0d data %0d (expected %0d/%0d)", msg, o.wave, o.data, w, d));
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NP; i++) begin req_valid[i] = 0; req[i] = '0; end
    #1 rst_n = 1;
    #1 rst_n = 0;   // an edge, so that the asynchronous resets act
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    chk(lcw == '1 && lexen == 0, "reset: lastCommittedWave -1, lastExeN 0");

    // ---- A: wave 0 alone
    send(OP_STORE, 0, DOT, 0, 1, 10, 5);
    send(OP_LOAD,  0, 0, 1, DOT, 10, 0);
    settle();
    expect_rsp(0, 5, "A load sees the store");
    chk(mem_u.mem[10] == 5 && lcw == 0 && ncommit == 1, "A wave 0 committed");

    // ---- B: wave 2 runs ahead of wave 1
    send(OP_STORE, 2, DOT, 0, 1, 20, 222);
    send(OP_STORE, 2, 0, 1, DOT, 30, 333);
    settle();
    chk(st.spec_ops == 2 && mem_u.mem[20] == 222 && mem_u.mem[30] == 333,
        "B speculative stores reach memory and are logged");
    chk(lcw == 0, "B wave 2 cannot commit before wave 1");
    send(OP_LOAD,  1, DOT, 0, 1, 20, 0);
    send(OP_STORE, 1, 0, 1, DOT, 30, 111);
    settle();
    expect_rsp(1, 1020, "B WAR: older load reads the value before wave 2's store");
    chk(st.war == 1 && st.waw == 1, "B one WAR and one WAW");
    chk(mem_u.mem[20] == 222 && mem_u.mem[30] == 333, "B memory holds the younger values");
    chk(lcw == 2 && ncommit == 3, "B waves 1 and 2 committed in order");
    chk(st.moh_peak >= 2 && st.rollbacks == 0, "B no rollback");

    // ---- C: wave 3 withheld, wave 5 runs ahead of wave 4
    send_wa(5, 0, 77);
    send(OP_LOAD,  5, DOT, 0, 1, 40, 0, 0, 1);
    send(OP_STORE, 5, 0, 1, DOT, 41, 555);
    settle();
    expect_rsp(5, 1040, "C speculative load");
    chk(mem_u.mem[41] == 555, "C speculative store in memory");
    send(OP_STORE, 4, DOT, 0, DOT, 40, 444);
    settle();
    chk(st.raw == 1 && st.rollbacks == 1 && lexen == 1, "C RAW causes one rollback");
    chk(st.restores == 1 && mem_u.mem[41] == 1041, "C wave 5's store undone");
    chk(mem_u.mem[40] == 444, "C wave 4's store executed after the rollback");
    chk(rss.size() == 1, "C read set of wave 5 re-sent");
    if (rss.size() != 0) begin
      operand_t o;
      o = rss.pop_front();
      chk(o.wave == 5 && o.exen == 1 && o.data == 77 && o.dest.inst == 5, "C re-sent operand");
    end
    send_wa(5, 0, 88);
    settle(5);
    chk(rss.size() == 1, "C late Wave-Advance copy forwarded");
    if (rss.size() != 0) begin
      operand_t o;
      o = rss.pop_front();
      chk(o.exen == 1 && o.data == 88, "C late copy carries the new ExeN");
    end
    send(OP_LOAD, 5, DOT, 0, 1, 40, 0, 0);          // from the old execution
    settle(5);
    chk(st.stale == 1 && rsps.size() == 0, "C old-execution request dropped");
    send(OP_LOAD,  5, DOT, 0, 1, 40, 0, 1);
    send(OP_STORE, 5, 0, 1, DOT, 41, 556, 1);
    settle();
    expect_rsp(5, 444, "C re-executed load sees wave 4's store");
    send(OP_LOAD, 3, DOT, 0, DOT, 40, 0);
    settle();
    expect_rsp(3, 1040, "C wave 3 load reads the original value (WAR)");
    chk(lcw == 5 && mem_u.mem[40] == 444 && mem_u.mem[41] == 556, "C waves 3..5 committed");

    // The rollback gave every wave from 5 on the new ExeN 1.
    // ---- D: Speculation Window of 4; wave 11 is at offset 5
    send(OP_LOAD, 11, DOT, 0, DOT, 50, 0, 1);
    settle(20);
    chk(rsps.size() == 0 && st.win_wait > 0, "D wave beyond the window waits");
    send(OP_NOP, 6, DOT, 0, DOT, 0, 0, 1);
    settle(30);
    expect_rsp(11, 1050, "D wave 11 runs once inside the window");
    for (int w = 7; w <= 10; w++) send(OP_NOP, w, DOT, 0, DOT, 0, 0, 1);
    settle();
    chk(lcw == 11, "D all committed");

    // ---- E: MOH of 8 entries, WCT of 4 lines; wave 12 withheld
    for (int k = 0; k < 9; k++)
      send(OP_LOAD, 13, k == 0 ? DOT : k - 1, k, k == 8 ? DOT : k + 1, 60 + k, 0, 1);
    settle(150);
    chk(rsps.size() == 8 && st.moh_full > 0, "E ninth speculative load waits for MOH room");
    fork
      for (int k = 0; k < 5; k++) send_wa(14, 1, k);
    join_none
    settle(20);
    chk(st.wct_full > 0 && wa_valid, "E fifth Wave-Advance copy blocked by a full WCT");
    send(OP_NOP, 12, DOT, 0, DOT, 0, 0, 1);
    send(OP_NOP, 14, DOT, 0, DOT, 0, 0, 1);
    settle(100);
    chk(rsps.size() == 9 && !wa_valid, "E both stalls resolved");
    for (int k = 0; k < 9; k++) expect_rsp(13, 1060 + k, "E load");
    chk(lcw == 14, "E waves 12..14 committed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
