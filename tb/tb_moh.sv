// tb_moh -- self-checking test of the MemOp-History and its hazard search.
//
// Logs a handful of operations of different waves, then checks that the
// search returns, for an executing operation of a given wave, the closest
// later-wave operation to the same address (ordered by wave, then by the
// Current annotation) and the closest later Store with its backup; also the
// backup update of the WAW rule, releasing entries, the read port and the
// full flag.
module tb_moh;
  import twc_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  wave_t lcw = '1;
  addr_t s_addr = '0;
  wave_t s_off = '0;
  logic any_hit, any_store, st_hit, has_free;
  logic [2:0] any_idx, free_idx;
  wave_t any_wave;
  data_t any_backup, st_backup;
  logic alloc = 0, setbk = 0, rel = 0;
  wave_t a_wave = '0;
  ann_t a_cur = '0;
  logic a_store = 0;
  addr_t a_addr = '0;
  data_t a_backup = '0, setbk_val = '0;
  logic [2:0] setbk_idx = '0, rel_idx = '0, rd_idx = '0;
  logic rd_store;
  addr_t rd_addr;
  data_t rd_backup;
  logic [3:0] count;

  moh #(.DEPTH(D)) dut (
    .clk, .rst_n, .lcw, .s_addr, .s_off, .any_hit, .any_idx, .any_store, .any_wave,
    .any_backup, .st_hit, .st_backup, .has_free, .free_idx, .alloc_i(alloc), .a_wave,
    .a_cur, .a_store, .a_addr, .a_backup, .setbk_i(setbk), .setbk_idx, .setbk_val,
    .free_i(rel), .free_idx_i(rel_idx), .rd_idx, .rd_store, .rd_addr, .rd_backup,
    .count_o(count));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  int idx_of [int];

  task automatic log_op(input int tag, input int w, input int c, input logic st,
                        input int a, input int bk);
    #1 idx_of[tag] = int'(free_idx);
    alloc = 1; a_wave = wave_t'(w); a_cur = ann_t'(c); a_store = st;
    a_addr = addr_t'(a); a_backup = data_t'(bk);
    @(posedge clk); #1 alloc = 0;
  endtask

  task automatic search(input int a, input int off, input int any_tag, input logic any_st,
                        input int st_bk, input string msg);
    s_addr = addr_t'(a); s_off = wave_t'(off);
    #1;
    if (any_tag < 0) chk(!any_hit, {msg, ": no later operation"});
    else chk(any_hit && int'(any_idx) == idx_of[any_tag] && any_store == any_st,
             {msg, ": closest later operation"});
    if (st_bk < 0) chk(!st_hit, {msg, ": no later store"});
    else chk(st_hit && st_backup == data_t'(st_bk), {msg, ": closest later store backup"});
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1;
    #1 rst_n = 0;   // an edge, so that the asynchronous resets act
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    chk(has_free && count == 0, "empty after reset");
    log_op(0, 3, 0, 0, 100, 0);     // wave 3 Load  [100]
    log_op(1, 2, 1, 1, 100, 7);     // wave 2 Store [100], backup 7
    log_op(2, 2, 0, 0, 100, 0);     // wave 2 Load  [100] (earlier in the chain)
    log_op(3, 5, 0, 1, 100, 9);     // wave 5 Store [100], backup 9
    log_op(4, 4, 2, 1, 200, 5);     // wave 4 Store [200], backup 5
    chk(count == 5, "five logged");
    search(100, 1, 2, 0, 7, "wave 1 op on [100]");   // RAW with wave 2's load
    search(100, 2, 0, 0, 9, "wave 2 op on [100]");
    search(100, 3, 3, 1, 9, "wave 3 op on [100]");   // WAW with wave 5
    search(100, 5, -1, 0, -1, "wave 5 op on [100]");
    search(200, 0, 4, 1, 5, "wave 0 op on [200]");
    search(300, 0, -1, 0, -1, "other address");
    chk(any_wave == 16'd4 || !any_hit, "wave field");
    setbk = 1; setbk_idx = 3'(idx_of[3]); setbk_val = 42;
    @(posedge clk); #1 setbk = 0;
    search(100, 3, 3, 1, 42, "after WAW backup update");
    rel = 1; rel_idx = 3'(idx_of[2]); @(posedge clk); #1 rel = 0;
    search(100, 1, 1, 1, 7, "after releasing wave 2's load");
    rd_idx = 3'(idx_of[4]);
    #1 chk(rd_store && rd_addr == 200 && rd_backup == 5, "read port");
    // wave offsets follow lastCommittedWave: with lcw = 2, wave 3 is at offset 0
    lcw = 16'd2;
    search(100, 0, 3, 1, 42, "offsets relative to lcw+1");
    lcw = '1;
    for (int t = 10; t < 14; t++) log_op(t, 6, 0, 0, 500 + t, 0);
    chk(count == 8 && !has_free, "full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
