// tb_wave_table -- self-checking test of the per-wave transactional state.
//
// Checks the reset values (lastCommittedWave = -1, F = FALSE), chain updates
// and the F bit set by the operation whose S is ".", commits (slot recycling
// and the inherited currentExeN), rollback (lastExeN + 1, all waves from the
// rollback wave on reset to the new ExeN) and the custody hand-off.
module tb_wave_table;
  import twc_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic upd = 0, commit = 0, rb = 0, ho = 0;
  logic [2:0] upd_slot = '0, rb_off = '0;
  ann_t upd_c = '0, upd_s = '0;
  wave_t ho_lcw = '0, lcw;
  exen_t ho_exen = '0, lexen;
  logic fin [N], started [N];
  ann_t lc [N], ls [N];
  exen_t ex [N];

  wave_table #(.NWAVES(N)) dut (
    .clk, .rst_n, .upd_i(upd), .upd_slot, .upd_c, .upd_s, .commit_i(commit),
    .rb_i(rb), .rb_off, .ho_i(ho), .ho_lcw, .ho_last_exen(ho_exen),
    .lcw_o(lcw), .last_exen_o(lexen), .fin_o(fin), .started_o(started),
    .last_c_o(lc), .last_s_o(ls), .exen_o(ex));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask
  task automatic tick; @(posedge clk); #1; upd = 0; commit = 0; rb = 0; ho = 0; endtask

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
    chk(lcw == '1, "lastCommittedWave resets to -1");
    chk(lexen == '0, "lastExeN resets to 0");
    for (int i = 0; i < N; i++) chk(!fin[i] && !started[i] && ex[i] == 0, "slot reset");
    // wave 0: Load <.,0,?> then Store <?,3,.>
    upd = 1; upd_slot = 0; upd_c = 8'd0; upd_s = ANN_UNK; tick;
    chk(started[0] && lc[0] == 0 && ls[0] == ANN_UNK && !fin[0], "chain after load");
    upd = 1; upd_slot = 0; upd_c = 8'd3; upd_s = ANN_NONE; tick;
    chk(fin[0] && lc[0] == 3, "F set by the last operation");
    // wave 1 and 2 finish too
    upd = 1; upd_slot = 1; upd_c = 8'd0; upd_s = ANN_NONE; tick;
    chk(fin[1], "wave 1 finished");
    commit = 1; tick;
    chk(lcw == 0, "commit of wave 0");
    chk(!fin[0] && !started[0], "slot 0 recycled for wave 8");
    // rollback at offset 2 from wave 1 -> waves 3.. get ExeN 1
    upd = 1; upd_slot = 4; upd_c = 8'd0; upd_s = 8'd1; tick;
    rb = 1; rb_off = 3'd2; tick;
    chk(lexen == 1, "lastExeN incremented");
    for (int i = 0; i < N; i++) begin
      int off;
      off = (i - 1 + N) % N;
      if (off >= 2) chk(ex[i] == 1 && !started[i] && !fin[i], $sformatf("slot %0d reset by rollback", i));
      else          chk(ex[i] == 0, $sformatf("slot %0d kept", i));
    end
    chk(fin[1], "wave 1 keeps its F bit");
    commit = 1; tick;
    chk(lcw == 1 && ex[1] == 1, "recycled slot inherits the youngest ExeN");
    ho = 1; ho_lcw = 16'd41; ho_exen = 8'd7; tick;
    chk(lcw == 41 && lexen == 7, "hand-off loads both registers");
    for (int i = 0; i < N; i++) chk(ex[i] == 7 && !fin[i], "hand-off resets slots");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
