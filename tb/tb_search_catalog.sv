// tb_search_catalog -- self-checking test of the Search Catalog lists.
//
// Links random MOH entry numbers into the lists of several wave slots and pops
// them back, comparing with a per-slot reference stack (a wave's list is
// walked newest first).
module tb_search_catalog;
  import twc_pkg::*;
  localparam int N = 8, M = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ins = 0, pop = 0, clr = 0, hvld;
  logic [2:0] ins_slot = '0, pop_slot = '0, q_slot = '0;
  logic [4:0] ins_idx = '0, head;
  logic any [N];

  search_catalog #(.NWAVES(N), .MOH_DEPTH(M)) dut (
    .clk, .rst_n, .ins_i(ins), .ins_slot, .ins_idx, .pop_i(pop), .pop_slot,
    .clr_i(clr), .q_slot, .hvld_o(hvld), .head_o(head), .any_o(any));

  int stk [N][$];
  int freel [$];

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < M; i++) freel.push_back(i);
    #1 rst_n = 1;
    #1 rst_n = 0;   // an edge, so that the asynchronous resets act
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int i = 0; i < N; i++) chk(!any[i], "empty after reset");
    for (int n = 0; n < 2000; n++) begin
      int s;
      s = $urandom_range(0, N - 1);
      q_slot = 3'(s);
      #1;
      chk(hvld == (stk[s].size() != 0), "list non-empty flag");
      if (stk[s].size() != 0) chk(int'(head) == stk[s][$], $sformatf("head of slot %0d", s));
      if (freel.size() != 0 && ($urandom_range(0, 1) == 0 || stk[s].size() == 0)) begin
        int k, e;
        k = $urandom_range(0, freel.size() - 1);
        e = freel[k];
        freel.delete(k);
        ins = 1; ins_slot = 3'(s); ins_idx = 5'(e);
        stk[s].push_back(e);
      end else if (stk[s].size() != 0) begin
        pop = 1; pop_slot = 3'(s);
        freel.push_back(stk[s].pop_back());
      end
      @(posedge clk); #1 ins = 0; pop = 0;
    end
    clr = 1; @(posedge clk); #1 clr = 0;
    for (int i = 0; i < N; i++) chk(!any[i], "empty after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
