// tb_wct -- self-checking test of the Wave-Context-Tables.
//
// Fills the tables of several waves with operands, checks that a full table
// refuses more (the Wave-Advance would block), reads the lines back in order,
// and checks clearing one table and clearing all tables beyond a rollback
// wave.
module tb_wct;
  import twc_pkg::*;
  localparam int N = 8, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ins = 0, ins_ready, clr = 0, clr_above = 0;
  logic [2:0] ins_slot = '0, clr_slot = '0, ns_slot = '0, clr_off = '0, rd_slot = '0;
  logic [1:0] rd_idx = '0;
  operand_t ins_op = '0, rd_op;
  logic [2:0] cnt;

  wct #(.NWAVES(N), .DEPTH(D)) dut (
    .clk, .rst_n, .ins_i(ins), .ins_slot, .ins_op, .ins_ready, .clr_i(clr), .clr_slot,
    .clr_above_i(clr_above), .ns_slot, .clr_off, .rd_slot, .rd_idx, .rd_op, .cnt_o(cnt));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic operand_t mk(int s, int k);
    return '{dest: '{pe: PE_W'(s), inst: INST_W'(k), port: '0}, wave: wave_t'(s),
             exen: '0, data: data_t'(s * 100 + k)};
  endfunction

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
    for (int s = 0; s < N; s++)
      for (int k = 0; k < (s % 3) + 2; k++) begin
        ins = 1; ins_slot = 3'(s); ins_op = mk(s, k);
        #1 chk(ins_ready == (k < D), $sformatf("slot %0d line %0d ready", s, k));
        @(posedge clk); #1 ins = 0;
      end
    for (int s = 0; s < N; s++) begin
      int n;
      n = (s % 3) + 2; if (n > D) n = D;
      rd_slot = 3'(s);
      #1 chk(int'(cnt) == n, $sformatf("slot %0d count %0d", s, cnt));
      for (int k = 0; k < n; k++) begin
        rd_idx = 2'(k);
        #1 chk(rd_op == mk(s, k), $sformatf("slot %0d line %0d", s, k));
      end
    end
    clr = 1; clr_slot = 3'd2; @(posedge clk); #1 clr = 0;
    rd_slot = 3'd2; #1 chk(cnt == 0, "slot 2 cleared");
    rd_slot = 3'd3; #1 chk(cnt == 2, "slot 3 kept");
    // non-speculative slot 6, rollback at offset 3 (slot 1): offsets > 3 cleared
    clr_above = 1; ns_slot = 3'd6; clr_off = 3'd3; @(posedge clk); #1 clr_above = 0;
    for (int s = 0; s < N; s++) begin
      int off, n;
      off = (s - 6 + N) % N;
      n = (s == 2) ? 0 : (off > 3) ? 0 : ((s % 3) + 2 > D ? D : (s % 3) + 2);
      rd_slot = 3'(s);
      #1 chk(int'(cnt) == n, $sformatf("slot %0d after rollback clear", s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
