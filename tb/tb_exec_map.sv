// tb_exec_map -- self-checking test of the Execution Map.
//
// Replays the example of the Execution Map description (pairs <0,0>,<5,1>; an
// operand of wave 3 with ExeN 1 is accepted and replaces <5,1> by <3,1>), then
// random operands against a reference that keeps, for every wave, the least
// ExeN still accepted and raises it for all later waves when an accepted
// operand carries a newer ExeN.
module tb_exec_map;
  import twc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  in_valid = 0;
  wave_t in_wave  = '0;
  exen_t in_exen  = '0;
  logic  acc;

  exec_map #(.DEPTH(8)) dut (.clk, .rst_n, .in_valid, .in_wave, .in_exen, .acc_o(acc));

  int thr [64];

  task automatic send(input int w, input int e, input logic exp);
    in_wave = wave_t'(w); in_exen = exen_t'(e); in_valid = 1;
    #1;
    checks++;
    if (acc !== exp) begin
      failures++;
      $display("FAIL wave %0d exen %0d: acc=%0b expected %0b", w, e, acc, exp);
    end
    @(posedge clk); #1 in_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1;
    #1 rst_n = 0;   // an edge, so that the asynchronous resets act
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // the paper's example
    send(0, 0, 1);
    send(5, 1, 1);      // table now holds <5,1> (waves 0..4 accept ExeN >= 0)
    send(4, 0, 1);
    send(6, 0, 0);      // wave >= 5 needs ExeN >= 1
    send(5, 1, 1);
    send(3, 1, 1);      // <5,1> is replaced by <3,1>
    send(4, 0, 0);
    send(3, 0, 0);
    send(2, 0, 1);
    send(7, 2, 1);      // adds <7,2>
    send(8, 1, 0);
    send(6, 1, 1);
    send(3, 2, 1);      // replaces <3,1> and <7,2> by <3,2>
    send(7, 1, 0);
    send(2, 1, 1);      // adds <2,1> before <3,2>
    send(2, 0, 0);
    // random operands against the reference
    @(posedge clk); rst_n = 0; @(posedge clk); #1 rst_n = 1;
    foreach (thr[i]) thr[i] = 0;
    for (int n = 0; n < 3000; n++) begin
      int w, e;
      logic exp;
      w = $urandom_range(0, 63);
      e = $urandom_range(0, 7);
      exp = e >= thr[w];
      send(w, e, exp);
      if (exp) for (int v = w; v < 64; v++) if (thr[v] < e) thr[v] = e;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
