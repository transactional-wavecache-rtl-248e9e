// tb_matching_table -- self-checking test of the PE matching table.
//
// Instruction slots 0, 1 and 2 take one, two and three inputs. The test checks
// that a one-input instruction fires at once, that two- and three-input
// instances fire with all their operands one cycle after the last one arrives,
// that an operand of a newer execution erases the older operands of the same
// instance (MT Checkup) and that an older one is ignored, that instances of
// different waves do not mix, and that the table refuses operands needing an
// entry when it is full.
module tb_matching_table;
  import twc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] arity [8];
  logic       in_valid = 0, in_ready, fire_valid, fire_ready = 1;
  operand_t   in_op;
  logic [INST_W-1:0] fire_inst;
  wave_t      fire_wave;
  exen_t      fire_exen;
  data_t      fire_data [3];
  logic [15:0] erased, ignored;

  matching_table #(.DEPTH(16)) dut (
    .clk, .rst_n, .arity_i(arity), .in_valid, .in_ready, .in_op,
    .fire_valid, .fire_ready, .fire_inst, .fire_wave, .fire_exen, .fire_data,
    .erased_cnt_o(erased), .ignored_cnt_o(ignored));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // drive one operand; report whether the instance fired on the next cycle
  task automatic send(input int inst, input int port, input int w, input int e,
                      input int d, output logic fired);
    in_op = '{dest: '{pe: '0, inst: INST_W'(inst), port: PORT_W'(port)},
              wave: wave_t'(w), exen: exen_t'(e), data: data_t'(d)};
    in_valid = 1;
    #1 chk(in_ready, $sformatf("ready for inst %0d wave %0d", inst, w));
    @(posedge clk); #1 in_valid = 0;
    fired = fire_valid;
  endtask

  task automatic expect_fire(input logic fired, input int inst, input int w, input int e,
                             input int d0, input int d1, input int d2);
    chk(fired, $sformatf("inst %0d wave %0d fires", inst, w));
    if (fired) begin
      chk(fire_inst == INST_W'(inst) && fire_wave == wave_t'(w) && fire_exen == exen_t'(e),
          $sformatf("fire tag %0d/%0d/%0d", fire_inst, fire_wave, fire_exen));
      chk(fire_data[0] == data_t'(d0), "fire data 0");
      if (d1 >= 0) chk(fire_data[1] == data_t'(d1), "fire data 1");
      if (d2 >= 0) chk(fire_data[2] == data_t'(d2), "fire data 2");
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic f;
    foreach (arity[i]) arity[i] = 2'd1;
    arity[1] = 2'd2;
    arity[2] = 2'd3;
    in_op = '0;
    #1 rst_n = 1;
    #1 rst_n = 0;   // an edge, so that the asynchronous resets act
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    send(0, 0, 1, 0, 11, f);              expect_fire(f, 0, 1, 0, 11, -1, -1);
    send(1, 1, 1, 0, 22, f);              chk(!f, "inst1 waits for port 0");
    send(1, 1, 2, 0, 99, f);              chk(!f, "other wave waits");
    send(1, 0, 1, 0, 21, f);              expect_fire(f, 1, 1, 0, 21, 22, -1);
    send(2, 0, 3, 0, 30, f);              chk(!f, "inst2 waits");
    send(2, 1, 3, 0, 31, f);              chk(!f, "inst2 waits for port 2");
    send(2, 2, 3, 1, 42, f);              chk(!f, "newer ExeN erases the older operands");
    chk(erased == 16'd1, "one MT Checkup erase");
    send(2, 0, 3, 0, 30, f);              chk(!f, "older ExeN ignored");
    chk(ignored == 16'd1, "one MT Checkup ignore");
    send(2, 0, 3, 1, 40, f);              chk(!f, "inst2 wave3 ExeN1 waits");
    send(2, 1, 3, 1, 41, f);              expect_fire(f, 2, 3, 1, 40, 41, 42);
    send(1, 0, 2, 0, 98, f);              expect_fire(f, 1, 2, 0, 98, 99, -1);
    // fill the table: 16 waiting instances
    for (int w = 10; w < 26; w++) begin
      send(1, 0, w, 0, w, f);
      chk(!f, "waiting");
    end
    in_op = '{dest: '{pe: '0, inst: 3'd1, port: 2'd0}, wave: wave_t'(40), exen: '0, data: '0};
    in_valid = 1;
    #1 chk(!in_ready, "full table refuses a new instance");
    in_op.dest.inst = 3'd0;
    #1 chk(in_ready, "one-input instruction still fires when full");
    in_valid = 0;
    send(1, 1, 10, 0, 7, f);              expect_fire(f, 1, 10, 0, 10, 7, -1);
    // fire port back-pressure: no operand is taken while a fired set waits
    @(posedge clk); #1;
    fire_ready = 0;
    send(0, 0, 50, 0, 5, f);              expect_fire(f, 0, 50, 0, 5, -1, -1);
    in_op.wave = wave_t'(51);
    in_valid = 1;
    #1 chk(!in_ready, "stalled while fire waits");
    in_valid = 0;
    fire_ready = 1;
    @(posedge clk); #1;
    chk(!fire_valid, "fire taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
