// tb_req_buffer -- self-checking test of the StoreBuffer request pool.
//
// The testbench plays the wave table itself. It replays the memory chain of
// the IF-THEN-ELSE example (Load <.,0,?>, Store <0,1,3> on the taken path,
// Store <?,3,.>), pushed in reverse order, and checks that they are offered in
// chain order; then it checks oldest-wave-first selection, the Speculation
// Window, the stall of speculative waves when spec_ok is low, the dropping of
// requests of an old execution and the rollback purge.
module tb_req_buffer;
  import twc_pkg::*;
  localparam int N = 8, D = 8, SW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push = 0, take = 0, purge = 0, spec_ok = 1, sel_valid, win_block, res_block;
  mem_req_t push_req = '0, sel_req;
  wave_t lcw = '1;
  logic started [N];
  ann_t lc [N], ls [N];
  exen_t wexen [N];
  logic [2:0] purge_off = '0;
  logic [3:0] free;
  logic [15:0] drops;

  req_buffer #(.DEPTH(D), .NWAVES(N), .SPEC_WINDOW(SW)) dut (
    .clk, .rst_n, .push_i(push), .push_req, .lcw, .started, .last_c(lc), .last_s(ls),
    .wexen, .spec_ok, .sel_valid, .sel_req, .take_i(take), .purge_i(purge),
    .purge_off, .free_o(free), .drop_cnt_o(drops), .win_block_o(win_block),
    .res_block_o(res_block));

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic mem_req_t mk(memop_e op, int w, int p, int c, int s, int a, int e = 0);
    mem_req_t r;
    r = '0;
    r.op = op; r.wave = wave_t'(w); r.exen = exen_t'(e);
    r.p = ann_t'(p); r.c = ann_t'(c); r.s = ann_t'(s); r.addr = addr_t'(a);
    return r;
  endfunction

  task automatic put(input mem_req_t r);
    push = 1; push_req = r; @(posedge clk); #1 push = 0;
  endtask

  // take the offered request and advance its wave's chain as the controller does
  task automatic take_expect(input int w, input int c, input string msg);
    mem_req_t r;
    logic v;
    #1 chk(sel_valid && sel_req.wave == wave_t'(w) && sel_req.c == ann_t'(c), msg);
    v = sel_valid; r = sel_req;
    take = 1; @(posedge clk); #1 take = 0;
    if (v) begin
      started[r.wave[2:0]] = 1;
      lc[r.wave[2:0]] = r.c;
      ls[r.wave[2:0]] = r.s;
    end
  endtask

  localparam int DOT = 255, Q = 254;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin started[i] = 0; lc[i] = 0; ls[i] = 0; wexen[i] = 0; end
    #1 rst_n = 1;
    #1 rst_n = 0;   // an edge, so that the asynchronous resets act
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    chk(free == 4'd8 && !sel_valid, "empty after reset");
    put(mk(OP_STORE, 0, Q, 3, DOT, 12));
    put(mk(OP_STORE, 0, 0, 1, 3, 11));
    put(mk(OP_LOAD,  0, DOT, 0, Q, 10));
    chk(free == 4'd5, "three entries used");
    take_expect(0, 0, "Load <.,0,?> first");
    take_expect(0, 1, "Store <0,1,3> follows P = last C");
    take_expect(0, 3, "Store <?,3,.> follows last S = C");
    #1 chk(!sel_valid, "nothing left");
    // oldest wave first
    put(mk(OP_LOAD, 2, DOT, 0, DOT, 20));
    put(mk(OP_LOAD, 1, DOT, 0, DOT, 21));
    take_expect(1, 0, "wave 1 before wave 2");
    take_expect(2, 0, "then wave 2");
    // speculation window: lcw = -1, so wave 4 has offset 4 > 3
    put(mk(OP_LOAD, 4, DOT, 0, DOT, 40));
    #1 chk(!sel_valid && win_block, "wave beyond the window waits");
    lcw = 16'd0;   // wave 0 committed: wave 4 now at offset 3
    #1 chk(sel_valid && sel_req.wave == 4 && !win_block, "wave 4 inside the window");
    take_expect(4, 0, "wave 4 executes");
    // spec_ok low: only the non-speculative wave 1 may go
    spec_ok = 0;
    put(mk(OP_LOAD, 3, DOT, 0, DOT, 30));
    #1 chk(!sel_valid && res_block, "speculative wave stalls without MOH room");
    started[1] = 0;
    put(mk(OP_NOP, 1, DOT, 0, DOT, 0));
    take_expect(1, 0, "non-speculative wave still executes");
    spec_ok = 1;
    take_expect(3, 0, "speculative wave resumes");
    // old execution: wave 2 now requires ExeN 1
    wexen[2] = 1; started[2] = 0;
    put(mk(OP_LOAD, 2, DOT, 0, DOT, 22, 0));
    @(posedge clk); #1;
    chk(drops == 16'd1 && free == 4'd8, "old-execution request dropped");
    put(mk(OP_LOAD, 2, DOT, 0, DOT, 23, 1));
    #1 chk(sel_valid && sel_req.addr == 23, "current-execution request kept");
    // purge waves >= 3 (offset 2 from lcw = 0)
    started[3] = 0; started[5] = 0;
    put(mk(OP_LOAD, 3, DOT, 0, DOT, 33));
    put(mk(OP_LOAD, 5, DOT, 0, DOT, 55));
    chk(free == 4'd5, "three waiting");
    purge = 1; purge_off = 3'd2; @(posedge clk); #1 purge = 0;
    chk(free == 4'd7, "waves 3 and 5 purged, wave 2 kept");
    take_expect(2, 0, "wave 2 survives the purge");
    // the chain rule on an IF-THEN-ELSE wave: Load <.,0,?>, then Store <0,1,3>
    // on one path or Store <0,2,3> on the other, then Store <?,3,.>
    chk(chain_ready(1'b0, '0, '0, ann_t'(DOT), 8'd0), "Load <.,0,?> starts the wave");
    chk(!chain_ready(1'b0, '0, '0, 8'd0, 8'd1), "Store <0,1,3> cannot start the wave");
    chk(chain_ready(1'b1, 8'd0, ann_t'(Q), 8'd0, 8'd1), "Store <0,1,3> follows Load <.,0,?>");
    chk(chain_ready(1'b1, 8'd0, ann_t'(Q), 8'd0, 8'd2), "Store <0,2,3> follows Load <.,0,?>");
    chk(!chain_ready(1'b1, 8'd0, ann_t'(Q), ann_t'(Q), 8'd3), "Store <?,3,.> cannot follow the Load directly");
    chk(chain_ready(1'b1, 8'd1, 8'd3, ann_t'(Q), 8'd3), "Store <?,3,.> follows Store <0,1,3>");
    chk(chain_ready(1'b1, 8'd2, 8'd3, ann_t'(Q), 8'd3), "Store <?,3,.> follows Store <0,2,3>");
    chk(!chain_ready(1'b1, 8'd1, 8'd3, ann_t'(Q), 8'd2), "Store <0,2,3> cannot follow Store <0,1,3>");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
