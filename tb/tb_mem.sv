// tb_mem -- behavioural data memory for the StoreBuffer testbenches.
//
// Stands in for the L1 data cache behind a StoreBuffer. Accepts one request at a
// time on a valid/ready port (ready is low while a read is in flight and, when
// RAND_READY is set, randomly); a read returns its word LAT cycles after it was
// accepted, a write takes effect at the accepting edge. WORDS words, word
// addressed, initialised to INIT_BASE + address.
module tb_mem
  import twc_pkg::*;
#(
  parameter int WORDS      = 1024,
  parameter int LAT        = 3,
  parameter bit RAND_READY = 1'b0,
  parameter int INIT_BASE  = 1000
) (
  input  logic  clk,
  input  logic  req_valid,
  output logic  req_ready,
  input  logic  we,
  input  addr_t addr,
  input  data_t wdata,
  output logic  rsp_valid,
  output data_t rdata
);
  data_t mem [WORDS];
  int    cnt;
  logic  busy, rnd;
  data_t pend;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = data_t'(INIT_BASE + i);
    busy = 1'b0; cnt = 0; rsp_valid = 1'b0; rdata = '0; rnd = 1'b1; pend = '0;
  end

  assign req_ready = !busy && rnd;

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    rnd <= RAND_READY ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (busy) begin
      cnt <= cnt - 1;
      if (cnt == 1) begin
        busy      <= 1'b0;
        rsp_valid <= 1'b1;
        rdata     <= pend;
      end
    end else if (req_valid && req_ready) begin
      if (we) mem[addr % WORDS] <= wdata;
      else begin
        pend <= mem[addr % WORDS];
        busy <= 1'b1;
        cnt  <= LAT;
      end
    end
  end
endmodule
