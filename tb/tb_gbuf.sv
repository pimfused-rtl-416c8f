// tb_gbuf: random writes and two-port reads of the global
// buffer (default 32 KB) against an array model; checks the one-cycle read latency, that
// read data holds when no read is issued, and read-during-write returning
// the old word.
module tb_gbuf;
  import pimfused_pkg::*;
  import pimfused_ref_pkg::*;
  localparam int BYTES = 32768;
  localparam int DEPTH = BYTES * 8 / WORD_W;
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic rd_a = 0, rd_b = 0, wr = 0;
  logic [BUF_ADDR_W-1:0] addr_a = 0, addr_b = 0, waddr = 0;
  logic [LANES-1:0] wmask = 0;
  word_t wdata = '0, rdata_a, rdata_b;
  word_t model [DEPTH];
  word_t exp_a, exp_b;

  gbuf dut (.clk, .rst_n, .rd_a, .addr_a, .rdata_a, .rd_b, .addr_b, .rdata_b, .wr, .waddr, .wdata);
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise every word with full masks
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); wr = 1; waddr = i; wmask = '1; wdata = rand_word(30000); model[i] = wdata;
    end
    @(negedge clk); wr = 0;
    exp_a = rdata_a; exp_b = rdata_b;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      // check what the previous cycle's reads returned
      checks += 2;
      if (rdata_a != exp_a) begin failures++; $display("FAIL t=%0d port A", t); end
      if (rdata_b != exp_b) begin failures++; $display("FAIL t=%0d port B", t); end
      rd_a = $urandom_range(1, 0); rd_b = $urandom_range(1, 0); wr = $urandom_range(1, 0);
      addr_a = $urandom_range(DEPTH - 1, 0); addr_b = $urandom_range(DEPTH - 1, 0);
      waddr = $urandom_range(DEPTH - 1, 0); wmask = '1; wdata = rand_word(30000);
      if (rd_a) exp_a = model[addr_a];
      if (rd_b) exp_b = model[addr_b];
      if (wr) for (int i = 0; i < LANES; i++) if (wmask[i]) model[waddr][i] = wdata[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (cycles > 10000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
