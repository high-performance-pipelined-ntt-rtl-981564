// tb_ntt_full: end-to-end test of ntt_top at its default size: a 1024-point
// NTT on 256-bit words in 32-bit digits, i.e. 8 paths of 128-point pipelines
// (7 stages) and an 8-point parallel NTT, instantiated without parameter
// overrides. Q is a 253-bit prime with 2^11 dividing Q-1, chosen near R/8.9
// (R = 2^256) so that the Montgomery one, R mod Q, is about 0.9*Q. The last
// parallel stage multiplies every branch by the Montgomery one, and its
// outputs only reach [Q, 2Q) - so that the final subtraction is taken - when
// R mod Q is a large fraction of Q. Three polynomials are streamed (two back
// to back, one after a gap); see ntt_top_tb_body.svh for what is checked and
// counted.
module tb_ntt_full;
  localparam int unsigned N = ntt_pkg::NTT_N, W = ntt_pkg::NTT_W, D = ntt_pkg::NTT_D;
  localparam int unsigned NPOLY = 3;
  localparam logic [511:0] QV = 512'h1cc398730e61cbfffffffffffffffffffffffffffffffffffffffffffffd6001;

  task automatic end_of_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  `include "ntt_top_tb_body.svh"

  ntt_top dut (.*);
endmodule
