// tb_ntt_fig6: end-to-end test of the small example configuration:
// a 32-point NTT on two paths with 16-bit digits (32-bit words), i.e. two
// 16-point pipelines of four stages each merged by a 2-point parallel NTT.
// Q = 268435649 (29 bits, below 2^32/8; 64 divides Q-1). Four polynomials;
// see ntt_top_tb_body.svh for what is checked and counted.
module tb_ntt_fig6;
  localparam int unsigned N = 32, W = 32, D = 16;
  localparam int unsigned NPOLY = 4;
  localparam logic [511:0] QV = 512'd268435649;

  task automatic end_of_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  `include "ntt_top_tb_body.svh"

  ntt_top #(.N(N), .W(W), .D(D)) dut (.*);
endmodule
