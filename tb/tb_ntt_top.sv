// tb_ntt_top: end-to-end test of the multipath NTT at a reduced size.
//
// N = 32 points, 16-bit words in 4-bit digits, so 4 paths of 8-point
// pipelines (3 stages) and a 4-point parallel NTT; Q = 7681. Four
// polynomials; see ntt_top_tb_body.svh for what is checked and counted.
module tb_ntt_top;
  localparam int unsigned N = 32, W = 16, D = 4;
  localparam int unsigned NPOLY = 4;
  localparam logic [511:0] QV = 512'd7681;

  task automatic end_of_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  `include "ntt_top_tb_body.svh"

  ntt_top #(.N(N), .W(W), .D(D)) dut (.*);
endmodule
