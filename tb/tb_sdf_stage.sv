// tb_sdf_stage: checks one digit-serial delay-feedback stage.
//
// 16-bit words as 4 digits of 4 bits, Q = 7681 (< 2^16/8), pair distance
// B = 4 words, polynomials of 16 words (two move/compute windows each).
// Random inputs in [0, 2Q) are streamed: polynomials back to back, then after
// a gap. For each pair (a_i, a_j) = (x[m], x[m+B]) the stage must output, at
// position m, MontMul(a_i + a_j, R mod Q) and, at position m+B,
// MontMul(a_i - a_j + 2Q, w_k) with the k-th loaded twiddle, exactly as the
// word-level Montgomery model gives, and each word must leave
// B*K + 4K + 1 = 33 cycles after it entered. Both states of the stage and the
// 2Q correction (a_i < a_j) are counted and must occur.
module tb_sdf_stage;
  import ntt_tb_pkg::*;
  localparam int unsigned D = 4, K = 4, W = 16, B = 4, PM = 16, NP = 5;
  localparam int unsigned LAT = B * K + 4 * K + 1;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] q, tw_wdata;
  logic [D-1:0] qinv, in_digit, out_digit;
  logic tw_we, in_valid, in_sop, out_valid, out_sop;
  logic [2:0] tw_waddr;
  logic [1:0] out_didx;
  int checks = 0, failures = 0, n_move = 0, n_compute = 0, n_neg = 0;

  sdf_stage #(.D(D), .K(K), .B(B)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] tw [B+1];
  logic [W-1:0] xin  [NP][PM];
  logic [W-1:0] xexp [NP][PM];
  int start_cyc [NP][PM];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // count the two states while valid data pass
  always @(negedge clk) if (dut.bv && dut.first) begin
    if (dut.phase == ntt_pkg::PH_COMPUTE) n_compute++; else n_move++;
  end

  initial begin
    logic [W-1:0] acc;
    int n = 0, pidx = -1;
    forever begin
      @(negedge clk);
      if (out_valid) begin
        acc[out_didx*D +: D] = out_digit;
        if (out_didx == 0) begin
          if (out_sop) begin pidx++; n = 0; end
          checks++;
          if (pidx < 0 || cyc != start_cyc[pidx][n] + LAT) begin
            failures++; $display("poly %0d word %0d bad timing", pidx, n);
          end
        end
        if (out_didx == 3) begin
          checks++;
          if (acc !== xexp[pidx][n]) begin
            failures++; $display("poly %0d pos %0d got %h exp %h", pidx, n, acc, xexp[pidx][n]);
          end
          n++;
          if (pidx == NP - 1 && n == PM) begin
            checks++;
            if (n_move == 0 || n_compute == 0 || n_neg == 0) begin
              failures++; $display("mechanism not exercised");
            end
            $display("move words=%0d compute words=%0d 2Q-corrections=%0d", n_move, n_compute, n_neg);
            $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
            $finish;
          end
        end
      end
    end
  end

  initial begin
    big_t a, b;
    q = 16'd7681;
    qinv = D'(neg_qinv(big_t'(q), D));
    tw_we = 0; tw_waddr = 0; tw_wdata = 0;
    in_valid = 0; in_sop = 0; in_digit = 0;
    for (int k = 0; k < B; k++) tw[k] = W'($urandom % (2 * q));
    tw[B] = W'(to_mont(1, big_t'(q), W));
    for (int p = 0; p < NP; p++) begin
      for (int m = 0; m < PM; m++) xin[p][m] = W'($urandom % (2 * q));
      for (int g = 0; g < PM; g += 2 * B)
        for (int k = 0; k < B; k++) begin
          a = big_t'(xin[p][g+k]); b = big_t'(xin[p][g+k+B]);
          if (a < b) n_neg++;
          xexp[p][g+k]   = W'(mont_mul(a + b, big_t'(tw[B]), big_t'(q), D, K));
          xexp[p][g+k+B] = W'(mont_mul(a - b + 2 * big_t'(q), big_t'(tw[k]), big_t'(q), D, K));
        end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i <= B; i++) begin
      @(negedge clk);
      tw_we = 1; tw_waddr = 3'(i); tw_wdata = tw[i];
    end
    @(negedge clk);
    tw_we = 0;
    repeat (7) @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      for (int m = 0; m < PM; m++)
        for (int j = 0; j < K; j++) begin
          if (j == 0) start_cyc[p][m] = cyc;
          in_valid = 1; in_sop = (m == 0 && j == 0); in_digit = xin[p][m][j*D +: D];
          @(negedge clk);
        end
      in_valid = 0; in_sop = 0; in_digit = $urandom;
      if (p == 2) repeat (23) @(negedge clk);   // a gap between polynomials
    end
  end
endmodule
