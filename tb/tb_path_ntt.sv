// tb_path_ntt: checks one pipelined path as a stand-alone M-point NTT.
//
// 16-bit words as 4 digits of 4 bits, Q = 7681, M = 16 points (4 stages with
// buffers of 8, 4, 2, 1 words). With the twiddles of a plain 16-point
// decimation-in-frequency transform loaded (stage s, pair k: w^(k*2^s) in
// Montgomery form, plus the Montgomery one), output position m must be
// congruent mod Q to NTT(x)[bitrev(m)] and lie in [0, 2Q). Inputs are in
// Montgomery form; by linearity the NTT of the Montgomery images is the
// Montgomery image of the NTT, so the reference works on the raw values.
// Three polynomials are sent back to back; the first output digit must leave
// (M-1)*K + log2(M)*(4K+1) = 128 cycles after the first input digit.
module tb_path_ntt;
  import ntt_tb_pkg::*;
  localparam int unsigned D = 4, K = 4, W = 16, M = 16, L = 4, NP = 3;
  localparam int unsigned LAT = (M - 1) * K + L * (4 * K + 1);

  logic clk = 0, rst_n = 0;
  logic [W-1:0] q, tw_wdata;
  logic [D-1:0] qinv, in_digit, out_digit;
  logic tw_we, in_valid, in_sop, out_valid, out_sop;
  logic [1:0] tw_stage, out_didx;
  logic [3:0] tw_waddr;
  int checks = 0, failures = 0;

  path_ntt #(.D(D), .K(K), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  big_t xin [NP][];
  big_t xref [NP][];
  int first_in [NP];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    logic [W-1:0] acc;
    int n = 0, pidx = -1;
    forever begin
      @(negedge clk);
      if (out_valid) begin
        acc[out_didx*D +: D] = out_digit;
        if (out_didx == 0 && out_sop) begin
          pidx++; n = 0;
          checks++;
          if (cyc != first_in[pidx] + LAT) begin
            failures++; $display("poly %0d latency %0d", pidx, cyc - first_in[pidx]);
          end
        end
        if (out_didx == 3) begin
          checks++;
          if (acc >= 2 * q || big_t'(acc) % q != xref[pidx][bitrev(n, L)]) begin
            failures++; $display("poly %0d pos %0d got %h exp %h (mod Q)", pidx, n, acc, xref[pidx][bitrev(n, L)]);
          end
          n++;
          if (pidx == NP - 1 && n == M) begin
            $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
            $finish;
          end
        end
      end
    end
  end

  initial begin
    big_t w, one;
    q = 16'd7681;
    qinv = D'(neg_qinv(big_t'(q), D));
    w = find_root(big_t'(q), M);
    one = to_mont(1, big_t'(q), W);
    tw_we = 0; tw_stage = 0; tw_waddr = 0; tw_wdata = 0;
    in_valid = 0; in_sop = 0; in_digit = 0;
    for (int p = 0; p < NP; p++) begin
      xin[p] = new[M];
      for (int m = 0; m < M; m++) xin[p][m] = big_t'($urandom % (2 * q));
      ntt_direct(xin[p], w, big_t'(q), xref[p]);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < L; s++) begin
      automatic int unsigned bw = M >> (s + 1);
      for (int k = 0; k <= bw; k++) begin
        @(negedge clk);
        tw_we = 1; tw_stage = 2'(s); tw_waddr = 4'(k);
        tw_wdata = W'((k == bw) ? one : to_mont(powmod(w, big_t'(k << s), big_t'(q)), big_t'(q), W));
      end
    end
    @(negedge clk);
    tw_we = 0;
    for (int p = 0; p < NP; p++)
      for (int m = 0; m < M; m++)
        for (int j = 0; j < K; j++) begin
          if (m == 0 && j == 0) first_in[p] = cyc;
          in_valid = 1; in_sop = (m == 0 && j == 0); in_digit = D'(xin[p][m] >> (j * D));
          @(negedge clk);
        end
    in_valid = 0; in_sop = 0;
  end
endmodule
