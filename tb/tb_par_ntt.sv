// tb_par_ntt: checks the 4-point parallel digit-serial NTT.
//
// 16-bit words as 4 digits of 4 bits, Q = 7681, P = 4 branches (2 stages of
// 2 butterflies, 8 multipliers). Sum branches are loaded with the Montgomery
// one, difference branches with the decimation-in-frequency twiddles of a
// 4-point transform. Random words in [0, 2Q) enter on all branches in
// lockstep; branch b must output a value in [0, 2Q) congruent mod Q to
// NTT(x)[bitrev(b)], 2*(4K+1) = 34 cycles after the word entered.
module tb_par_ntt;
  import ntt_tb_pkg::*;
  localparam int unsigned D = 4, K = 4, W = 16, P = 4, LP = 2, NW = 60;
  localparam int unsigned LAT = LP * (4 * K + 1);

  logic clk = 0, rst_n = 0;
  logic [W-1:0] q, tw_wdata;
  logic [D-1:0] qinv;
  logic tw_we, in_valid, in_sop, out_valid, out_sop;
  logic [2:0] tw_idx;
  logic [1:0] in_didx, out_didx;
  logic [P-1:0][D-1:0] in_digit, out_digit;
  int checks = 0, failures = 0;

  par_ntt #(.D(D), .K(K), .P(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  big_t xin [NW][];
  big_t xref [NW][];
  int start_cyc [NW];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    logic [P-1:0][W-1:0] acc;
    int n = 0;
    forever begin
      @(negedge clk);
      if (out_valid) begin
        for (int b = 0; b < P; b++) acc[b][out_didx*D +: D] = out_digit[b];
        if (out_didx == 0) begin
          checks++;
          if (cyc != start_cyc[n] + LAT) begin failures++; $display("word %0d latency", n); end
        end
        if (out_didx == 3) begin
          for (int b = 0; b < P; b++) begin
            checks++;
            if (acc[b] >= 2 * q || big_t'(acc[b]) % q != xref[n][bitrev(b, LP)]) begin
              failures++; $display("word %0d branch %0d got %h exp %h", n, b, acc[b], xref[n][bitrev(b, LP)]);
            end
          end
          n++;
          if (n == NW) begin
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
    w = find_root(big_t'(q), P);
    one = to_mont(1, big_t'(q), W);
    tw_we = 0; tw_idx = 0; tw_wdata = 0;
    in_valid = 0; in_sop = 0; in_didx = 0; in_digit = 0;
    for (int n = 0; n < NW; n++) begin
      xin[n] = new[P];
      for (int b = 0; b < P; b++) xin[n][b] = big_t'($urandom % (2 * q));
      ntt_direct(xin[n], w, big_t'(q), xref[n]);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < LP; s++) begin
      automatic int unsigned h = P >> (s + 1);
      for (int b = 0; b < P; b++) begin
        @(negedge clk);
        tw_we = 1; tw_idx = 3'(s * P + b);
        tw_wdata = W'(((b % (2 * h)) < h) ? one
                      : to_mont(powmod(w, big_t'((b % h) << s), big_t'(q)), big_t'(q), W));
      end
    end
    @(negedge clk);
    tw_we = 0;
    for (int n = 0; n < NW; n++) begin
      for (int j = 0; j < K; j++) begin
        if (j == 0) start_cyc[n] = cyc;
        in_valid = 1; in_sop = (n == 0 && j == 0); in_didx = 2'(j);
        for (int b = 0; b < P; b++) in_digit[b] = D'(xin[n][b] >> (j * D));
        @(negedge clk);
      end
      if (n % 4 == 3) begin
        in_valid = 0; in_sop = 0;
        @(negedge clk);
      end
    end
    in_valid = 0; in_sop = 0;
  end
endmodule
