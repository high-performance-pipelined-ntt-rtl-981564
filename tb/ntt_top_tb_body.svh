// Shared body of the end-to-end testbenches of ntt_top.
//
// The including module defines N, W, D (the sizes of the instance), NPOLY
// (number of polynomials) and QV (the prime modulus, odd, below 2^W/8, with
// N dividing QV-1), includes this file and then instantiates ntt_top as `dut`
// with the port connections (.*). It also defines the task end_of_run(),
// called once when the last output word has been checked (or the watchdog
// expires): a stand-alone testbench reports and finishes there, a testbench
// with several instances records that this one is done.
//
// What it does: finds a primitive N-th root of unity w, loads all twiddles in
// Montgomery form (path p, stage s, pair k: w^((p + P*k) * 2^s); parallel NTT
// stage t, branch b: the Montgomery one on sum branches, w^((b mod h) * 2^(L+t))
// on difference branches), then streams NPOLY random polynomials in [0, 2Q):
// the first two back to back, then a gap, then the rest back to back. Element
// a_i goes to path i mod P at word i / P. Every output word must equal the
// direct NTT of the polynomial at index bitrev_N(p + P*m), exactly (the final
// correction makes it canonical, [0, Q)). Latency and the continuity of the
// output stream are checked, and the mechanisms are counted: both stage
// states, 2Q-corrected subtractions, the final subtraction taken and skipped,
// back-to-back and gapped polynomials. One that never occurs is a failure.

  import ntt_tb_pkg::*;

  localparam int unsigned K   = W / D;
  localparam int unsigned P   = W / D;
  localparam int unsigned M   = N / P;
  localparam int unsigned L   = $clog2(M);
  localparam int unsigned LP  = $clog2(P);
  localparam int unsigned LN  = $clog2(N);
  localparam int unsigned IW  = ntt_pkg::idx_width(K);
  localparam int unsigned PW  = ntt_pkg::idx_width(P + 1);
  localparam int unsigned SW  = ntt_pkg::idx_width((L > LP) ? L : LP);
  localparam int unsigned TAW = ntt_pkg::idx_width((M / 2 + 1 > P) ? M / 2 + 1 : P);
  localparam int unsigned LAT = (M - 1) * K + (L + LP) * (4 * K + 1) + K;
  localparam int unsigned GAP = (M / 2) * K + 7;
  localparam int unsigned WATCHDOG = 4 * (NPOLY * M * K + LAT + GAP) + 2 * N + 1000;

  logic                clk = 0, rst_n = 0;
  logic [W-1:0]        q, tw_wdata;
  logic [D-1:0]        qinv;
  logic                tw_we;
  logic [PW-1:0]       tw_path;
  logic [SW-1:0]       tw_stage;
  logic [TAW-1:0]      tw_addr;
  logic                in_valid, in_sop, out_valid, out_sop;
  logic [P-1:0][D-1:0] in_digit, out_digit;
  logic [IW-1:0]       out_didx;

  int checks = 0, failures = 0;
  bit run_done = 0;
  int n_move = 0, n_compute = 0, n_neg = 0, n_b2b = 0, n_gap = 0;
  int n_fix_taken [P];
  int n_fix_kept  [P];

  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    if (!run_done) begin
      failures++;
      $display("%m: watchdog expired");
      end_of_run();
    end
  end

  // states of the first stage of path 0, per valid word
  always @(negedge clk)
    if (dut.g_path[0].u_path.g_stage[0].u_stage.bv && dut.g_path[0].u_path.g_stage[0].u_stage.first) begin
      if (dut.g_path[0].u_path.g_stage[0].u_stage.phase == ntt_pkg::PH_COMPUTE) n_compute++;
      else n_move++;
    end

  // final subtraction of each branch, observed as each word leaves
  for (genvar b = 0; b < P; b++) begin : g_mon
    initial begin n_fix_taken[b] = 0; n_fix_kept[b] = 0; end
    always @(negedge clk)
      if (dut.g_fix[b].u_fix.out_valid && dut.g_fix[b].u_fix.out_didx == '0) begin
        if (dut.g_fix[b].u_fix.sel_q) n_fix_kept[b]++;
        else n_fix_taken[b]++;
      end
  end

  big_t xin  [NPOLY][];
  big_t xref [NPOLY][];
  int first_in [NPOLY];

  // output checker
  initial begin
    logic [P-1:0][W-1:0] acc;
    int m = 0, pidx = -1, last_valid_cyc = 0;
    int taken = 0, kept = 0;
    forever begin
      @(negedge clk);
      if (out_valid) begin
        for (int b = 0; b < P; b++) acc[b][out_didx*D +: D] = out_digit[b];
        if (out_didx == '0 && out_sop) begin
          pidx++; m = 0;
          checks++;
          if (cyc != first_in[pidx] + LAT) begin
            failures++;
            $display("%m: poly %0d: first output after %0d cycles, expected %0d", pidx, cyc - first_in[pidx], LAT);
          end
        end else if (pidx < 0) begin
          checks++; failures++; $display("%m: output flagged valid before the first polynomial");
        end else begin
          checks++;
          if (cyc != last_valid_cyc + 1) begin
            failures++; $display("%m: poly %0d: output stream not continuous at word %0d", pidx, m);
          end
        end
        last_valid_cyc = cyc;
        if (32'(out_didx) == K - 1) begin
          for (int b = 0; b < P; b++) begin
            automatic int unsigned idx = bitrev(b + P * m, LN);
            checks++;
            if (big_t'(acc[b]) !== xref[pidx][idx]) begin
              failures++;
              if (failures < 20)
                $display("%m: poly %0d word %0d branch %0d (A[%0d]): got %h expected %h",
                         pidx, m, b, idx, acc[b], W'(xref[pidx][idx]));
            end
          end
          m++;
          if (pidx == NPOLY - 1 && m == M) begin
            for (int b = 0; b < P; b++) begin
              taken += n_fix_taken[b]; kept += n_fix_kept[b];
              checks++;
              if (n_fix_taken[b] + n_fix_kept[b] != NPOLY * M) begin
                failures++; $display("%m: branch %0d passed %0d words", b, n_fix_taken[b] + n_fix_kept[b]);
              end
            end
            $display("%m: stage states: move=%0d compute=%0d words; 2Q-corrected subtractions (stage 1): %0d",
                     n_move, n_compute, n_neg);
            $display("%m: final subtraction: taken=%0d skipped=%0d; polynomials back-to-back=%0d after gap=%0d",
                     taken, kept, n_b2b, n_gap);
            checks++;
            if (n_move == 0 || n_compute == 0 || n_neg == 0 || taken == 0 || kept == 0 ||
                n_b2b == 0 || n_gap == 0) begin
              failures++; $display("%m: a mechanism was never exercised");
            end
            run_done = 1;
            end_of_run();
          end
        end
      end
    end
  end

  // stimulus
  initial begin
    big_t w, one, qq;
    qq = QV;
    q = W'(qq);
    qinv = D'(neg_qinv(qq, D));
    w = find_root(qq, N);
    one = to_mont(1, qq, W);
    tw_we = 0; tw_path = 0; tw_stage = 0; tw_addr = 0; tw_wdata = 0;
    in_valid = 0; in_sop = 0; in_digit = '0;

    for (int n = 0; n < NPOLY; n++) begin
      xin[n] = new[N];
      for (int i = 0; i < N; i++) begin
        big_t r = 0;
        for (int c = 0; c < (W + 31) / 32; c++) r = (r << 32) | big_t'($urandom);
        xin[n][i] = r % (2 * qq);
      end
      ntt_direct(xin[n], w, qq, xref[n]);
      for (int i = 0; i < N / 2; i++) if (xin[n][i] < xin[n][i + N/2]) n_neg++;
    end

    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // twiddles of the paths
    for (int p = 0; p < P; p++)
      for (int s = 0; s < L; s++) begin
        automatic int unsigned bw = M >> (s + 1);
        for (int k = 0; k <= bw; k++) begin
          tw_we = 1; tw_path = PW'(p); tw_stage = SW'(s); tw_addr = TAW'(k);
          tw_wdata = W'((k == bw) ? one
                        : to_mont(powmod(w, big_t'((p + P * k) << s), qq), qq, W));
          @(negedge clk);
        end
      end
    // twiddles of the parallel NTT
    for (int t = 0; t < LP; t++) begin
      automatic int unsigned h = P >> (t + 1);
      for (int b = 0; b < P; b++) begin
        tw_we = 1; tw_path = PW'(P); tw_stage = SW'(t); tw_addr = TAW'(b);
        tw_wdata = W'(((b % (2 * h)) < h) ? one
                      : to_mont(powmod(w, big_t'((b % h) << (L + t)), qq), qq, W));
        @(negedge clk);
      end
    end
    tw_we = 0;
    repeat (3) @(negedge clk);

    for (int n = 0; n < NPOLY; n++) begin
      if (n == 2) begin
        in_valid = 0; in_sop = 0;
        repeat (GAP) @(negedge clk);
        n_gap++;
      end else if (n > 0) n_b2b++;
      for (int m = 0; m < M; m++)
        for (int j = 0; j < K; j++) begin
          if (m == 0 && j == 0) first_in[n] = cyc;
          in_valid = 1; in_sop = (m == 0 && j == 0);
          for (int p = 0; p < P; p++) in_digit[p] = D'(xin[n][p + P * m] >> (j * D));
          @(negedge clk);
        end
    end
    in_valid = 0; in_sop = 0;
  end
