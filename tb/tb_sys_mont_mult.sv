// tb_sys_mont_mult: checks the systolic digit-serial Montgomery multiplier.
//
// 32-bit words as 4 digits of 8 bits (4 PEs), Q = 268435649 < 2^32/8. Four
// twiddles w < 2Q are loaded (one of them the Montgomery one, R mod Q), then
// multiplicands x in [0, 4Q) stream in, back to back or with gaps, each with
// a twiddle address and a tag. For every word the output must
//   - equal the word-level radix-2^d Montgomery product exactly,
//   - be below 2Q and congruent to x*w*2^-32 mod Q (the paper's range claim),
//   - leave 4K+1 = 17 cycles after it entered, with its tag.
module tb_sys_mont_mult;
  import ntt_tb_pkg::*;
  localparam int unsigned D = 8, K = 4, W = 32, DEPTH = 4, NW = 300;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] q, tw_wdata;
  logic [D-1:0] qinv, in_x, out_s;
  logic tw_we, in_valid, out_valid;
  logic [1:0] tw_waddr, in_twaddr, in_didx, out_didx;
  logic [2:0] in_tag, out_tag;
  int checks = 0, failures = 0;

  sys_mont_mult #(.D(D), .K(K), .DEPTH(DEPTH), .TAGW(3)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] tw [DEPTH];
  logic [W-1:0] wx [NW];
  int wa [NW];
  int start_cyc [NW];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    logic [W-1:0] acc;
    big_t e, rinv;
    int n = 0;
    rinv = powmod(big_t'(2) ** 32 % big_t'(268435649), big_t'(268435649 - 2), big_t'(268435649));
    forever begin
      @(negedge clk);
      if (out_valid) begin
        acc[out_didx*D +: D] = out_s;
        if (out_didx == 0) begin
          checks++;
          if (cyc != start_cyc[n] + 4 * K + 1) begin
            failures++; $display("word %0d latency %0d", n, cyc - start_cyc[n]);
          end
          checks++;
          if (out_tag !== 3'(n)) begin failures++; $display("tag wrong word %0d", n); end
        end
        if (out_didx == 3) begin
          e = mont_mul(big_t'(wx[n]), big_t'(tw[wa[n]]), big_t'(q), D, K);
          checks++;
          if (big_t'(acc) !== e) begin
            failures++; $display("word %0d x=%h w=%h got %h exp %h", n, wx[n], tw[wa[n]], acc, e);
          end
          checks++;
          if (acc >= 2 * q || big_t'(acc) % q != mulmod(mulmod(big_t'(wx[n]), big_t'(tw[wa[n]]), big_t'(q)), rinv, big_t'(q))) begin
            failures++; $display("word %0d out of range or wrong residue", n);
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
    q = 32'd268435649;
    qinv = D'(neg_qinv(big_t'(q), D));
    tw_we = 0; tw_waddr = 0; tw_wdata = 0;
    in_valid = 0; in_didx = 0; in_x = 0; in_twaddr = 0; in_tag = 0;
    tw[0] = W'(to_mont(1, big_t'(q), W));
    tw[1] = W'($urandom % q);
    tw[2] = 2 * q - 1;
    tw[3] = W'($urandom % (2 * q));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      tw_we = 1; tw_waddr = 2'(i); tw_wdata = tw[i];
    end
    @(negedge clk);
    tw_we = 0;
    for (int n = 0; n < NW; n++) begin
      wx[n] = W'($urandom % (4 * q));
      if (n % 11 == 1) wx[n] = 4 * q - 1;
      wa[n] = $urandom % DEPTH;
      for (int j = 0; j < K; j++) begin
        @(negedge clk);
        if (j == 0) start_cyc[n] = cyc;
        in_valid = 1; in_didx = 2'(j); in_x = wx[n][j*D +: D];
        in_twaddr = 2'(wa[n]); in_tag = 3'(n);
      end
      if ($urandom % 3 == 0) begin
        @(negedge clk);
        in_valid = 0; in_didx = 0; in_x = $urandom;
      end
    end
    @(negedge clk);
    in_valid = 0;
  end
endmodule
