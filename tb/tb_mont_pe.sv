// tb_mont_pe: checks one Montgomery PE against the word-level step
// S_out = (S_in + x*y + m*Q) / 2^d, m = ((S_in + x*y) mod 2^d)(-Q^-1) mod 2^d.
//
// 32-bit words as 4 digits of 8 bits, Q = 268435649. Words are streamed with
// random idle gaps (including none, so that the top digit of one word leaves
// while digit 0 of the next enters). Output digit j of a word must appear
// exactly 4 cycles after input digit j: the checker reads it at that cycle.
module tb_mont_pe;
  import ntt_tb_pkg::*;

  localparam int unsigned D = 8;
  localparam int unsigned K = 4;
  localparam int unsigned W = D * K;
  localparam int unsigned NW = 300;     // words
  localparam int unsigned NC = NW * (K + 2) + 20;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] q;
  logic [D-1:0] qinv;
  logic in_valid;
  logic [1:0] in_didx;
  logic [D-1:0] x, s, y, s_out;

  int checks = 0, failures = 0;

  mont_pe #(.D(D), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // schedule: per cycle the input digit set, and the word/digit it belongs to
  logic         sv_v   [NC];
  int           sv_w   [NC];
  int           sv_j   [NC];
  logic [D-1:0] out_at [NC];
  logic [W-1:0] wx [NW], ws [NW], wexp [NW], wgot [NW];
  logic [D-1:0] wy [NW];

  initial begin
    big_t t, m, qi, mask;
    int c;
    q = 32'd268435649;
    qi = neg_qinv(big_t'(q), D);
    qinv = D'(qi);
    mask = (big_t'(1) << D) - 1;
    for (int i = 0; i < NC; i++) begin sv_v[i] = 0; sv_w[i] = 0; sv_j[i] = 0; end
    c = 2;
    for (int n = 0; n < NW; n++) begin
      wx[n] = W'($urandom % (4 * q));
      ws[n] = W'($urandom % (wx[n] + q));
      wy[n] = D'($urandom);
      if (n % 9 == 0) begin wx[n] = 4 * q - 1; ws[n] = wx[n] + q - 1; wy[n] = '1; end
      t = big_t'(ws[n]) + big_t'(wx[n]) * big_t'(wy[n]);
      m = ((t & mask) * qi) & mask;
      wexp[n] = W'((t + m * big_t'(q)) >> D);
      for (int j = 0; j < K; j++) begin
        sv_v[c] = 1; sv_w[c] = n; sv_j[c] = j; c++;
      end
      c += $urandom % 3;
    end

    in_valid = 0; in_didx = 0; x = 0; s = 0; y = 0;
    for (int cyc = 0; cyc < NC; cyc++) begin
      @(negedge clk);
      if (cyc > 0) out_at[cyc-1] = s_out;
      if (cyc == 1) rst_n = 1;
      in_valid = sv_v[cyc];
      in_didx  = 2'(sv_j[cyc]);
      x = sv_v[cyc] ? wx[sv_w[cyc]][sv_j[cyc]*D +: D] : D'($urandom);
      s = sv_v[cyc] ? ws[sv_w[cyc]][sv_j[cyc]*D +: D] : D'($urandom);
      y = sv_v[cyc] ? wy[sv_w[cyc]] : D'($urandom);
    end

    // digit presented in cycle c is captured at the following edge; its
    // result is visible 4 cycles later
    for (int cyc = 0; cyc + 4 < NC; cyc++)
      if (sv_v[cyc]) wgot[sv_w[cyc]][sv_j[cyc]*D +: D] = out_at[cyc + 3];

    for (int n = 0; n < NW; n++) begin
      checks++;
      if (wgot[n] !== wexp[n]) begin
        failures++;
        if (failures < 10) $display("word %0d: x=%h s=%h y=%h got %h exp %h", n, wx[n], ws[n], wy[n], wgot[n], wexp[n]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
