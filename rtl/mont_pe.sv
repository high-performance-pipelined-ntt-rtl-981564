// mont_pe: one processing element of the systolic high-radix Montgomery
// multiplier.
//
// PE number i owns digit y = w_i of the twiddle factor w and computes, for a
// multiplicand x that streams past it one d-bit digit per cycle (least
// significant digit first), one step of radix-2^d Montgomery multiplication:
//
//     S_i = (S_{i-1} + x * w_i + m * Q) / 2^d,
//     m   = ((S_{i-1} + x * w_i) mod 2^d) * (-Q^-1) mod 2^d.
//
// S_{i-1} arrives from the previous PE as a digit stream aligned with x. The
// low digit of S_{i-1} + x*w_i + m*Q is zero by the choice of m, so the
// division by 2^d is done by not emitting it: the carry of digit j produces
// output digit j-1 and the carry left after the last digit becomes the top
// output digit, sent in the cycle that follows (while digit 0 of the next word
// is being absorbed). The output therefore keeps the uniform K-digit format.
//
// Pipeline (3 registers; with the one-digit shift the result digit j leaves 4
// cycles after input digit j, the 4-cycle PE latency of the design):
//   A: p = x*w_i + S_{i-1} digit                      (first multiply-add)
//   B: at digit 0, m = (p mod 2^d) * (-Q^-1) mod 2^d   (held for the word)
//   C: t = p + m*Q_j + carry; emit digit, keep carry  (second multiply-add)
// The split into these three registers is this implementation's own; the
// design gives the two multiply-add units, the (-Q^-1) product, the held m and
// the 4-cycle latency with single-cycle throughput.
//
// Interface: `in_valid` and `in_didx` (digit index 0..K-1) describe the digit
// presented on x/s; the digits of one word must come in K consecutive cycles.
// `y` must hold the PE's twiddle digit for the word being presented.
// `s_out` is meaningful 4 cycles after the digit it belongs to entered; the
// enclosing multiplier tracks that with its delay chain.
module mont_pe #(
  parameter int unsigned D  = ntt_pkg::NTT_D,
  parameter int unsigned K  = ntt_pkg::NTT_W / ntt_pkg::NTT_D,
  parameter int unsigned IW = ntt_pkg::idx_width(K)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [K*D-1:0] q,         // modulus Q
  input  logic [D-1:0]   qinv,      // -Q^-1 mod 2^d
  input  logic           in_valid,
  input  logic [IW-1:0]  in_didx,
  input  logic [D-1:0]   x,         // multiplicand digit
  input  logic [D-1:0]   s,         // digit of S_{i-1}
  input  logic [D-1:0]   y,         // this PE's twiddle digit w_i
  output logic [D-1:0]   s_out      // digit of S_i
);

  // stage A
  logic [2*D-1:0] pa_q;
  logic           va_q, fa_q;
  logic [IW-1:0]  ia_q;
  // stage B
  logic [2*D-1:0] pb_q;
  logic           vb_q, fb_q;
  logic [IW-1:0]  ib_q;
  logic [D-1:0]   m_q;
  // stage C
  logic [D+1:0]   carry_q;
  logic [D-1:0]   s_out_q;

  logic [2*D+1:0] t;
  logic [D-1:0]   qj;
  logic [2*D-1:0] mq;
  logic [2*D-1:0] m_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      va_q <= 1'b0;
      fa_q <= 1'b0;
      vb_q <= 1'b0;
      fb_q <= 1'b0;
    end else begin
      va_q <= in_valid;
      fa_q <= in_valid && (in_didx == '0);
      vb_q <= va_q;
      fb_q <= fa_q;
    end
  end

  always_ff @(posedge clk) begin
    pa_q <= (2*D)'(x) * (2*D)'(y) + (2*D)'(s);
    ia_q <= in_didx;
    pb_q <= pa_q;
    ib_q <= ia_q;
  end

  assign m_full = (2*D)'(pa_q[D-1:0]) * (2*D)'(qinv);

  always_ff @(posedge clk) begin
    if (va_q && fa_q) m_q <= m_full[D-1:0];
  end

  always_comb begin
    qj = q[ib_q*D +: D];
    mq = (2*D)'(m_q) * (2*D)'(qj);
    t  = (2*D+2)'(pb_q) + (2*D+2)'(mq) + (fb_q ? '0 : (2*D+2)'(carry_q));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      carry_q <= '0;
      s_out_q <= '0;
    end else begin
      // digit 0 (or an idle cycle) releases the top digit of the previous word
      s_out_q <= (fb_q || !vb_q) ? carry_q[D-1:0] : t[D-1:0];
      if (vb_q) carry_q <= (D+2)'(t >> D);
    end
  end

  assign s_out = s_out_q;

endmodule
