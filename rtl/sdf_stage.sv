// sdf_stage: one digit-serial stage of a single-path delay-feedback NTT.
//
// A stage pairs elements that are B words apart (B = M/2^s in stage s of an
// M-point pipeline). Its buffer delays the digit stream by exactly B words
// (B*K digits). A counter, restarted by the start-of-polynomial flag, splits
// time into alternating windows of B words:
//   MOVE    : the incoming word is written to the buffer; the word leaving the
//             buffer (a difference stored in the previous COMPUTE window) goes
//             on to the multiplier with twiddle w^k of its pair.
//   COMPUTE : the butterfly takes the buffered word a_i and the incoming word
//             a_j; a_i + a_j goes on to the multiplier (twiddle = Montgomery
//             one, i.e. R mod Q, which only reduces it back to [0, 2Q)) and
//             a_i - a_j + 2Q goes into the buffer.
// So the butterfly is the decimation-in-frequency one of the NTT; every value
// leaving the stage has passed one Montgomery multiplication and is in
// [0, 2Q), and the output stream is in the same (in-place) element order as
// the input, B words plus the multiplier latency later.
//
// Twiddle buffer of the multiplier: entry k (0 <= k < B) is the factor of the
// k-th pair of a window; entry B is the Montgomery one. They are loaded
// through the tw_* port.
//
// Interface: one d-bit digit per cycle, least significant first; a polynomial
// is sent as M words in M*K consecutive cycles with `in_sop` on its first
// digit. Polynomials may follow back to back or after a gap. Output digit j of
// the word at position m leaves B*K + 4K + 1 cycles after input digit j of the
// word at position m.
//
// Follows the design: buffer size, BFU with two multiplexers, move/compute
// alternation, multiplier after the BFU. This implementation's own: the
// counter-based control, the tags carried with the data, Montgomery one as a
// buffer entry.
module sdf_stage #(
  parameter int unsigned D  = ntt_pkg::NTT_D,
  parameter int unsigned K  = ntt_pkg::NTT_W / ntt_pkg::NTT_D,
  parameter int unsigned B  = 64,                         // pair distance in words
  parameter int unsigned IW = ntt_pkg::idx_width(K),
  parameter int unsigned AW = ntt_pkg::idx_width(B + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [K*D-1:0] q,
  input  logic [D-1:0]   qinv,
  input  logic           tw_we,
  input  logic [AW-1:0]  tw_waddr,
  input  logic [K*D-1:0] tw_wdata,
  input  logic           in_valid,
  input  logic           in_sop,
  input  logic [D-1:0]   in_digit,
  output logic           out_valid,
  output logic           out_sop,
  output logic [IW-1:0]  out_didx,
  output logic [D-1:0]   out_digit
);

  import ntt_pkg::*;

  localparam int unsigned BK = B * K;
  localparam int unsigned CW = idx_width(2 * BK);

  logic [CW-1:0] cnt_q, cnt_now;
  stage_phase_e  phase;
  logic [IW-1:0] didx;
  logic [AW-1:0] pair;
  logic          first;

  logic [K*D-1:0] q2;
  logic [D-1:0]   q2_digit;

  logic [D+1:0]  buf_in, buf_out;
  logic          buf_primed;
  logic          bv, bsop;
  logic [D-1:0]  bdata;

  logic [D-1:0]  sum, diff, mul_x;
  logic [AW-1:0] mul_ta;

  // ---------------- control ----------------
  assign cnt_now = (in_valid && in_sop) ? '0 : cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          cnt_q <= '0;
    else if (32'(cnt_now) == 2 * BK - 1) cnt_q <= '0;
    else                                 cnt_q <= cnt_now + 1'b1;
  end

  always_comb begin
    phase = (32'(cnt_now) >= BK) ? PH_COMPUTE : PH_MOVE;
    didx  = IW'(32'(cnt_now) % K);
    pair  = AW'((32'(cnt_now) % BK) / K);
    first = (didx == '0);
  end

  // ---------------- buffer ----------------
  assign buf_in = {in_valid, in_sop, (phase == PH_COMPUTE) ? diff : in_digit};

  delay_buffer #(.WIDTH(D + 2), .DEPTH(BK)) u_buf (
    .clk    (clk),
    .rst_n  (rst_n),
    .din    (buf_in),
    .dout   (buf_out),
    .primed (buf_primed)
  );

  assign bv    = buf_out[D+1] && buf_primed;
  assign bsop  = buf_out[D];
  assign bdata = buf_out[D-1:0];

  // ---------------- butterfly ----------------
  assign q2       = q << 1;
  assign q2_digit = q2[didx*D +: D];

  ds_bfu #(.D(D)) u_bfu (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (1'b1),
    .first (first),
    .a     (bdata),
    .b     (in_digit),
    .q2    (q2_digit),
    .sum   (sum),
    .diff  (diff)
  );

  assign mul_x  = (phase == PH_COMPUTE) ? sum : bdata;
  assign mul_ta = (phase == PH_COMPUTE) ? AW'(B) : pair;

  // ---------------- multiplier ----------------
  sys_mont_mult #(.D(D), .K(K), .DEPTH(B + 1), .TAGW(1), .IW(IW), .AW(AW)) u_mul (
    .clk       (clk),
    .rst_n     (rst_n),
    .q         (q),
    .qinv      (qinv),
    .tw_we     (tw_we),
    .tw_waddr  (tw_waddr),
    .tw_wdata  (tw_wdata),
    .in_valid  (bv),
    .in_didx   (didx),
    .in_x      (mul_x),
    .in_twaddr (mul_ta),
    .in_tag    (bsop),
    .out_valid (out_valid),
    .out_didx  (out_didx),
    .out_s     (out_digit),
    .out_tag   (out_sop)
  );

endmodule
