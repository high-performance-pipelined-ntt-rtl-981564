// par_ntt: P-point fully parallel NTT on digit-serial data.
//
// The last log2(P) stages of the multipath transform. P digit streams arrive
// in lockstep (one per path, digit j of the words at the same position). Each
// of the log2(P) stages is a column of P/2 digit-serial butterflies, without
// buffers, pairing branch p with branch p + h (h = P/2, P/4, ..., 1): the sum
// goes to branch p and a - b + 2Q to branch p + h, and every branch has its
// own systolic Montgomery multiplier. On sum branches the multiplier's twiddle
// is the Montgomery one (R mod Q), so it only brings the sum back to [0, 2Q);
// on difference branches it is the decimation-in-frequency twiddle. Each
// multiplier holds a single twiddle (a one-entry twiddle buffer), loaded via
// tw_* with index stage*P + branch.
//
// Latency: log2(P) * (4K+1) cycles, one word per branch every K cycles.
//
// Follows the design: butterflies with the digit-serial adder and the
// CSA-based 2Q subtractor, a multiplier in every branch ("multiply by 1" on
// the sum branches). This implementation's own: one loadable twiddle per
// multiplier.
module par_ntt #(
  parameter int unsigned D   = ntt_pkg::NTT_D,
  parameter int unsigned K   = ntt_pkg::NTT_W / ntt_pkg::NTT_D,
  parameter int unsigned P   = ntt_pkg::NTT_W / ntt_pkg::NTT_D,
  parameter int unsigned LP  = $clog2(P),
  parameter int unsigned IW  = ntt_pkg::idx_width(K),
  parameter int unsigned TIW = ntt_pkg::idx_width(LP * P)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [K*D-1:0]      q,
  input  logic [D-1:0]        qinv,
  input  logic                tw_we,
  input  logic [TIW-1:0]      tw_idx,
  input  logic [K*D-1:0]      tw_wdata,
  input  logic                in_valid,
  input  logic                in_sop,
  input  logic [IW-1:0]       in_didx,
  input  logic [P-1:0][D-1:0] in_digit,
  output logic                out_valid,
  output logic                out_sop,
  output logic [IW-1:0]       out_didx,
  output logic [P-1:0][D-1:0] out_digit
);

  logic                v   [LP+1];
  logic                sop [LP+1];
  logic [IW-1:0]       di  [LP+1];
  logic [P-1:0][D-1:0] dg  [LP+1];

  logic [K*D-1:0] q2;
  assign q2 = q << 1;

  assign v[0]   = in_valid;
  assign sop[0] = in_sop;
  assign di[0]  = in_didx;
  assign dg[0]  = in_digit;

  for (genvar s = 0; s < LP; s++) begin : g_stage
    localparam int unsigned H = P >> (s + 1);

    logic [P-1:0][D-1:0] bf_out;
    logic [P-1:0]        mv;
    logic [P-1:0]        msop;
    logic [IW-1:0]       mdi [P];
    logic [D-1:0]        q2d;

    assign q2d = q2[di[s]*D +: D];

    for (genvar p = 0; p < P; p++) begin : g_branch
      if ((p % (2 * H)) < H) begin : g_bfu
        ds_bfu #(.D(D)) u_bfu (
          .clk   (clk),
          .rst_n (rst_n),
          .en    (v[s]),
          .first (di[s] == '0),
          .a     (dg[s][p]),
          .b     (dg[s][p+H]),
          .q2    (q2d),
          .sum   (bf_out[p]),
          .diff  (bf_out[p+H])
        );
      end

      sys_mont_mult #(.D(D), .K(K), .DEPTH(1), .TAGW(1), .IW(IW), .AW(1)) u_mul (
        .clk       (clk),
        .rst_n     (rst_n),
        .q         (q),
        .qinv      (qinv),
        .tw_we     (tw_we && (32'(tw_idx) == s * P + p)),
        .tw_waddr  (1'b0),
        .tw_wdata  (tw_wdata),
        .in_valid  (v[s]),
        .in_didx   (di[s]),
        .in_x      (bf_out[p]),
        .in_twaddr (1'b0),
        .in_tag    (sop[s]),
        .out_valid (mv[p]),
        .out_didx  (mdi[p]),
        .out_s     (dg[s+1][p]),
        .out_tag   (msop[p])
      );
    end

    // all branches run in lockstep; branch 0 carries the stream flags
    assign v[s+1]   = mv[0];
    assign sop[s+1] = msop[0];
    assign di[s+1]  = mdi[0];
  end

  assign out_valid = v[LP];
  assign out_sop   = sop[LP];
  assign out_didx  = di[LP];
  assign out_digit = dg[LP];

endmodule
