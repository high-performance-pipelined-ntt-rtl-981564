// ntt_top: N-point multipath pipelined NTT with homogeneous digit-serial
// Montgomery arithmetic.
//
// Words of W bits are cut into K = W/d digits of d bits and every unit works on
// one digit per cycle. To keep the I/O bandwidth at a full word per cycle the
// transform is split over P = W/d paths: path p receives the polynomial
// elements a_p, a_{p+P}, a_{p+2P}, ... (one word every K cycles) and runs the
// first log2(N/P) decimation-in-frequency stages on them as an (N/P)-point
// single-path delay-feedback pipeline; the P path outputs, which arrive in
// lockstep, then pass through a P-point fully parallel NTT that performs the
// last log2(P) stages. A final conditional subtraction per branch maps the
// redundant [0, 2Q) results to [0, Q).
//
// Number format: inputs, twiddles and outputs are in Montgomery form with
// R = 2^W; inputs may lie anywhere in [0, 2Q), Q must be odd and below R/8.
// Every butterfly output passes a Montgomery multiplier, which keeps all
// intermediate values in [0, 2Q) without any comparison.
//
// Ordering: at output word position m, branch p carries A[bitrev_N(p + P*m)],
// the natural decimation-in-frequency (bit-reversed) order.
//
// Interface: a polynomial enters as N/P words per path, i.e. N/P*K consecutive
// cycles of P digits, with `in_sop` on the first. The results leave the same
// way, flagged by out_valid/out_sop and the digit index out_didx. Polynomials
// may be streamed back to back; if there is a gap between two, it must be at
// least N/P/2 words (N/P/2*K cycles), the time the first stage needs to drain
// its buffer. A transform occupies N/P*K = N cycles at each end (since
// K = P). Q and -Q^-1 mod 2^d are static configuration.
// Twiddles are loaded through tw_*: tw_path < P addresses stage tw_stage of
// that path, entry tw_addr (entries 0 .. N/P/2^(s+1)-1 are the pair twiddles,
// the next entry the Montgomery one); tw_path == P addresses the parallel NTT
// multiplier tw_stage*P + tw_addr.
//
// Latency, first input digit to first output digit:
//   (N/P - 1)*K + (log2(N/P) + log2(P)) * (4K + 1) + K cycles.
//
// Follows the design: the W/d-path split and input distribution, the
// delay-feedback stages, the parallel NTT and the single final subtraction.
// This implementation's own: the stream flags, the twiddle load port and
// the output order convention.
module ntt_top #(
  parameter int unsigned N = ntt_pkg::NTT_N,
  parameter int unsigned W = ntt_pkg::NTT_W,
  parameter int unsigned D = ntt_pkg::NTT_D,
  parameter int unsigned K   = W / D,
  parameter int unsigned P   = W / D,
  parameter int unsigned M   = N / P,
  parameter int unsigned L   = $clog2(M),
  parameter int unsigned LP  = $clog2(P),
  parameter int unsigned IW  = ntt_pkg::idx_width(K),
  parameter int unsigned PW  = ntt_pkg::idx_width(P + 1),
  parameter int unsigned SW  = ntt_pkg::idx_width((L > LP) ? L : LP),
  parameter int unsigned TAW = ntt_pkg::idx_width((M / 2 + 1 > P) ? M / 2 + 1 : P)
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic [W-1:0]        q,
  input  logic [D-1:0]        qinv,       // -Q^-1 mod 2^d
  input  logic                tw_we,
  input  logic [PW-1:0]       tw_path,
  input  logic [SW-1:0]       tw_stage,
  input  logic [TAW-1:0]      tw_addr,
  input  logic [W-1:0]        tw_wdata,
  // data in
  input  logic                in_valid,
  input  logic                in_sop,
  input  logic [P-1:0][D-1:0] in_digit,
  // data out
  output logic                out_valid,
  output logic                out_sop,
  output logic [IW-1:0]       out_didx,
  output logic [P-1:0][D-1:0] out_digit
);

  localparam int unsigned TIW = ntt_pkg::idx_width(LP * P);

  logic [P-1:0]        pv, psop;
  logic [IW-1:0]       pdi [P];
  logic [P-1:0][D-1:0] pdg;

  logic                xv, xsop;
  logic [IW-1:0]       xdi;
  logic [P-1:0][D-1:0] xdg;

  logic [P-1:0]        fv, fsop;
  logic [IW-1:0]       fdi [P];

  for (genvar p = 0; p < P; p++) begin : g_path
    path_ntt #(.D(D), .K(K), .M(M), .L(L), .IW(IW), .SW(SW), .TAW(TAW)) u_path (
      .clk       (clk),
      .rst_n     (rst_n),
      .q         (q),
      .qinv      (qinv),
      .tw_we     (tw_we && (32'(tw_path) == p)),
      .tw_stage  (tw_stage),
      .tw_waddr  (tw_addr),
      .tw_wdata  (tw_wdata),
      .in_valid  (in_valid),
      .in_sop    (in_sop),
      .in_digit  (in_digit[p]),
      .out_valid (pv[p]),
      .out_sop   (psop[p]),
      .out_didx  (pdi[p]),
      .out_digit (pdg[p])
    );
  end

  par_ntt #(.D(D), .K(K), .P(P), .LP(LP), .IW(IW), .TIW(TIW)) u_par (
    .clk       (clk),
    .rst_n     (rst_n),
    .q         (q),
    .qinv      (qinv),
    .tw_we     (tw_we && (32'(tw_path) == P)),
    .tw_idx    (TIW'(32'(tw_stage) * P + 32'(tw_addr))),
    .tw_wdata  (tw_wdata),
    .in_valid  (pv[0]),
    .in_sop    (psop[0]),
    .in_didx   (pdi[0]),
    .in_digit  (pdg),
    .out_valid (xv),
    .out_sop   (xsop),
    .out_didx  (xdi),
    .out_digit (xdg)
  );

  for (genvar p = 0; p < P; p++) begin : g_fix
    final_correct #(.D(D), .K(K), .IW(IW)) u_fix (
      .clk       (clk),
      .rst_n     (rst_n),
      .q         (q),
      .in_valid  (xv),
      .in_sop    (xsop),
      .in_didx   (xdi),
      .in_digit  (xdg[p]),
      .out_valid (fv[p]),
      .out_sop   (fsop[p]),
      .out_didx  (fdi[p]),
      .out_digit (out_digit[p])
    );
  end

  assign out_valid = fv[0];
  assign out_sop   = fsop[0];
  assign out_didx  = fdi[0];

  // the paths run in lockstep, so their stream flags must agree
  a_paths_lockstep : assert property (@(posedge clk) disable iff (!rst_n)
    (pv == '0) || (pv == '1));

endmodule
