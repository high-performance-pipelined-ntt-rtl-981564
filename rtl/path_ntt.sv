// path_ntt: one pipelined path, an M-point single-path delay-feedback NTT
// built from log2(M) digit-serial stages.
//
// Stage s (s = 1 .. log2 M) pairs words M/2^s apart, so its buffer holds
// (W/d) * M/2^s digits. Stages are connected directly: the multiplier output
// digit stream of one stage is the input of the next, with its valid and
// start-of-polynomial flags. The twiddle factors of every stage are loaded
// through one port, `tw_stage` selecting the stage (0 = first stage).
//
// In the multipath arrangement, path p of P receives the elements
// p, p+P, p+2P, ... of the polynomial and performs the first log2(M) stages of
// the N-point decimation-in-frequency transform on them; its twiddles then
// depend on p (they are w^((p + P*k) * 2^(s-1)) for pair k of stage s). Loaded
// with w^(P*k*2^(s-1)) it is a plain M-point transform with bit-reversed
// output order.
//
// Latency: output digit j of position m leaves (M-1)*K + log2(M)*(4K+1)
// cycles after input digit j of position m. One word per K cycles.
//
// Follows the design: linear chain of identical stages with halving buffers.
module path_ntt #(
  parameter int unsigned D   = ntt_pkg::NTT_D,
  parameter int unsigned K   = ntt_pkg::NTT_W / ntt_pkg::NTT_D,
  parameter int unsigned M   = ntt_pkg::NTT_N / (ntt_pkg::NTT_W / ntt_pkg::NTT_D),
  parameter int unsigned L   = $clog2(M),
  parameter int unsigned IW  = ntt_pkg::idx_width(K),
  parameter int unsigned SW  = ntt_pkg::idx_width(L),
  parameter int unsigned TAW = ntt_pkg::idx_width(M / 2 + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [K*D-1:0] q,
  input  logic [D-1:0]   qinv,
  input  logic           tw_we,
  input  logic [SW-1:0]  tw_stage,
  input  logic [TAW-1:0] tw_waddr,
  input  logic [K*D-1:0] tw_wdata,
  input  logic           in_valid,
  input  logic           in_sop,
  input  logic [D-1:0]   in_digit,
  output logic           out_valid,
  output logic           out_sop,
  output logic [IW-1:0]  out_didx,
  output logic [D-1:0]   out_digit
);

  logic          v   [L+1];
  logic          sop [L+1];
  logic [D-1:0]  dg  [L+1];
  logic [IW-1:0] di  [L+1];

  assign v[0]   = in_valid;
  assign sop[0] = in_sop;
  assign dg[0]  = in_digit;
  assign di[0]  = '0;

  for (genvar s = 0; s < L; s++) begin : g_stage
    localparam int unsigned B  = M >> (s + 1);
    localparam int unsigned AW = ntt_pkg::idx_width(B + 1);

    sdf_stage #(.D(D), .K(K), .B(B), .IW(IW), .AW(AW)) u_stage (
      .clk       (clk),
      .rst_n     (rst_n),
      .q         (q),
      .qinv      (qinv),
      .tw_we     (tw_we && (32'(tw_stage) == s)),
      .tw_waddr  (AW'(tw_waddr)),
      .tw_wdata  (tw_wdata),
      .in_valid  (v[s]),
      .in_sop    (sop[s]),
      .in_digit  (dg[s]),
      .out_valid (v[s+1]),
      .out_sop   (sop[s+1]),
      .out_didx  (di[s+1]),
      .out_digit (dg[s+1])
    );
  end

  assign out_valid = v[L];
  assign out_sop   = sop[L];
  assign out_didx  = di[L];
  assign out_digit = dg[L];

endmodule
