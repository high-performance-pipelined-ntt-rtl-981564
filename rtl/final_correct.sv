// final_correct: the single conditional subtraction at the end of the NTT.
//
// All values inside the pipeline are kept in the redundant range [0, 2Q); the
// only reduction to [0, Q) is done here, once per output word. The word v
// streams in digit by digit (least significant first) while v - Q is formed
// digit-serially with a borrow register. After the last digit the final
// borrow tells whether v < Q. Both candidate digit streams wait in a K-deep
// delay line, and as the word leaves it the register `sel_q` picks v (borrow)
// or v - Q (no borrow). The result is still in Montgomery form.
//
// Interface: K consecutive digits per word, digit index on `in_didx`.
// Latency: K cycles; one digit per cycle.
//
// The design states only that the correction is one subtraction at the end;
// the digit-serial form with a K-cycle delay line is this implementation's.
module final_correct #(
  parameter int unsigned D  = ntt_pkg::NTT_D,
  parameter int unsigned K  = ntt_pkg::NTT_W / ntt_pkg::NTT_D,
  parameter int unsigned IW = ntt_pkg::idx_width(K)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [K*D-1:0] q,
  input  logic           in_valid,
  input  logic           in_sop,
  input  logic [IW-1:0]  in_didx,
  input  logic [D-1:0]   in_digit,
  output logic           out_valid,
  output logic           out_sop,
  output logic [IW-1:0]  out_didx,
  output logic [D-1:0]   out_digit
);

  localparam int unsigned WD = 2 + IW + 2 * D;

  logic         borrow_q;
  logic         sel_q;           // 1: keep v, 0: take v - Q
  logic         first, last;
  logic [D:0]   sub_t;
  logic [D-1:0] qd;

  logic [WD-1:0] dl_in, dl_out;
  logic          dl_primed;

  assign first = (in_didx == '0);
  assign last  = (32'(in_didx) == K - 1);
  assign qd    = q[in_didx*D +: D];
  assign sub_t = (D+1)'(in_digit) - (D+1)'(qd) - (D+1)'(first ? 1'b0 : borrow_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      borrow_q <= 1'b0;
      sel_q    <= 1'b0;
    end else if (in_valid) begin
      borrow_q <= sub_t[D];
      if (last) sel_q <= sub_t[D];
    end
  end

  assign dl_in = {in_valid, in_sop, in_didx, in_digit, sub_t[D-1:0]};

  delay_buffer #(.WIDTH(WD), .DEPTH(K)) u_dl (
    .clk    (clk),
    .rst_n  (rst_n),
    .din    (dl_in),
    .dout   (dl_out),
    .primed (dl_primed)
  );

  assign out_valid = dl_out[WD-1] && dl_primed;
  assign out_sop   = dl_out[WD-2];
  assign out_didx  = dl_out[2*D +: IW];
  assign out_digit = sel_q ? dl_out[D +: D] : dl_out[0 +: D];

endmodule
