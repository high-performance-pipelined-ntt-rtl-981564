// ds_bfu: digit-serial butterfly unit (adder and 2Q-corrected subtractor).
//
// Two words a (a_i, the element that waited in the stage buffer) and b (a_j,
// the element arriving now) enter as d-bit digits, least significant digit
// first, one digit per cycle, with `first` marking digit 0 of a word. The unit
// produces, digit by digit and in the same cycle:
//   sum  = a + b
//   diff = a - b + 2Q
// With a, b in [0, 2Q) both results lie in (0, 4Q), so the Montgomery
// multiplier that follows brings either back to [0, 2Q) and no comparison with
// Q is ever needed inside the pipeline. The subtractor is a carry-save adder
// that compresses a, the inverted b and the matching digit of 2Q, followed by
// a digit adder whose carry (0..2) is kept in a register; the two's complement
// "+1" enters as the carry-in of digit 0. The adder has a 1-bit carry register.
// Carries are only updated when `en` is high; they are discarded at `first`.
//
// Following the design: CSA + adder for the subtraction, one carry register
// per adder, combinational digit outputs. This implementation's choice: the
// CSA carry vector's top bit is folded into the 2-bit carry register.
module ds_bfu #(
  parameter int unsigned D = ntt_pkg::NTT_D
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,       // a valid digit pair is present
  input  logic         first,    // digit 0 of the word
  input  logic [D-1:0] a,        // digit of a_i
  input  logic [D-1:0] b,        // digit of a_j
  input  logic [D-1:0] q2,       // same digit of 2Q
  output logic [D-1:0] sum,      // digit of a_i + a_j
  output logic [D-1:0] diff      // digit of a_i - a_j + 2Q
);

  logic         add_c_q;   // adder carry
  logic [1:0]   sub_c_q;   // subtractor carry (0..2)

  logic [D:0]   add_t;
  logic [D-1:0] csa_s, csa_c, nb;
  logic [D+1:0] sub_t;
  logic         add_cin;
  logic [1:0]   sub_cin;

  always_comb begin
    add_cin = first ? 1'b0 : add_c_q;
    add_t   = (D+1)'(a) + (D+1)'(b) + (D+1)'(add_cin);

    nb      = ~b;
    csa_s   = a ^ nb ^ q2;
    csa_c   = (a & nb) | (a & q2) | (nb & q2);
    sub_cin = first ? 2'd1 : sub_c_q;
    sub_t   = (D+2)'(csa_s) + ((D+2)'(csa_c) << 1) + (D+2)'(sub_cin);

    sum  = add_t[D-1:0];
    diff = sub_t[D-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      add_c_q <= 1'b0;
      sub_c_q <= 2'd0;
    end else if (en) begin
      add_c_q <= add_t[D];
      sub_c_q <= sub_t[D+1:D];
    end
  end

endmodule
