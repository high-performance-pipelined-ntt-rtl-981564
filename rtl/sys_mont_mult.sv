// sys_mont_mult: systolic high-radix Montgomery multiplier, digit-serial.
//
// Computes S = x * w * 2^-W mod Q (Montgomery product, R = 2^W) where the
// multiplicand x streams in as K = W/d digits, least significant first, one
// per cycle, and the twiddle w comes from the multiplier's own twiddle factor
// buffer, selected per word by `in_twaddr`. K PEs are chained: PE i handles
// twiddle digit w_i, takes S_{i-1} from PE i-1 (PE 0 takes 0) and hands S_i on
// after 4 cycles. The multiplicand, with its valid flag, digit index, twiddle
// address and a user tag, moves along a chain of 4 registers per PE so that it
// meets each PE together with that PE's S_{i-1}. A last register follows the
// final PE.
//
// Range: with x < 4Q, w < 2Q and R > 8Q the product x*w is below Q*R, so S is
// below 2Q: the redundant [0, 2Q) form is kept without any comparison. The
// partial results S_i stay below x + Q < R, so K digits always suffice.
//
// Timing: single-cycle throughput; output digit j leaves 4K+1 cycles after
// input digit j, with the same valid / index / address / tag it came in with.
// The digits of a word must arrive in K consecutive cycles; words may be
// separated by idle cycles.
//
// Follows the design: W/d PEs, 4 registers of x between PEs, twiddle buffer
// feeding all PEs, output register. This implementation's own: the tag chain
// and the load port of the twiddle buffer.
module sys_mont_mult #(
  parameter int unsigned D     = ntt_pkg::NTT_D,
  parameter int unsigned K     = ntt_pkg::NTT_W / ntt_pkg::NTT_D,
  parameter int unsigned DEPTH = 2,                          // twiddle entries
  parameter int unsigned TAGW  = 1,                          // user tag bits
  parameter int unsigned IW    = ntt_pkg::idx_width(K),
  parameter int unsigned AW    = ntt_pkg::idx_width(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [K*D-1:0]  q,
  input  logic [D-1:0]    qinv,
  // twiddle load port
  input  logic            tw_we,
  input  logic [AW-1:0]   tw_waddr,
  input  logic [K*D-1:0]  tw_wdata,
  // digit stream in
  input  logic            in_valid,
  input  logic [IW-1:0]   in_didx,
  input  logic [D-1:0]    in_x,
  input  logic [AW-1:0]   in_twaddr,
  input  logic [TAGW-1:0] in_tag,
  // digit stream out
  output logic            out_valid,
  output logic [IW-1:0]   out_didx,
  output logic [D-1:0]    out_s,
  output logic [TAGW-1:0] out_tag
);

  localparam int unsigned CH = ntt_pkg::PE_LATENCY * K;  // chain length

  typedef struct packed {
    logic [IW-1:0]   di;
    logic [AW-1:0]   ta;
    logic [TAGW-1:0] tag;
    logic [D-1:0]    x;
  } chain_t;

  chain_t ch  [CH+1];
  logic   chv [CH+1];
  logic [D-1:0]  s_link [K+1];
  logic [AW-1:0] raddr  [K];
  logic [D-1:0]  ydig   [K];

  assign chv[0] = in_valid;
  assign ch[0]  = '{di: in_didx, ta: in_twaddr, tag: in_tag, x: in_x};

  for (genvar c = 0; c < CH; c++) begin : g_chain
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) chv[c+1] <= 1'b0;
      else        chv[c+1] <= chv[c];
    end
    always_ff @(posedge clk) begin
      ch[c+1] <= ch[c];
    end
  end

  tf_buffer #(.D(D), .K(K), .DEPTH(DEPTH), .AW(AW)) u_tf (
    .clk   (clk),
    .we    (tw_we),
    .waddr (tw_waddr),
    .wdata (tw_wdata),
    .raddr (raddr),
    .rdata (ydig)
  );

  assign s_link[0] = '0;

  for (genvar i = 0; i < K; i++) begin : g_pe
    localparam int unsigned P0 = ntt_pkg::PE_LATENCY * i;
    assign raddr[i] = ch[P0].ta;

    mont_pe #(.D(D), .K(K), .IW(IW)) u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .q        (q),
      .qinv     (qinv),
      .in_valid (chv[P0]),
      .in_didx  (ch[P0].di),
      .x        (ch[P0].x),
      .s        (s_link[i]),
      .y        (ydig[i]),
      .s_out    (s_link[i+1])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= chv[CH];
  end

  always_ff @(posedge clk) begin
    out_didx <= ch[CH].di;
    out_tag  <= ch[CH].tag;
    out_s    <= s_link[K];
  end

endmodule
