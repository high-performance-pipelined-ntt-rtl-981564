// delay_buffer: the delay-feedback buffer of a pipelined NTT stage.
//
// A first-in first-out delay line of exactly DEPTH cycles: what is written in
// cycle t is read out in cycle t + DEPTH. In stage i of an N-point pipeline it
// holds (W/d) * N/2^i digits of d bits (plus the stream's tag bits). It is a
// circular memory with a single pointer: each cycle the entry under the
// pointer is read and then overwritten, so only one entry is touched per cycle
// and it maps onto a register file or SRAM. DEPTH = 1 is a plain register.
// The contents are not reset; `primed` goes high once DEPTH entries have been
// written since reset, and until then `dout` must be treated as empty.
//
// The buffer size follows the design; the circular organisation and the
// `primed` flag are this implementation's choices.
module delay_buffer #(
  parameter int unsigned WIDTH = 34,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout,
  output logic             primed
);

  localparam int unsigned PW = ntt_pkg::idx_width(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    ptr_q;
  logic             primed_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q    <= '0;
      primed_q <= 1'b0;
    end else if (32'(ptr_q) == DEPTH - 1) begin
      ptr_q    <= '0;
      primed_q <= 1'b1;
    end else begin
      ptr_q    <= ptr_q + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    mem[ptr_q] <= din;
  end

  assign dout   = mem[ptr_q];
  assign primed = primed_q;

endmodule
