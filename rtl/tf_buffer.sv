// tf_buffer: twiddle factor buffer of one systolic Montgomery multiplier.
//
// Holds DEPTH twiddle factors of W = K*d bits, in Montgomery form. It is
// stored as K digit slices; PE number i reads only digit i, through its own
// read address, because the PEs of the systolic chain work on the same word at
// different times (4 cycles apart). Reads are combinational; words are written
// whole through a single synchronous write port (loaded before use).
//
// The design names this buffer and shows it feeding every PE; the digit-sliced
// organisation and the load port are this implementation's own choices (the
// twiddles depend on Q, so they are loaded rather than fixed at elaboration).
module tf_buffer #(
  parameter int unsigned D     = ntt_pkg::NTT_D,
  parameter int unsigned K     = ntt_pkg::NTT_W / ntt_pkg::NTT_D,
  parameter int unsigned DEPTH = 2,
  parameter int unsigned AW    = ntt_pkg::idx_width(DEPTH)
) (
  input  logic           clk,
  input  logic           we,
  input  logic [AW-1:0]  waddr,
  input  logic [K*D-1:0] wdata,
  input  logic [AW-1:0]  raddr [K],
  output logic [D-1:0]   rdata [K]
);

  for (genvar i = 0; i < K; i++) begin : g_slice
    logic [D-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata[i*D +: D];
    end

    assign rdata[i] = mem[raddr[i]];
  end

endmodule
