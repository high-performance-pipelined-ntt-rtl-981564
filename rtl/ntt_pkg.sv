// ntt_pkg: sizes and helpers shared by the digit-serial multipath NTT.
//
// The default sizes are those of the main configuration: a 1024-point NTT on
// 256-bit words cut into 32-bit digits, which gives W/d = 8 digits per word,
// 8 systolic PEs per Montgomery multiplier and 8 parallel pipelined paths of
// 128 points each. Every value travels as its digits, least significant digit
// first, one digit per clock, in a redundant Montgomery form in [0, 2Q).
//
// The PE latency of 4 cycles follows the description of the systolic
// multiplier; everything else here is bookkeeping for the modules.
package ntt_pkg;

  parameter int unsigned NTT_N = 1024;  // transform size
  parameter int unsigned NTT_W = 256;   // word width W; Montgomery radix R = 2^W
  parameter int unsigned NTT_D = 32;    // digit size d

  // Latency of one multiplier PE, in cycles (single-cycle throughput).
  parameter int unsigned PE_LATENCY = 4;

  // The two states of a delay-feedback stage: in MOVE the input is written
  // to the buffer and the buffered differences leave through the multiplier;
  // in COMPUTE the butterfly adds/subtracts the input and the buffer output.
  typedef enum logic {
    PH_MOVE    = 1'b0,
    PH_COMPUTE = 1'b1
  } stage_phase_e;

  // Latency of a systolic multiplier with k PEs: 4 cycles per PE plus the
  // output register.
  function automatic int unsigned mult_latency(int unsigned k);
    return PE_LATENCY * k + 1;
  endfunction

  // Width of an index into n items, at least 1.
  function automatic int unsigned idx_width(int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage
