// mseq_lfsr -- M-sequence random illumination pattern generator.
//
// A 71-flip-flop linear feedback shift register, M(70)..M(0), that advances
// STEP bits of the maximum-length sequence per clock so that STEP pattern
// bits (one per calculation module) are available every cycle.
//
// The sequence obeys a(n+71) = a(n) xor a(n+6) (trinomial x^71 + x^6 + 1).
// M(70) holds the oldest bit, M(0) the newest.  One step does
//   M(j) <= M(j-STEP)                                   for j >= STEP
//   M(k) <= M(k+71-STEP) xor M(k+65-STEP)               for k <  STEP
// which for STEP = 64 is M(70..64) <= M(6..0) and M(k) <= M(k+7) xor M(k+1),
// the wiring of the published 64-bit register.  All right-hand terms are old
// state because STEP <= 65, so there is no chained XOR.  The outputs are
// I(k) = M(k+71-STEP), i.e. I(63) = M(70) down to I(0) = M(7): after w steps
// I(STEP-1-j) is sequence bit a(STEP*w + j).
//
// Interface: `load` (or reset) writes SEED; `step` advances; `pattern` is a
// direct register read, so the word belongs to the state before the next step.
// The register width, the taps and the output positions follow the published
// drawing; the seed and the load input are this design's choice.
module mseq_lfsr #(
  parameter int                      STEP = 64,
  parameter logic [cgi_pkg::LFSR_LEN-1:0] SEED = 71'h2A_5AC3_C30F_0F12_34AB
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic            step,
  output logic [STEP-1:0] pattern
);
  import cgi_pkg::*;

  localparam int L = LFSR_LEN;

  logic [L-1:0] m, m_next;

  initial begin
    assert (STEP >= 1 && STEP <= 65) else $error("mseq_lfsr: STEP must be 1..65");
    assert (SEED != '0) else $error("mseq_lfsr: SEED must be non-zero");
  end

  always_comb begin
    for (int j = STEP; j < L; j++) m_next[j] = m[j-STEP];
    for (int k = 0; k < STEP; k++) m_next[k] = m[k+L-STEP] ^ m[k+L-6-STEP];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    m <= SEED;
    else if (load) m <= SEED;
    else if (step) m <= m_next;
  end

  assign pattern = m[L-1 -: STEP];

endmodule
