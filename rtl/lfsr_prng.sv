// lfsr_prng: parallel multiple-output LFSR random number generator.
//
// A single 16-bit Fibonacci LFSR (polynomial x^16+x^14+x^13+x^11+1, maximal
// length 65535) is advanced NOUT positions in every clock. The XOR network
// that does this is the loop in the always_comb block: it computes the NOUT
// feedback bits that a serial LFSR would shift in one at a time. The register
// shifts right by NOUT and the leftmost NOUT cells take the feedback bits.
// Output j is the L-bit window starting at bit j of the vector
// {feedback bits, old register}, i.e. NOUT consecutive L-bit states of the
// serial LFSR, all produced in one cycle. With K sub-filters NOUT = 2K:
// sub-filter k uses window k as PRN_x and window k+K as PRN_y.
//
// The use of one LFSR with parallel outputs and the width of 16 follow the
// design description; the polynomial, the output mapping and the pairing of
// two numbers per sub-filter are this design's choices.
//
// Timing: seed_load (synchronous) loads the seed (zero is replaced by 1);
// otherwise the register advances every cycle and prn[] is combinational
// from it (new values every cycle).
module lfsr_prng #(
  parameter int unsigned K = 8,
  parameter int unsigned L = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                seed_load,
  input  logic [L-1:0]        seed,
  output logic [2*K-1:0][L-1:0] prn
);
  localparam int unsigned NOUT = 2 * K;

  logic [L-1:0]      state;
  logic [NOUT+L-1:0] stream;   // {feedback bits, state}
  logic [L-1:0]      next_state;

  // Feedback of the serial LFSR: bits 0, 2, 3, 5 of the right-shifting register.
  always_comb begin
    logic [L-1:0] s;
    s = state;
    stream = '0;
    stream[L-1:0] = state;
    for (int unsigned n = 0; n < NOUT; n++) begin
      logic fb;
      fb = s[0] ^ s[2] ^ s[3] ^ s[5];
      s = {fb, s[L-1:1]};
      stream[L+n] = fb;
    end
    next_state = s;
  end

  always_comb begin
    for (int unsigned j = 0; j < NOUT; j++)
      prn[j] = stream[j +: L];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      state <= L'(1);
    else if (seed_load)
      state <= (seed == '0) ? L'(1) : seed;
    else
      state <= next_state;
  end

endmodule
