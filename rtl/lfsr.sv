// lfsr -- maximal-length Fibonacci linear feedback shift register.
//
// W flip-flops hold the state s[W-1:0]. Each enabled cycle the register shifts
// one place towards bit 0 and the new top bit is the XOR of the state bits
// selected by TAPS, so the register obeys the characteristic polynomial
//   x^W + c_{W-1} x^{W-1} + ... + c_1 x + 1,   TAPS[i] = c_i, TAPS[0] = 1.
// With a primitive polynomial the state runs through all 2^W-1 non-zero
// values before repeating. The whole W-bit state is the pseudo-random number
// used by the index scaler.
//
// Interface: `load` copies `seed` into the register (a zero seed, which would
// lock the register, is replaced by 1); otherwise `step` advances one state.
// `load` wins over `step`. Both act at the rising clock edge; `state` is the
// register output. Synchronous active-low reset loads the SEED parameter.
//
// Follows the paper: flip-flops with a seed, XOR feedback described by a
// primitive characteristic polynomial. Own choices: the Fibonacci form, the
// shift direction, the default width and polynomial, the zero-seed guard.
module lfsr #(
  parameter int unsigned   W    = lfsr_prune_pkg::LFSR_W,
  parameter logic [W-1:0]  TAPS = W'(lfsr_prune_pkg::LFSR24_TAPS),
  parameter logic [W-1:0]  SEED = W'(1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] seed,
  input  logic         step,
  output logic [W-1:0] state
);

  logic feedback;
  assign feedback = ^(state & TAPS);

  always_ff @(posedge clk) begin
    if (!rst_n)      state <= (SEED == '0) ? W'(1) : SEED;
    else if (load)   state <= (seed == '0) ? W'(1) : seed;
    else if (step)   state <= {feedback, state[W-1:1]};
  end

endmodule
