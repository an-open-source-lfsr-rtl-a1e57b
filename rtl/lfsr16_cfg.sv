// lfsr16_cfg: 16-bit Fibonacci LFSR with a run-time feedback polynomial.
//
// Each enabled cycle the feedback bit is the parity of (state & poly), and the
// next state is the state shifted left by one with that bit in bit 0:
//   f = ^(s & p);  s' = {s[14:0], f}.
// Because the all-zero state is a fixed point of any linear feedback, a zero
// state is replaced by 1 on the next step. A maximal-length polynomial such
// as 0xB400 or 0xD008 gives a period of 65535; the reset polynomial 0x002D
// gives a 63-state cycle.
//
// Interface: `load` copies `seed` into the state (priority over `en`); `en`
// advances one step; `state` is the registered s_t. Both take effect at the
// next rising clock edge. Asynchronous active-low reset to RESET_SEED.
//
// The shift direction, feedback and zero reseed follow the published design;
// the load-on-seed-write behaviour and the enable gating are choices of this
// design.
module lfsr16_cfg #(
  parameter int unsigned       WIDTH      = 16,
  parameter logic [WIDTH-1:0]  RESET_SEED = 16'h0001
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             load,
  input  logic [WIDTH-1:0] seed,
  input  logic [WIDTH-1:0] poly,
  output logic [WIDTH-1:0] state
);

  logic             feedback;
  logic [WIDTH-1:0] next_state;

  always_comb begin
    feedback = ^(state & poly);
    if (state == '0) next_state = WIDTH'(1);
    else             next_state = {state[WIDTH-2:0], feedback};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state <= RESET_SEED;
    else if (load) state <= seed;
    else if (en)   state <= next_state;
  end

endmodule
