// mtj_model: behavioural model of a magnetic tunnel junction with stochastic
// switching. This is not synthesizable logic; it stands in for the device.
//
// The free layer is either parallel (P, low resistance, reads as 1) or
// antiparallel (AP, high resistance, reads as 0) to the reference layer.
// A current from bottom to top (i_reset) drives the junction to AP; the
// reset bias and its 10 ns duration are chosen so that this always
// succeeds. A current from top to bottom (i_write) switches AP to P only
// with some probability, set by the bias voltage: p_sw carries that
// probability as a code (p_sw / 2**PROB_W), i.e. the bias already read off
// the device's P-V curve. Thermal fluctuation is modelled by one draw from
// a private xorshift32 generator per write pulse, taken on the first clock
// of the pulse; a longer pulse does not draw again. Each device starts its
// generator from its own seed (the 'seed' input, held constant), which is
// how the published design keeps bitstreams of different SBGs uncorrelated. A
// junction that is already P stays P under a write current.
//
// Interface: clk samples the currents; state_p is the stored state
// (1 = P). i_reset has priority if both currents were asserted at once (the
// SBG cell forbids that by assertion). The initial state is AP.
module mtj_model
  import bis_pkg::*;
(
  input  logic        clk,
  input  logic [31:0] seed,      // per-device seed, constant, non-zero
  input  logic        i_reset,   // current bottom->top: force AP
  input  logic        i_write,   // current top->bottom: AP->P with p_sw
  input  prob_t       p_sw,      // switching probability of the write bias
  output logic        state_p    // 1 = P (low resistance)
);

  logic [31:0] rng;
  logic        seeded;
  logic        write_q;          // i_write one clock earlier
  logic [31:0] rng_next;
  logic [PROB_W-1:0] draw;

  initial begin
    seeded  = 1'b0;
    write_q = 1'b0;
    state_p = 1'b0;
    rng     = 32'h1;
  end

  // xorshift32 step, then the top PROB_W bits as a uniform draw.
  always_comb begin
    logic [31:0] x;
    x = seeded ? rng : seed;
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    rng_next = x;
    draw     = x[31 -: PROB_W];
  end

  always @(posedge clk) begin
    write_q <= i_write;
    if (i_reset) begin
      state_p <= 1'b0;
    end else if (i_write && !write_q) begin
      rng    <= rng_next;
      seeded <= 1'b1;
      if ({1'b0, draw} < p_sw) state_p <= 1'b1;
    end
  end

endmodule
