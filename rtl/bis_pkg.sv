// bis_pkg: types and constants shared by the stochastic Bayesian inference
// system.
//
// A probability travels through the design in two forms. Before it reaches
// a stochastic bitstream generator (SBG) it is a bias code, prob_t: an
// unsigned fixed-point number whose value is code / 2**PROB_W, so that
// PROB_ONE stands for probability 1.0. In silicon this code is the bias
// voltage applied to the MTJ during the write phase (about 1.13 V to 1.36 V
// spans switching probabilities 0 to 1); the voltage source itself is
// analog and lies outside this RTL. After the SBG a probability is a
// bitstream, one bit per SBG cycle, whose fraction of ones is the value.
//
// Every SBG is driven by the same four phase signals, bundled in
// sbg_ctrl_t. One SBG cycle is reset (MTJ forced to AP), write (AP->P with
// the bias-dependent probability) and read (sense amplifier). The tick
// counts below use a 1 ns tick: 10 ns reset and 5 ns write come from the
// published circuit simulations, 40 ns per bit from the quoted 40T ns
// inference time; the gaps and the read length are this design's choice to
// fill the 40 ns.
package bis_pkg;

  // Bias code resolution. The published design states none; 10 bits puts a
  // step near 0.1 % in probability, about 0.2 mV on the P-V curve.
  localparam int unsigned PROB_W   = 10;
  typedef logic [PROB_W:0] prob_t;              // 0 .. PROB_ONE
  localparam prob_t       PROB_ONE = prob_t'(1) << PROB_W;

  // Longest bitstream the evaluation uses (64, 128 and 256 bits).
  localparam int unsigned MAX_LEN_DEF = 256;

  // Phase lengths in clock ticks (1 ns per tick assumed).
  localparam int unsigned RESET_TICKS_DEF = 10;
  localparam int unsigned WRITE_TICKS_DEF = 5;
  localparam int unsigned READ_TICKS_DEF  = 10;
  localparam int unsigned GAP_TICKS_DEF   = 5;

  // Phase signals of one SBG (names as on the SBG schematic).
  typedef struct packed {
    logic write_en;   // 'Write En': MUX2/MUX3 connect the write driver
    logic rst0;       // 'Rst. 0'  : MUX4 drives SL, reset current bottom->top
    logic wrt1;       // 'Wrt. 1'  : MUX1 drives BL, write current top->bottom
    logic read_en;    // 'Read En' : N1 on, PCSA senses the MTJ
  } sbg_ctrl_t;

  typedef enum logic [2:0] {
    PH_IDLE, PH_RESET, PH_GAP1, PH_WRITE, PH_GAP2, PH_READ, PH_GAP3
  } sbg_phase_e;

  // Per-device seed. Every MTJ model gets its own seed so that no two
  // bitstreams are correlated (each device draws from its own sequence).
  // splitmix32 finaliser of the device index; never returns 0 because the
  // generator that uses it is an xorshift.
  function automatic logic [31:0] seed_mix(input int unsigned idx);
    logic [31:0] z;
    z = 32'(idx) + 32'h9E37_79B9;
    z = (z ^ (z >> 16)) * 32'h85EB_CA6B;
    z = (z ^ (z >> 13)) * 32'hC2B2_AE35;
    z = z ^ (z >> 16);
    return (z == 32'd0) ? 32'h1234_5679 : z;
  endfunction

endpackage
