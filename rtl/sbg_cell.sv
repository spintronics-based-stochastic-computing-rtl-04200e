// sbg_cell: behavioural model of one MTJ-based stochastic bitstream
// generator (SBG). Not synthesizable as a whole: it contains the MTJ model
// and stands for a hybrid MTJ/CMOS circuit.
//
// The cell follows the SBG schematic. A write driver of two switches picks
// what reaches the junction: MUX1 ('Wrt. 1') connects the bit line BL, which
// carries the write bias, or ground; MUX4 ('Rst. 0') connects the source
// line SL, which carries the reset bias, or ground. MUX2 and MUX3
// ('Write En') connect the junction either to that write driver (terminal
// 1) or to the read circuit (terminal 0): the pre-charge sense amplifier
// (PCSA) on top and transistor N1 ('Read En') to ground below. So:
//   Write En & Rst. 0 & !Wrt. 1  -> current bottom to top, junction reset to AP
//   Write En & Wrt. 1 & !Rst. 0  -> current top to bottom, AP->P with p(bias)
//   !Write En & Read En          -> PCSA reads the junction: P gives 1, AP 0
// One reset, write and read sequence gives one bit of the stream.
//
// The bias code vbias stands for the BL write voltage (see bis_pkg). The
// PCSA output is modelled as a register loaded on every clock of the read
// phase and held afterwards, so readout is valid from the clock after the
// read phase starts until the next read phase; the held value is this
// design's choice (the real PCSA pre-charges between reads).
module sbg_cell
  import bis_pkg::*;
(
  input  logic        clk,
  input  logic [31:0] seed,     // per-device seed for the MTJ model
  input  prob_t       vbias,    // write bias as a switching probability code
  input  sbg_ctrl_t   ctrl,     // Write En, Rst. 0, Wrt. 1, Read En
  output logic        readout   // PCSA output, the stochastic bit
);

  logic i_reset, i_write, read_path, state_p;

  // Switch network of the write driver and the path-select multiplexers.
  assign i_reset   = ctrl.write_en &  ctrl.rst0 & ~ctrl.wrt1;
  assign i_write   = ctrl.write_en &  ctrl.wrt1 & ~ctrl.rst0;
  assign read_path = ~ctrl.write_en & ctrl.read_en;

  mtj_model u_mtj (
    .clk     (clk),
    .seed    (seed),
    .i_reset (i_reset),
    .i_write (i_write),
    .p_sw    (vbias),
    .state_p (state_p)
  );

  // Pre-charge sense amplifier: low resistance (P) reads as 1.
  initial readout = 1'b0;
  always @(posedge clk) begin
    if (read_path) readout <= state_p;
  end

  // BL and SL must never be driven together, and the junction must not be
  // read while the write driver is connected.
  a_no_bl_sl_short: assert property (@(posedge clk) !(ctrl.wrt1 && ctrl.rst0));
  a_no_read_in_write: assert property (@(posedge clk) !(ctrl.read_en && ctrl.write_en));

endmodule
