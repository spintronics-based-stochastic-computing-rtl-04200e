// bbn_hd_posterior: stochastic circuit for p(HD=Y | BP, CP), the group
// {heart disease HD, blood pressure BP, chest pain CP}:
//
//   p(HD=Y | BP,CP) = L_Y p(HD=Y) / (L_Y p(HD=Y) + L_N p(HD=N))
//   L_Y = p(BP|HD=Y) p(CP|HD=Y),   L_N = p(BP|HD=N) p(CP|HD=N)
//
// Four SBGs give the CPT streams p(BP=Y|HD=Y), p(CP=Y|HD=Y), p(BP=Y|HD=N)
// and p(CP=Y|HD=N). Each passes a two-way multiplexer whose terminal 0 is a
// constant 1: with the evidence bit (ctrl3 for BP, ctrl4 for CP) at 1 the
// CPT stream is used, at 0 the factor is 1 (symptom not observed). Two AND
// gates form the streams of L_Y and L_N; a third AND with the p(HD) stream
// gives the numerator ('molecule'), and a fifth multiplexer selected by the
// p(HD) stream gives the denominator p(HD) L_Y + (1-p(HD)) L_N. Because
// both share the same p(HD) and L_Y streams, every 1 of the numerator is
// also a 1 of the denominator, and count(molecule) / count(denominator)
// estimates the posterior. The division itself is not part of the circuit;
// it is left to whoever reads the two counters.
//
// To condition on a symptom observed as absent, set the corresponding CPT
// bias to 1 - p (e.g. p(BP=N|HD=Y)) and its evidence bit to 1.
//
// Interface: cpt = {p(BP|HD=Y), p(CP|HD=Y), p(BP|HD=N), p(CP|HD=N)} at
// indices 0..3; p_hd is the stream from bbn_hd_prior, in the same bit cycle.
// Outputs are combinational on the SBG readouts. SBG devices use indices
// seed_base+0..3.
module bbn_hd_posterior
  import bis_pkg::*;
(
  input  logic        clk,
  input  logic [31:0] seed_base,
  input  sbg_ctrl_t   ctrl,
  input  prob_t       cpt [4],
  input  logic        ev_bp,       // ctrl3: blood pressure observed
  input  logic        ev_cp,       // ctrl4: chest pain observed
  input  logic        p_hd,
  output logic [3:0]  sb_cpt,
  output logic        molecule,
  output logic        denominator
);

  for (genvar k = 0; k < 4; k++) begin : g_sbg
    sbg_cell u_sbg (
      .clk     (clk),
      .seed    (seed_mix(seed_base + 32'(k))),
      .vbias   (cpt[k]),
      .ctrl    (ctrl),
      .readout (sb_cpt[k])
    );
  end

  logic bp_y, cp_y, bp_n, cp_n, l_y, l_n;
  assign bp_y = ev_bp ? sb_cpt[0] : 1'b1;
  assign cp_y = ev_cp ? sb_cpt[1] : 1'b1;
  assign bp_n = ev_bp ? sb_cpt[2] : 1'b1;
  assign cp_n = ev_cp ? sb_cpt[3] : 1'b1;

  assign l_y = bp_y & cp_y;
  assign l_n = bp_n & cp_n;

  assign molecule    = p_hd & l_y;
  assign denominator = p_hd ? l_y : l_n;

endmodule
