// bbn_hd_prior: stochastic circuit for p(HD=Y) of the heart-disease belief
// network, the group {exercise E, diet D, heart disease HD}:
//
//   p(HD=Y) = [p(HD|E=Y,D=Y) p(D=Y) + p(HD|E=Y,D=N) p(D=N)] p(E=Y)
//           + [p(HD|E=N,D=Y) p(D=Y) + p(HD|E=N,D=N) p(D=N)] p(E=N)
//
// A multiplexer whose select is a stream of probability p computes the
// scaled sum p*a + (1-p)*b of its inputs a (terminal 1) and b (terminal 0).
// Three multiplexers do the whole sum: the two first-level ones select
// between the CPT streams of E=Y and of E=N with a ctrl1 stream of value
// p(D=Y); the output multiplexer selects between them with a ctrl2 stream of
// value p(E=Y). Seven SBGs feed it: four for the CPT entries and three for
// the select streams (each first-level multiplexer has its own ctrl1 SBG,
// so the two selects are independent). When D or E is observed, its select
// bias is set to 1 (yes) or 0 (no) instead of the prior.
//
// Interface: cpt[0..3] = p(HD=Y | E,D) for (E,D) = (Y,Y), (Y,N), (N,Y),
// (N,N); ctrl1_bias = p(D=Y) or 0/1; ctrl2_bias = p(E=Y) or 0/1. p_hd is the
// output stream, valid with the SBG readouts. sb_cpt and sb_sel expose the
// SBG streams for observation. SBG devices use indices seed_base+0..6.
module bbn_hd_prior
  import bis_pkg::*;
(
  input  logic        clk,
  input  logic [31:0] seed_base,
  input  sbg_ctrl_t   ctrl,
  input  prob_t       cpt [4],
  input  prob_t       ctrl1_bias,
  input  prob_t       ctrl2_bias,
  output logic [3:0]  sb_cpt,
  output logic [2:0]  sb_sel,      // {ctrl2, ctrl1 of lower, ctrl1 of upper}
  output logic        p_hd
);

  prob_t bias [7];
  always_comb begin
    for (int k = 0; k < 4; k++) bias[k] = cpt[k];
    bias[4] = ctrl1_bias;
    bias[5] = ctrl1_bias;
    bias[6] = ctrl2_bias;
  end

  logic [6:0] sb;
  for (genvar k = 0; k < 7; k++) begin : g_sbg
    sbg_cell u_sbg (
      .clk     (clk),
      .seed    (seed_mix(seed_base + 32'(k))),
      .vbias   (bias[k]),
      .ctrl    (ctrl),
      .readout (sb[k])
    );
  end
  assign sb_cpt = sb[3:0];
  assign sb_sel = sb[6:4];

  logic e_yes, e_no;
  assign e_yes = sb[4] ? sb[0] : sb[1];   // E=Y branch, select p(D=Y)
  assign e_no  = sb[5] ? sb[2] : sb[3];   // E=N branch, select p(D=Y)
  assign p_hd  = sb[6] ? e_yes : e_no;    // select p(E=Y)

endmodule
