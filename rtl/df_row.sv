// df_row: one grid position (x, y) of the data-fusion inference matrix.
//
// For a candidate position the posterior is, up to a constant, the product
// of six likelihoods: distance and bearing as seen by each of three sensors
// (the prior is uniform and dropped). Each likelihood is the bias of one
// SBG; a chain of five AND gates multiplies the six independent bitstreams,
// sb[0] & sb[1] & ... & sb[5], into the row's output stream o. The AND
// chain is combinational on the SBG readouts, so o is valid whenever the
// readouts are, i.e. at the phase controller's bit_valid.
//
// Interface: vbias[k] is the likelihood code of SBG k (order D1 B1 D2 B2 D3
// B3 by convention of this design), seed_base is the device index of
// SBG 0 (SBG k uses seed_mix(seed_base + k)), ctrl comes from the shared
// phase sequencer. sb exposes the six streams for observation.
module df_row
  import bis_pkg::*;
#(
  parameter int unsigned N_SBG = 6      // 3 sensors x (distance, bearing)
) (
  input  logic             clk,
  input  logic [31:0]      seed_base,
  input  prob_t            vbias [N_SBG],
  input  sbg_ctrl_t        ctrl,
  output logic [N_SBG-1:0] sb,
  output logic             o
);

  for (genvar k = 0; k < N_SBG; k++) begin : g_sbg
    sbg_cell u_sbg (
      .clk     (clk),
      .seed    (seed_mix(seed_base + 32'(k))),
      .vbias   (vbias[k]),
      .ctrl    (ctrl),
      .readout (sb[k])
    );
  end

  // N_SBG-1 two-input AND gates in a chain: chain[k] = sb[0] & ... & sb[k].
  logic [N_SBG-1:0] chain;
  assign chain[0] = sb[0];
  for (genvar k = 1; k < N_SBG; k++) begin : g_and
    assign chain[k] = chain[k-1] & sb[k];
  end
  assign o = chain[N_SBG-1];

endmodule
