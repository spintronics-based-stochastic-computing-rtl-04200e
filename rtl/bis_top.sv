// bis_top: the stochastic Bayesian inference chip, holding the two
// inference systems built from MTJ-based stochastic bitstream generators:
//   df_*  : target location by fusing distance and bearing from three
//           sensors over a GRID x GRID grid (6*GRID*GRID SBGs, 5*GRID*GRID
//           AND gates, one counter per position);
//   bbn_* : the heart-disease belief network (11 SBGs, 3 AND gates,
//           8 multiplexers, 3 counters).
// The two run independently, each with its own phase sequencer, start and
// done. Inputs are the bias codes that stand for the analog bias voltages
// set by the evidence and likelihoods; outputs are counts of ones, from
// which the reader forms the posterior distributions (see df_system and
// bbn_system). The belief-network SBGs use device indices after those of
// the grid, so no two SBGs on the chip share a seed.
module bis_top
  import bis_pkg::*;
#(
  parameter int unsigned GRID       = 64,
  parameter int unsigned MAX_LEN    = MAX_LEN_DEF,
  localparam int unsigned N_ROWS    = GRID * GRID,
  localparam int unsigned LEN_W     = $clog2(MAX_LEN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // data fusion
  input  logic             df_start,
  input  logic [LEN_W-1:0] df_len,
  input  prob_t            df_vbias [N_ROWS][6],
  output logic [LEN_W-1:0] df_count [N_ROWS],
  output logic             df_busy,
  output logic             df_done,
  // belief network
  input  logic             bbn_start,
  input  logic [LEN_W-1:0] bbn_len,
  input  prob_t            bbn_cpt_hd [4],
  input  prob_t            bbn_ctrl1_bias,
  input  prob_t            bbn_ctrl2_bias,
  input  prob_t            bbn_cpt_sym [4],
  input  logic             bbn_ev_bp,
  input  logic             bbn_ev_cp,
  output logic [LEN_W-1:0] bbn_cnt_hd,
  output logic [LEN_W-1:0] bbn_cnt_mol,
  output logic [LEN_W-1:0] bbn_cnt_den,
  output logic             bbn_busy,
  output logic             bbn_done
);

  df_system #(
    .GRID      (GRID),
    .MAX_LEN   (MAX_LEN),
    .SEED_BASE (0)
  ) u_df (
    .clk   (clk),
    .rst_n (rst_n),
    .start (df_start),
    .len   (df_len),
    .vbias (df_vbias),
    .count (df_count),
    .busy  (df_busy),
    .done  (df_done)
  );

  bbn_system #(
    .MAX_LEN   (MAX_LEN),
    .SEED_BASE (6 * N_ROWS)
  ) u_bbn (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (bbn_start),
    .len        (bbn_len),
    .cpt_hd     (bbn_cpt_hd),
    .ctrl1_bias (bbn_ctrl1_bias),
    .ctrl2_bias (bbn_ctrl2_bias),
    .cpt_sym    (bbn_cpt_sym),
    .ev_bp      (bbn_ev_bp),
    .ev_cp      (bbn_ev_cp),
    .cnt_hd     (bbn_cnt_hd),
    .cnt_mol    (bbn_cnt_mol),
    .cnt_den    (bbn_cnt_den),
    .busy       (bbn_busy),
    .done       (bbn_done)
  );

endmodule
