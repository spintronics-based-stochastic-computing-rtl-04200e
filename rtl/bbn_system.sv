// bbn_system: Bayesian inference system for the heart-disease belief
// network (exercise, diet -> heart disease -> blood pressure, chest pain).
//
// bbn_hd_prior turns the CPT of HD and the state of E and D (prior or
// observed) into a p(HD=Y) stream; bbn_hd_posterior conditions it on the
// observed symptoms and yields numerator and denominator streams of
// p(HD=Y | BP, CP). Eleven SBGs in all, driven by one sbg_phase_ctrl; three
// sc_counters decode p(HD=Y), the numerator and the denominator. After T
// bits:
//   p(HD=Y | E, D)         ~ cnt_hd / T
//   p(HD=Y | E, D, BP, CP) ~ cnt_mol / cnt_den   (division by the reader)
// Which query is answered is set only by the select inputs: ctrl1_bias and
// ctrl2_bias (prior value or 0/1 for an observed D or E) and the evidence
// bits ev_bp, ev_cp.
//
// Interface: start/len/busy/done as in sbg_phase_ctrl; all other inputs
// held during an inference; counts final when done is high. SBG device
// indices SEED_BASE+0..10.
module bbn_system
  import bis_pkg::*;
#(
  parameter int unsigned MAX_LEN     = MAX_LEN_DEF,
  parameter int unsigned SEED_BASE   = 0,
  parameter int unsigned RESET_TICKS = RESET_TICKS_DEF,
  parameter int unsigned WRITE_TICKS = WRITE_TICKS_DEF,
  parameter int unsigned READ_TICKS  = READ_TICKS_DEF,
  parameter int unsigned GAP_TICKS   = GAP_TICKS_DEF,
  localparam int unsigned LEN_W      = $clog2(MAX_LEN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [LEN_W-1:0] len,
  input  prob_t            cpt_hd [4],   // p(HD=Y|E,D): YY, YN, NY, NN
  input  prob_t            ctrl1_bias,   // p(D=Y), or 0/1 if observed
  input  prob_t            ctrl2_bias,   // p(E=Y), or 0/1 if observed
  input  prob_t            cpt_sym [4],  // p(BP|HD=Y), p(CP|HD=Y), p(BP|HD=N), p(CP|HD=N)
  input  logic             ev_bp,        // ctrl3
  input  logic             ev_cp,        // ctrl4
  output logic [LEN_W-1:0] cnt_hd,
  output logic [LEN_W-1:0] cnt_mol,
  output logic [LEN_W-1:0] cnt_den,
  output logic             busy,
  output logic             done
);

  sbg_ctrl_t        ctrl;
  logic             clear, bit_valid;
  logic [LEN_W-1:0] bit_idx;
  logic [3:0]       sb_prior_cpt, sb_post_cpt;
  logic [2:0]       sb_sel;
  logic             p_hd, molecule, denominator;

  sbg_phase_ctrl #(
    .MAX_LEN     (MAX_LEN),
    .RESET_TICKS (RESET_TICKS),
    .WRITE_TICKS (WRITE_TICKS),
    .READ_TICKS  (READ_TICKS),
    .GAP_TICKS   (GAP_TICKS)
  ) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .len       (len),
    .ctrl      (ctrl),
    .clear     (clear),
    .bit_valid (bit_valid),
    .bit_idx   (bit_idx),
    .busy      (busy),
    .done      (done)
  );

  bbn_hd_prior u_prior (
    .clk        (clk),
    .seed_base  (32'(SEED_BASE)),
    .ctrl       (ctrl),
    .cpt        (cpt_hd),
    .ctrl1_bias (ctrl1_bias),
    .ctrl2_bias (ctrl2_bias),
    .sb_cpt     (sb_prior_cpt),
    .sb_sel     (sb_sel),
    .p_hd       (p_hd)
  );

  bbn_hd_posterior u_post (
    .clk         (clk),
    .seed_base   (32'(SEED_BASE + 7)),
    .ctrl        (ctrl),
    .cpt         (cpt_sym),
    .ev_bp       (ev_bp),
    .ev_cp       (ev_cp),
    .p_hd        (p_hd),
    .sb_cpt      (sb_post_cpt),
    .molecule    (molecule),
    .denominator (denominator)
  );

  sc_counter #(.MAX_LEN(MAX_LEN)) u_cnt_hd (
    .clk(clk), .rst_n(rst_n), .clear(clear), .bit_valid(bit_valid),
    .bit_in(p_hd), .count(cnt_hd));
  sc_counter #(.MAX_LEN(MAX_LEN)) u_cnt_mol (
    .clk(clk), .rst_n(rst_n), .clear(clear), .bit_valid(bit_valid),
    .bit_in(molecule), .count(cnt_mol));
  sc_counter #(.MAX_LEN(MAX_LEN)) u_cnt_den (
    .clk(clk), .rst_n(rst_n), .clear(clear), .bit_valid(bit_valid),
    .bit_in(denominator), .count(cnt_den));

endmodule
