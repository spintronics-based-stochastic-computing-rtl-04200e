// df_system: Bayesian inference system for locating a target from three
// noisy sensors (data fusion).
//
// The plane is cut into GRID x GRID candidate positions. The posterior of
// every position is computed independently by its own df_row (six SBGs and
// five AND gates), so all rows run at once; the matrix of rows is the SBG
// matrix plus the stochastic-computing architecture of the system. One
// sc_counter per row counts the ones of the row's output stream; after T
// bits, count[r] / T is the unnormalised posterior of position r, and the
// distribution over the grid is the counts divided by their sum. One
// sbg_phase_ctrl drives the phase signals of all 6*GRID*GRID SBGs.
//
// Interface: row r = y*GRID + x. vbias[r][k] is the likelihood code of SBG
// k of row r, held for the whole inference. start/len/done/busy as in
// sbg_phase_ctrl; counts are final when done is high. SBG k of row r uses
// device index SEED_BASE + 6*r + k. An inference of T bits takes
// 40*T ticks at the default phase lengths, counted from the cycle after the
// edge that samples start to the first cycle with done high.
module df_system
  import bis_pkg::*;
#(
  parameter int unsigned GRID        = 64,
  parameter int unsigned MAX_LEN     = MAX_LEN_DEF,
  parameter int unsigned SEED_BASE   = 0,
  parameter int unsigned RESET_TICKS = RESET_TICKS_DEF,
  parameter int unsigned WRITE_TICKS = WRITE_TICKS_DEF,
  parameter int unsigned READ_TICKS  = READ_TICKS_DEF,
  parameter int unsigned GAP_TICKS   = GAP_TICKS_DEF,
  localparam int unsigned N_ROWS     = GRID * GRID,
  localparam int unsigned N_SBG      = 6,
  localparam int unsigned LEN_W      = $clog2(MAX_LEN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [LEN_W-1:0] len,
  input  prob_t            vbias [N_ROWS][N_SBG],
  output logic [LEN_W-1:0] count [N_ROWS],
  output logic             busy,
  output logic             done
);

  sbg_ctrl_t        ctrl;
  logic             clear, bit_valid;
  logic [LEN_W-1:0] bit_idx;

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

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    logic [N_SBG-1:0] sb;
    logic             o;

    df_row #(.N_SBG(N_SBG)) u_row (
      .clk       (clk),
      .seed_base (32'(SEED_BASE + N_SBG * r)),
      .vbias     (vbias[r]),
      .ctrl      (ctrl),
      .sb        (sb),
      .o         (o)
    );

    sc_counter #(.MAX_LEN(MAX_LEN)) u_cnt (
      .clk       (clk),
      .rst_n     (rst_n),
      .clear     (clear),
      .bit_valid (bit_valid),
      .bit_in    (o),
      .count     (count[r])
    );
  end

endmodule
