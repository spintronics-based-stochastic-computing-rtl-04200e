// sbg_phase_ctrl: phase sequencer shared by all SBGs of one inference
// system.
//
// After 'start' it runs 'len' SBG cycles. Each cycle is
//   RESET (Write En, Rst. 0) -> GAP -> WRITE (Write En, Wrt. 1) -> GAP
//   -> READ (Read En) -> GAP
// with the tick counts given by the parameters, 40 ticks per bit by
// default, so an inference of T bits takes 40*T ticks (40T ns at 1 ns per
// tick, as published). The published design fixes the order of the phases and
// the 10 ns reset and 5 ns write; the gaps, the read length and the
// start/len/done handshake are this design's.
//
// Timing: 'start' is sampled on a clock edge; in the cycle after that
// edge 'clear' pulses and the first reset tick runs. 'bit_valid' is high for
// one cycle, the first tick after each read phase, when every SBG's readout
// holds the bit just read; consumers sample on the edge that ends it.
// 'done' goes high 40*T cycles (default phase lengths) after the first
// cycle following the start edge and stays high until the next start;
// 'busy' is high from that first cycle until done. A start while busy is
// ignored. len = 0 finishes at once with no bits.
module sbg_phase_ctrl
  import bis_pkg::*;
#(
  parameter int unsigned MAX_LEN     = MAX_LEN_DEF,
  parameter int unsigned RESET_TICKS = RESET_TICKS_DEF,
  parameter int unsigned WRITE_TICKS = WRITE_TICKS_DEF,
  parameter int unsigned READ_TICKS  = READ_TICKS_DEF,
  parameter int unsigned GAP_TICKS   = GAP_TICKS_DEF,
  localparam int unsigned LEN_W      = $clog2(MAX_LEN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [LEN_W-1:0] len,        // bitstream length T, 0..MAX_LEN
  output sbg_ctrl_t        ctrl,
  output logic             clear,      // restart the decoders
  output logic             bit_valid,  // readouts hold a new bit
  output logic [LEN_W-1:0] bit_idx,    // bits finished so far
  output logic             busy,
  output logic             done
);

  localparam int unsigned MAX_TICKS =
      (RESET_TICKS > READ_TICKS) ? RESET_TICKS : READ_TICKS;
  localparam int unsigned TICK_W = $clog2(MAX_TICKS + 1);

  sbg_phase_e       phase;
  logic [TICK_W-1:0] tick;       // ticks left in this phase, minus one
  logic [LEN_W-1:0]  len_q;

  function automatic logic [TICK_W-1:0] ticks_of(sbg_phase_e ph);
    case (ph)
      PH_RESET: return TICK_W'(RESET_TICKS - 1);
      PH_WRITE: return TICK_W'(WRITE_TICKS - 1);
      PH_READ:  return TICK_W'(READ_TICKS - 1);
      default:  return TICK_W'(GAP_TICKS - 1);
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= PH_IDLE;
      tick      <= '0;
      len_q     <= '0;
      bit_idx   <= '0;
      clear     <= 1'b0;
      bit_valid <= 1'b0;
      done      <= 1'b0;
    end else begin
      clear     <= 1'b0;
      bit_valid <= 1'b0;
      if (phase == PH_IDLE) begin
        if (start) begin
          len_q   <= len;
          bit_idx <= '0;
          clear   <= 1'b1;
          done    <= (len == '0);
          if (len != '0) begin
            phase <= PH_RESET;
            tick  <= ticks_of(PH_RESET);
          end
        end
      end else if (tick != '0) begin
        tick <= tick - 1'b1;
      end else begin
        unique case (phase)
          PH_RESET: begin phase <= PH_GAP1;  tick <= ticks_of(PH_GAP1);  end
          PH_GAP1:  begin phase <= PH_WRITE; tick <= ticks_of(PH_WRITE); end
          PH_WRITE: begin phase <= PH_GAP2;  tick <= ticks_of(PH_GAP2);  end
          PH_GAP2:  begin phase <= PH_READ;  tick <= ticks_of(PH_READ);  end
          PH_READ: begin
            phase     <= PH_GAP3;
            tick      <= ticks_of(PH_GAP3);
            bit_valid <= 1'b1;
            bit_idx   <= bit_idx + 1'b1;
          end
          PH_GAP3: begin
            if (bit_idx == len_q) begin
              phase <= PH_IDLE;
              done  <= 1'b1;
            end else begin
              phase <= PH_RESET;
              tick  <= ticks_of(PH_RESET);
            end
          end
          default: phase <= PH_IDLE;
        endcase
      end
    end
  end

  always_comb begin
    ctrl          = '0;
    ctrl.write_en = (phase == PH_RESET) || (phase == PH_WRITE);
    ctrl.rst0     = (phase == PH_RESET);
    ctrl.wrt1     = (phase == PH_WRITE);
    ctrl.read_en  = (phase == PH_READ);
  end

  assign busy = (phase != PH_IDLE);

  initial begin
    assert (RESET_TICKS >= 1 && WRITE_TICKS >= 1 && READ_TICKS >= 1 && GAP_TICKS >= 1)
      else $error("every phase needs at least one tick");
    assert (GAP_TICKS <= MAX_TICKS) else $error("GAP_TICKS longer than reset/read");
    assert (WRITE_TICKS <= MAX_TICKS) else $error("WRITE_TICKS longer than reset/read");
  end

endmodule
