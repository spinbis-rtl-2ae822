`timescale 1ns/1ps
// sbg_phase_ctrl -- enable sequencer shared by all self-control SBGs.
//
// A self-control SBG produces one stochastic bit per SBG cycle made of a
// write pulse followed by a read window (no separate reset step). With the
// default 1 ns clock the cycle is 10 clocks, laid out after the published
// 10 ns waveform:
//
//   clock in cycle : 0 .. 6            7        8        9
//   write_en       : 1 .. 1            0        0        0
//   read_en        : 0 .. 0            1        1        1
//   c_clk          :                   1                       comparator samples
//   t_clk          :                            1              TG passes state
//   d_clk          :                                     1     DFF latches, bit out
//
// The published waveform places C_clk, T_clk and D_clk 0.5 ns, 1 ns and
// 2 ns into the read window; here they fall on whole clock cycles. The
// first SBG cycle after `run` rises only initialises the MTJ and the stored
// state, so its bit is flagged with `init` and not counted. `run` may drop at
// any time; the current SBG cycle is finished first.
//
// bit_valid is high for one clock in the clock after each D_clk of a
// non-initialising cycle, i.e. exactly when a fresh bit appears on the SBG
// outputs: one pulse per WRITE_CYC + READ_CYC clocks.
//
// Source vs own choice: the 7 + 3 ns write/read split, the order of C_clk,
// T_clk, D_clk and the discarded first cycle follow the publication; the
// rounding to whole clocks, the run/stop handshake and bit_valid are this
// design's choices.
//
// Lint note: rst_n is read both by the asynchronous reset and by the
// exclusivity assertion (which holds off while in reset); the synchronous-
// and-asynchronous use that verilator reports comes only from that check.
module sbg_phase_ctrl
  import spinbis_pkg::*;
#(
  parameter int unsigned WRITE_CYC = WRITE_CYC_DEF,
  parameter int unsigned READ_CYC  = READ_CYC_DEF
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       run,
  output sbg_phase_t ph,
  output logic       bit_valid
);

  localparam int unsigned CYC = WRITE_CYC + READ_CYC;
  localparam int unsigned CW  = $clog2(CYC);

  logic          active;
  logic          init;
  logic [CW-1:0] cnt;
  logic          last;

  assign last = (cnt == CW'(CYC - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      init      <= 1'b1;
      cnt       <= '0;
      bit_valid <= 1'b0;
    end else begin
      bit_valid <= ph.d_clk && !ph.init;
      if (!active) begin
        cnt  <= '0;
        init <= 1'b1;
        if (run) active <= 1'b1;
      end else if (last) begin
        cnt  <= '0;
        init <= 1'b0;
        if (!run) active <= 1'b0;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  always_comb begin
    ph          = '0;
    ph.init     = init;
    if (active) begin
      ph.write_en = (cnt <  CW'(WRITE_CYC));
      ph.read_en  = (cnt >= CW'(WRITE_CYC));
      ph.c_clk    = (cnt == CW'(WRITE_CYC));
      ph.t_clk    = (cnt == CW'(WRITE_CYC + 1));
      ph.d_clk    = (cnt == CW'(CYC - 1));
    end
  end

  initial begin
    assert (WRITE_CYC >= 1 && READ_CYC >= 3)
      else $error("sbg_phase_ctrl needs WRITE_CYC >= 1 and READ_CYC >= 3");
  end

  // Write and read never overlap (the two multiplexers of the cell are
  // either on the write or on the read side).
  a_excl: assert property (@(posedge clk) !rst_n || !(ph.write_en && ph.read_en));

endmodule
