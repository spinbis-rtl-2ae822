`timescale 1ns/1ps
// sbg -- one self-control stochastic bitstream generator (BEHAVIOURAL MODEL,
// because it contains the MTJ and sense-amplifier models).
//
// An MTJ is written with a pulse that switches it with probability p; the
// read circuit senses its state and the self-control circuit turns "did it
// switch" into the output bit, then chooses the direction of the next write.
// The output is thus a bitstream whose fraction of ones is p. Both write
// directions use the same probability, as the source publication requires
// of the write bias. One bit per SBG cycle (10 clocks by default), after one
// initialising cycle.
//
// Interface: p_q16 and seed are constants per instance; ph comes from a shared sbg_phase_ctrl; bit_out is held for a
// whole SBG cycle and changes one clock after the d_clk cycle.
//
// Source vs own choice: the MTJ + read circuit + self-control structure and
// equal probabilities in both directions follow the publication; supplying
// the probability as a constant input (instead of a bias voltage) and the
// seed input are this model's choices.
module sbg
  import spinbis_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [16:0] p_q16,   // switching probability set by the bias, Q16
  input  logic [31:0] seed,    // instance seed of the MTJ model
  input  sbg_phase_t ph,
  output logic       bit_out
);

  logic        wrt1, rst0, mtj_state;
  logic [15:0] r_ohm;

  mtj_cell u_cell (
    .clk, .rst_n, .p_p2ap_q16(p_q16), .p_ap2p_q16(p_q16), .seed, .write_en(ph.write_en), .wrt1, .rst0, .ap(), .r_ohm
  );

  mtj_sense_amp u_sa (
    .clk, .rst_n, .read_en(ph.read_en), .c_clk(ph.c_clk), .r_data(r_ohm), .mtj_state
  );

  sbg_self_control u_sc (
    .clk, .rst_n, .t_clk(ph.t_clk), .d_clk(ph.d_clk), .init(ph.init),
    .mtj_state, .wrt1, .rst0, .bit_out
  );

endmodule
