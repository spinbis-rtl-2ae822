`timescale 1ns/1ps
// mtj_cell -- BEHAVIOURAL MODEL of the data MTJ and its write circuit.
//
// The real part is a perpendicular MTJ in a write path of four analogue
// multiplexers (MUX1..MUX4): with Write En. high, Wrt.1 drives current from
// bit-line to ground through the MTJ (trying P -> AP) and Rst.0 drives it
// from source-line to ground (trying AP -> P). Switching is stochastic:
// a pulse of fixed voltage and width flips the cell with a probability set
// by that voltage. This model keeps only what the logic sees:
//   * one switching attempt per Write En. pulse, in the direction that
//     Wrt.1 / Rst.0 select when the pulse begins (both or neither selected:
//     no attempt); a successful switch shows at the end of the pulse's
//     first clock, i.e. somewhere inside the pulse, before the read;
//   * success when a 16-bit draw from a private xorshift32 generator is
//     below the direction's probability (Q16, 65536 = always);
//   * the resistance seen by the read circuit, R_P for P and R_AP for AP.
// The two probabilities stand for the fixed write bias of the cell, which
// on chip comes from a voltage divider. Each instance gets its own seed, so
// that cells with the same bias produce
// different bitstreams; the source publication obtains the same effect in
// its device model with a per-instance random seed. The per-pulse
// probability, the seeded generator and the state after reset (taken from
// the seed, i.e. unknown to the circuit) are this model's choices.
// Resistances follow the published device parameters (RA = 5 Ohm.um^2,
// 45 nm x 45 nm, TMR = 1.5); process variation is not modelled.
//
// Interface: clk/rst_n; p_p2ap_q16/p_ap2p_q16 and seed (constant inputs);
// write_en, wrt1, rst0 from the phase controller and
// the self-control circuit; ap (1 = anti-parallel = logic 1) and r_ohm.
module mtj_cell #(
  parameter int unsigned R_P_OHM    = spinbis_pkg::R_P_OHM,
  parameter int unsigned R_AP_OHM   = spinbis_pkg::R_AP_OHM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [16:0] p_p2ap_q16,   // P -> AP success probability (bias)
  input  logic [16:0] p_ap2p_q16,   // AP -> P success probability (bias)
  input  logic [31:0] seed,         // instance seed, read at reset
  input  logic        write_en,
  input  logic        wrt1,
  input  logic        rst0,
  output logic        ap,
  output logic [15:0] r_ohm
);

  logic [31:0] seed0;
  assign seed0 = (seed == 0) ? 32'h1234_5678 : (seed * 32'h9E37_79B9) ^ 32'h5A5A_0F0F;

  logic [31:0] rng;
  logic        pulse_d;     // Write En. in the previous cycle

  function automatic logic [31:0] xorshift32(logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  logic        pulse_start;
  logic        dir_p2ap;    // Wrt.1 alone selected
  logic        dir_ap2p;    // Rst.0 alone selected
  logic [16:0] draw;
  assign pulse_start = write_en && !pulse_d;
  assign dir_p2ap    = wrt1 && !rst0;
  assign dir_ap2p    = rst0 && !wrt1;
  assign draw      = {1'b0, rng[31:16]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rng      <= seed0;
      ap       <= seed0[7];
      pulse_d  <= 1'b0;
    end else begin
      pulse_d <= write_en;
      if (pulse_start) begin
        rng <= xorshift32(rng);
        if (dir_p2ap && !ap && (draw < p_p2ap_q16)) ap <= 1'b1;
        if (dir_ap2p &&  ap && (draw < p_ap2p_q16)) ap <= 1'b0;
      end
    end
  end

  assign r_ohm = ap ? 16'(R_AP_OHM) : 16'(R_P_OHM);

endmodule
