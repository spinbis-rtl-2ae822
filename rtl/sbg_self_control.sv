`timescale 1ns/1ps
// sbg_self_control -- state-aware self-control circuit of one SBG.
//
// Instead of resetting the MTJ before every bit, the SBG remembers the state
// it read last time and always writes towards the opposite state. A bit is
// 1 when the write succeeded, which shows as a change between the state
// read now and the state read in the previous cycle:
//   TG  : passes the comparator output when t_clk is high (current_state);
//   DFF : latches current_state on d_clk (last_state);
//   XOR : bit = current_state ^ last_state;
//   last_state drives Rst.0 directly and Wrt.1 through an inverter, so a
//   stored P (0) selects a P -> AP write and a stored AP (1) an AP -> P write.
// This structure follows the published circuit. Two choices are this
// design's own: the TG is an enabled register, and the XOR result is
// registered on the same d_clk edge that updates last_state, so bit_out is
// stable for one whole SBG cycle. In the initialising cycle (init high) the
// state is latched but bit_out is left unchanged, since the stored state
// is then meaningless.
//
// After reset last_state is 1 (AP), so the first, initialising write is an
// AP -> P write, following the published description that the first cycle
// initialises the MTJ towards P.
//
// Timing: current_state updates at the end of the t_clk cycle; last_state
// and bit_out at the end of the d_clk cycle.
module sbg_self_control (
  input  logic clk,
  input  logic rst_n,
  input  logic t_clk,
  input  logic d_clk,
  input  logic init,
  input  logic mtj_state,
  output logic wrt1,
  output logic rst0,
  output logic bit_out
);

  logic current_state;
  logic last_state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      current_state <= 1'b0;
      last_state    <= 1'b1;
      bit_out       <= 1'b0;
    end else begin
      if (t_clk) current_state <= mtj_state;
      if (d_clk) begin
        last_state <= current_state;
        if (!init) bit_out <= current_state ^ last_state;
      end
    end
  end

  assign rst0 = last_state;
  assign wrt1 = ~last_state;

endmodule
