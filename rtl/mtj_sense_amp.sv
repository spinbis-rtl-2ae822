`timescale 1ns/1ps
// mtj_sense_amp -- BEHAVIOURAL MODEL of the SBG read circuit.
//
// The real part is a pre-charge sense amplifier: two branches (data cell and
// reference cell), each with a load pMOS, a clamp nMOS and a read-enable
// nMOS, turn the resistance difference into V_data - V_ref, and a dynamic
// latched comparator clocked by C_clk resolves it to a logic level. The
// reference cell is two series P+AP MTJ pairs in parallel, i.e.
// (R_P + R_AP) / 2, half-way between the two data states.
// This model compares the data resistance with that reference value and
// latches the result on the clock edge that ends a cycle in which both
// Read En. and C_clk are high; otherwise the output holds. Output 1 means
// the data cell is anti-parallel (high resistance). Equalising, clamping
// and read disturb are not modelled.
//
// Interface: clk/rst_n; read_en, c_clk enables; r_data in ohms;
// mtj_state (registered).
//
// Source vs own choice: the reference (R_P+R_AP)/2 and sampling on C_clk
// within Read En. follow the publication; the ideal comparator and
// clock-edge latching are this model's choices.
module mtj_sense_amp #(
  parameter int unsigned R_P_OHM  = spinbis_pkg::R_P_OHM,
  parameter int unsigned R_AP_OHM = spinbis_pkg::R_AP_OHM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        read_en,
  input  logic        c_clk,
  input  logic [15:0] r_data,
  output logic        mtj_state
);

  // Reference cell: (R_P + R_AP) || (R_P + R_AP).
  localparam int unsigned R_REF_OHM = (R_P_OHM + R_AP_OHM) / 2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                mtj_state <= 1'b0;
    else if (read_en && c_clk) mtj_state <= (32'(r_data) > R_REF_OHM);
  end

endmodule
