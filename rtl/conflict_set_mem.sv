`timescale 1ns/1ps
// conflict_set_mem -- storage for the pre-extracted conflict sets.
//
// Terminals that feed the same gate network (for example the six inputs of
// one AND chain) form a conflict set: they must not receive the same
// bitstream, or the gate would see correlated inputs. The sets depend only
// on the application's logic and are extracted before run time; the host
// writes them here as a flat list of entries {last, term}, one per terminal
// occurrence, with `last` marking the final entry of each set. A terminal
// may occur in several sets. The list format and the asynchronous read port
// (the switch controller reads one entry per clock) are this design's
// choice; the source publication only says the sets are stored and used by
// the switch controller.
//
// Interface: write port we/waddr/wdata (one entry per clock), read port
// raddr -> rdata combinational.
module conflict_set_mem
  import spinbis_pkg::*;
#(
  parameter int unsigned DEPTH = GRID_DEF * GRID_DEF * TERMS_PER_POS,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic       clk,
  input  logic       we,
  input  logic [AW-1:0] waddr,
  input  cs_entry_t  wdata,
  input  logic [AW-1:0] raddr,
  output cs_entry_t  rdata
);

  cs_entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
