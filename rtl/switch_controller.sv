`timescale 1ns/1ps
// switch_controller -- assigns SBG bitstreams to logic terminals
// (SBG sharing strategy).
//
// Inputs are a digital probability code In[t] for every terminal t (written
// by the host) and the conflict sets (read from conflict_set_mem). The
// array has L kinds of SBG, kind k being SBGs k*PHI .. k*PHI+PHI-1. For every
// conflict set in turn the controller
//   pass 1: marks as used the SBGs already given to members of the set
//           (terminals that also belong to an earlier set);
//   pass 2: for each member not yet connected, finds its kind
//           k = round(In[t] * (L-1) / (2^PROB_W - 1))  (findProIndex)
//           and connects it to the first SBG of kind k not used in this set.
// Members of one set therefore always get different SBGs, while terminals of
// different sets with the same value reuse the same SBGs: with the
// nine-terminal example of the publication (sets {T1,T2,T5}, {T3,T4,T5},
// {T6..T9}) seven SBGs serve nine terminals.
//
// The published pseudo-code keeps one "first free SBG" pointer per kind for
// the whole run and does not say what happens to a terminal in two sets;
// taken literally it would never share. This controller follows its stated
// goal and worked example instead: the pointers restart for every set
// (the `used` vector is cleared), and already-connected members are only
// marked, never connected twice. If a set needs more than PHI SBGs of one
// kind, the extra terminal stays unconnected and `overflow` is raised.
// Because sets are handled one after another, two terminals that were given
// the same SBG in earlier sets cannot be separated when a later set holds
// both; the controller then raises `clash` (the host must order or split
// its sets). Neither case arises when every terminal is in one set only, as
// in the sensor-fusion logic. Those two flags, the nearest-level rounding and the storage of the control
// matrix as one row index plus a valid bit per column (a column has at most
// one switch on) are this design's choices.
//
// Timing: after `start`, one clock per conflict-set entry in each pass, so a
// run over E entries takes 2*E clocks plus one; `done` pulses at the end.
// `sel`/`sel_valid` change while busy and are stable afterwards. In[] may
// only be written while idle.
module switch_controller
  import spinbis_pkg::*;
#(
  parameter int unsigned L        = L_PROB_DEF,
  parameter int unsigned PHI      = PHI_DEF,
  parameter int unsigned M        = L * PHI,
  parameter int unsigned N        = GRID_DEF * GRID_DEF * TERMS_PER_POS,
  parameter int unsigned CS_DEPTH = N,
  parameter int unsigned RW       = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned TW       = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned CAW      = (CS_DEPTH > 1) ? $clog2(CS_DEPTH) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // digital inputs
  input  logic                in_we,
  input  logic [TW-1:0]       in_addr,
  input  logic [PROB_W-1:0]   in_data,
  // conflict-set memory
  output logic [CAW-1:0]      cs_raddr,
  input  cs_entry_t           cs_rdata,
  input  logic [CAW:0]        n_entries,
  // control
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic                overflow,
  output logic                clash,
  // switch matrix control: row of the single ON switch of each column
  output logic [RW-1:0]       sel       [N],
  output logic [N-1:0]        sel_valid
);

  localparam int unsigned MAXC = (1 << PROB_W) - 1;

  typedef enum logic [1:0] {S_IDLE, S_MARK, S_ASSIGN} state_t;

  state_t             state;
  logic [PROB_W-1:0]  in_mem [N];
  logic [M-1:0]       used;
  logic [CAW:0]       ptr, set_start;

  // ---- current entry ------------------------------------------------------
  logic [TW-1:0]      term;
  logic               term_ok;
  logic               set_end;
  assign cs_raddr = ptr[CAW-1:0];
  assign term     = cs_rdata.term[TW-1:0];
  assign term_ok  = (32'(cs_rdata.term) < N);
  assign set_end  = cs_rdata.last || (ptr + 1'b1 == n_entries);

  // ---- findProIndex: nearest of the L levels -------------------------------
  logic [PROB_W-1:0]  code;
  logic [15:0]        kind;
  assign code = in_mem[term];
  always_comb begin
    kind = '0;
    for (int unsigned i = 1; i < L; i++)
      if (2 * 32'(code) * (L - 1) >= (2 * i - 1) * MAXC) kind = kind + 1'b1;
  end

  // ---- first SBG of that kind not used in this set ------------------------
  logic               free_found;
  logic [RW-1:0]      free_row;
  always_comb begin
    free_found = 1'b0;
    free_row   = '0;
    for (int i = PHI - 1; i >= 0; i--) begin
      if (!used[32'(kind) * PHI + 32'(i)]) begin
        free_found = 1'b1;
        free_row   = RW'(32'(kind) * PHI + 32'(i));
      end
    end
  end

  // ---- digital input storage ------------------------------------------------
  always_ff @(posedge clk) begin
    if (in_we && state == S_IDLE) in_mem[in_addr] <= in_data;
  end

  // ---- sequencer -------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ptr       <= '0;
      set_start <= '0;
      used      <= '0;
      done      <= 1'b0;
      overflow  <= 1'b0;
      clash     <= 1'b0;
      sel_valid <= '0;
      for (int k = 0; k < N; k++) sel[k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          ptr       <= '0;
          set_start <= '0;
          used      <= '0;
          overflow  <= 1'b0;
          clash     <= 1'b0;
          sel_valid <= '0;
          if (n_entries == 0) done  <= 1'b1;
          else                state <= S_MARK;
        end
        S_MARK: begin
          if (term_ok && sel_valid[term]) begin
            used[sel[term]] <= 1'b1;
            if (used[sel[term]]) clash <= 1'b1;
          end
          if (set_end) begin
            ptr   <= set_start;
            state <= S_ASSIGN;
          end else begin
            ptr <= ptr + 1'b1;
          end
        end
        S_ASSIGN: begin
          if (term_ok && !sel_valid[term]) begin
            if (free_found) begin
              sel[term]       <= free_row;
              sel_valid[term] <= 1'b1;
              used[free_row]  <= 1'b1;
            end else begin
              overflow <= 1'b1;
            end
          end
          ptr <= ptr + 1'b1;
          if (set_end) begin
            used      <= '0;
            set_start <= ptr + 1'b1;
            if (ptr + 1'b1 == n_entries) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_MARK;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  initial assert (M == L * PHI && L >= 2 && PHI >= 1)
    else $error("switch_controller: needs M == L*PHI, L >= 2");

endmodule
