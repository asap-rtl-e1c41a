// asap_delay_element: one cell D(i,j) of the ASAP lattice.
//
// The cell turns the three incoming wavefront signals into one outgoing
// wavefront, delayed by the cheapest of the three edit operations. Each input
// feeds its own delay unit: D_M (from the diagonal neighbour (i-1,j-1), delay =
// match or mismatch penalty, chosen by comparing the two nucleotides), D_D (from
// (i,j-1), delay = deletion penalty) and D_I (from (i-1,j), delay = insertion
// penalty). A delay unit is a shift register of MAXD flip-flops whose taps, and
// the undelayed input as tap 0, go to a multiplexer whose select is the
// penalty. The three unit outputs are ORed, so the output rises with whichever
// delayed input rises first: the OR is the min, the shift register the add.
//
// Timing: wavefront signals are levels that rise once and stay high until clr.
// A penalty of 0 is a purely combinational path (the "zero delay" element the
// accelerator relies on for matches); a penalty of k delays the rise by k
// clock cycles. clr synchronously empties the shift registers; it must be held
// while the inputs are low, between two comparisons.
//
// From the paper: the three delay units, their inputs and penalties, the
// shift-register-plus-mux structure, the OR, the match/mismatch selection by
// Read[i] == Ref[j], and gating the cell with its input signals. Own choices:
// the gating is a clock enable (en = any input high) rather than a gated
// clock, which keeps the cell synthesizable on an FPGA fabric and behaves the
// same because the registers hold zeros until an input rises; penalties above
// MAXD saturate to MAXD.
module asap_delay_element #(
  parameter int unsigned PW   = 2,              // penalty (mux select) width
  parameter int unsigned MAXD = (1 << PW) - 1   // shift-register length
) (
  input  logic          clk,
  input  logic          clr,        // synchronous clear of the shift registers
  input  logic          in_diag,    // wavefront from (i-1, j-1)
  input  logic          in_left,    // wavefront from (i, j-1)
  input  logic          in_up,      // wavefront from (i-1, j)
  input  logic [1:0]    nt_read,    // Read[i]
  input  logic [1:0]    nt_ref,     // Ref[j]
  input  logic [PW-1:0] pen_match,
  input  logic [PW-1:0] pen_mismatch,
  input  logic [PW-1:0] pen_del,
  input  logic [PW-1:0] pen_ins,
  output logic          out         // wavefront leaving (i, j)
);

  logic [MAXD-1:0] sr_m, sr_d, sr_i;   // bit k-1 = input delayed by k cycles
  logic [PW-1:0]   sel_m;
  logic            gate_en;
  logic            d_m, d_d, d_i;

  assign sel_m   = (nt_read == nt_ref) ? pen_match : pen_mismatch;
  assign gate_en = in_diag | in_left | in_up;

  always_ff @(posedge clk) begin
    if (clr) begin
      sr_m <= '0;
      sr_d <= '0;
      sr_i <= '0;
    end else if (gate_en) begin
      sr_m <= {sr_m[MAXD-2:0], in_diag};
      sr_d <= {sr_d[MAXD-2:0], in_left};
      sr_i <= {sr_i[MAXD-2:0], in_up};
    end
  end

  // Tap multiplexer: tap 0 is the input itself, tap k the k-th flip-flop.
  function automatic logic tap(input logic x, input logic [MAXD-1:0] sr,
                               input logic [PW-1:0] sel);
    if (sel == '0)                   return x;
    else if (int'(sel) >= int'(MAXD)) return sr[MAXD-1];
    else                             return sr[sel - 1'b1];
  endfunction

  assign d_m = tap(in_diag, sr_m, sel_m);
  assign d_d = tap(in_left, sr_d, pen_del);
  assign d_i = tap(in_up,   sr_i, pen_ins);
  assign out = d_m | d_d | d_i;

endmodule
