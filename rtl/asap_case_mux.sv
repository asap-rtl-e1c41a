// asap_case_mux: picks one comparison out of an input cache line.
//
// A 1024-bit line holds N = 1024 / (2*(LQ+LR)) comparisons side by side;
// comparison k occupies bits [k*CW +: CW] with CW = 2*(LQ+LR). Within it the
// read comes first (nucleotide n at bits [2n +: 2]) and the reference window
// follows (nucleotide n at bits [2*LQ + 2n +: 2]). sel, driven by the control
// unit, selects k; the multiplexer is purely combinational.
//
// From the paper: an N x 1 multiplexer under control-unit control that turns
// the 1024-bit cache output into one case at a time (4 x 1 for 64-nucleotide
// strings; 2 x 1 for the 128-nucleotide default here). Own choices: the bit
// order of a case within the line.
module asap_case_mux
  import asap_pkg::*;
#(
  parameter int unsigned LQ = 128,
  parameter int unsigned LR = 128,
  parameter int unsigned CW = 2 * (LQ + LR),
  parameter int unsigned N  = LINE_W / CW,
  parameter int unsigned SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [LINE_W-1:0]  line,
  input  logic [SW-1:0]      sel,
  output logic [LQ-1:0][1:0] nt_read,
  output logic [LR-1:0][1:0] nt_ref
);

  logic [CW-1:0] c;

  always_comb begin
    c = '0;
    for (int k = 0; k < N; k++) begin
      if (int'(sel) == k) c = line[k*CW +: CW];
    end
  end

  assign nt_read = c[2*LQ-1:0];
  assign nt_ref  = c[CW-1:2*LQ];

endmodule
