// asap_lattice: the full LQ x LR delay-element lattice, built from tiles.
//
// Row i of the lattice holds read nucleotide i, column j reference nucleotide
// j; delay element D(i,j) takes the wavefront from D(i-1,j-1), D(i,j-1) and
// D(i-1,j). The start signal enters the diagonal input of D(0,0); inputs from
// outside the lattice are tied low. Once start rises, D(i,j) rises after the
// minimum, over all monotone paths from the start, of the summed penalties plus
// one cycle per tile edge crossed (two for a diagonal corner crossing).
// out_row is the unregistered last row (its OR gives the local, SW-style
// result) and out_nw the bottom-right element (the global, NW-style result).
//
// Band elimination (LV variant): with BAND > 0 only tiles whose row and
// column tile index differ by at most BAND are built; the others are removed
// at elaboration and their outputs read as low. BAND = 0 keeps every tile.
//
// Timing: start and all wavefronts are levels; clr (held while start is low)
// returns every flip-flop to zero between comparisons. Read and reference
// nucleotides and penalties must be stable while start is high.
//
// From the paper: the lattice of delay elements, the injection at D(0,0), the
// last-row and bottom-right outputs, the tiling with registered tile edges and
// the removal of tiles outside the band. Own choices: inputs outside the
// lattice are tied low (no boundary row/column), the band is counted in tiles
// around the main diagonal, LQ and LR must be multiples of T.
module asap_lattice #(
  parameter int unsigned LQ   = 128,   // read length (rows)
  parameter int unsigned LR   = 128,   // reference length (columns)
  parameter int unsigned T    = 16,    // tile edge
  parameter int unsigned PW   = 2,     // penalty width
  parameter int unsigned BAND = 0      // kept tile diagonals each side, 0 = all
) (
  input  logic                 clk,
  input  logic                 clr,
  input  logic                 start,
  input  logic [LQ-1:0][1:0]   nt_read,
  input  logic [LR-1:0][1:0]   nt_ref,
  input  logic [PW-1:0]        pen_match,
  input  logic [PW-1:0]        pen_mismatch,
  input  logic [PW-1:0]        pen_del,
  input  logic [PW-1:0]        pen_ins,
  output logic [LR-1:0]        out_row,
  output logic                 out_nw
);

  localparam int unsigned NTR = LQ / T;
  localparam int unsigned NTC = LR / T;

  for (genvar tr = 0; tr < NTR; tr++) begin : g_tr
    for (genvar tc = 0; tc < NTC; tc++) begin : g_tc
      logic [T-1:0] bot_q, right_q, bot_raw;
      logic         corner_qq;
      logic [T-1:0] i_top, i_left;
      logic         i_corner;

      if (tr == 0) begin : g_it
        assign i_top = '0;
      end else begin : g_it
        assign i_top = g_tr[tr-1].g_tc[tc].bot_q;
      end
      if (tc == 0) begin : g_il
        assign i_left = '0;
      end else begin : g_il
        assign i_left = g_tr[tr].g_tc[tc-1].right_q;
      end
      if (tr == 0 && tc == 0) begin : g_ic
        assign i_corner = start;
      end else if (tr > 0 && tc > 0) begin : g_ic
        assign i_corner = g_tr[tr-1].g_tc[tc-1].corner_qq;
      end else begin : g_ic
        assign i_corner = 1'b0;
      end

      if (BAND == 0 || (tr >= tc ? tr - tc : tc - tr) <= BAND) begin : g_tile
        asap_tile #(.T(T), .PW(PW)) u_tile (
          .clk           (clk),
          .clr           (clr),
          .nt_read       (nt_read[tr*T +: T]),
          .nt_ref        (nt_ref[tc*T +: T]),
          .pen_match     (pen_match),
          .pen_mismatch  (pen_mismatch),
          .pen_del       (pen_del),
          .pen_ins       (pen_ins),
          .in_top        (i_top),
          .in_left       (i_left),
          .in_corner     (i_corner),
          .out_bot_q     (bot_q),
          .out_right_q   (right_q),
          .out_corner_qq (corner_qq),
          .out_bot_raw   (bot_raw)
        );
      end else begin : g_tile
        // Eliminated tile: nothing is built, its outputs read as low.
        assign bot_q     = '0;
        assign right_q   = '0;
        assign corner_qq = 1'b0;
        assign bot_raw   = '0;
      end
    end
  end

  for (genvar tc = 0; tc < NTC; tc++) begin : g_out
    assign out_row[tc*T +: T] = g_tr[NTR-1].g_tc[tc].bot_raw;
  end
  assign out_nw = out_row[LR-1];

endmodule
