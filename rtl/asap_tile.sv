// asap_tile: a T x T block of delay elements with registered outputs.
//
// Inside a tile the wavefront crosses the delay elements combinationally when
// penalties are zero, so a long zero-penalty chain is a long combinational
// path. The lattice is therefore built from tiles, and every signal that leaves
// a tile passes through a flip-flop: the outputs of the right column and of the
// bottom row are each registered once, and the bottom-right (corner) element
// also has a second flip-flop in series for the diagonal crossing into the
// tile below-right. A signal crossing one tile edge is thus delayed by one
// cycle and a diagonal corner crossing by two.
//
// Interface: in_top[c] is the registered bottom-row output of the tile above
// (column c), in_left[r] the registered right-column output of the tile to the
// left (row r), in_corner the twice-registered corner output of the tile
// above-left (or the start signal for the first tile). Diagonal inputs of the
// first row / column come from in_top[c-1] / in_left[r-1]. out_bot_q,
// out_right_q and out_corner_qq are the registered outputs described above;
// out_bot_raw is the unregistered last row, used to read the result.
// nt_read[r] is the read nucleotide of row r, nt_ref[c] the reference
// nucleotide of column c.
//
// From the paper: the tile structure, the one-flip-flop edge buffers and the
// two-flip-flop diagonal crossing. Own choices: the flip-flops are cleared
// with the delay elements by clr.
module asap_tile #(
  parameter int unsigned T  = 16,   // tile edge, in delay elements
  parameter int unsigned PW = 2     // penalty width
) (
  input  logic                clk,
  input  logic                clr,
  input  logic [T-1:0][1:0]   nt_read,
  input  logic [T-1:0][1:0]   nt_ref,
  input  logic [PW-1:0]       pen_match,
  input  logic [PW-1:0]       pen_mismatch,
  input  logic [PW-1:0]       pen_del,
  input  logic [PW-1:0]       pen_ins,
  input  logic [T-1:0]        in_top,
  input  logic [T-1:0]        in_left,
  input  logic                in_corner,
  output logic [T-1:0]        out_bot_q,
  output logic [T-1:0]        out_right_q,
  output logic                out_corner_qq,
  output logic [T-1:0]        out_bot_raw
);

  // One generate scope per delay element, each with its own output net, so
  // the combinational chain through the tile is a plain acyclic netlist.
  for (genvar r = 0; r < T; r++) begin : g_r
    for (genvar c = 0; c < T; c++) begin : g_c
      logic o, i_diag, i_left, i_up;

      if (r == 0 && c == 0) begin : g_in
        assign i_diag = in_corner;
        assign i_up   = in_top[0];
        assign i_left = in_left[0];
      end else if (r == 0) begin : g_in
        assign i_diag = in_top[c-1];
        assign i_up   = in_top[c];
        assign i_left = g_r[0].g_c[c-1].o;
      end else if (c == 0) begin : g_in
        assign i_diag = in_left[r-1];
        assign i_up   = g_r[r-1].g_c[0].o;
        assign i_left = in_left[r];
      end else begin : g_in
        assign i_diag = g_r[r-1].g_c[c-1].o;
        assign i_up   = g_r[r-1].g_c[c].o;
        assign i_left = g_r[r].g_c[c-1].o;
      end

      asap_delay_element #(.PW(PW)) u_de (
        .clk          (clk),
        .clr          (clr),
        .in_diag      (i_diag),
        .in_left      (i_left),
        .in_up        (i_up),
        .nt_read      (nt_read[r]),
        .nt_ref       (nt_ref[c]),
        .pen_match    (pen_match),
        .pen_mismatch (pen_mismatch),
        .pen_del      (pen_del),
        .pen_ins      (pen_ins),
        .out          (o)
      );
    end
  end

  logic [T-1:0] bot_raw, right_raw;
  for (genvar k = 0; k < T; k++) begin : g_edge
    assign bot_raw[k]   = g_r[T-1].g_c[k].o;
    assign right_raw[k] = g_r[k].g_c[T-1].o;
  end
  assign out_bot_raw = bot_raw;

  logic corner_q;
  always_ff @(posedge clk) begin
    if (clr) begin
      out_bot_q   <= '0;
      out_right_q <= '0;
      corner_q    <= 1'b0;
      out_corner_qq <= 1'b0;
    end else begin
      out_bot_q     <= bot_raw;
      out_right_q   <= right_raw;
      corner_q      <= bot_raw[T-1];
      out_corner_qq <= corner_q;
    end
  end

endmodule
