// asap_input_cache: the internal input cache, a FIFO of host cache lines.
//
// Lines read from host memory are pushed on the write side (1024 bits wide,
// from the host interface) and popped on the read side, whose head line is
// always visible on rd_data (1024 bits, towards the case multiplexer). Every
// line holds several comparisons; the control unit pops a line only after it
// has handed all of them to the lattices, which is what makes the FIFO
// "modified": the head stays readable across several cycles and selections.
// count reports the occupancy so the control unit can bound the reads it has
// in flight.
//
// Timing: push and pop take effect at the clock edge; rd_data shows the head
// combinationally from the storage array (first-word fall-through). Pushing
// into a full or popping from an empty FIFO is a protocol error (asserted).
//
// From the paper: 32 KB capacity, 1024-bit input and output ports, FIFO
// organisation with several input cases per entry. Own choices: first-word
// fall-through read, the occupancy output, asynchronous reset of pointers.
module asap_input_cache
  import asap_pkg::*;
#(
  parameter int unsigned DEPTH = 256,   // 32 KB / 128 B lines
  parameter int unsigned W     = LINE_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_en,
  output logic [W-1:0]             rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr_en) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (rd_en) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(wr_en) - (AW+1)'(rd_en);
    end
  end

  assign rd_data = mem[rp];
  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));

  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));

endmodule
