// asap_output_cache: packs 32-bit results into one 128-byte cache line.
//
// Results arrive one at a time on res_valid/res_ready and are written into
// slot 0, 1, ... of a single line buffer (slot k at bits [32k +: 32]). When
// all NS slots are filled, or when flush is high and at least one slot is
// filled, the line is offered on line_valid with line_count valid results;
// no result is accepted while a line is offered. Once line_ready takes it, the
// buffer is cleared and filling starts again. Unused slots of a flushed line
// read as zero.
//
// Timing: one result per cycle; the line is offered from the cycle after its
// last result is written.
//
// From the paper: a 128-byte internal output cache into which the 32-bit
// results are packed before they are written back to host memory. Own
// choices: single buffer, the flush input for a final partial line.
module asap_output_cache
  import asap_pkg::*;
#(
  parameter int unsigned NS = LINE_W / RES_W   // 32 results per line
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    res_valid,
  output logic                    res_ready,
  input  logic [RES_W-1:0]        res_data,
  input  logic                    flush,
  output logic                    line_valid,
  input  logic                    line_ready,
  output logic [LINE_W-1:0]       line_data,
  output logic [$clog2(NS):0]     line_count
);

  localparam int unsigned CW = $clog2(NS) + 1;

  logic [CW-1:0] fill;

  assign line_valid = (fill == CW'(NS)) || (flush && fill != '0);
  assign res_ready  = !line_valid;
  assign line_count = fill;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill      <= '0;
      line_data <= '0;
    end else if (line_valid && line_ready) begin
      fill      <= '0;
      line_data <= '0;
    end else if (res_valid && res_ready) begin
      line_data[fill[CW-2:0]*RES_W +: RES_W] <= res_data;
      fill <= fill + 1'b1;
    end
  end

endmodule
