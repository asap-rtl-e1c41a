// asap_delay_counter: decodes a delay-encoded value into a binary count.
//
// The counter measures the interval between the rise of en (the start of the
// wavefront) and the rise of dis (the wavefront leaving the lattice). While en
// is low it is held at zero; from the first cycle en is high it increments
// once per clock until dis is high, then it holds. Because both signals are
// levels that stay high, count equals the number of clock edges between the
// rise of en and the rise of dis: a dis that is already high in the first
// cycle of en reads 0. done is high once both are high. The count saturates at
// its largest value instead of wrapping.
//
// From the paper: the en/dis counter as the decoder of the delay encoding and
// its synchronous clocking. Own choices: saturation, the zero-latency reading.
module asap_delay_counter #(
  parameter int unsigned W = 16   // counter width (N_o)
) (
  input  logic         clk,
  input  logic         en,
  input  logic         dis,
  output logic [W-1:0] count,
  output logic         done
);

  always_ff @(posedge clk) begin
    if (!en)                        count <= '0;
    else if (!dis && count != '1)   count <= count + 1'b1;
  end

  assign done = en & dis;

endmodule
