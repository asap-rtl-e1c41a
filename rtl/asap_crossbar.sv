// asap_crossbar: connects the single case stream to NC lattices and back.
//
// On the input side one comparison at a time (in_valid/in_ready plus the read
// and reference nucleotides) is broadcast to every lattice, and the valid
// ("en") is steered to lattice dp; dp then moves on round-robin. On the result
// side the crossbar offers the result ("done") of lattice cp and moves cp on
// round-robin when it is taken. Because both pointers visit the lattices in
// the same order, results leave in the order the comparisons entered, even
// though each lattice takes a data-dependent number of cycles; a slow lattice
// only holds back the results behind it, while the others keep computing.
//
// Timing: purely combinational steering plus two pointer registers.
//
// From the paper: a crossbar between the input multiplexer / output cache and
// the four lattices, with en and done signals. Own choices: round-robin
// dispatch and in-order collection, the handshake signals.
module asap_crossbar
  import asap_pkg::*;
#(
  parameter int unsigned NC = 4,
  parameter int unsigned LQ = 128,
  parameter int unsigned LR = 128
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // case stream from the control unit / multiplexer
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [LQ-1:0][1:0]          in_read,
  input  logic [LR-1:0][1:0]          in_ref,
  // result stream to the output cache
  output logic                        res_valid,
  input  logic                        res_ready,
  output logic [RES_W-1:0]            res_data,
  // lattice side
  output logic [NC-1:0]               core_in_valid,
  input  logic [NC-1:0]               core_in_ready,
  output logic [LQ-1:0][1:0]          core_read,
  output logic [LR-1:0][1:0]          core_ref,
  input  logic [NC-1:0]               core_res_valid,
  output logic [NC-1:0]               core_res_ready,
  input  logic [NC-1:0][RES_W-1:0]    core_res_data
);

  localparam int unsigned PTR_W = (NC > 1) ? $clog2(NC) : 1;

  logic [PTR_W-1:0] dp, cp;

  function automatic logic [PTR_W-1:0] nxt(input logic [PTR_W-1:0] p);
    return (int'(p) == NC - 1) ? '0 : p + 1'b1;
  endfunction

  assign core_read = in_read;
  assign core_ref  = in_ref;

  always_comb begin
    core_in_valid      = '0;
    core_in_valid[dp]  = in_valid;
    core_res_ready     = '0;
    core_res_ready[cp] = res_ready;
  end

  assign in_ready  = core_in_ready[dp];
  assign res_valid = core_res_valid[cp];
  assign res_data  = core_res_data[cp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dp <= '0;
      cp <= '0;
    end else begin
      if (in_valid && in_ready)   dp <= nxt(dp);
      if (res_valid && res_ready) cp <= nxt(cp);
    end
  end

endmodule
