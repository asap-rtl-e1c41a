// asap_afu: the accelerator function unit, top of the ASAP design.
//
// Holds NC edit-distance lattices (four in the default build) behind a
// control unit that talks to host memory. Data flow: the control unit reads
// the job descriptor, then input lines (each with N = 1024 / (2*(LQ+LR))
// read/reference pairs) into the 32 KB input cache; the case multiplexer
// picks one pair of the head line at a time; the crossbar hands it to the
// next lattice in round-robin order and collects the 32-bit results in the
// same order; the 128-byte output cache packs 32 results per line, and the
// control unit writes those lines, then a status line, back to host memory.
//
// Interface: job_start/job_wed start a job, job_done pulses at its end. The
// host memory port is one command channel (cmd_*, 1024-bit write data) and an
// in-order read-data channel (rsp_*); MMIO reads return progress counters
// (see asap_control_unit). The service layer that turns these into the
// coherent host bus protocol is outside this design.
//
// From the paper: the blocks and their connection (input cache, multiplexer,
// crossbar with en/done, four lattices, output cache, control unit), 1024-bit
// lines, 32-bit results, 128 x 128 lattices with 16 x 16 tiles. Own choices:
// the memory and job ports, penalty width PW = 2 (delays 0..3 cycles).
module asap_afu
  import asap_pkg::*;
#(
  parameter int unsigned LQ    = 128,
  parameter int unsigned LR    = 128,
  parameter int unsigned T     = 16,
  parameter int unsigned PW    = 2,
  parameter int unsigned BAND  = 0,
  parameter int unsigned NC    = 4,
  parameter int unsigned DEPTH = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               job_start,
  input  logic [63:0]        job_wed,
  output logic               job_done,
  output logic               job_running,
  output logic               cmd_valid,
  input  logic               cmd_ready,
  output logic               cmd_write,
  output logic [63:0]        cmd_addr,
  output logic [LINE_W-1:0]  cmd_wdata,
  input  logic               rsp_valid,
  input  logic [LINE_W-1:0]  rsp_data,
  input  logic               mmio_rd,
  input  logic [2:0]         mmio_addr,
  output logic               mmio_rvalid,
  output logic [63:0]        mmio_rdata
);

  localparam int unsigned CW  = 2 * (LQ + LR);
  localparam int unsigned N   = LINE_W / CW;
  localparam int unsigned SEL = (N > 1) ? $clog2(N) : 1;

  asap_cfg_t              cfg;
  logic                   ic_wr_en, ic_rd_en, ic_empty, ic_full;
  logic [LINE_W-1:0]      ic_wr_data, ic_head;
  logic [$clog2(DEPTH):0] ic_count;
  logic [SEL-1:0]         mux_sel;
  logic [LQ-1:0][1:0]     case_read, core_read;
  logic [LR-1:0][1:0]     case_ref, core_ref;
  logic                   case_valid, case_ready;
  logic                   res_valid, res_ready;
  logic [RES_W-1:0]       res_data;
  logic                   oc_line_valid, oc_line_ready, oc_flush;
  logic [LINE_W-1:0]      oc_line_data;
  logic [$clog2(LINE_W/RES_W):0] oc_line_count;

  logic [NC-1:0]            core_in_valid, core_in_ready, core_res_valid, core_res_ready;
  logic [NC-1:0]            core_timeout, core_busy;
  logic [NC-1:0][RES_W-1:0] core_res_data;

  asap_control_unit #(.N(N), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n,
    .job_start, .job_wed, .job_done, .job_running,
    .cmd_valid, .cmd_ready, .cmd_write, .cmd_addr, .cmd_wdata,
    .rsp_valid, .rsp_data,
    .mmio_rd, .mmio_addr, .mmio_rvalid, .mmio_rdata,
    .cfg,
    .ic_wr_en, .ic_wr_data, .ic_rd_en, .ic_empty, .ic_count,
    .mux_sel, .case_valid, .case_ready,
    .res_fire      (res_valid && res_ready),
    .oc_line_valid, .oc_line_ready, .oc_line_data, .oc_flush
  );

  asap_input_cache #(.DEPTH(DEPTH)) u_icache (
    .clk, .rst_n,
    .wr_en   (ic_wr_en),
    .wr_data (ic_wr_data),
    .rd_en   (ic_rd_en),
    .rd_data (ic_head),
    .empty   (ic_empty),
    .full    (ic_full),
    .count   (ic_count)
  );

  asap_case_mux #(.LQ(LQ), .LR(LR)) u_mux (
    .line    (ic_head),
    .sel     (mux_sel),
    .nt_read (case_read),
    .nt_ref  (case_ref)
  );

  asap_crossbar #(.NC(NC), .LQ(LQ), .LR(LR)) u_xbar (
    .clk, .rst_n,
    .in_valid       (case_valid),
    .in_ready       (case_ready),
    .in_read        (case_read),
    .in_ref         (case_ref),
    .res_valid, .res_ready, .res_data,
    .core_in_valid, .core_in_ready,
    .core_read, .core_ref,
    .core_res_valid, .core_res_ready, .core_res_data
  );

  for (genvar k = 0; k < NC; k++) begin : g_core
    asap_core #(.LQ(LQ), .LR(LR), .T(T), .PW(PW), .BAND(BAND)) u_core (
      .clk, .rst_n,
      .cfg         (cfg),
      .in_valid    (core_in_valid[k]),
      .in_ready    (core_in_ready[k]),
      .in_read     (core_read),
      .in_ref      (core_ref),
      .res_valid   (core_res_valid[k]),
      .res_ready   (core_res_ready[k]),
      .res_data    (core_res_data[k]),
      .res_timeout (core_timeout[k]),
      .busy        (core_busy[k])
    );
  end

  asap_output_cache u_ocache (
    .clk, .rst_n,
    .res_valid, .res_ready, .res_data,
    .flush      (oc_flush),
    .line_valid (oc_line_valid),
    .line_ready (oc_line_ready),
    .line_data  (oc_line_data),
    .line_count (oc_line_count)
  );

endmodule
