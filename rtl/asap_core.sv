// asap_core: one ASAP lattice with its decoders, ready to be fed comparisons.
//
// A comparison is a read of LQ nucleotides and a reference window of LR
// nucleotides. The core accepts one on in_valid/in_ready, clears the lattice,
// raises the start signal and lets the wavefront run. Two counters measure the
// time to the first arrival anywhere on the last row (SW output) and at the
// bottom-right element (NW output); cfg.mode picks which one ends the run. With
// cfg.lv_en set the run also ends when the selected count reaches cfg.max_ld
// without an arrival: the result is then max_ld and res_timeout is set (the
// Landau-Vishkin style "maximum permissible distance"). The result is offered
// on res_valid/res_ready; the next comparison is accepted after it is taken.
//
// Timing: accept cycle, then start is high from the next cycle; a result that
// arrives d cycles after start is offered d+1 cycles after the start cycle
// (one cycle to capture it). The lattice is held cleared whenever start is low.
//
// Penalty fields wider than the lattice's shift registers are saturated to
// the longest delay the lattice has (2**PW - 1 cycles).
//
// From the paper: lattice, SW and NW counters started by the input signal,
// mode selection, the LV timeout, a 32-bit result. Own choices: the
// valid/ready handshakes, the comparator form of the timeout and the
// saturation of penalties.
module asap_core
  import asap_pkg::*;
#(
  parameter int unsigned LQ   = 128,
  parameter int unsigned LR   = 128,
  parameter int unsigned T    = 16,
  parameter int unsigned PW   = 2,
  parameter int unsigned BAND = 0,
  parameter int unsigned NO   = counter_width(LQ, LR, (1 << PW) - 1, T)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  asap_cfg_t          cfg,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [LQ-1:0][1:0] in_read,
  input  logic [LR-1:0][1:0] in_ref,
  output logic               res_valid,
  input  logic               res_ready,
  output logic [RES_W-1:0]   res_data,
  output logic               res_timeout,
  output logic               busy
);

  localparam int unsigned MAXD = (1 << PW) - 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e state;

  logic [LQ-1:0][1:0] read_q;
  logic [LR-1:0][1:0] ref_q;
  logic               start;
  logic [LR-1:0]      out_row;
  logic               out_nw;
  logic [NO-1:0]      cnt_sw, cnt_nw, cnt_sel;
  logic               done_sw, done_nw, done_sel, tmo;

  function automatic logic [PW-1:0] sat(input logic [PEN_FIELD_W-1:0] p);
    return (32'(p) > MAXD) ? PW'(MAXD) : p[PW-1:0];
  endfunction

  assign start = (state == S_RUN);

  asap_lattice #(.LQ(LQ), .LR(LR), .T(T), .PW(PW), .BAND(BAND)) u_lattice (
    .clk          (clk),
    .clr          (!start),
    .start        (start),
    .nt_read      (read_q),
    .nt_ref       (ref_q),
    .pen_match    (sat(cfg.pen_match)),
    .pen_mismatch (sat(cfg.pen_mismatch)),
    .pen_del      (sat(cfg.pen_del)),
    .pen_ins      (sat(cfg.pen_ins)),
    .out_row      (out_row),
    .out_nw       (out_nw)
  );

  asap_delay_counter #(.W(NO)) u_cnt_sw (
    .clk(clk), .en(start), .dis(|out_row), .count(cnt_sw), .done(done_sw));
  asap_delay_counter #(.W(NO)) u_cnt_nw (
    .clk(clk), .en(start), .dis(out_nw), .count(cnt_nw), .done(done_nw));

  assign cnt_sel  = (cfg.mode == MODE_NW) ? cnt_nw  : cnt_sw;
  assign done_sel = (cfg.mode == MODE_NW) ? done_nw : done_sw;
  assign tmo      = cfg.lv_en && (RES_W'(cnt_sel) >= cfg.max_ld);

  assign in_ready  = (state == S_IDLE);
  assign res_valid = (state == S_DONE);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      res_data    <= '0;
      res_timeout <= 1'b0;
      read_q      <= '0;
      ref_q       <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          read_q <= in_read;
          ref_q  <= in_ref;
          state  <= S_RUN;
        end
        S_RUN: begin
          if (done_sel) begin
            res_data    <= RES_W'(cnt_sel);
            res_timeout <= 1'b0;
            state       <= S_DONE;
          end else if (tmo) begin
            res_data    <= cfg.max_ld;
            res_timeout <= 1'b1;
            state       <= S_DONE;
          end
        end
        S_DONE: if (res_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A result is not withdrawn before it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   res_valid && !res_ready |=> res_valid && $stable(res_data));

endmodule
