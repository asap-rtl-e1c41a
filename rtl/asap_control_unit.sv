// asap_control_unit: runs one alignment job of the accelerator function unit.
//
// A job starts with job_start and the address of a work element descriptor
// (WED) in host memory. The unit reads the WED line, takes from it the input
// and output pointers, the number of comparisons and the lattice
// configuration (penalties, SW/NW mode, LV timeout), then works three streams
// at once:
//  * input: it reads consecutive 128-byte input lines from in_ptr into the
//    input cache, never requesting more lines than the cache has room for
//    (lines stored plus lines requested <= DEPTH);
//  * dispatch: it steps the case multiplexer through the N comparisons of the
//    cache's head line, handing each to the crossbar, and pops the line after
//    its last comparison;
//  * output: every line the output cache offers is written to out_ptr,
//    out_ptr + 128, ...; when all results are in, the partial last line is
//    flushed.
// When every result line is written it writes a status line (STATUS_MAGIC and
// the number of results) to WED + 128, pulses job_done and returns to idle.
// Cycles in which a lattice could take a comparison but the input cache is
// empty are counted as stalls. Progress and counters are readable over MMIO.
//
// Host memory interface (a simplified stand-in for the host's command,
// buffer and response interfaces): one command register (cmd_valid/cmd_ready,
// read or write, 64-bit byte address, 1024-bit write data); read data comes
// back on rsp_valid/rsp_data in request order; a write is complete once
// accepted. MMIO reads (mmio_rd, mmio_addr) answer on the next cycle:
// 0 status {running, done}, 1 comparisons dispatched, 2 result lines written,
// 3 stall cycles, 4 busy cycles.
//
// From the paper: the WED carries the input and output pointers and the
// progress, the input is read into the input cache and results are packed
// and written back, the control unit drives the multiplexer and the crossbar
// en/done. Own choices: the WED layout, the in-order memory interface, the
// status line, the credit rule and the MMIO register map.
module asap_control_unit
  import asap_pkg::*;
#(
  parameter int unsigned N     = 2,     // comparisons per input line
  parameter int unsigned DEPTH = 256,   // input cache lines
  parameter int unsigned NS    = LINE_W / RES_W,
  parameter int unsigned SW    = (N > 1) ? $clog2(N) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // job control
  input  logic                   job_start,
  input  logic [63:0]            job_wed,
  output logic                   job_done,
  output logic                   job_running,
  // host memory commands
  output logic                   cmd_valid,
  input  logic                   cmd_ready,
  output logic                   cmd_write,
  output logic [63:0]            cmd_addr,
  output logic [LINE_W-1:0]      cmd_wdata,
  input  logic                   rsp_valid,
  input  logic [LINE_W-1:0]      rsp_data,
  // MMIO
  input  logic                   mmio_rd,
  input  logic [2:0]             mmio_addr,
  output logic                   mmio_rvalid,
  output logic [63:0]            mmio_rdata,
  // lattice configuration
  output asap_cfg_t              cfg,
  // input cache
  output logic                   ic_wr_en,
  output logic [LINE_W-1:0]      ic_wr_data,
  output logic                   ic_rd_en,
  input  logic                   ic_empty,
  input  logic [$clog2(DEPTH):0] ic_count,
  // case multiplexer and crossbar
  output logic [SW-1:0]          mux_sel,
  output logic                   case_valid,   // en
  input  logic                   case_ready,
  input  logic                   res_fire,     // a result entered the output cache
  // output cache
  input  logic                   oc_line_valid,
  output logic                   oc_line_ready,
  input  logic [LINE_W-1:0]      oc_line_data,
  output logic                   oc_flush
);

  typedef enum logic [2:0] {C_IDLE, C_WED_REQ, C_WED_WAIT, C_RUN, C_STATUS, C_FIN} cstate_e;
  cstate_e state;

  logic [63:0] wed_addr, in_ptr, out_ptr;
  logic [31:0] num_cases, lines_total, out_lines_total;
  logic [31:0] lines_req, lines_recv, lines_wr, disp_cnt, res_cnt;
  logic [63:0] stall_cnt, busy_cnt;
  logic        done_flag;
  wed_t        wed;

  assign wed = wed_t'(rsp_data);

  logic [31:0] outstanding;
  logic        can_read, run_done;
  assign outstanding = lines_req - lines_recv;
  assign can_read    = (state == C_RUN) && (lines_req < lines_total) &&
                       (32'(ic_count) + outstanding < 32'(DEPTH));
  assign run_done    = (res_cnt == num_cases) && (lines_wr == out_lines_total);

  // Input-cache write side: read data of input lines.
  assign ic_wr_en   = (state == C_RUN) && rsp_valid;
  assign ic_wr_data = rsp_data;

  // Dispatch side.
  logic last_in_line;
  assign case_valid   = (state == C_RUN) && !ic_empty && (disp_cnt < num_cases);
  assign last_in_line = (int'(mux_sel) == N - 1) || (disp_cnt + 1 == num_cases);
  assign ic_rd_en     = case_valid && case_ready && last_in_line;

  assign oc_flush = (state == C_RUN) && (res_cnt == num_cases);

  // The command register is free when empty or being taken this cycle.
  logic cmd_free;
  assign cmd_free      = !cmd_valid || cmd_ready;
  assign oc_line_ready = (state == C_RUN) && cmd_free && oc_line_valid;

  assign job_running = (state != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= C_IDLE;
      wed_addr        <= '0;
      in_ptr          <= '0;
      out_ptr         <= '0;
      num_cases       <= '0;
      lines_total     <= '0;
      out_lines_total <= '0;
      lines_req       <= '0;
      lines_recv      <= '0;
      lines_wr        <= '0;
      disp_cnt        <= '0;
      res_cnt         <= '0;
      stall_cnt       <= '0;
      busy_cnt        <= '0;
      done_flag       <= 1'b0;
      mux_sel         <= '0;
      cfg             <= '0;
      cmd_valid       <= 1'b0;
      cmd_write       <= 1'b0;
      cmd_addr        <= '0;
      cmd_wdata       <= '0;
      job_done        <= 1'b0;
    end else begin
      job_done <= 1'b0;
      if (cmd_valid && cmd_ready) cmd_valid <= 1'b0;
      if (state != C_IDLE) busy_cnt <= busy_cnt + 1'b1;

      unique case (state)
        C_IDLE: if (job_start) begin
          wed_addr   <= job_wed;
          lines_req  <= '0;
          lines_recv <= '0;
          lines_wr   <= '0;
          disp_cnt   <= '0;
          res_cnt    <= '0;
          stall_cnt  <= '0;
          busy_cnt   <= '0;
          mux_sel    <= '0;
          done_flag  <= 1'b0;
          state      <= C_WED_REQ;
        end

        C_WED_REQ: if (cmd_free) begin
          cmd_valid <= 1'b1;
          cmd_write <= 1'b0;
          cmd_addr  <= wed_addr;
          state     <= C_WED_WAIT;
        end

        C_WED_WAIT: if (rsp_valid) begin
          in_ptr              <= wed.in_ptr;
          out_ptr             <= wed.out_ptr;
          num_cases           <= wed.num_cases;
          lines_total         <= (wed.num_cases + 32'(N) - 1) / 32'(N);
          out_lines_total     <= (wed.num_cases + 32'(NS) - 1) / 32'(NS);
          cfg.pen_match       <= wed.pen_match;
          cfg.pen_mismatch    <= wed.pen_mismatch;
          cfg.pen_ins         <= wed.pen_ins;
          cfg.pen_del         <= wed.pen_del;
          cfg.mode            <= wed.flags[0] ? MODE_NW : MODE_SW;
          cfg.lv_en           <= wed.flags[1];
          cfg.max_ld          <= wed.max_ld;
          state               <= C_RUN;
        end

        C_RUN: begin
          // Commands: result lines first, then input lines.
          if (cmd_free) begin
            if (oc_line_valid) begin
              cmd_valid <= 1'b1;
              cmd_write <= 1'b1;
              cmd_addr  <= out_ptr + 64'({lines_wr, 7'd0});
              cmd_wdata <= oc_line_data;
              lines_wr  <= lines_wr + 1'b1;
            end else if (can_read) begin
              cmd_valid <= 1'b1;
              cmd_write <= 1'b0;
              cmd_addr  <= in_ptr + 64'({lines_req, 7'd0});
              lines_req <= lines_req + 1'b1;
            end
          end
          if (rsp_valid) lines_recv <= lines_recv + 1'b1;

          if (case_valid && case_ready) begin
            disp_cnt <= disp_cnt + 1'b1;
            mux_sel  <= last_in_line ? '0 : mux_sel + 1'b1;
          end
          if (case_ready && ic_empty && disp_cnt < num_cases)
            stall_cnt <= stall_cnt + 1'b1;
          if (res_fire) res_cnt <= res_cnt + 1'b1;

          if (run_done && !oc_line_valid && cmd_free) state <= C_STATUS;
        end

        C_STATUS: if (cmd_free) begin
          cmd_valid <= 1'b1;
          cmd_write <= 1'b1;
          cmd_addr  <= wed_addr + 64'd128;
          cmd_wdata <= {{(LINE_W-64){1'b0}}, res_cnt, STATUS_MAGIC};
          state     <= C_FIN;
        end

        C_FIN: if (cmd_free) begin
          job_done  <= 1'b1;
          done_flag <= 1'b1;
          state     <= C_IDLE;
        end

        default: state <= C_IDLE;
      endcase
    end
  end

  // MMIO register reads.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mmio_rvalid <= 1'b0;
      mmio_rdata  <= '0;
    end else begin
      mmio_rvalid <= mmio_rd;
      if (mmio_rd) begin
        unique case (mmio_addr)
          3'd0:    mmio_rdata <= {62'd0, done_flag, job_running};
          3'd1:    mmio_rdata <= {32'd0, disp_cnt};
          3'd2:    mmio_rdata <= {32'd0, lines_wr};
          3'd3:    mmio_rdata <= stall_cnt;
          3'd4:    mmio_rdata <= busy_cnt;
          default: mmio_rdata <= '0;
        endcase
      end
    end
  end

  // Command handshake: a pending command is held until taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_addr) && $stable(cmd_write));

endmodule
