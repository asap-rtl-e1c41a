// tb_asap_control_unit: the control unit with the real input cache, case
// multiplexer and output cache, but a behavioural stand-in for the crossbar
// and lattices: it accepts a comparison when free, and after a random delay
// answers with the number of positions where read and reference agree plus
// 1000 times the case's position in its line. The host memory model applies
// random back-pressure. Checks the configuration taken from the descriptor,
// every result word in host memory, the status line, the MMIO counters and
// that the read credit limit (a full 4-line input cache) was reached.
module tb_asap_control_unit;
  import asap_pkg::*;
  localparam int LQ = 16, LR = 16, DEPTH = 4;
  localparam int CW = 2 * (LQ + LR), N = LINE_W / CW, SEL = $clog2(N);

  logic clk = 0, rst_n;
  logic job_start, job_done, job_running;
  logic [63:0] job_wed, cmd_addr, mmio_rdata;
  logic cmd_valid, cmd_ready, cmd_write, rsp_valid, mmio_rd, mmio_rvalid;
  logic [LINE_W-1:0] cmd_wdata, rsp_data, ic_wr_data, ic_head, oc_line_data;
  logic [2:0] mmio_addr;
  asap_cfg_t cfg;
  logic ic_wr_en, ic_rd_en, ic_empty, ic_full;
  logic [$clog2(DEPTH):0] ic_count;
  logic [SEL-1:0] mux_sel;
  logic case_valid, case_ready, res_valid, res_ready, oc_line_valid, oc_line_ready, oc_flush;
  logic [RES_W-1:0] res_data;
  logic [$clog2(LINE_W/RES_W):0] oc_line_count;
  logic [LQ-1:0][1:0] nt_read;
  logic [LR-1:0][1:0] nt_ref;
  int checks = 0, failures = 0, n_full = 0;

  asap_control_unit #(.N(N), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .job_start, .job_wed, .job_done, .job_running,
    .cmd_valid, .cmd_ready, .cmd_write, .cmd_addr, .cmd_wdata, .rsp_valid, .rsp_data,
    .mmio_rd, .mmio_addr, .mmio_rvalid, .mmio_rdata, .cfg,
    .ic_wr_en, .ic_wr_data, .ic_rd_en, .ic_empty, .ic_count,
    .mux_sel, .case_valid, .case_ready, .res_fire(res_valid && res_ready),
    .oc_line_valid, .oc_line_ready, .oc_line_data, .oc_flush);
  asap_input_cache #(.DEPTH(DEPTH)) u_ic (.clk, .rst_n, .wr_en(ic_wr_en), .wr_data(ic_wr_data),
    .rd_en(ic_rd_en), .rd_data(ic_head), .empty(ic_empty), .full(ic_full), .count(ic_count));
  asap_case_mux #(.LQ(LQ), .LR(LR)) u_mux (.line(ic_head), .sel(mux_sel), .nt_read, .nt_ref);
  asap_output_cache u_oc (.clk, .rst_n, .res_valid, .res_ready, .res_data, .flush(oc_flush),
    .line_valid(oc_line_valid), .line_ready(oc_line_ready), .line_data(oc_line_data),
    .line_count(oc_line_count));
  asap_host_mem #(.LAT(6), .STALL_PCT(30)) u_mem (
    .clk, .cmd_valid, .cmd_ready, .cmd_write, .cmd_addr, .cmd_wdata, .rsp_valid, .rsp_data);

  always #5 clk = ~clk;

  // Behavioural lattice path: one comparison at a time.
  int busy_t = 0;
  logic busy = 0;
  assign case_ready = !busy && !res_valid;
  always @(posedge clk) begin
    if (ic_full) n_full++;
    if (res_valid && res_ready) res_valid <= 1'b0;
    if (case_valid && case_ready) begin
      automatic int m = 0;
      for (int i = 0; i < LQ; i++) if (nt_read[i] == nt_ref[i]) m++;
      res_data <= 32'(m + 1000 * int'(mux_sel));
      busy <= 1'b1;
      busy_t <= $urandom_range(0, 6);
    end else if (busy) begin
      if (busy_t == 0) begin busy <= 1'b0; res_valid <= 1'b1; end
      else busy_t <= busy_t - 1;
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    longint wed = 64'h2000, inp = 64'h4_0000, outp = 64'h9_0000;
    localparam int NCASES = 150;
    int expv[NCASES];
    logic [LINE_W-1:0] line;
    wed_t w;
    rst_n = 0; job_start = 0; job_wed = '0; mmio_rd = 0; mmio_addr = '0;
    res_valid = 0; res_data = '0;
    for (int l = 0; l < (NCASES + N - 1) / N; l++) begin
      for (int k = 0; k < LINE_W / 32; k++) line[k*32 +: 32] = $urandom;
      for (int k = 0; k < N; k++) begin
        automatic int m = 0;
        for (int i = 0; i < LQ; i++)
          if (line[k*CW + 2*i +: 2] == line[k*CW + 2*LQ + 2*i +: 2]) m++;
        if (l * N + k < NCASES) expv[l * N + k] = m + 1000 * k;
      end
      u_mem.put(inp + 128 * l, line);
    end
    w = '0;
    w.in_ptr = 64'(inp); w.out_ptr = 64'(outp); w.num_cases = NCASES;
    w.pen_match = 8'd0; w.pen_mismatch = 8'd3; w.pen_ins = 8'd2; w.pen_del = 8'd1;
    w.flags = 8'b10; w.max_ld = 32'd77;
    u_mem.put(wed, LINE_W'(w));
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    job_start = 1; job_wed = 64'(wed);
    @(negedge clk);
    job_start = 0;
    while (!job_done) @(negedge clk);
    check("cfg mismatch", cfg.pen_mismatch, 3);
    check("cfg ins", cfg.pen_ins, 2);
    check("cfg del", cfg.pen_del, 1);
    check("cfg mode", cfg.mode, MODE_SW);
    check("cfg lv", cfg.lv_en, 1);
    check("cfg max_ld", cfg.max_ld, 77);
    for (int c = 0; c < NCASES; c++) begin
      line = u_mem.get(outp + 128 * (c / 32));
      check($sformatf("result %0d", c), longint'(line[(c % 32) * 32 +: 32]), expv[c]);
    end
    line = u_mem.get(wed + 128);
    check("status magic", longint'(line[31:0]), longint'(STATUS_MAGIC));
    check("status count", longint'(line[63:32]), NCASES);
    @(negedge clk); mmio_rd = 1; mmio_addr = 3'd1;
    @(negedge clk); mmio_rd = 0;
    check("mmio dispatched", longint'(mmio_rdata), NCASES);
    check("mmio rvalid", longint'(mmio_rvalid), 1);
    check("input cache reached full", longint'(n_full > 0), 1);
    check("job idle", longint'(job_running), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
