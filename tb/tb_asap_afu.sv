// tb_asap_afu: end-to-end test of the accelerator function unit at reduced
// size (16 x 16 lattices with 8 x 8 tiles, four lattices, an 8-line input
// cache). A behavioural host memory holds a job descriptor, input lines of
// read/reference pairs and room for results. Three jobs run back to back:
// SW mode, NW mode, and NW with the LV timeout. Every result word written back
// is compared with the reference model, as are the status line and the MMIO
// counters. The test also counts how often each mechanism happened and fails
// if one never did: host back-pressure, input-cache full (read credit limit),
// input stalls, overlapping lattices, LV timeouts, a partial last line.
module tb_asap_afu;
  import asap_pkg::*;
  import asap_ref_pkg::*;
  localparam int LQ = 16, LR = 16, T = 8, NC = 4, DEPTH = 8;
  localparam int CW = 2 * (LQ + LR), N = LINE_W / CW;

  logic clk = 0, rst_n;
  logic job_start, job_done, job_running;
  logic [63:0] job_wed;
  logic cmd_valid, cmd_ready, cmd_write, rsp_valid, mmio_rd, mmio_rvalid;
  logic [63:0] cmd_addr, mmio_rdata;
  logic [LINE_W-1:0] cmd_wdata, rsp_data;
  logic [2:0] mmio_addr;
  int checks = 0, failures = 0;
  int n_full = 0, n_overlap = 0, n_tmo = 0, n_partial = 0, n_stall = 0;

  asap_afu #(.LQ(LQ), .LR(LR), .T(T), .NC(NC), .DEPTH(DEPTH)) dut (.*);
  asap_host_mem #(.LAT(12), .STALL_PCT(25)) u_mem (
    .clk, .cmd_valid, .cmd_ready, .cmd_write, .cmd_addr, .cmd_wdata, .rsp_valid, .rsp_data);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (dut.ic_full) n_full++;
    if ($countones(dut.core_busy) >= 2) n_overlap++;
  end

  initial begin
    #20000000;
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

  task automatic mmio(input logic [2:0] a, output logic [63:0] d);
    @(negedge clk); mmio_rd = 1; mmio_addr = a;
    @(negedge clk); mmio_rd = 0;
    d = mmio_rdata;
  endtask

  task automatic run_job(int ncases, bit nw, bit lv, int pm, int pmm, int pi, int pd);
    longint wed = 64'h1000, inp = 64'h10_0000, outp = 64'h80_0000;
    int expv[];
    wed_t w;
    logic [LINE_W-1:0] line;
    logic [63:0] d;
    int nlines = (ncases + N - 1) / N;
    expv = new[ncases];
    for (int l = 0; l < nlines; l++) begin
      line = '0;
      for (int k = 0; k < N; k++) begin
        int c = l * N + k;
        if (c < ncases) begin
          byte unsigned rd[], rf[];
          make_pair(LQ, LR, $urandom_range(0, 5), rd, rf);
          foreach (rd[i]) line[k*CW + 2*i +: 2] = rd[i][1:0];
          foreach (rf[j]) line[k*CW + 2*LQ + 2*j +: 2] = rf[j][1:0];
          expv[c] = ref_result(rd, rf, pm, pmm, pi, pd, T, 0, nw);
        end
      end
      u_mem.put(inp + 128 * l, line);
    end
    w = '0;
    w.in_ptr = 64'(inp); w.out_ptr = 64'(outp); w.num_cases = 32'(ncases);
    w.pen_match = 8'(pm); w.pen_mismatch = 8'(pmm); w.pen_ins = 8'(pi); w.pen_del = 8'(pd);
    w.flags = {6'd0, lv, nw};
    w.max_ld = lv ? 32'd3 : 32'd1000;
    if (lv) foreach (expv[c]) if (expv[c] > 3) begin expv[c] = 3; n_tmo++; end
    u_mem.put(wed, LINE_W'(w));
    u_mem.put(wed + 128, '0);
    if (ncases % 32 != 0) n_partial++;
    @(negedge clk);
    job_start = 1; job_wed = 64'(wed);
    @(negedge clk);
    job_start = 0;
    while (!job_done) @(negedge clk);
    for (int c = 0; c < ncases; c++) begin
      line = u_mem.get(outp + 128 * (c / 32));
      check($sformatf("result %0d (nw=%0d lv=%0d)", c, nw, lv),
            longint'(line[(c % 32) * 32 +: 32]), expv[c]);
    end
    line = u_mem.get(wed + 128);
    check("status magic", longint'(line[31:0]), longint'(STATUS_MAGIC));
    check("status count", longint'(line[63:32]), ncases);
    mmio(3'd0, d); check("mmio done", longint'(d[1]), 1);
    mmio(3'd1, d); check("mmio dispatched", longint'(d), ncases);
    mmio(3'd2, d); check("mmio lines", longint'(d), (ncases + 31) / 32);
    mmio(3'd3, d); n_stall += int'(d);
  endtask

  initial begin
    rst_n = 0; job_start = 0; job_wed = '0; mmio_rd = 0; mmio_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_job(300, 1'b0, 1'b0, 0, 2, 1, 1);
    run_job(64,  1'b1, 1'b0, 0, 3, 2, 1);
    run_job(45,  1'b1, 1'b1, 1, 2, 1, 2);
    $display("mechanisms: cache_full=%0d overlap=%0d backpressure=%0d stall_cycles=%0d timeouts=%0d partial_lines=%0d",
             n_full, n_overlap, u_mem.n_backpressure, n_stall, n_tmo, n_partial);
    check("input cache filled", longint'(n_full > 0), 1);
    check("lattices overlapped", longint'(n_overlap > 0), 1);
    check("host back-pressure", longint'(u_mem.n_backpressure > 0), 1);
    check("input stalls", longint'(n_stall > 0), 1);
    check("LV timeouts", longint'(n_tmo > 0), 1);
    check("partial line", longint'(n_partial > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
