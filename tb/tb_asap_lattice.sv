// tb_asap_lattice: races random read/reference pairs through two small
// lattices (32 x 32 with 8 x 8 tiles; one full, one with LV band elimination
// of one tile diagonal) and compares the rise cycle of every last-row output
// with the software reference model, including the tile flip-flop delays.
module tb_asap_lattice;
  import asap_ref_pkg::*;
  localparam int LQ = 32, LR = 32, T = 8, PW = 2;
  logic clk = 0, clr, start;
  logic [LQ-1:0][1:0] nt_read;
  logic [LR-1:0][1:0] nt_ref;
  logic [PW-1:0] pm, pmm, pd, pi;
  logic [LR-1:0] row_full, row_band;
  logic nw_full, nw_band;
  int checks = 0, failures = 0;

  asap_lattice #(.LQ(LQ), .LR(LR), .T(T), .PW(PW), .BAND(0)) dut_full (
    .clk, .clr, .start, .nt_read, .nt_ref, .pen_match(pm), .pen_mismatch(pmm),
    .pen_del(pd), .pen_ins(pi), .out_row(row_full), .out_nw(nw_full));
  asap_lattice #(.LQ(LQ), .LR(LR), .T(T), .PW(PW), .BAND(1)) dut_band (
    .clk, .clr, .start, .nt_read, .nt_ref, .pen_match(pm), .pen_mismatch(pmm),
    .pen_del(pd), .pen_ins(pi), .out_row(row_band), .out_nw(nw_band));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned rd[], rf[];
    time_grid_t tf, tb;
    int got_f[LR], got_b[LR];
    int band_cut = 0;
    clr = 1; start = 0; nt_read = '0; nt_ref = '0;
    pm = 0; pmm = 2; pd = 1; pi = 1;
    for (int n = 0; n < 30; n++) begin
      make_pair(LQ, LR, (n % 3 == 0) ? 8 : 2, rd, rf);
      if (n >= 10) begin
        pm = PW'($urandom_range(0, 1)); pmm = PW'($urandom_range(1, 3));
        pd = PW'($urandom_range(1, 3)); pi = PW'($urandom_range(1, 3));
      end
      foreach (rd[i]) nt_read[i] = rd[i][1:0];
      foreach (rf[j]) nt_ref[j] = rf[j][1:0];
      tf = lattice_times(rd, rf, pm, pmm, pi, pd, T, 0);
      tb = lattice_times(rd, rf, pm, pmm, pi, pd, T, 1);
      for (int j = 0; j < LR; j++) begin got_f[j] = INF; got_b[j] = INF; end
      clr = 1; start = 0;
      @(negedge clk); @(negedge clk);
      clr = 0; start = 1;
      for (int c = 0; c < 400; c++) begin
        #1;
        for (int j = 0; j < LR; j++) begin
          if (row_full[j] && got_f[j] == INF) got_f[j] = c;
          if (row_band[j] && got_b[j] == INF) got_b[j] = c;
        end
        @(negedge clk);
      end
      for (int j = 0; j < LR; j++) begin
        checks += 2;
        if (got_f[j] != tf[LQ-1][j]) begin
          failures++;
          $display("FAIL full n=%0d col %0d got %0d exp %0d", n, j, got_f[j], tf[LQ-1][j]);
        end
        if (got_b[j] != tb[LQ-1][j]) begin
          failures++;
          $display("FAIL band n=%0d col %0d got %0d exp %0d", n, j, got_b[j], tb[LQ-1][j]);
        end
        if (tb[LQ-1][j] == INF) band_cut++;
      end
    end
    // The band build must actually have removed reachable cells.
    checks++;
    if (band_cut == 0) begin
      failures++;
      $display("FAIL band elimination never observed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
