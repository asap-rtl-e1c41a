// tb_asap_tile: drives one 8 x 8 tile from its corner input and checks the
// rise cycles of its unregistered bottom row, of the registered bottom row and
// right column (one cycle later) and of the twice-registered corner output
// (two cycles later) against the reference model. A second set of trials
// enters the wavefront through the left and top edge inputs instead.
module tb_asap_tile;
  import asap_ref_pkg::*;
  localparam int T = 8, PW = 2;
  logic clk = 0, clr;
  logic [T-1:0][1:0] nt_read, nt_ref;
  logic [PW-1:0] pm, pmm, pd, pi;
  logic [T-1:0] in_top, in_left, bot_q, right_q, bot_raw;
  logic in_corner, corner_qq;
  int checks = 0, failures = 0;

  asap_tile #(.T(T), .PW(PW)) dut (
    .clk, .clr, .nt_read, .nt_ref, .pen_match(pm), .pen_mismatch(pmm),
    .pen_del(pd), .pen_ins(pi), .in_top, .in_left, .in_corner,
    .out_bot_q(bot_q), .out_right_q(right_q), .out_corner_qq(corner_qq),
    .out_bot_raw(bot_raw));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    byte unsigned rd[], rf[];
    time_grid_t t;
    int g_raw[T], g_bq[T], g_rq[T], g_cq;
    clr = 1; in_top = '0; in_left = '0; in_corner = 0;
    for (int n = 0; n < 40; n++) begin
      make_pair(T, T, 2, rd, rf);
      pm = PW'($urandom_range(0, 1)); pmm = PW'($urandom_range(1, 3));
      pd = PW'($urandom_range(0, 3)); pi = PW'($urandom_range(0, 3));
      foreach (rd[i]) nt_read[i] = rd[i][1:0];
      foreach (rf[j]) nt_ref[j] = rf[j][1:0];
      t = lattice_times(rd, rf, pm, pmm, pi, pd, T, 0);
      for (int k = 0; k < T; k++) begin g_raw[k] = INF; g_bq[k] = INF; g_rq[k] = INF; end
      g_cq = INF;
      clr = 1; in_corner = 0;
      @(negedge clk); @(negedge clk);
      clr = 0; in_corner = 1;
      for (int c = 0; c < 120; c++) begin
        #1;
        for (int k = 0; k < T; k++) begin
          if (bot_raw[k] && g_raw[k] == INF) g_raw[k] = c;
          if (bot_q[k]   && g_bq[k]  == INF) g_bq[k]  = c;
          if (right_q[k] && g_rq[k]  == INF) g_rq[k]  = c;
        end
        if (corner_qq && g_cq == INF) g_cq = c;
        @(negedge clk);
      end
      for (int k = 0; k < T; k++) begin
        check($sformatf("raw bottom %0d", k), g_raw[k], t[T-1][k]);
        check($sformatf("reg bottom %0d", k), g_bq[k], t[T-1][k] + 1);
        check($sformatf("reg right %0d", k), g_rq[k], t[k][T-1] + 1);
      end
      check("corner", g_cq, t[T-1][T-1] + 2);
    end
    // Edge inputs: the wavefront enters on in_left[0] (deletion path from the
    // left tile) and on in_top[0] (insertion path from the tile above).
    pm = 0; pmm = 2; pd = 1; pi = 1;
    for (int e = 0; e < 2; e++) begin
      automatic int got = INF;
      nt_read = '0; nt_ref = '0;         // all match
      clr = 1; in_corner = 0; in_left = '0; in_top = '0;
      @(negedge clk); @(negedge clk);
      clr = 0;
      if (e == 0) in_left[0] = 1'b1; else in_top[0] = 1'b1;
      for (int c = 0; c < 60; c++) begin
        #1;
        if (bot_raw[T-1] && got == INF) got = c;
        @(negedge clk);
      end
      // With all matches the edge input reaches the next row (or column)
      // through a zero-delay diagonal, so the corner sees it after exactly
      // one gap penalty: 1 cycle.
      check($sformatf("edge entry %0d", e), got, 1);
      in_left = '0; in_top = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
