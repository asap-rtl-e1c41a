// tb_asap_core: runs random comparisons through a 32 x 32 core (8 x 8 tiles)
// in SW, NW and LV-timeout configurations and checks the result, the timeout
// flag and the latency from acceptance to result (distance + 2 cycles)
// against the reference model. Results are sometimes held back with
// res_ready low to check that they stay stable.
module tb_asap_core;
  import asap_pkg::*;
  import asap_ref_pkg::*;
  localparam int LQ = 32, LR = 32, T = 8, PW = 2;
  logic clk = 0, rst_n;
  asap_cfg_t cfg;
  logic in_valid, in_ready, res_valid, res_ready, res_timeout, busy;
  logic [LQ-1:0][1:0] in_read;
  logic [LR-1:0][1:0] in_ref;
  logic [RES_W-1:0] res_data;
  int checks = 0, failures = 0;
  int n_sw = 0, n_nw = 0, n_tmo = 0, n_sat = 0;

  asap_core #(.LQ(LQ), .LR(LR), .T(T), .PW(PW)) dut (
    .clk, .rst_n, .cfg, .in_valid, .in_ready, .in_read, .in_ref,
    .res_valid, .res_ready, .res_data, .res_timeout, .busy);

  always #5 clk = ~clk;

  initial begin
    #5000000;
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
    rst_n = 0; in_valid = 0; res_ready = 0; cfg = '0; in_read = '0; in_ref = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      int pm, pmm, pd, pi, expv, lat;
      bit nw, lv, exp_tmo, hold;
      make_pair(LQ, LR, $urandom_range(0, 10), rd, rf);
      pm = $urandom_range(0, 1); pmm = $urandom_range(1, 3);
      pd = $urandom_range(1, 3); pi = $urandom_range(1, 3);
      nw = bit'(n % 2);
      lv = (n % 5 == 0);
      cfg.pen_match = 8'(pm); cfg.pen_mismatch = 8'(pmm);
      cfg.pen_del = 8'(pd); cfg.pen_ins = 8'(pi);
      if (n % 7 == 3) begin  // out-of-range field saturates to 3 cycles
        cfg.pen_mismatch = 8'd9; pmm = 3; n_sat++;
      end
      cfg.mode = nw ? MODE_NW : MODE_SW;
      cfg.lv_en = lv;
      foreach (rd[i]) in_read[i] = rd[i][1:0];
      foreach (rf[j]) in_ref[j] = rf[j][1:0];
      expv = ref_result(rd, rf, pm, pmm, pi, pd, T, 0, nw);
      exp_tmo = 0;
      cfg.max_ld = 32'(expv + 5);
      if (lv && expv > 2) begin
        cfg.max_ld = 32'($urandom_range(0, expv - 1));
        exp_tmo = 1;
        expv = int'(cfg.max_ld);
      end
      hold = (n % 4 == 1);
      // present the comparison
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      lat = 1;
      while (!res_valid) begin @(negedge clk); lat++; end
      if (hold) begin
        repeat (3) @(negedge clk);
        check("held valid", int'(res_valid), 1);
      end
      res_ready = 1;
      #1;
      check($sformatf("result n=%0d nw=%0d lv=%0d", n, nw, lv), int'(res_data), expv);
      check("timeout flag", int'(res_timeout), int'(exp_tmo));
      check($sformatf("latency n=%0d", n), lat, expv + 2);
      if (exp_tmo) n_tmo++; else if (nw) n_nw++; else n_sw++;
      @(negedge clk);
      res_ready = 0;
    end
    check("SW runs", int'(n_sw > 0), 1);
    check("NW runs", int'(n_nw > 0), 1);
    check("LV timeouts", int'(n_tmo > 0), 1);
    $display("mechanisms: sw=%0d nw=%0d timeout=%0d saturated_penalty=%0d", n_sw, n_nw, n_tmo, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
