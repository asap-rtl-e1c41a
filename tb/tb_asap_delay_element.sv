// tb_asap_delay_element: checks that one delay element raises its output after
// the penalty of the input that rises, and after the smallest total when
// several inputs rise at different times. For every trial the inputs rise at
// chosen cycles (or never), the output rise cycle is measured and compared
// with min over inputs of (rise + penalty), computed here independently.
module tb_asap_delay_element;
  localparam int PW = 2;
  logic clk = 0, clr;
  logic in_diag, in_left, in_up, out;
  logic [1:0] nt_read, nt_ref;
  logic [PW-1:0] pm, pmm, pd, pi;
  int checks = 0, failures = 0;

  asap_delay_element #(.PW(PW)) dut (
    .clk, .clr, .in_diag, .in_left, .in_up, .nt_read, .nt_ref,
    .pen_match(pm), .pen_mismatch(pmm), .pen_del(pd), .pen_ins(pi), .out);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic trial(int rd, int rl, int ru, bit match);
    int exp_t, got_t, pdg;
    // rd/rl/ru: rise cycle of each input, -1 = never
    pm = PW'($urandom_range(0, 3)); pmm = PW'($urandom_range(0, 3));
    pd = PW'($urandom_range(0, 3)); pi = PW'($urandom_range(0, 3));
    nt_read = 2'($urandom_range(0, 3));
    nt_ref  = match ? nt_read : nt_read + 2'd1;
    pdg = match ? int'(pm) : int'(pmm);
    exp_t = 1000;
    if (rd >= 0 && rd + pdg < exp_t) exp_t = rd + pdg;
    if (rl >= 0 && rl + int'(pd) < exp_t) exp_t = rl + int'(pd);
    if (ru >= 0 && ru + int'(pi) < exp_t) exp_t = ru + int'(pi);
    in_diag = 0; in_left = 0; in_up = 0; clr = 1;
    @(negedge clk); @(negedge clk);
    clr = 0;
    got_t = -1;
    for (int c = 0; c < 12; c++) begin
      in_diag = (rd >= 0 && c >= rd);
      in_left = (rl >= 0 && c >= rl);
      in_up   = (ru >= 0 && c >= ru);
      #1;
      if (out && got_t < 0) got_t = c;
      @(negedge clk);
    end
    if (exp_t == 1000) exp_t = -1;
    checks++;
    if (got_t != exp_t) begin
      failures++;
      $display("FAIL rise d=%0d l=%0d u=%0d pen m=%0d mm=%0d d=%0d i=%0d match=%0b: got %0d exp %0d",
               rd, rl, ru, pm, pmm, pd, pi, match, got_t, exp_t);
    end
  endtask

  initial begin
    clr = 1; in_diag = 0; in_left = 0; in_up = 0;
    nt_read = 0; nt_ref = 0; pm = 0; pmm = 0; pd = 0; pi = 0;
    for (int n = 0; n < 200; n++) begin
      automatic int rd = $urandom_range(0, 4) - 1;
      automatic int rl = $urandom_range(0, 4) - 1;
      automatic int ru = $urandom_range(0, 4) - 1;
      trial(rd, rl, ru, bit'($urandom_range(0, 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
