// tb_asap_delay_counter: raises en, then dis a chosen number of cycles later,
// and checks that the count equals that interval, holds afterwards, returns
// to zero when en falls, and saturates instead of wrapping.
module tb_asap_delay_counter;
  localparam int W = 5;
  logic clk = 0, en, dis, done;
  logic [W-1:0] count;
  int checks = 0, failures = 0;

  asap_delay_counter #(.W(W)) dut (.clk, .en, .dis, .count, .done);

  always #5 clk = ~clk;

  initial begin
    #100000;
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
    en = 0; dis = 0;
    @(negedge clk); @(negedge clk);
    for (int n = 0; n < 40; n++) begin
      automatic int d = $urandom_range(0, 40);
      en = 1; dis = 0;
      for (int c = 0; c < d; c++) begin
        #1 check("done early", int'(done), 0);
        @(negedge clk);
      end
      dis = 1;
      #1;
      check("done", int'(done), 1);
      check("count", int'(count), (d > 31) ? 31 : d);
      repeat (3) @(negedge clk);
      check("hold", int'(count), (d > 31) ? 31 : d);
      en = 0; dis = 0;
      @(negedge clk);
      check("cleared", int'(count), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
