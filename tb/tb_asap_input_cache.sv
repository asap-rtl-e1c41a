// tb_asap_input_cache: random pushes and pops on a 16-line cache, compared
// with a queue; checks head data, empty/full flags, occupancy, and filling it
// completely and draining it.
module tb_asap_input_cache;
  import asap_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n, wr_en, rd_en, empty, full;
  logic [LINE_W-1:0] wr_data, rd_data;
  logic [$clog2(DEPTH):0] count;
  logic [LINE_W-1:0] q[$];
  int checks = 0, failures = 0, n_full = 0;

  asap_input_cache #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .wr_en, .wr_data, .rd_en,
                                         .rd_data, .empty, .full, .count);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LINE_W-1:0] rnd_line();
    logic [LINE_W-1:0] l;
    for (int k = 0; k < LINE_W / 32; k++) l[k*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    rst_n = 0; wr_en = 0; rd_en = 0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      automatic int phase = (n / 200) % 2;   // alternate filling and draining bias
      wr_en = !full && ($urandom_range(0, 9) < (phase ? 3 : 8));
      rd_en = !empty && ($urandom_range(0, 9) < (phase ? 8 : 3));
      wr_data = rnd_line();
      #1;
      check("count", int'(count) == q.size());
      check("empty", empty == (q.size() == 0));
      check("full", full == (q.size() == DEPTH));
      if (q.size() > 0) check("head", rd_data == q[0]);
      if (full) n_full++;
      @(negedge clk);
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
    end
    check("reached full", n_full > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
