// tb_asap_output_cache: streams random results with random stalls on both
// sides, ends with a partial line flushed, and checks every emitted line slot
// by slot against the expected sequence, plus the valid count of each line.
module tb_asap_output_cache;
  import asap_pkg::*;
  localparam int NS = LINE_W / RES_W;
  logic clk = 0, rst_n, res_valid, res_ready, flush, line_valid, line_ready;
  logic [RES_W-1:0] res_data;
  logic [LINE_W-1:0] line_data;
  logic [$clog2(NS):0] line_count;
  int checks = 0, failures = 0;

  asap_output_cache dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int TOTAL = 3 * NS + 7;
  int vals[TOTAL];
  int sent = 0, got = 0;
  initial begin
    foreach (vals[i]) vals[i] = $urandom;
    rst_n = 0; res_valid = 0; line_ready = 0; flush = 0; res_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (got < TOTAL) begin
      res_valid = (sent < TOTAL) && ($urandom_range(0, 3) != 0);
      res_data = (sent < TOTAL) ? 32'(vals[sent]) : '0;
      line_ready = ($urandom_range(0, 2) != 0);
      flush = (sent == TOTAL);
      #1;
      if (line_valid && line_ready) begin
        automatic int exp_n = (TOTAL - got >= NS) ? NS : TOTAL - got;
        checks++;
        if (int'(line_count) != exp_n) begin
          failures++; $display("FAIL count %0d exp %0d", line_count, exp_n);
        end
        for (int k = 0; k < NS; k++) begin
          checks++;
          if (line_data[k*32 +: 32] != ((k < exp_n) ? 32'(vals[got + k]) : 32'd0)) failures++;
        end
        got += exp_n;
      end
      if (res_valid && res_ready) sent++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
