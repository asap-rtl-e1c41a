// tb_asap_crossbar: four behavioural lattices with random compute times sit
// behind the crossbar. Each comparison carries its sequence number in its
// read; each fake lattice answers with that number after a random delay.
// Checks that every comparison goes to exactly one lattice, that results come
// out in input order, and that lattices overlap their work.
module tb_asap_crossbar;
  import asap_pkg::*;
  localparam int NC = 4, LQ = 16, LR = 16;
  logic clk = 0, rst_n;
  logic in_valid, in_ready, res_valid, res_ready;
  logic [LQ-1:0][1:0] in_read, core_read;
  logic [LR-1:0][1:0] in_ref, core_ref;
  logic [RES_W-1:0] res_data;
  logic [NC-1:0] core_in_valid, core_in_ready, core_res_valid, core_res_ready;
  logic [NC-1:0][RES_W-1:0] core_res_data;
  int checks = 0, failures = 0, max_busy = 0;

  asap_crossbar #(.NC(NC), .LQ(LQ), .LR(LR)) dut (.*);

  always #5 clk = ~clk;

  // Behavioural lattices: accept when idle, answer after 1..20 cycles.
  int timer[NC];
  logic [NC-1:0] busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0; core_res_valid <= '0; core_res_data <= '0;
      for (int k = 0; k < NC; k++) timer[k] <= 0;
    end else begin
      for (int k = 0; k < NC; k++) begin
        if (!busy[k] && !core_res_valid[k] && core_in_valid[k]) begin
          busy[k] <= 1'b1;
          timer[k] <= $urandom_range(1, 20);
          core_res_data[k] <= 32'(core_read);
        end else if (busy[k]) begin
          if (timer[k] == 0) begin busy[k] <= 1'b0; core_res_valid[k] <= 1'b1; end
          else timer[k] <= timer[k] - 1;
        end else if (core_res_valid[k] && core_res_ready[k]) begin
          core_res_valid[k] <= 1'b0;
        end
      end
    end
  end
  assign core_in_ready = ~busy & ~core_res_valid;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent = 0, recv = 0;
  initial begin
    rst_n = 0; in_valid = 0; res_ready = 0; in_read = '0; in_ref = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (recv < 200) begin
      in_valid = (sent < 200) && ($urandom_range(0, 3) != 0);
      in_read = (LQ*2)'(sent);
      in_ref = '0;
      res_ready = ($urandom_range(0, 3) != 0);
      #1;
      checks++;
      if (in_valid && $countones(core_in_valid) != 1) failures++;
      if ($countones(busy) > max_busy) max_busy = $countones(busy);
      if (res_valid && res_ready) begin
        checks++;
        if (int'(res_data) != recv) begin
          failures++;
          $display("FAIL order: got %0d exp %0d", res_data, recv);
        end
        recv++;
      end
      if (in_valid && in_ready) sent++;
      @(negedge clk);
    end
    checks++;
    if (max_busy < 2) begin failures++; $display("FAIL lattices never overlapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
