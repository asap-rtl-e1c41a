// tb_asap_case_mux: random cache lines for the 64-nucleotide build (four
// comparisons per line) and the 128-nucleotide build (two per line); checks
// every selected read and reference nucleotide against the line layout.
module tb_asap_case_mux;
  import asap_pkg::*;
  logic [LINE_W-1:0] line;
  logic [1:0] sel4;
  logic [0:0] sel2;
  logic [63:0][1:0] rd64, rf64;
  logic [127:0][1:0] rd128, rf128;
  int checks = 0, failures = 0;

  asap_case_mux #(.LQ(64), .LR(64)) dut4 (.line, .sel(sel4), .nt_read(rd64), .nt_ref(rf64));
  asap_case_mux #(.LQ(128), .LR(128)) dut2 (.line, .sel(sel2), .nt_read(rd128), .nt_ref(rf128));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 50; n++) begin
      for (int k = 0; k < LINE_W / 32; k++) line[k*32 +: 32] = $urandom;
      for (int s = 0; s < 4; s++) begin
        sel4 = 2'(s); sel2 = 1'(s % 2);
        #1;
        for (int i = 0; i < 64; i++) begin
          checks += 2;
          if (rd64[i] != line[s*256 + 2*i +: 2]) failures++;
          if (rf64[i] != line[s*256 + 128 + 2*i +: 2]) failures++;
        end
        for (int i = 0; i < 128; i++) begin
          checks += 2;
          if (rd128[i] != line[(s%2)*512 + 2*i +: 2]) failures++;
          if (rf128[i] != line[(s%2)*512 + 256 + 2*i +: 2]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
