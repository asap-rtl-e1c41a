// asap_host_mem: behavioural model of host memory as seen by the accelerator
// (the host service layer and the memory behind it are not part of the RTL).
// Accepts one command per cycle when cmd_ready is high (ready is withheld at
// random, STALL_PCT percent of cycles), stores writes at once and returns
// each read line in request order after LAT cycles. Lines are 128 bytes,
// addressed by byte address; the testbench fills and inspects memory with
// the put/get functions. Counts commands refused by back-pressure.
module asap_host_mem
  import asap_pkg::*;
#(
  parameter int LAT       = 8,
  parameter int STALL_PCT = 20
) (
  input  logic              clk,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic              cmd_write,
  input  logic [63:0]       cmd_addr,
  input  logic [LINE_W-1:0] cmd_wdata,
  output logic              rsp_valid,
  output logic [LINE_W-1:0] rsp_data
);
  logic [LINE_W-1:0] mem [longint];
  typedef struct { longint due; logic [LINE_W-1:0] d; } rsp_t;
  rsp_t pend[$];
  longint cyc = 0;
  int n_reads = 0, n_writes = 0, n_backpressure = 0;

  function automatic void put(longint addr, logic [LINE_W-1:0] d);
    mem[addr >> 7] = d;
  endfunction
  function automatic logic [LINE_W-1:0] get(longint addr);
    return mem.exists(addr >> 7) ? mem[addr >> 7] : '0;
  endfunction

  initial begin cmd_ready = 0; rsp_valid = 0; rsp_data = '0; end

  always @(posedge clk) begin
    cyc++;
    if (cmd_valid && cmd_ready) begin
      if (cmd_write) begin
        mem[longint'(cmd_addr) >> 7] = cmd_wdata;
        n_writes++;
      end else begin
        rsp_t r;
        r.due = cyc + LAT;
        r.d = get(longint'(cmd_addr));
        pend.push_back(r);
        n_reads++;
      end
    end
    if (cmd_valid && !cmd_ready) n_backpressure++;
    rsp_valid <= 1'b0;
    if (pend.size() > 0 && pend[0].due <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_data  <= pend[0].d;
      void'(pend.pop_front());
    end
    cmd_ready <= ($urandom_range(0, 99) >= STALL_PCT);
  end
endmodule
