// tb_global_mem: behavioural model of the FPGA card's global memory (DRAM), for
// testbenches only. Word-addressed array of WORDS 32-bit words. A request is
// accepted when req_valid && req_ready; req_ready drops at random on STALL_PCT
// percent of cycles to exercise back-pressure. Reads are answered in order,
// LATENCY cycles after acceptance, with one rsp_valid pulse each. The array is
// public (mem) so testbenches can preload inputs and inspect outputs; stalls
// counts the cycles on which a pending request was refused.
module tb_global_mem
  import preba_pkg::*;
#(
  parameter int unsigned WORDS     = 1 << 20,
  parameter int unsigned LATENCY   = 8,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  mem_req_t      req,
  output logic          rsp_valid,
  output logic [DW-1:0] rsp_rdata
);
  logic [DW-1:0] mem [WORDS];
  int unsigned   due_q [$];
  logic [DW-1:0] dat_q [$];
  longint unsigned cyc = 0;
  int unsigned   stalls = 0;
  int unsigned   writes = 0;
  int unsigned   reads  = 0;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    req_ready <= ($urandom_range(99) >= STALL_PCT);
    rsp_valid <= 1'b0;
    if (rst_n) begin
      if (req_valid && !req_ready) stalls <= stalls + 1;
      if (req_valid && req_ready) begin
        if (req.addr >= WORDS) $error("tb_global_mem: address %0d out of range", req.addr);
        else if (req.we) begin
          mem[req.addr] <= req.wdata;
          writes <= writes + 1;
        end else begin
          due_q.push_back(32'(cyc) + LATENCY);
          dat_q.push_back(mem[req.addr]);
          reads <= reads + 1;
        end
      end
      if (due_q.size() > 0 && due_q[0] <= 32'(cyc)) begin
        rsp_valid <= 1'b1;
        rsp_rdata <= dat_q[0];
        void'(due_q.pop_front());
        void'(dat_q.pop_front());
      end
    end
  end

  initial begin
    req_ready = 1'b0;
    rsp_valid = 1'b0;
    rsp_rdata = '0;
    foreach (mem[i]) mem[i] = '0;
  end
endmodule
