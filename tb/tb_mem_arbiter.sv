// tb_mem_arbiter: three requesters issue random reads and writes through
// mem_arbiter to the behavioural global memory (random stalls, 8-cycle read
// latency). Reads target a preloaded region (value = f(address)); writes go to
// a separate region per requester. Checks: every read answer reaches the
// requester that asked, in that requester's order, with the right data; every
// write lands; all requesters get service (round-robin, no starvation).
module tb_mem_arbiter;
  import preba_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          s_req_valid [N];
  logic          s_req_ready [N];
  mem_req_t      s_req       [N];
  logic          s_rsp_valid [N];
  logic [DW-1:0] s_rsp_rdata;
  logic          m_req_valid, m_req_ready, m_rsp_valid;
  mem_req_t      m_req;
  logic [DW-1:0] m_rsp_rdata;
  int checks = 0, failures = 0;

  mem_arbiter #(.N(N), .ID_DEPTH(8)) dut (.*);
  tb_global_mem #(.WORDS(4096), .LATENCY(8), .STALL_PCT(25)) u_mem (
    .clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .rsp_valid(m_rsp_valid), .rsp_rdata(m_rsp_rdata));

  function automatic logic [31:0] f(logic [31:0] a);
    return a * 32'h9E37_79B9 ^ 32'h1234_5678;
  endfunction

  logic [31:0] expq [N][$];
  int          nreq [N];
  int          nrsp [N];
  int          nwr  [N];
  localparam int PER = 300;

  initial begin
    for (int a = 0; a < 1024; a++) u_mem.mem[a] = f(a);
    for (int i = 0; i < N; i++) begin s_req_valid[i] = 0; s_req[i] = '0; nreq[i] = 0; nrsp[i] = 0; nwr[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  for (genvar g = 0; g < N; g++) begin : g_m
    initial begin
      wait (rst_n);
      while (nreq[g] < PER) begin
        @(negedge clk);
        if (!s_req_valid[g] && $urandom_range(3) != 0) begin
          s_req_valid[g] = 1;
          if ($urandom_range(1) == 0) s_req[g] = '{we: 1'b0, addr: 32'($urandom_range(1023)), wdata: '0};
          else s_req[g] = '{we: 1'b1, addr: 32'(1024 + g*512 + nwr[g]), wdata: 32'(g*100000 + nwr[g])};
        end
        #4;
        if (s_req_valid[g] && s_req_ready[g]) begin
          if (!s_req[g].we) expq[g].push_back(f(s_req[g].addr));
          else nwr[g]++;
          nreq[g]++;
          @(negedge clk);
          s_req_valid[g] = 0;
        end
      end
      @(negedge clk);
      s_req_valid[g] = 0;
    end
    always @(negedge clk) begin
      if (s_rsp_valid[g]) begin
        checks++;
        if (expq[g].size() == 0 || s_rsp_rdata != expq[g][0]) begin
          failures++;
          if (failures < 10) $display("requester %0d: bad read data %h", g, s_rsp_rdata);
        end
        if (expq[g].size() != 0) void'(expq[g].pop_front());
        nrsp[g]++;
      end
    end
  end

  initial begin
    wait (rst_n);
    wait (nreq[0] == PER && nreq[1] == PER && nreq[2] == PER);
    repeat (50) @(posedge clk);
    for (int g = 0; g < N; g++) begin
      checks++;
      if (expq[g].size() != 0) begin failures++; $display("requester %0d: %0d reads unanswered", g, expq[g].size()); end
      for (int w = 0; w < nwr[g]; w++) begin
        checks++;
        if (u_mem.mem[1024 + g*512 + w] != 32'(g*100000 + w)) failures++;
      end
      checks++;
      if (nwr[g] == 0 || nrsp[g] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
