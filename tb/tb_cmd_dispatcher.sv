// tb_cmd_dispatcher: checks cmd_dispatcher with simple CU models (2 image,
// 1 Mel, 1 Normalize CU) that finish after a random time and report
// result = 3*tag + 1. 60 random commands of mixed kinds are pushed back to
// back; the host drains completions with random back-pressure. Checks: every
// command completes exactly once with its kind, tag and result; a CU is never
// started while it still holds work; the start pulse carries the command of the
// right kind; requests of a type wait (blocked) when all its CUs are busy; both
// image CUs get used (request-level parallelism).
module tb_cmd_dispatcher;
  import preba_pkg::*;
  localparam int NI = 2, NM = 1, NN = 1, NT = 4, NCMD = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        cmd_valid, cmd_ready, cpl_valid, cpl_ready;
  cmd_t        cmd, img_cmd, mel_cmd, norm_cmd;
  cpl_t        cpl;
  logic        start   [NT];
  logic        done    [NT];
  logic [31:0] result  [NT];
  logic        blocked [3];
  int checks = 0, failures = 0;
  int blocked_cycles = 0;
  int used [NT];
  bit outstanding [256];
  cu_kind_e kind_of [256];

  cmd_dispatcher #(.NI(NI), .NM(NM), .NN(NN), .QDEPTH(4)) dut (.*);

  // CU models
  for (genvar i = 0; i < NT; i++) begin : g_cu
    int   remaining;
    logic cbusy;
    logic [7:0] ctag;
    initial begin cbusy = 0; done[i] = 0; result[i] = 0; used[i] = 0; end
    always @(negedge clk) begin
      done[i] <= 1'b0;
      if (start[i]) begin
        cmd_t c;
        c = (i < NI) ? img_cmd : (i < NI + NM) ? mel_cmd : norm_cmd;
        checks++;
        if (cbusy) begin failures++; $display("CU %0d started while busy", i); end
        if (c.kind != ((i < NI) ? CU_IMG : (i < NI + NM) ? CU_MEL : CU_NORM)) begin
          failures++; $display("CU %0d got a command of kind %0d", i, c.kind);
        end
        cbusy <= 1'b1;
        ctag  <= c.tag;
        remaining <= $urandom_range(40, 5);
        used[i] <= used[i] + 1;
      end else if (cbusy) begin
        remaining <= remaining - 1;
        if (remaining == 1) begin
          cbusy     <= 1'b0;
          done[i]   <= 1'b1;
          result[i] <= 32'(ctag) * 3 + 1;
        end
      end
    end
  end

  always @(negedge clk) if (blocked[0] || blocked[1] || blocked[2]) blocked_cycles <= blocked_cycles + 1;

  initial begin
    int ncpl;
    cmd_valid = 0; cpl_ready = 0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin
        for (int t = 0; t < NCMD; t++) begin
          @(negedge clk);
          cmd_valid = 1;
          cmd = '{kind: cu_kind_e'($urandom_range(2)), tag: 8'(t), src: 32'(t), len: 1, dst: 0, arg0: 0, arg1: 0};
          outstanding[t] = 1;
          kind_of[t] = cmd.kind;
          #4;
          while (!cmd_ready) begin @(negedge clk); #4; end
        end
        @(negedge clk);
        cmd_valid = 0;
      end
      begin
        ncpl = 0;
        while (ncpl < NCMD) begin
          @(negedge clk);
          cpl_ready = ($urandom_range(2) != 0);
          #4;
          if (cpl_valid && cpl_ready) begin
            checks++;
            if (!outstanding[cpl.tag] || cpl.kind != kind_of[cpl.tag] || cpl.result != 32'(cpl.tag) * 3 + 1) begin
              failures++;
              $display("bad completion tag %0d kind %0d result %0d", cpl.tag, cpl.kind, cpl.result);
            end
            outstanding[cpl.tag] = 0;
            ncpl++;
          end
        end
      end
    join
    checks++;
    if (blocked_cycles == 0) begin failures++; $display("no request ever waited for a CU"); end
    checks++;
    if (used[0] == 0 || used[1] == 0) begin failures++; $display("an image CU was never used"); end
    $display("blocked cycles %0d, CU use %0d %0d %0d %0d", blocked_cycles, used[0], used[1], used[2], used[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
