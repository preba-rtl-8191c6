// tb_audio_norm_cu: checks audio_norm_cu on the behavioural global memory.
// Requests of several sizes and value ranges (small integers, large values up
// to 2^31, a constant block) are normalised; every output must be within 2 LSB
// of the real-valued (x - mean)/std in Q5.10 (saturated to 16 bits), the
// constant block must give zeros, done must come with result = n, and no word
// outside the destination may change.
module tb_audio_norm_cu;
  import preba_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic          start, busy, done, req_valid, req_ready, rsp_valid;
  logic [31:0]   src, len, dst, result;
  mem_req_t      req;
  logic [DW-1:0] rsp_rdata;
  int checks = 0, failures = 0;

  audio_norm_cu dut (.*);
  tb_global_mem #(.WORDS(8192), .LATENCY(6), .STALL_PCT(20)) u_mem (.*);

  task automatic run(int n, int kind);
    real mean, var_, sd;
    mean = 0; var_ = 0;
    for (int i = 0; i < n; i++) begin
      logic [31:0] v;
      v = (kind == 0) ? 32'($urandom_range(1000)) :
          (kind == 1) ? 32'($urandom) >> 1 : 32'd777;
      u_mem.mem[i] = v;
      mean += real'(v);
    end
    mean = mean / n;
    for (int i = 0; i < n; i++) var_ += (real'(u_mem.mem[i]) - mean) ** 2;
    sd = $sqrt(var_ / n);
    u_mem.mem[4000 + n] = 32'hDEAD_BEEF;
    @(negedge clk);
    src = 0; len = n; dst = 4000; start = 1;
    @(negedge clk); start = 0;
    fork
      begin
        @(posedge done);
      end
      begin
        repeat (20 * n + 2000) @(posedge clk);
      end
    join_any
    disable fork;
    @(negedge clk);
    checks++;
    if (result != n) begin failures++; $display("result %0d, expected %0d", result, n); end
    for (int i = 0; i < n; i++) begin
      real r;
      int  y;
      r = (sd == 0) ? 0.0 : (real'(u_mem.mem[i]) - mean) / sd * 1024.0;
      if (r > 32767.0) r = 32767.0;
      if (r < -32768.0) r = -32768.0;
      y = int'($signed(u_mem.mem[4000 + i]));
      checks++;
      if (real'(y) - r > 2.0 || r - real'(y) > 2.0) begin
        failures++;
        if (failures < 10) $display("n=%0d kind=%0d i=%0d: got %0d ref %0.2f", n, kind, i, y, r);
      end
    end
    checks++;
    if (u_mem.mem[4000 + n] != 32'hDEAD_BEEF) failures++;
  endtask

  initial begin
    start = 0; src = 0; len = 0; dst = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(300, 0);
    run(1000, 1);
    run(64, 2);
    run(1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
