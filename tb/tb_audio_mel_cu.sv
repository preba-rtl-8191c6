// tb_audio_mel_cu: end-to-end check of one audio Mel CU on the behavioural
// global memory. PCM at 32 kHz (so the resampler must pick every second
// sample) and at 16 kHz (pass-through) is placed in memory; the CU output must
// be frame-major (frame f, band m at dst + 80*f + m), every band within 2% + 8
// of a floating-point model (periodic Hann, 512-point DFT, Slaney Mel filters,
// scale 2^-16), result = frames*80, and the word after the output untouched.
module tb_audio_mel_cu;
  import preba_pkg::*;
  localparam int WIN = 400, HOP = 160, NFFT = 512, NMELS = 80;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic          start, busy, done, req_valid, req_ready, rsp_valid;
  logic [31:0]   src, len, dst, in_rate, out_rate, result;
  mem_req_t      req;
  logic [DW-1:0] rsp_rdata;
  int checks = 0, failures = 0;
  real melw [NMELS][NFFT/2+1];
  real pi = 3.14159265358979;

  audio_mel_cu dut (.*);
  tb_global_mem #(.WORDS(16384), .LATENCY(8), .STALL_PCT(20)) u_mem (.*);

  function automatic real hz2mel(real f);
    return (f < 1000.0) ? f * 3.0 / 200.0 : 15.0 + $ln(f / 1000.0) / ($ln(6.4) / 27.0);
  endfunction
  function automatic real mel2hz(real m);
    return (m < 15.0) ? m * 200.0 / 3.0 : 1000.0 * $exp(($ln(6.4) / 27.0) * (m - 15.0));
  endfunction

  initial begin
    real pts [NMELS+2];
    for (int i = 0; i < NMELS + 2; i++) pts[i] = mel2hz(hz2mel(8000.0) * i / (NMELS + 1));
    for (int m = 0; m < NMELS; m++)
      for (int k = 0; k <= NFFT/2; k++) begin
        real f, lo, hi;
        f  = k * 16000.0 / NFFT;
        lo = (f - pts[m]) / (pts[m+1] - pts[m]);
        hi = (pts[m+2] - f) / (pts[m+2] - pts[m+1]);
        melw[m][k] = (lo < hi) ? lo : hi;
        if (melw[m][k] < 0) melw[m][k] = 0;
      end
  end

  task automatic run(int n, int ir);
    int ns16, nfr, D, dec;
    logic signed [15:0] s16 [];
    dec  = ir / 16000;
    ns16 = (n + dec - 1) / dec;
    nfr  = (ns16 >= WIN) ? (ns16 - WIN) / HOP + 1 : 0;
    D    = 8192;
    for (int i = 0; i < n; i++)
      u_mem.mem[i] = 32'($signed(16'($rtoi(7000.0 * $sin(2*pi*700.0*i/ir) + 2000.0 * $sin(2*pi*3100.0*i/ir)))));
    s16 = new[ns16];
    for (int i = 0; i < ns16; i++) s16[i] = u_mem.mem[i*dec][15:0];
    u_mem.mem[D + nfr*NMELS] = 32'h5EED_5EED;
    @(negedge clk);
    src = 0; len = n; dst = D; in_rate = ir; out_rate = 16000; start = 1;
    @(negedge clk); start = 0;
    fork
      @(posedge done);
      repeat (20 * n + 5000 * (nfr + 1)) @(posedge clk);
    join_any
    disable fork;
    @(negedge clk);
    checks++;
    if (result != nfr * NMELS) begin failures++; $display("result %0d, expected %0d", result, nfr*NMELS); end
    for (int fr = 0; fr < nfr; fr++) begin
      real p [NFFT/2+1];
      for (int k = 0; k <= NFFT/2; k++) begin
        real re, im;
        re = 0; im = 0;
        for (int t = 0; t < WIN; t++) begin
          real w;
          w  = s16[fr*HOP + t] * (0.5 - 0.5 * $cos(2*pi*t/WIN));
          re += w * $cos(2*pi*k*t/NFFT);
          im -= w * $sin(2*pi*k*t/NFFT);
        end
        p[k] = re*re + im*im;
      end
      for (int m = 0; m < NMELS; m++) begin
        real r, tol;
        r = 0;
        for (int k = 0; k <= NFFT/2; k++) r += p[k] * melw[m][k];
        r = r / 65536.0;
        tol = 0.02 * r + 8.0;
        checks++;
        if (real'(u_mem.mem[D + fr*NMELS + m]) - r > tol || r - real'(u_mem.mem[D + fr*NMELS + m]) > tol) begin
          failures++;
          if (failures < 10) $display("rate %0d frame %0d band %0d: got %0d ref %0.1f", ir, fr, m, u_mem.mem[D + fr*NMELS + m], r);
        end
      end
    end
    checks++;
    if (u_mem.mem[D + nfr*NMELS] != 32'h5EED_5EED) failures++;
  endtask

  initial begin
    start = 0; src = 0; len = 0; dst = 0; in_rate = 0; out_rate = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1800, 32000);
    run(900, 16000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
