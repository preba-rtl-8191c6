// tb_audio_resample: checks audio_resample. (1) Equal rates: the output must
// equal the input sample for sample. (2) 44.1 kHz -> 16 kHz and 8 kHz -> 16 kHz
// on a slow sine: every output must match the real-valued linear interpolation
// at t = n*in_rate/out_rate within 16 LSB, and the number of outputs must be
// the number of n with n*step < n_in (step = floor(2^16*in/out)/2^16).
// Random input gaps and output back-pressure throughout.
module tb_audio_resample;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic               start, busy, done, in_valid, in_ready, out_valid, out_ready, out_last;
  logic [31:0]        n_in, in_rate, out_rate;
  logic signed [15:0] in_sample, out_sample;
  int checks = 0, failures = 0;
  logic signed [15:0] src [4096];

  audio_resample dut (.*);

  task automatic run(int n, int ir, int orate, bit sine);
    longint step, nexp;
    int idx, got;
    bit last_seen;
    step = (longint'(ir) << 16) / orate;
    nexp = 0;
    while ((nexp * step) < (longint'(n) << 16)) nexp++;
    for (int i = 0; i < n; i++)
      src[i] = sine ? 16'($rtoi(10000.0 * $sin(2.0 * 3.14159265 * 0.01 * i * 16000.0 / ir)))
                    : 16'($urandom);
    @(negedge clk);
    n_in = n; in_rate = ir; out_rate = orate; start = 1;
    @(negedge clk); start = 0;
    last_seen = 0;
    fork
      begin
        idx = 0;
        while (idx < n) begin
          @(negedge clk);
          in_valid = ($urandom_range(3) != 0);
          in_sample = src[idx];
          #4;
          if (in_valid && in_ready) idx++;
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        got = 0;
        while (!last_seen) begin
          @(negedge clk);
          out_ready = ($urandom_range(3) != 0);
          #4;
          if (out_valid && out_ready) begin
            real t, r;
            int x0;
            checks++;
            if (!sine) begin
              if (out_sample != src[got]) failures++;
            end else begin
              t = real'(got) * ir / orate;
              x0 = int'($floor(t));
              r = (x0 + 1 < n) ? src[x0] + (src[x0+1] - src[x0]) * (t - x0) : src[x0];
              if (real'(out_sample) - r > 16.0 || r - real'(out_sample) > 16.0) begin
                failures++;
                if (failures < 10) $display("%0d->%0d n=%0d got %0d ref %0.1f", ir, orate, got, out_sample, r);
              end
            end
            got++;
            last_seen = out_last;
          end
        end
        @(negedge clk);
        out_ready = 0;
      end
    join
    checks++;
    if (longint'(got) != nexp) begin failures++; $display("%0d->%0d: %0d outputs, expected %0d", ir, orate, got, nexp); end
    repeat (5) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy"); end
  endtask

  initial begin
    start = 0; in_valid = 0; out_ready = 0; in_sample = 0; n_in = 0; in_rate = 0; out_rate = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(500, 16000, 16000, 0);
    run(2000, 44100, 16000, 1);
    run(700, 8000, 16000, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
