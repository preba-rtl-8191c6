// tb_mel_spectrogram: checks mel_spectrogram against a floating-point model
// computed here from first principles: frames of 400 samples every 160,
// periodic Hann window, 512-point DFT (direct sum), power spectrum, and 80
// triangular filters on the Slaney Mel scale from 0 to 8 kHz (peak 1), scaled
// by 2^-16 as the unit documents. The input is a mix of three tones and noise,
// 1000 samples -> 4 frames (the tail that does not fill a frame is dropped).
// Checks every band value within 2% + 8 of the model, the frame count, the
// end-of-input behaviour, and the per-frame latency from the frame's last
// input sample to its first output (at most 3153 cycles).
module tb_mel_spectrogram;
  localparam int WIN = 400, HOP = 160, NFFT = 512, NMELS = 80, NS = 1000;
  localparam int NFR = (NS - WIN) / HOP + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic               start, busy, done, in_valid, in_ready, in_last, out_valid, out_ready;
  logic [31:0]        frames, out_data;
  logic signed [15:0] in_sample;
  int checks = 0, failures = 0;
  logic signed [15:0] x [NS];
  real melw [NMELS][NFFT/2+1];
  real refm [NFR][NMELS];
  longint cyc = 0;
  longint t_frame_end [NFR];
  longint t_first_out [NFR];
  always @(posedge clk) cyc <= cyc + 1;

  mel_spectrogram dut (.*);

  function automatic real hz2mel(real f);
    real fsp, minlog, step;
    fsp = 200.0 / 3.0; minlog = 1000.0; step = $ln(6.4) / 27.0;
    return (f < minlog) ? f / fsp : minlog / fsp + $ln(f / minlog) / step;
  endfunction
  function automatic real mel2hz(real m);
    real fsp, minlog, step;
    fsp = 200.0 / 3.0; minlog = 1000.0; step = $ln(6.4) / 27.0;
    return (m < minlog / fsp) ? fsp * m : minlog * $exp(step * (m - minlog / fsp));
  endfunction

  initial begin
    real pts [NMELS+2];
    real pi;
    pi = 3.14159265358979;
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
    for (int n = 0; n < NS; n++)
      x[n] = 16'($rtoi(6000.0 * $sin(2*pi*440.0*n/16000.0) + 3000.0 * $sin(2*pi*2500.0*n/16000.0)
                       + 1500.0 * $cos(2*pi*6100.0*n/16000.0) + $itor($urandom_range(400)) - 200.0));
    for (int fr = 0; fr < NFR; fr++) begin
      real p [NFFT/2+1];
      for (int k = 0; k <= NFFT/2; k++) begin
        real re, im;
        re = 0; im = 0;
        for (int n = 0; n < WIN; n++) begin
          real w;
          w  = x[fr*HOP + n] * (0.5 - 0.5 * $cos(2*pi*n/WIN));
          re += w * $cos(2*pi*k*n/NFFT);
          im -= w * $sin(2*pi*k*n/NFFT);
        end
        p[k] = re*re + im*im;
      end
      for (int m = 0; m < NMELS; m++) begin
        refm[fr][m] = 0;
        for (int k = 0; k <= NFFT/2; k++) refm[fr][m] += p[k] * melw[m][k];
        refm[fr][m] = refm[fr][m] / 65536.0;
      end
    end
  end

  initial begin
    start = 0; in_valid = 0; in_last = 0; out_ready = 0; in_sample = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    fork
      begin
        int idx;
        idx = 0;
        while (idx < NS) begin
          @(negedge clk);
          in_valid  = ($urandom_range(4) != 0);
          in_sample = x[idx];
          in_last   = (idx == NS - 1);
          #4;
          if (in_valid && in_ready) begin
            if (idx >= WIN - 1 && (idx - (WIN - 1)) % HOP == 0 && (idx - (WIN - 1)) / HOP < NFR)
              t_frame_end[(idx - (WIN - 1)) / HOP] = cyc;
            idx++;
          end
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        int got;
        got = 0;
        while (got < NFR * NMELS) begin
          @(negedge clk);
          out_ready = ($urandom_range(3) != 0);
          #4;
          if (out_valid && out_ready) begin
            real r, v, tol;
            int fr, m;
            fr = got / NMELS; m = got % NMELS;
            if (m == 0) t_first_out[fr] = cyc;
            r = refm[fr][m];
            v = real'(out_data);
            tol = 0.02 * r + 8.0;
            checks++;
            if (v - r > tol || r - v > tol) begin
              failures++;
              if (failures < 10) $display("frame %0d band %0d: got %0.0f ref %0.1f", fr, m, v, r);
            end
            got++;
          end
        end
      end
    join
    wait (!busy);
    checks++;
    if (frames != NFR) begin failures++; $display("frames %0d, expected %0d", frames, NFR); end
    for (int fr = 0; fr < NFR; fr++) begin
      checks++;
      if (t_first_out[fr] - t_frame_end[fr] > 3153 || t_first_out[fr] <= t_frame_end[fr]) begin
        failures++;
        $display("frame %0d latency %0d cycles", fr, t_first_out[fr] - t_frame_end[fr]);
      end
    end
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
