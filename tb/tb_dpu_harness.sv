// tb_dpu_harness: end-to-end test bench body for preba_dpu, shared by the
// end-to-end test (many small requests) and the full-size test (one
// ImageNet-sized image and one 2.5 s utterance). preba_dpu is instantiated with
// its default parameters. Around it: the behavioural global memory, one
// stand-in decoder per image CU, and a host model that writes inputs into
// memory, pushes commands, drains completions and, for every finished Mel
// spectrogram, queues the Normalize command for it (the two-stage audio flow).
//
// The wrapping test (tb_preba_dpu*) owns the watchdog, prints the TB_RESULT
// line from checks/failures once `finished` rises, and ends the simulation.
// Checks. Image outputs: every value against a floating-point reference
// (bilinear resize, centre crop, ImageNet normalisation). Audio: the first
// CHECK_FRAMES frames of each spectrogram against a floating-point DFT/Mel
// model, and every normalised value against mean/std computed in floating
// point from the spectrogram in memory. Completions: kind, tag, result.
// With REQUIRE_MECH set, each mechanism must occur at least once: memory
// back-pressure, a request waiting for a free CU, two image CUs and two Mel CUs
// working at once, a Normalize CU working while a Mel CU works, resampling at a
// rate other than 16 kHz, resize up-scaling and down-scaling.
// The parameter defaults describe the full-size workload (one 500x375 image
// resized to 256 and cropped to 224, one 2.5 s 16 kHz utterance); the
// end-to-end test overrides them with many small requests. Request r of each
// type gets its own size (images alternate landscape/portrait, request 3 is
// smaller than the target and must be up-scaled; audio request r lasts
// AUD_LEN + r*AUD_STEP samples at 16 kHz and is sent at 16, 32 or
// 8 kHz). Inputs are random pixels and tones plus noise.
module tb_dpu_harness
  import preba_pkg::*;
#(
  parameter int NIMG         = 1,
  parameter int IMG_W        = 500,
  parameter int IMG_H        = 375,
  parameter int SHORT        = 256,
  parameter int CROP         = 224,
  parameter int NAUD         = 1,
  parameter int AUD_LEN      = 40000,
  parameter int AUD_STEP     = 333,     // extra samples (16 kHz) per audio request
  parameter int CHECK_FRAMES = 3,
  parameter int MEM_WORDS    = 1 << 19,
  parameter bit REQUIRE_MECH = 0
) ();
  localparam int NI = 3, NM = 3, NN = 2, NT = NI + NM + NN;   // preba_dpu defaults
  localparam int WIN = 400, HOP = 160, NFFT = 512, NMELS = 80;
  real pi = 3.14159265358979;
  real mean [3] = '{0.485, 0.456, 0.406};
  real sdev [3] = '{0.229, 0.224, 0.225};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic          cmd_valid, cmd_ready, cpl_valid, cpl_ready;
  cmd_t          cmd;
  cpl_t          cpl;
  logic          mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t      mem_req;
  logic [DW-1:0] mem_rsp_rdata;
  logic          dec_in_valid  [NI];
  logic          dec_in_ready  [NI];
  logic [31:0]   dec_in_data   [NI];
  logic          dec_in_last   [NI];
  logic          dec_hdr_valid [NI];
  logic          dec_hdr_ready [NI];
  logic [15:0]   dec_w         [NI];
  logic [15:0]   dec_h         [NI];
  logic          dec_pix_valid [NI];
  logic          dec_pix_ready [NI];
  rgb_t          dec_pix       [NI];
  logic          cu_busy [NT];
  logic          blocked [3];

  int checks = 0, failures = 0;
  bit finished = 1'b0;   // all checks done; the wrapping test prints the result

  preba_dpu dut (.*);

  tb_global_mem #(.WORDS(MEM_WORDS), .LATENCY(10), .STALL_PCT(15)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  for (genvar i = 0; i < NI; i++) begin : g_dec
    tb_jpeg_decoder_model u_dec (
      .clk, .rst_n, .in_valid(dec_in_valid[i]), .in_ready(dec_in_ready[i]),
      .in_data(dec_in_data[i]), .in_last(dec_in_last[i]),
      .hdr_valid(dec_hdr_valid[i]), .hdr_ready(dec_hdr_ready[i]), .w(dec_w[i]), .h(dec_h[i]),
      .pix_valid(dec_pix_valid[i]), .pix_ready(dec_pix_ready[i]), .pix(dec_pix[i]));
  end

  // ---------------- mechanism counters
  int n_blocked = 0, n_img2 = 0, n_mel2 = 0, n_overlap = 0, n_resample = 0, n_up = 0, n_down = 0;
  always @(negedge clk) if (rst_n) begin
    int ni, nm, nn;
    ni = 0; nm = 0; nn = 0;
    for (int i = 0; i < NI; i++) ni += int'(cu_busy[i]);
    for (int i = 0; i < NM; i++) nm += int'(cu_busy[NI + i]);
    for (int i = 0; i < NN; i++) nn += int'(cu_busy[NI + NM + i]);
    if (blocked[0] || blocked[1] || blocked[2]) n_blocked++;
    if (ni >= 2) n_img2++;
    if (nm >= 2) n_mel2++;
    if (nm >= 1 && nn >= 1) n_overlap++;
  end

  // ---------------- request bookkeeping
  typedef struct {
    cu_kind_e kind;
    int       src, len, dst, w, h, rate;
    bit       done;
    int       nfr;
    longint   t_issue, t_done;
  } req_t;
  req_t reqs [256];
  int   nreq = 0;
  int   alloc = 0;
  cmd_t cmdq [$];

  function automatic int salloc(int n);
    int a;
    a = alloc;
    alloc += n;
    if (alloc > MEM_WORDS) $fatal(1, "test memory too small");
    return a;
  endfunction

  function automatic void add_cmd(cu_kind_e k, int src, int len, int dst, int a0, int a1, int w, int h);
    reqs[nreq] = '{kind: k, src: src, len: len, dst: dst, w: w, h: h, rate: a0, done: 0, nfr: 0, t_issue: 0, t_done: 0};
    cmdq.push_back('{kind: k, tag: 8'(nreq), src: 32'(src), len: 32'(len), dst: 32'(dst),
                     arg0: 32'(a0), arg1: 32'(a1)});
    nreq++;
  endfunction

  // ---------------- reference checks
  function automatic real chan(int base, int w, int x, int y, int c);
    logic [31:0] v;
    v = u_mem.mem[base + 1 + y*w + x];
    return (c == 0) ? real'(v[23:16]) : (c == 1) ? real'(v[15:8]) : real'(v[7:0]);
  endfunction

  task automatic check_img(int t);
    int w, h, ow, oh, x0, y0, base, D;
    w = reqs[t].w; h = reqs[t].h; base = reqs[t].src; D = reqs[t].dst;
    ow = (w <= h) ? SHORT : (w * SHORT) / h;
    oh = (w <= h) ? (h * SHORT) / w : SHORT;
    x0 = (ow - CROP) / 2; y0 = (oh - CROP) / 2;
    for (int c = 0; c < 3; c++)
      for (int y = 0; y < CROP; y++)
        for (int x = 0; x < CROP; x++) begin
          real sx, sy, fx, fy, rv, r, tol;
          int xa, xb, ya, yb, got;
          sx = (x0 + x + 0.5) * w / ow - 0.5; if (sx < 0) sx = 0;
          sy = (y0 + y + 0.5) * h / oh - 0.5; if (sy < 0) sy = 0;
          xa = int'($floor(sx)); ya = int'($floor(sy));
          if (xa >= w-1) begin xa = w-1; xb = w-1; fx = 0; end else begin xb = xa+1; fx = sx - xa; end
          if (ya >= h-1) begin ya = h-1; yb = h-1; fy = 0; end else begin yb = ya+1; fy = sy - ya; end
          rv = (chan(base,w,xa,ya,c)*(1-fx) + chan(base,w,xb,ya,c)*fx)*(1-fy)
             + (chan(base,w,xa,yb,c)*(1-fx) + chan(base,w,xb,yb,c)*fx)*fy;
          r   = (rv / 255.0 - mean[c]) / sdev[c] * 4096.0;
          tol = 2.5 / 255.0 / sdev[c] * 4096.0 + 2.0;
          got = int'($signed(u_mem.mem[D + c*CROP*CROP + y*CROP + x]));
          checks++;
          if (real'(got) - r > tol || r - real'(got) > tol) begin
            failures++;
            if (failures < 10) $display("image %0d c%0d (%0d,%0d): got %0d ref %0.1f", t, c, x, y, got, r);
          end
        end
  endtask

  real melw [NMELS][NFFT/2+1];
  function automatic real hz2mel(real f);
    return (f < 1000.0) ? f * 3.0 / 200.0 : 15.0 + $ln(f / 1000.0) / ($ln(6.4) / 27.0);
  endfunction
  function automatic real mel2hz(real m);
    return (m < 15.0) ? m * 200.0 / 3.0 : 1000.0 * $exp(($ln(6.4) / 27.0) * (m - 15.0));
  endfunction

  // resampled sample n as the linear interpolation at n*in/16000
  // resampled sample n exactly as the resampler defines it: t = n*step in
  // 16.16 fixed point, linear interpolation, last sample held past the end
  function automatic real rs_sample(int t, int n);
    longint step, tt;
    real fr;
    int  x0, len, src;
    step = (longint'(reqs[t].rate) << 16) / 16000;
    tt   = longint'(n) * step;
    x0   = int'(tt >> 16);
    fr   = real'(tt & 64'hffff) / 65536.0;
    len  = reqs[t].len; src = reqs[t].src;
    if (x0 + 1 >= len) return real'($signed(u_mem.mem[src + len - 1][15:0]));
    return real'($signed(u_mem.mem[src + x0][15:0])) * (1 - fr)
         + real'($signed(u_mem.mem[src + x0 + 1][15:0])) * fr;
  endfunction

  task automatic check_mel(int t, int nfr_expected);
    // t: the Mel request; its output is in reqs[t].dst
    checks++;
    if (nfr_expected < CHECK_FRAMES) begin failures++; $display("audio %0d: only %0d frames", t, nfr_expected); end
    for (int fr = 0; fr < CHECK_FRAMES && fr < nfr_expected; fr++) begin
      real p [NFFT/2+1];
      real s [WIN];
      for (int n = 0; n < WIN; n++) s[n] = rs_sample(t, fr*HOP + n);
      for (int k = 0; k <= NFFT/2; k++) begin
        real re, im;
        re = 0; im = 0;
        for (int n = 0; n < WIN; n++) begin
          real w;
          w  = s[n] * (0.5 - 0.5 * $cos(2*pi*n/WIN));
          re += w * $cos(2*pi*k*n/NFFT);
          im -= w * $sin(2*pi*k*n/NFFT);
        end
        p[k] = re*re + im*im;
      end
      for (int m = 0; m < NMELS; m++) begin
        real r, tol, v;
        r = 0;
        for (int k = 0; k <= NFFT/2; k++) r += p[k] * melw[m][k];
        r = r / 65536.0;
        // resampler rounding and step quantisation add a little on top of the unit's own error
        tol = 0.02 * r + 10.0;
        v = real'(u_mem.mem[reqs[t].dst + fr*NMELS + m]);
        checks++;
        if (v - r > tol || r - v > tol) begin
          failures++;
          if (failures < 10) $display("audio %0d frame %0d band %0d: got %0.0f ref %0.1f", t, fr, m, v, r);
        end
      end
    end
  endtask

  task automatic check_norm(int t);
    real mu, var_, sd;
    int n, s, d;
    n = reqs[t].len; s = reqs[t].src; d = reqs[t].dst;
    mu = 0; var_ = 0;
    for (int i = 0; i < n; i++) mu += real'(u_mem.mem[s + i]);
    mu = mu / n;
    for (int i = 0; i < n; i++) var_ += (real'(u_mem.mem[s + i]) - mu) ** 2;
    sd = $sqrt(var_ / n);
    for (int i = 0; i < n; i++) begin
      real r;
      int  y;
      r = (sd == 0) ? 0.0 : (real'(u_mem.mem[s + i]) - mu) / sd * 1024.0;
      if (r > 32767.0) r = 32767.0;
      if (r < -32768.0) r = -32768.0;
      y = int'($signed(u_mem.mem[d + i]));
      checks++;
      if (real'(y) - r > 2.0 || r - real'(y) > 2.0) begin
        failures++;
        if (failures < 10) $display("norm %0d i=%0d: got %0d ref %0.2f", t, i, y, r);
      end
    end
  endtask

  // ---------------- stimulus
  int ntodo;   // completions still expected
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

    // interleave image and audio requests
    for (int r = 0; r < NIMG || r < NAUD; r++) begin
      if (r < NIMG) begin
        int w, h, src, dst;
        w = (r % 2 == 0) ? IMG_W + 7*r : IMG_H + 3*r;
        h = (r % 2 == 0) ? IMG_H + 3*r : IMG_W + 7*r;
        if (r == 3) begin w = SHORT / 2 + 1; h = SHORT - 3; end   // smaller than the target: up-scaling
        if ((w <= h ? w : h) < SHORT) n_up++; else n_down++;
        src = salloc(1 + w*h);
        u_mem.mem[src] = {16'(h), 16'(w)};
        for (int i = 0; i < w*h; i++) u_mem.mem[src + 1 + i] = {8'h0, 24'($urandom)};
        dst = salloc(3*CROP*CROP);
        add_cmd(CU_IMG, src, 1 + w*h, dst, SHORT, CROP, w, h);
      end
      if (r < NAUD) begin
        int len, rate, src, tmp;
        rate = (r % 3 == 0) ? 16000 : (r % 3 == 1) ? 32000 : 8000;
        len  = int'((longint'(AUD_LEN) + longint'(AUD_STEP)*r) * rate / 16000);
        if (rate != 16000) n_resample++;
        src = salloc(len);
        for (int i = 0; i < len; i++)
          u_mem.mem[src + i] = 32'($signed(16'($rtoi(6000.0 * $sin(2*pi*(300.0 + 150*r)*i/rate)
                                                   + 2500.0 * $sin(2*pi*1900.0*i/rate)
                                                   + $itor($urandom_range(600)) - 300.0))));
        tmp = salloc(int'((longint'(len) * 16000 / rate + 2) / HOP + 1) * NMELS);
        add_cmd(CU_MEL, src, len, tmp, rate, 16000, 0, 0);
      end
    end
    ntodo = nreq + NAUD;   // every Mel request spawns a Normalize request

    cmd_valid = 0; cpl_ready = 0; cmd = '0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    fork
      begin   // command pusher
        while (ntodo > 0) begin
          @(negedge clk);
          cmd_valid = (cmdq.size() > 0);
          if (cmdq.size() > 0) cmd = cmdq[0];
          #4;
          if (cmd_valid && cmd_ready) begin
            reqs[cmd.tag].t_issue = cyc;
            void'(cmdq.pop_front());
          end
        end
        @(negedge clk);
        cmd_valid = 0;
      end
      begin   // completion handler
        while (ntodo > 0) begin
          @(negedge clk);
          cpl_ready = ($urandom_range(3) != 0);
          #4;
          if (cpl_valid && cpl_ready) begin
            int t;
            t = int'(cpl.tag);
            checks++;
            if (t >= nreq || reqs[t].done || cpl.kind != reqs[t].kind) begin
              failures++;
              $display("unexpected completion tag %0d kind %0d", t, cpl.kind);
            end else begin
              reqs[t].done   = 1;
              reqs[t].t_done = cyc;
              unique case (reqs[t].kind)
                CU_IMG: begin
                  checks++;
                  if (cpl.result != 3*CROP*CROP) begin failures++; $display("image %0d result %0d", t, cpl.result); end
                end
                CU_MEL: begin
                  int ns16, nfr, dst;
                  ns16 = 0;
                  while (longint'(ns16) * ((longint'(reqs[t].rate) << 16) / 16000) < (longint'(reqs[t].len) << 16)) ns16++;
                  nfr = (ns16 >= WIN) ? (ns16 - WIN) / HOP + 1 : 0;
                  checks++;
                  if (cpl.result != nfr * NMELS) begin failures++; $display("audio %0d result %0d expected %0d", t, cpl.result, nfr*NMELS); end
                  reqs[t].nfr = nfr;
                  dst = salloc(cpl.result);
                  add_cmd(CU_NORM, reqs[t].dst, int'(cpl.result), dst, 0, 0, t, 0);
                end
                default: begin
                  checks++;
                  if (cpl.result != 32'(reqs[t].len)) begin failures++; $display("norm %0d result %0d", t, cpl.result); end
                end
              endcase
            end
            ntodo--;
          end
        end
      end
    join
    $display("all %0d requests completed at cycle %0d", nreq, cyc);

    for (int t = 0; t < nreq; t++) begin
      checks++;
      if (!reqs[t].done) begin failures++; $display("request %0d never completed", t); end
      unique case (reqs[t].kind)
        CU_IMG:  check_img(t);
        CU_MEL:  check_mel(t, reqs[t].nfr);
        default: check_norm(t);
      endcase
    end

    $display("mechanisms: blocked=%0d cycles, 2+ image CUs=%0d, 2+ Mel CUs=%0d, Mel/Norm overlap=%0d, memory stalls=%0d, resampled=%0d, upscaled=%0d, downscaled=%0d",
             n_blocked, n_img2, n_mel2, n_overlap, u_mem.stalls, n_resample, n_up, n_down);
    if (REQUIRE_MECH) begin
      checks += 8;
      if (n_blocked == 0)    begin failures++; $display("no request ever waited for a CU"); end
      if (n_img2 == 0)       begin failures++; $display("image CUs never ran concurrently"); end
      if (n_mel2 == 0)       begin failures++; $display("Mel CUs never ran concurrently"); end
      if (n_overlap == 0)    begin failures++; $display("Normalize never overlapped Mel"); end
      if (u_mem.stalls == 0) begin failures++; $display("memory never stalled"); end
      if (n_resample == 0)   begin failures++; $display("no resampling"); end
      if (n_up == 0)         begin failures++; $display("no up-scaling"); end
      if (n_down == 0)       begin failures++; $display("no down-scaling"); end
    end
    finished = 1'b1;
  end

endmodule
