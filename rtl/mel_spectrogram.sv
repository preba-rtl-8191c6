// mel_spectrogram: Mel spectrogram unit of the audio Mel CU. Turns a stream of
// 16 kHz signed 16-bit samples into frames of NMELS Mel-band energies, in the
// four steps framing -> Hann window -> FFT -> Mel filter bank.
//
// Framing: frame f covers samples f*HOP .. f*HOP+WIN-1 (25 ms frames every
// 10 ms at the defaults); only complete frames are produced, no padding. Input
// samples go into a ring buffer of NFFT entries; a frame starts once its last
// sample has arrived.
// Window + load: the WIN samples are multiplied by a periodic Hann window
// w[n] = 0.5 - 0.5*cos(2*pi*n/WIN) (Q15, table hann400.hex) and written in
// bit-reversed order into the FFT buffer, zero-padded to NFFT points.
// FFT: in-place iterative radix-2 decimation-in-time FFT, one butterfly per
// clock, log2(NFFT) stages of NFFT/2 butterflies, Q15 twiddles
// cos/sin(2*pi*k/NFFT) (table twiddle512.hex), 32-bit data, no scaling.
// Mel filter: for every bin k = 0..NFFT/2 the power p = re^2 + im^2 (scaled by
// 2^-16) is added to the two triangular filters that overlap that bin: table
// melbank512.hex holds, per bin, the index q of the Mel point at or below the
// bin frequency and the rising weight w (Q16); filter q gets p*w and filter q-1
// gets p*(1-w). The Mel points are NMELS+2 points evenly spaced on the Slaney
// Mel scale from 0 Hz to SR/2; filters have peak 1 (no area normalisation).
// Output: each band value is the accumulated energy scaled by 2^-16 and
// saturated to 32 bits, NMELS values per frame on a valid/ready stream.
//
// Timing per frame: NFFT (load) + log2(NFFT)*NFFT/2 (FFT) + NFFT/2+1 (filter)
// + NMELS (output) cycles after its last sample, i.e. 3153 cycles at the
// defaults. done pulses after the input's last sample once no further complete
// frame remains; frames counts the frames produced.
// The paper names the four steps; all sizes (16 kHz, 400/160/512, 80 Mel
// bands) are the common speech-model front-end settings, chosen here. The
// tables are generated for these defaults and must be regenerated if they change.
module mel_spectrogram #(
  parameter int unsigned WIN   = 400,
  parameter int unsigned HOP   = 160,
  parameter int unsigned NFFT  = 512,
  parameter int unsigned NMELS = 80
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [31:0]        frames,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [15:0] in_sample,
  input  logic               in_last,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [31:0]        out_data
);
  localparam int unsigned LG  = $clog2(NFFT);
  localparam int unsigned NB  = NFFT / 2 + 1;     // bins used
  localparam int unsigned MW  = $clog2(NMELS);
  localparam int unsigned HWW = $clog2(WIN);       // Hann table index width
  localparam int unsigned BWW = $clog2(NB);        // filter-bank table index width

  typedef enum logic [2:0] {S_IDLE, S_COLLECT, S_LOAD, S_FFT, S_MEL, S_OUT} state_e;
  state_e state;

  logic signed [15:0] ring [NFFT];
  logic        [15:0] hann [WIN];
  logic        [31:0] twid [NFFT/2];   // {cos, sin}, Q15 signed
  logic        [23:0] melt [NB];       // {q, w}
  logic signed [31:0] re   [NFFT];
  logic signed [31:0] im   [NFFT];
  logic        [63:0] acc  [NMELS];

  initial begin
    $readmemh("rtl/hann400.hex", hann);
    $readmemh("rtl/twiddle512.hex", twid);
    $readmemh("rtl/melbank512.hex", melt);
  end

  logic [31:0]   wr_cnt, fstart;
  logic          ended;
  logic [LG:0]   n;          // load index / bin index
  logic [LG-1:0] b;          // butterfly index (LG-1 bits used)
  logic [$clog2(LG+1)-1:0] stage;
  logic [MW:0]   m;

  function automatic logic [LG-1:0] bitrev(input logic [LG-1:0] v);
    for (int i = 0; i < int'(LG); i++) bitrev[i] = v[LG-1-i];
  endfunction

  // ---- load: windowed sample
  logic signed [31:0] wsamp;
  always_comb begin
    logic signed [15:0] s;
    logic signed [32:0] p;
    s = ring[LG'(fstart + 32'(n))];
    p = s * $signed({1'b0, hann[(n < (LG+1)'(WIN)) ? HWW'(n) : '0]});
    wsamp = (n < (LG+1)'(WIN)) ? 32'(p >>> 15) : 32'sd0;
  end

  // ---- butterfly
  logic [LG-1:0]      bi, bj, half, pos, twi;
  logic signed [31:0] xr_i, xi_i, xr_j, xi_j;
  logic signed [15:0] c, sn;
  logic signed [47:0] tr_w, ti_w;
  logic signed [31:0] tr, ti;
  always_comb begin
    half = LG'(1) << stage;
    pos  = b & (half - 1'b1);
    bi   = LG'((({1'b0, b} >> stage) << (stage + 1)) | {1'b0, pos});
    bj   = bi + half;
    twi  = LG'(pos << (LG - 1 - 32'(stage)));
    c    = twid[twi[LG-2:0]][31:16];
    sn   = twid[twi[LG-2:0]][15:0];
    xr_i = re[bi]; xi_i = im[bi];
    xr_j = re[bj]; xi_j = im[bj];
    // (xr + j xi) * (c - j sn)
    tr_w = 48'(xr_j) * 48'(c) + 48'(xi_j) * 48'(sn);
    ti_w = 48'(xi_j) * 48'(c) - 48'(xr_j) * 48'(sn);
    tr   = 32'(tr_w >>> 15);
    ti   = 32'(ti_w >>> 15);
  end

  // ---- Mel filter
  logic [63:0] pw, p16;
  logic [7:0]  mq;
  logic [16:0] mw_up, mw_dn;
  always_comb begin
    logic signed [31:0] xr, xi;
    xr    = re[LG'(n)];
    xi    = im[LG'(n)];
    pw    = 64'(xr * xr) + 64'(xi * xi);
    p16   = pw >> 16;
    mq    = melt[(n < (LG+1)'(NB)) ? BWW'(n) : '0][23:16];
    mw_up = {1'b0, melt[(n < (LG+1)'(NB)) ? BWW'(n) : '0][15:0]};
    mw_dn = 17'h10000 - mw_up;
  end

  assign in_ready  = (state == S_COLLECT) && !ended && (wr_cnt < fstart + WIN);
  assign out_valid = (state == S_OUT);
  assign out_data  = (acc[MW'(m)][63:48] != 0) ? 32'hFFFF_FFFF : acc[MW'(m)][47:16];
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) ring[LG'(wr_cnt)] <= in_sample;
    unique case (state)
      S_LOAD: begin
        re[bitrev(LG'(n))] <= wsamp;
        im[bitrev(LG'(n))] <= '0;
      end
      S_FFT: begin
        re[bi] <= xr_i + tr;  im[bi] <= xi_i + ti;
        re[bj] <= xr_i - tr;  im[bj] <= xi_i - ti;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; frames <= '0;
      wr_cnt <= '0; fstart <= '0; ended <= 1'b0;
      n <= '0; b <= '0; stage <= '0; m <= '0;
      acc <= '{default: '0};
    end else begin
      done <= 1'b0;
      if (in_valid && in_ready) begin
        wr_cnt <= wr_cnt + 1;
        if (in_last) ended <= 1'b1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          wr_cnt <= '0; fstart <= '0; ended <= 1'b0; frames <= '0;
          state  <= S_COLLECT;
        end
        S_COLLECT: begin
          if (wr_cnt == fstart + WIN) begin
            n     <= '0;
            state <= S_LOAD;
          end else if (ended) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_LOAD: begin
          if (n == (LG+1)'(NFFT - 1)) begin
            b <= '0; stage <= '0;
            state <= S_FFT;
          end
          n <= n + 1'b1;
        end
        S_FFT: begin
          if (b == LG'(NFFT/2 - 1)) begin
            b <= '0;
            if (stage == ($clog2(LG+1))'(LG - 1)) begin
              n     <= '0;
              acc   <= '{default: '0};
              state <= S_MEL;
            end
            stage <= stage + 1'b1;
          end else begin
            b <= b + 1'b1;
          end
        end
        S_MEL: begin
          if (mq != 8'hFF) begin
            if (mq < 8'(NMELS)) acc[MW'(mq)]     <= acc[MW'(mq)]     + p16 * 64'(mw_up);
            if (mq != 8'd0)     acc[MW'(mq - 1)] <= acc[MW'(mq - 1)] + p16 * 64'(mw_dn);
          end
          if (n == (LG+1)'(NB - 1)) begin
            m     <= '0;
            state <= S_OUT;
          end
          n <= n + 1'b1;
        end
        S_OUT: if (out_ready) begin
          if (m == (MW+1)'(NMELS - 1)) begin
            frames <= frames + 1;
            fstart <= fstart + HOP;
            state  <= S_COLLECT;
          end
          m <= m + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
