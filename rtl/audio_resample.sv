// audio_resample: Resample unit of the audio Mel CU. Converts a stream of
// n_in signed 16-bit samples taken at in_rate Hz into the model's rate out_rate
// Hz (16 kHz for the speech models studied) by linear interpolation.
//
// start latches n_in, in_rate and out_rate; a sequential divider then computes
// the Q16 step in_rate/out_rate (48 cycles). Output
// sample n sits at source position t = n*step: with x0 = floor(t) and
// fraction f, y = s[x0] + round((s[x0+1] - s[x0]) * f / 2^16), where s[x0+1] is
// replaced by s[x0] past the end of the input. Outputs are produced for every
// t < n_in, so equal rates pass the stream through unchanged. Only the two most
// recent input samples are held; an input sample is accepted only when the next
// output needs it, and samples after the last useful one are drained.
// Streams are valid/ready; out_last marks the final output; done pulses when the
// last input has been consumed.
// The paper names the unit; linear interpolation is this design's simplest
// choice (library resamplers use longer band-limited filters).
module audio_resample (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        n_in,
  input  logic [31:0]        in_rate,
  input  logic [31:0]        out_rate,
  output logic               busy,
  output logic               done,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [15:0] in_sample,
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [15:0] out_sample,
  output logic               out_last
);
  typedef enum logic [1:0] {S_IDLE, S_DIV, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [31:0]        total, rcv;      // samples expected / received
  logic [47:0]        t, step;         // Q16 source position, step
  logic signed [15:0] prev, cur;       // samples rcv-2 and rcv-1
  logic               div_start, div_done, div_issued;
  logic [47:0]        div_q;
  logic [31:0]        r_in_rate, r_out_rate;   // rates latched at start

  seq_div #(.W(48)) u_div (
    .clk, .rst_n, .start(div_start),
    .dividend({r_in_rate, 16'b0}), .divisor({16'b0, r_out_rate}),
    .busy(), .done(div_done), .quotient(div_q)
  );
  assign div_start = (state == S_DIV) && !div_issued;

  logic [31:0] x0;
  logic [31:0] need;          // samples needed for the current output
  logic        more;          // another output exists
  logic        have;
  logic signed [15:0] s0, s1;
  logic signed [33:0] prod;
  logic signed [17:0] diff;

  always_comb begin
    x0   = t[47:16];
    more = (x0 < total);
    need = (x0 + 2 < total) ? x0 + 2 : total;
    have = (rcv >= need);
    // once rcv == x0+2, cur is s[x0+1] and prev is s[x0]; at the end cur is s[x0]
    if (x0 + 1 < total) begin
      s0 = prev;
      s1 = cur;
    end else begin
      s0 = cur;
      s1 = cur;
    end
    diff = 18'(s1) - 18'(s0);
    prod = diff * $signed({2'b0, t[15:0]}) + 34'sd32768;
    out_sample = 16'(s0 + 16'(prod >>> 16));
    out_last   = ((t + step) >> 16) >= 48'(total);
  end

  assign out_valid = (state == S_RUN) && more && have;
  assign in_ready  = ((state == S_RUN) && more && !have) || (state == S_DRAIN);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; div_issued <= 1'b0;
      total <= '0; rcv <= '0; t <= '0; step <= '0; prev <= '0; cur <= '0;
      r_in_rate <= '0; r_out_rate <= '0;
    end else begin
      done <= 1'b0;
      if (div_start) div_issued <= 1'b1;
      if (in_valid && in_ready) begin
        prev <= cur;
        cur  <= in_sample;
        rcv  <= rcv + 1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          total <= n_in; rcv <= '0; t <= '0;
          r_in_rate <= in_rate; r_out_rate <= out_rate;
          state <= (n_in == 0) ? S_IDLE : S_DIV;
          done  <= (n_in == 0);
        end
        S_DIV: if (div_done) begin
          div_issued <= 1'b0;
          step  <= div_q;
          state <= S_RUN;
        end
        S_RUN: begin
          if (out_valid && out_ready) begin
            t <= t + step;
            if (out_last) state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          if (rcv >= total || (in_valid && rcv + 1 >= total)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
