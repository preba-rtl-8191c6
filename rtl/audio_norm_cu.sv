// audio_norm_cu: second audio computing unit (CU), the Normalize unit. It
// normalises all n values of one request (the Mel spectrogram written by an
// audio_mel_cu) to zero mean and unit variance, in the three sub-steps the
// normalisation needs, each a full pass over the request in global memory:
//   pass 1: sum of all values                      -> mean
//   pass 2: sum of squared deviations from the mean -> variance -> std
//   pass 3: y = (x - mean) / std for every value, written to dst
// Because step 3 needs the statistics of the whole request, this unit cannot
// start before the spectrogram is complete; keeping it in a CU of its own lets
// the Mel CUs move on to the next request meanwhile.
//
// Arithmetic: inputs are unsigned 32-bit values. mean is kept with 8 fraction
// bits (mean_q8 = floor(2^8*sum/n)), deviations d = 2^8*x - mean_q8, variance
// var_q16 = floor(sum(d^2)/n), std_q8 = floor(sqrt(var_q16)), and the
// reciprocal r = floor(2^74/std_q8), so that y_q10 = (d*r) >>> 64 = 2^10*d/std.
// Outputs are signed Q5.10, saturated to 16 bits and sign-extended to 32-bit
// words. A zero standard deviation gives all-zero outputs.
// One 112-bit sequential divider (three divisions) and one square-root unit
// are shared; the passes run one word per cycle when memory keeps up.
// done pulses once the last output write has been accepted; result = n.
// The three sub-steps follow the paper; the number formats are this design's.
module audio_norm_cu
  import preba_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   src,
  input  logic [31:0]   len,
  input  logic [31:0]   dst,
  output logic          busy,
  output logic          done,
  output logic [31:0]   result,
  output logic          req_valid,
  input  logic          req_ready,
  output mem_req_t      req,
  input  logic          rsp_valid,
  input  logic [DW-1:0] rsp_rdata
);
  localparam int unsigned XW = 112;

  typedef enum logic [3:0] {S_IDLE, S_P1, S_DIV1, S_P2, S_DIV2, S_SQRT, S_DIV3, S_P3, S_FIN} state_e;
  state_e state;

  logic          a_valid [2];
  logic          a_ready [2];
  mem_req_t      a_req   [2];
  logic          a_rsp   [2];
  logic [DW-1:0] a_rdata;

  mem_arbiter #(.N(2), .ID_DEPTH(16)) u_arb (
    .clk, .rst_n,
    .s_req_valid(a_valid), .s_req_ready(a_ready), .s_req(a_req),
    .s_rsp_valid(a_rsp), .s_rsp_rdata(a_rdata),
    .m_req_valid(req_valid), .m_req_ready(req_ready), .m_req(req),
    .m_rsp_valid(rsp_valid), .m_rsp_rdata(rsp_rdata)
  );

  logic [31:0]   r_src, r_dst, n, writes;
  logic          rd_start, rd_done, rd_valid, rd_ready;
  logic [DW-1:0] rd_data;
  logic          step_issued;

  mem_reader #(.DEPTH(16)) u_rd (
    .clk, .rst_n, .start(rd_start), .base(r_src), .count(n),
    .busy(), .done(rd_done),
    .req_valid(a_valid[0]), .req_ready(a_ready[0]), .req(a_req[0]),
    .rsp_valid(a_rsp[0]), .rsp_rdata(a_rdata),
    .out_valid(rd_valid), .out_ready(rd_ready), .out_data(rd_data), .out_last()
  );

  logic [XW-1:0]   sum, sumsq, mean_q8, var_q16, recip;
  logic [XW/2-1:0] std_q8;

  // divider and square root
  logic          div_start, div_done, sq_start, sq_done;
  logic [XW-1:0] div_a, div_b, div_q;
  logic [XW/2-1:0] sq_root;
  seq_div #(.W(XW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(div_a), .divisor(div_b),
    .busy(), .done(div_done), .quotient(div_q)
  );
  seq_isqrt #(.W(XW)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .radicand(var_q16),
    .busy(), .done(sq_done), .root(sq_root)
  );

  always_comb begin
    div_a = '0;
    div_b = XW'(1);
    unique case (state)
      S_DIV1:  begin div_a = sum << 8;          div_b = XW'(n);      end
      S_DIV2:  begin div_a = sumsq;             div_b = XW'(n);      end
      S_DIV3:  begin div_a = XW'(1) << 74;      div_b = XW'(std_q8); end
      default: ;
    endcase
  end
  assign div_start = (state inside {S_DIV1, S_DIV2, S_DIV3}) && !step_issued;
  assign sq_start  = (state == S_SQRT) && !step_issued;

  // deviation of the current word and its normalised value
  logic signed [42:0]  dev;
  logic [85:0]         dev2;
  logic signed [119:0] prod;
  logic signed [55:0]  yfull;
  logic signed [15:0]  y;
  always_comb begin
    dev   = $signed({3'b0, rd_data, 8'b0}) - $signed({1'b0, mean_q8[41:0]});
    dev2  = 86'(dev * dev);
    prod  = 120'(dev) * $signed({1'b0, recip[74:0]});
    yfull = 56'(prod >>> 64);
    if (yfull > 56'sd32767)       y = 16'sh7FFF;
    else if (yfull < -56'sd32768) y = 16'sh8000;
    else                          y = 16'(yfull);
  end

  assign rd_ready   = (state == S_P1) || (state == S_P2) || ((state == S_P3) && a_ready[1]);
  assign a_valid[1] = (state == S_P3) && rd_valid;
  assign a_req[1]   = '{we: 1'b1, addr: r_dst + writes, wdata: 32'(y)};
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; result <= '0; rd_start <= 1'b0; step_issued <= 1'b0;
      r_src <= '0; r_dst <= '0; n <= '0; writes <= '0;
      sum <= '0; sumsq <= '0; mean_q8 <= '0; var_q16 <= '0; recip <= '0; std_q8 <= '0;
    end else begin
      done     <= 1'b0;
      rd_start <= 1'b0;
      if (div_start || sq_start) step_issued <= 1'b1;
      if (div_done || sq_done)   step_issued <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          r_src <= src; r_dst <= dst; n <= len; writes <= '0;
          sum <= '0; sumsq <= '0;
          if (len == 0) done <= 1'b1;
          else begin
            rd_start <= 1'b1;
            state    <= S_P1;
          end
        end
        S_P1: begin
          if (rd_valid) sum <= sum + XW'(rd_data);
          if (rd_done) state <= S_DIV1;
        end
        S_DIV1: if (div_done) begin
          mean_q8  <= div_q;
          rd_start <= 1'b1;
          state    <= S_P2;
        end
        S_P2: begin
          if (rd_valid) sumsq <= sumsq + XW'(dev2);
          if (rd_done) state <= S_DIV2;
        end
        S_DIV2: if (div_done) begin var_q16 <= div_q; state <= S_SQRT; end
        S_SQRT: if (sq_done) begin
          std_q8 <= sq_root;
          state  <= (sq_root == '0) ? S_P3 : S_DIV3;
          recip  <= '0;
          if (sq_root == '0) rd_start <= 1'b1;
        end
        S_DIV3: if (div_done) begin
          recip    <= div_q;
          rd_start <= 1'b1;
          state    <= S_P3;
        end
        S_P3: begin
          if (a_valid[1] && a_ready[1]) writes <= writes + 1;
          if (rd_done) state <= S_FIN;
        end
        S_FIN: begin
          state  <= S_IDLE;
          done   <= 1'b1;
          result <= writes;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
