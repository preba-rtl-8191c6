// audio_mel_cu: first audio computing unit (CU): Resample -> Mel spectrogram.
// One CU works on one request at a time. Several of these CUs run in parallel,
// and the separate normalisation CU (audio_norm_cu) finishes each request, so
// the next request's spectrogram can start while the previous one is being
// normalised.
//
// Operation. start latches src (PCM samples, one signed 16-bit sample in the
// low half of each word), len (sample count), dst, in_rate and out_rate. A
// mem_reader streams the samples through audio_resample into mel_spectrogram,
// and each Mel value is written to dst + k (frame-major: frame f, band m at
// k = f*NMELS + m). Reader and writer share the CU's memory port through a
// two-way mem_arbiter. done pulses once all samples are consumed, the
// spectrogram has finished and every write has been accepted; result is the
// number of words written (frames*NMELS).
// The paper gives the split into this CU and a separate Normalize CU, with
// global memory on both sides; the command and data formats are this design's.
module audio_mel_cu
  import preba_pkg::*;
#(
  parameter int unsigned WIN   = 400,
  parameter int unsigned HOP   = 160,
  parameter int unsigned NFFT  = 512,
  parameter int unsigned NMELS = 80
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   src,
  input  logic [31:0]   len,
  input  logic [31:0]   dst,
  input  logic [31:0]   in_rate,
  input  logic [31:0]   out_rate,
  output logic          busy,
  output logic          done,
  output logic [31:0]   result,
  output logic          req_valid,
  input  logic          req_ready,
  output mem_req_t      req,
  input  logic          rsp_valid,
  input  logic [DW-1:0] rsp_rdata
);
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

  logic go;
  assign go = start && !busy;

  logic          rd_done, rd_valid, rd_ready, rd_last;
  logic [DW-1:0] rd_data;
  mem_reader #(.DEPTH(16)) u_rd (
    .clk, .rst_n, .start(go), .base(src), .count(len),
    .busy(), .done(rd_done),
    .req_valid(a_valid[0]), .req_ready(a_ready[0]), .req(a_req[0]),
    .rsp_valid(a_rsp[0]), .rsp_rdata(a_rdata),
    .out_valid(rd_valid), .out_ready(rd_ready), .out_data(rd_data), .out_last(rd_last)
  );

  logic               rs_done, rs_valid, rs_ready, rs_last;
  logic signed [15:0] rs_sample;
  audio_resample u_resample (
    .clk, .rst_n, .start(go), .n_in(len), .in_rate(in_rate), .out_rate(out_rate),
    .busy(), .done(rs_done),
    .in_valid(rd_valid), .in_ready(rd_ready), .in_sample(rd_data[15:0]),
    .out_valid(rs_valid), .out_ready(rs_ready), .out_sample(rs_sample), .out_last(rs_last)
  );

  logic        mel_done, mel_valid, mel_ready;
  logic [31:0] mel_data, mel_frames;
  mel_spectrogram #(.WIN(WIN), .HOP(HOP), .NFFT(NFFT), .NMELS(NMELS)) u_mel (
    .clk, .rst_n, .start(go), .busy(), .done(mel_done), .frames(mel_frames),
    .in_valid(rs_valid), .in_ready(rs_ready), .in_sample(rs_sample), .in_last(rs_last),
    .out_valid(mel_valid), .out_ready(mel_ready), .out_data(mel_data)
  );

  logic [31:0] r_dst, writes;
  logic        rd_seen, rs_seen, mel_seen;

  assign a_valid[1] = mel_valid;
  assign a_req[1]   = '{we: 1'b1, addr: r_dst + writes, wdata: mel_data};
  assign mel_ready  = a_ready[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; result <= '0;
      r_dst <= '0; writes <= '0; rd_seen <= 1'b0; rs_seen <= 1'b0; mel_seen <= 1'b0;
    end else begin
      done <= 1'b0;
      if (go) begin
        busy <= 1'b1; r_dst <= dst; writes <= '0;
        rd_seen <= 1'b0; rs_seen <= 1'b0; mel_seen <= 1'b0;
      end else if (busy) begin
        if (rd_done)  rd_seen  <= 1'b1;
        if (rs_done)  rs_seen  <= 1'b1;
        if (mel_done) mel_seen <= 1'b1;
        if (a_valid[1] && a_ready[1]) writes <= writes + 1;
        if (rd_seen && rs_seen && mel_seen && writes == mel_frames * NMELS) begin
          busy   <= 1'b0;
          done   <= 1'b1;
          result <= writes;
        end
      end
    end
  end
endmodule
