// preba_dpu: top level of the preprocessing accelerator (DPU), an FPGA card
// attached to the inference server's PCIe bus as a co-processor of the host.
// It takes raw inputs (JPEG images, PCM audio) out of the card's global memory
// and writes back model-ready tensors, so the host CPU no longer preprocesses
// inputs for the GPU slices it feeds.
//
// Structure. NUM_IMG_CU image CUs (decode -> resize -> crop -> normalise),
// NUM_MEL_CU audio CUs (resample -> Mel spectrogram) and NUM_NORM_CU audio
// normalisation CUs. Each CU works on one single-input request at a time, tuned
// for latency; throughput comes from running many CUs side by side. A
// cmd_dispatcher holds the host's command queues and starts a free CU of the
// requested type; completions come back on the cpl port. All CUs share the
// global-memory port through a round-robin mem_arbiter.
//
// Request flow (host view):
//   image : write the JPEG into global memory, push {CU_IMG, src, len, dst,
//           256, 224}; on completion dst holds a 3x224x224 CHW tensor (Q3.12).
//   audio : write PCM samples, push {CU_MEL, src, len, tmp, in_rate, 16000};
//           on completion (result = frames*80 values) push {CU_NORM, tmp,
//           result, dst}; dst then holds the normalised spectrogram (Q5.10).
//           Splitting audio into two CU types lets the next spectrogram run
//           while the previous request is normalised.
//
// Ports left to the platform: the global-memory port (mem_*: the card's DRAM
// and its controller) and, per image CU, the JPEG decoder (dec_*: the CU
// streams the compressed words out and takes back the header and the RGB
// pixels). The host reaches cmd/cpl and memory through the PCIe shell.
// cu_busy shows which CUs are working; blocked[k] that requests of type k are
// waiting for a free CU.
//
// The paper presents separate image and audio DPU builds of the same card;
// this top holds both CU families in one design (either family can be left
// idle). CU counts are this design's choice.
module preba_dpu
  import preba_pkg::*;
#(
  parameter int unsigned NUM_IMG_CU  = 3,
  parameter int unsigned NUM_MEL_CU  = 3,
  parameter int unsigned NUM_NORM_CU = 2,
  parameter int unsigned MAX_IMG_W   = 4096
) (
  input  logic          clk,
  input  logic          rst_n,
  // host command / completion queues
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  cmd_t          cmd,
  output logic          cpl_valid,
  input  logic          cpl_ready,
  output cpl_t          cpl,
  // global memory
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output mem_req_t      mem_req,
  input  logic          mem_rsp_valid,
  input  logic [DW-1:0] mem_rsp_rdata,
  // JPEG decoders, one per image CU
  output logic          dec_in_valid  [NUM_IMG_CU],
  input  logic          dec_in_ready  [NUM_IMG_CU],
  output logic [31:0]   dec_in_data   [NUM_IMG_CU],
  output logic          dec_in_last   [NUM_IMG_CU],
  input  logic          dec_hdr_valid [NUM_IMG_CU],
  output logic          dec_hdr_ready [NUM_IMG_CU],
  input  logic [15:0]   dec_w         [NUM_IMG_CU],
  input  logic [15:0]   dec_h         [NUM_IMG_CU],
  input  logic          dec_pix_valid [NUM_IMG_CU],
  output logic          dec_pix_ready [NUM_IMG_CU],
  input  rgb_t          dec_pix       [NUM_IMG_CU],
  // status
  output logic          cu_busy [NUM_IMG_CU+NUM_MEL_CU+NUM_NORM_CU],
  output logic          blocked [3]
);
  localparam int unsigned NI = NUM_IMG_CU;
  localparam int unsigned NM = NUM_MEL_CU;
  localparam int unsigned NN = NUM_NORM_CU;
  localparam int unsigned NT = NI + NM + NN;

  logic        start  [NT];
  logic        done   [NT];
  logic [31:0] result [NT];
  cmd_t        img_cmd, mel_cmd, norm_cmd;

  cmd_dispatcher #(.NI(NI), .NM(NM), .NN(NN), .QDEPTH(8)) u_disp (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .cpl_valid, .cpl_ready, .cpl,
    .start, .img_cmd, .mel_cmd, .norm_cmd,
    .done, .result, .blocked
  );

  logic          m_valid [NT];
  logic          m_ready [NT];
  mem_req_t      m_req   [NT];
  logic          m_rsp   [NT];
  logic [DW-1:0] m_rdata;

  mem_arbiter #(.N(NT), .ID_DEPTH(64)) u_arb (
    .clk, .rst_n,
    .s_req_valid(m_valid), .s_req_ready(m_ready), .s_req(m_req),
    .s_rsp_valid(m_rsp), .s_rsp_rdata(m_rdata),
    .m_req_valid(mem_req_valid), .m_req_ready(mem_req_ready), .m_req(mem_req),
    .m_rsp_valid(mem_rsp_valid), .m_rsp_rdata(mem_rsp_rdata)
  );

  for (genvar i = 0; i < int'(NI); i++) begin : g_img
    img_cu #(.MAX_W(MAX_IMG_W)) u_cu (
      .clk, .rst_n,
      .start(start[i]), .src(img_cmd.src), .len(img_cmd.len), .dst(img_cmd.dst),
      .short_side(img_cmd.arg0[15:0]), .crop(img_cmd.arg1[15:0]),
      .busy(cu_busy[i]), .done(done[i]), .result(result[i]),
      .req_valid(m_valid[i]), .req_ready(m_ready[i]), .req(m_req[i]),
      .rsp_valid(m_rsp[i]), .rsp_rdata(m_rdata),
      .dec_in_valid(dec_in_valid[i]), .dec_in_ready(dec_in_ready[i]),
      .dec_in_data(dec_in_data[i]), .dec_in_last(dec_in_last[i]),
      .dec_hdr_valid(dec_hdr_valid[i]), .dec_hdr_ready(dec_hdr_ready[i]),
      .dec_w(dec_w[i]), .dec_h(dec_h[i]),
      .dec_pix_valid(dec_pix_valid[i]), .dec_pix_ready(dec_pix_ready[i]),
      .dec_pix(dec_pix[i])
    );
  end

  for (genvar i = 0; i < int'(NM); i++) begin : g_mel
    audio_mel_cu u_cu (
      .clk, .rst_n,
      .start(start[NI+i]), .src(mel_cmd.src), .len(mel_cmd.len), .dst(mel_cmd.dst),
      .in_rate(mel_cmd.arg0), .out_rate(mel_cmd.arg1),
      .busy(cu_busy[NI+i]), .done(done[NI+i]), .result(result[NI+i]),
      .req_valid(m_valid[NI+i]), .req_ready(m_ready[NI+i]), .req(m_req[NI+i]),
      .rsp_valid(m_rsp[NI+i]), .rsp_rdata(m_rdata)
    );
  end

  for (genvar i = 0; i < int'(NN); i++) begin : g_norm
    audio_norm_cu u_cu (
      .clk, .rst_n,
      .start(start[NI+NM+i]), .src(norm_cmd.src), .len(norm_cmd.len), .dst(norm_cmd.dst),
      .busy(cu_busy[NI+NM+i]), .done(done[NI+NM+i]), .result(result[NI+NM+i]),
      .req_valid(m_valid[NI+NM+i]), .req_ready(m_ready[NI+NM+i]), .req(m_req[NI+NM+i]),
      .rsp_valid(m_rsp[NI+NM+i]), .rsp_rdata(m_rdata)
    );
  end
endmodule
