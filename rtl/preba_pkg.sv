// preba_pkg: types and constants shared by the preprocessing accelerator (DPU).
//
// The DPU is a set of computing units (CUs) on an FPGA card. The host writes raw
// inputs into the card's global memory, queues a command naming a CU type and the
// buffers, and gets a completion back once the CU has written the preprocessed
// tensor into global memory. Everything here is this design's own encoding: the
// paper names the pieces (command queues, buffers, global memory, CU types) but
// not their formats.
//
// Global memory port: 32-bit words, word addresses. A request (mem_req_t) is
// transferred when valid and ready are both high; reads are answered in order,
// one rsp_valid pulse per read, and the requester must always accept a response.
package preba_pkg;

  localparam int unsigned AW = 32;   // word address width
  localparam int unsigned DW = 32;   // data word width

  typedef struct packed {
    logic          we;
    logic [AW-1:0] addr;
    logic [DW-1:0] wdata;
  } mem_req_t;

  // CU types. IMG: decode/resize/crop/normalize. MEL: resample + Mel spectrogram.
  // NORM: audio normalisation (mean, variance, scale).
  typedef enum logic [1:0] {
    CU_IMG  = 2'd0,
    CU_MEL  = 2'd1,
    CU_NORM = 2'd2
  } cu_kind_e;

  // Host command. Field use per kind:
  //   CU_IMG : src = JPEG words, len = word count, dst = output tensor,
  //            arg0 = resize short side (256), arg1 = crop size (224)
  //   CU_MEL : src = 16-bit PCM (one sample per word), len = sample count,
  //            dst = output, arg0 = input sample rate (Hz), arg1 = output rate (Hz)
  //   CU_NORM: src = values, len = value count, dst = output; arg0/arg1 unused
  typedef struct packed {
    cu_kind_e      kind;
    logic [7:0]    tag;
    logic [31:0]   src;
    logic [31:0]   len;
    logic [31:0]   dst;
    logic [31:0]   arg0;
    logic [31:0]   arg1;
  } cmd_t;

  // Completion: echoes kind and tag; result = number of words the CU wrote.
  typedef struct packed {
    cu_kind_e    kind;
    logic [7:0]  tag;
    logic [31:0] result;
  } cpl_t;

  typedef struct packed {
    logic [7:0] r;
    logic [7:0] g;
    logic [7:0] b;
  } rgb_t;

  // Image normalisation y = (x/255 - mean_c)/std_c with the ImageNet mean
  // (0.485, 0.456, 0.406) and std (0.229, 0.224, 0.225), computed as
  // y_q12 = (x*NORM_A[c] - NORM_B[c] + 128) >>> 8, where
  // NORM_A[c] = round(2^20/(255*std_c)) and NORM_B[c] = round(2^20*mean_c/std_c).
  // Index 0 = R, 1 = G, 2 = B.
  localparam int NORM_A [3] = '{17957, 18357, 18276};
  localparam int NORM_B [3] = '{2220783, 2134601, 1892097};

endpackage
