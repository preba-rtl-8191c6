// img_normalize: Normalize unit of the computer-vision CU. Converts each 8-bit
// RGB pixel into three signed Q3.12 values y_c = (x_c/255 - mean_c)/std_c with
// the ImageNet per-channel mean and standard deviation.
//
// Each channel is one multiply and one subtract: y = (x*A_c - B_c + 128) >>> 8,
// with the Q20 constants A_c = 2^20/(255*std_c) and B_c = 2^20*mean_c/std_c from
// preba_pkg. One output register stage with valid/ready; a new pixel is accepted
// every cycle unless the output is stalled. Latency one cycle.
// The paper names the unit and the operation; the constants are the standard
// ImageNet statistics, and the fixed-point format is this design's choice.
module img_normalize
  import preba_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  rgb_t               in_pix,
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [15:0] out_val [3]   // 0 = R, 1 = G, 2 = B, Q3.12
);
  function automatic logic signed [15:0] norm(input logic [7:0] x, input int c);
    logic signed [31:0] v;
    v = $signed({24'b0, x}) * NORM_A[c] - NORM_B[c] + 32'sd128;
    return 16'(v >>> 8);
  endfunction

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_val   <= '{default: '0};
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_val[0] <= norm(in_pix.r, 0);
        out_val[1] <= norm(in_pix.g, 1);
        out_val[2] <= norm(in_pix.b, 2);
      end
    end
  end
endmodule
