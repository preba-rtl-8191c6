// tb_jpeg_decoder_model: behavioural stand-in for the JPEG decoder that sits
// beside each image CU, for testbenches only. It does not decode JPEG: it
// accepts an uncompressed test format on the same ports. Word 0 carries
// {height[31:16], width[15:0]} and is answered with the header handshake; every
// following word carries one pixel {8'b0, r, g, b}, returned on the pixel
// stream in order. Random gaps (GAP_PCT percent of cycles) on both sides.
module tb_jpeg_decoder_model
  import preba_pkg::*;
#(
  parameter int unsigned GAP_PCT = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  input  logic        in_last,
  output logic        hdr_valid,
  input  logic        hdr_ready,
  output logic [15:0] w,
  output logic [15:0] h,
  output logic        pix_valid,
  input  logic        pix_ready,
  output rgb_t        pix
);
  logic have_hdr, gap;
  int unsigned words = 0;

  always_ff @(posedge clk) gap <= ($urandom_range(99) < GAP_PCT);

  assign in_ready = !gap && (!have_hdr ? !hdr_valid : (!pix_valid || pix_ready));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_hdr  <= 1'b0;
      hdr_valid <= 1'b0;
      pix_valid <= 1'b0;
      w <= '0; h <= '0; pix <= '0;
    end else begin
      if (hdr_valid && hdr_ready) begin
        hdr_valid <= 1'b0;
        have_hdr  <= 1'b1;
      end
      if (pix_valid && pix_ready) pix_valid <= 1'b0;
      if (in_valid && in_ready) begin
        words <= words + 1;
        if (!have_hdr) begin
          w <= in_data[15:0];
          h <= in_data[31:16];
          hdr_valid <= 1'b1;
        end else begin
          pix       <= rgb_t'(in_data[23:0]);
          pix_valid <= 1'b1;
        end
        if (in_last) have_hdr <= 1'b0;
      end
    end
  end
endmodule
