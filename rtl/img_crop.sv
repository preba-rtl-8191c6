// img_crop: Crop unit of the computer-vision CU. Keeps the centred
// crop x crop window (224 x 224 for the usual ImageNet preprocessing) of an
// in_w x in_h raster stream and drops every other pixel.
//
// The window starts at x0 = (in_w - crop)/2, y0 = (in_h - crop)/2 (floor); if a
// side is shorter than the crop, the window starts at 0 and is limited to the
// image. The unit is a pure stream filter: it tracks the raster position of each
// input pixel, forwards pixels in_win the window (valid/ready, one per cycle,
// no added latency) and swallows the others without waiting for the output.
// Start latches the sizes; done pulses when the last input pixel is consumed.
// The paper names the unit; the centring rule is this design's choice.
module img_crop
  import preba_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] in_w,
  input  logic [15:0] in_h,
  input  logic [15:0] crop,
  output logic        busy,
  output logic        done,
  input  logic        in_valid,
  output logic        in_ready,
  input  rgb_t        in_pix,
  output logic        out_valid,
  input  logic        out_ready,
  output rgb_t        out_pix
);
  logic [15:0] w, h, x0, y0, x1, y1, x, y;
  logic        in_win, fire;

  assign in_win    = (x >= x0) && (x < x1) && (y >= y0) && (y < y1);
  assign out_valid = busy && in_valid && in_win;
  assign out_pix   = in_pix;
  assign in_ready  = busy && (!in_win || out_ready);
  assign fire      = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      w <= '0; h <= '0; x0 <= '0; y0 <= '0; x1 <= '0; y1 <= '0; x <= '0; y <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= (in_w != 0) && (in_h != 0);
        done <= (in_w == 0) || (in_h == 0);
        w <= in_w;
        h <= in_h;
        x <= '0;
        y <= '0;
        x0 <= (in_w > crop) ? (in_w - crop) >> 1 : 16'd0;
        y0 <= (in_h > crop) ? (in_h - crop) >> 1 : 16'd0;
        x1 <= (in_w > crop) ? ((in_w - crop) >> 1) + crop : in_w;
        y1 <= (in_h > crop) ? ((in_h - crop) >> 1) + crop : in_h;
      end else if (fire) begin
        if (x == w - 1) begin
          x <= '0;
          y <= y + 1;
          if (y == h - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end else begin
          x <= x + 1;
        end
      end
    end
  end
endmodule
