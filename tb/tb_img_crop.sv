// tb_img_crop: checks img_crop. Random raster images of several sizes are
// streamed in with random gaps and output back-pressure; the output must be
// exactly the centred crop x crop window (start (in-crop)/2, floor) in raster
// order, and the unit must finish after the last input pixel. Also checks a
// crop larger than the image (window clipped to the image).
module tb_img_crop;
  import preba_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        start, busy, done, in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_w, in_h, crop;
  rgb_t        in_pix, out_pix;
  int checks = 0, failures = 0;

  img_crop dut (.*);

  task automatic run(int w, int h, int c);
    int x0, y0, cw, ch, got, idx;
    x0 = (w > c) ? (w - c) / 2 : 0;  cw = (w > c) ? c : w;
    y0 = (h > c) ? (h - c) / 2 : 0;  ch = (h > c) ? c : h;
    @(negedge clk);
    in_w = 16'(w); in_h = 16'(h); crop = 16'(c); start = 1;
    @(negedge clk); start = 0;
    fork
      begin
        idx = 0;
        while (idx < w*h) begin
          @(negedge clk);
          in_valid = ($urandom_range(3) != 0);
          // encode the position into the pixel
          in_pix = '{r: 8'(idx % w), g: 8'(idx / w), b: 8'(idx)};
          #4;
          if (in_valid && in_ready) idx++;
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        got = 0;
        while (got < cw*ch) begin
          @(negedge clk);
          out_ready = ($urandom_range(2) != 0);
          #4;
          if (out_valid && out_ready) begin
            checks++;
            if (out_pix.r != 8'(x0 + got % cw) || out_pix.g != 8'(y0 + got / cw)) begin
              failures++;
              if (failures < 10) $display("crop %0dx%0d: pixel %0d got (%0d,%0d)", w, h, got, out_pix.r, out_pix.g);
            end
            got++;
          end
        end
        @(negedge clk);
        out_ready = 1;
      end
    join
    repeat (3) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy after %0dx%0d", w, h); end
  endtask

  initial begin
    start = 0; in_valid = 0; out_ready = 0; in_pix = '0; in_w = 0; in_h = 0; crop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(40, 30, 20);
    run(33, 27, 24);
    run(25, 60, 25);
    run(10, 12, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
