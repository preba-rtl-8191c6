// tb_img_resize: checks img_resize against a floating-point bilinear model.
// Several image shapes are pushed through (down-scaling in both orientations,
// up-scaling, a 1-pixel-wide edge case) with random gaps on the input stream and
// random back-pressure on the output. Checks: output size (shorter side equals
// short_side, longer side floor(long*short_side/short)), pixel count, and every
// channel of every pixel within 2 LSB of the real-valued half-pixel-centre
// bilinear interpolation.
module tb_img_resize;
  import preba_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, busy, done, dims_valid;
  logic [15:0] in_w, in_h, short_side, out_w, out_h;
  logic        in_valid, in_ready, out_valid, out_ready;
  rgb_t        in_pix, out_pix;
  int checks = 0, failures = 0;

  img_resize #(.MAX_W(64)) dut (.*);

  rgb_t img [64*64];

  function automatic real pixel_ch(int x, int y, int c, int w);
    rgb_t p;
    p = img[y*w + x];
    return (c == 0) ? real'(p.r) : (c == 1) ? real'(p.g) : real'(p.b);
  endfunction

  task automatic run(int w, int h, int ss);
    int ow, oh, got;
    int idx;
    ow = (w <= h) ? ss : (w * ss) / h;
    oh = (w <= h) ? (h * ss) / w : ss;
    for (int i = 0; i < w*h; i++) img[i] = rgb_t'($urandom);
    @(negedge clk);
    in_w = 16'(w); in_h = 16'(h); short_side = 16'(ss); start = 1;
    @(negedge clk); start = 0;
    fork
      begin // input driver
        idx = 0;
        while (idx < w*h) begin
          @(negedge clk);
          in_valid = ($urandom_range(3) != 0);
          in_pix   = img[idx];
          #4;
          if (in_valid && in_ready) idx++;
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin // output checker
        got = 0;
        while (got < ow*oh) begin
          @(negedge clk);
          out_ready = ($urandom_range(3) != 0);
          #4;
          if (out_valid && out_ready) begin
            int ox, oy, x0, x1, y0, y1;
            real sx, sy, fx, fy, ref_v, v;
            ox = got % ow; oy = got / ow;
            sx = (ox + 0.5) * w / ow - 0.5; if (sx < 0) sx = 0;
            sy = (oy + 0.5) * h / oh - 0.5; if (sy < 0) sy = 0;
            x0 = int'($floor(sx)); y0 = int'($floor(sy));
            if (x0 >= w-1) begin x0 = w-1; x1 = w-1; fx = 0; end else begin x1 = x0+1; fx = sx - x0; end
            if (y0 >= h-1) begin y0 = h-1; y1 = h-1; fy = 0; end else begin y1 = y0+1; fy = sy - y0; end
            for (int c = 0; c < 3; c++) begin
              ref_v = (pixel_ch(x0,y0,c,w)*(1-fx) + pixel_ch(x1,y0,c,w)*fx)*(1-fy)
                    + (pixel_ch(x0,y1,c,w)*(1-fx) + pixel_ch(x1,y1,c,w)*fx)*fy;
              v = (c == 0) ? real'(out_pix.r) : (c == 1) ? real'(out_pix.g) : real'(out_pix.b);
              checks++;
              if (v - ref_v > 2.0 || ref_v - v > 2.0) begin
                failures++;
                if (failures < 10) $display("mismatch %0dx%0d px(%0d,%0d) c%0d: got %0.0f ref %0.2f", w, h, ox, oy, c, v, ref_v);
              end
            end
            got++;
          end
        end
        @(negedge clk);
        out_ready = 0;
      end
    join
    checks++;
    if (out_w != 16'(ow) || out_h != 16'(oh)) begin
      failures++;
      $display("size mismatch %0dx%0d: got %0dx%0d ref %0dx%0d", w, h, out_w, out_h, ow, oh);
    end
    wait (!busy);
    checks++;
    if (out_valid) failures++;
  endtask

  initial begin
    start = 0; in_valid = 0; out_ready = 0; in_pix = '0; in_w = 0; in_h = 0; short_side = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(37, 23, 16);   // landscape, down-scale
    run(20, 50, 8);    // portrait, strong down-scale
    run(10, 12, 24);   // up-scale
    run(64, 64, 64);   // identity
    run(1, 5, 3);      // degenerate width
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
