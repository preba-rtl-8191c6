// tb_img_cu: end-to-end check of one image CU with the behavioural global
// memory and the stand-in decoder. Test images in the stand-in's raw format
// are placed in memory; the CU is started with a resize short side and crop
// size (small, to keep the run short). The output tensor must be CHW planar,
// crop x crop per channel, every value within the error bound of the
// floating-point reference (real bilinear resize, centre crop, ImageNet
// normalisation; bound = 2.5 resize LSB expressed in Q3.12, plus 2), result =
// 3*crop*crop, and the word after the tensor untouched.
module tb_img_cu;
  import preba_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic          start, busy, done, req_valid, req_ready, rsp_valid;
  logic [31:0]   src, len, dst, result;
  logic [15:0]   short_side, crop;
  mem_req_t      req;
  logic [DW-1:0] rsp_rdata;
  logic          dec_in_valid, dec_in_ready, dec_in_last, dec_hdr_valid, dec_hdr_ready;
  logic          dec_pix_valid, dec_pix_ready;
  logic [31:0]   dec_in_data;
  logic [15:0]   dec_w, dec_h;
  rgb_t          dec_pix;
  int checks = 0, failures = 0;
  real mean [3] = '{0.485, 0.456, 0.406};
  real sdev [3] = '{0.229, 0.224, 0.225};

  img_cu #(.MAX_W(128)) dut (.*);
  tb_global_mem #(.WORDS(32768), .LATENCY(8), .STALL_PCT(20)) u_mem (.*);
  tb_jpeg_decoder_model u_dec (
    .clk, .rst_n, .in_valid(dec_in_valid), .in_ready(dec_in_ready), .in_data(dec_in_data),
    .in_last(dec_in_last), .hdr_valid(dec_hdr_valid), .hdr_ready(dec_hdr_ready),
    .w(dec_w), .h(dec_h), .pix_valid(dec_pix_valid), .pix_ready(dec_pix_ready), .pix(dec_pix));

  function automatic real chan(int w, int x, int y, int c);
    logic [31:0] v;
    v = u_mem.mem[1 + y*w + x];
    return (c == 0) ? real'(v[23:16]) : (c == 1) ? real'(v[15:8]) : real'(v[7:0]);
  endfunction

  task automatic run(int w, int h, int ss, int cs);
    int ow, oh, x0, y0, D;
    D = 16384;
    ow = (w <= h) ? ss : (w * ss) / h;
    oh = (w <= h) ? (h * ss) / w : ss;
    x0 = (ow - cs) / 2; y0 = (oh - cs) / 2;
    u_mem.mem[0] = {16'(h), 16'(w)};
    for (int i = 0; i < w*h; i++) u_mem.mem[1 + i] = {8'h0, 24'($urandom)};
    u_mem.mem[D + 3*cs*cs] = 32'hCAFE_F00D;
    @(negedge clk);
    src = 0; len = 1 + w*h; dst = D; short_side = 16'(ss); crop = 16'(cs); start = 1;
    @(negedge clk); start = 0;
    fork
      @(posedge done);
      repeat (50 * w * h + 5000) @(posedge clk);
    join_any
    disable fork;
    @(negedge clk);
    checks++;
    if (result != 3*cs*cs) begin failures++; $display("result %0d", result); end
    for (int c = 0; c < 3; c++)
      for (int y = 0; y < cs; y++)
        for (int x = 0; x < cs; x++) begin
          real sx, sy, fx, fy, rv, r, tol;
          int xa, xb, ya, yb, got;
          sx = (x0 + x + 0.5) * w / ow - 0.5; if (sx < 0) sx = 0;
          sy = (y0 + y + 0.5) * h / oh - 0.5; if (sy < 0) sy = 0;
          xa = int'($floor(sx)); ya = int'($floor(sy));
          if (xa >= w-1) begin xa = w-1; xb = w-1; fx = 0; end else begin xb = xa+1; fx = sx - xa; end
          if (ya >= h-1) begin ya = h-1; yb = h-1; fy = 0; end else begin yb = ya+1; fy = sy - ya; end
          rv = (chan(w,xa,ya,c)*(1-fx) + chan(w,xb,ya,c)*fx)*(1-fy) + (chan(w,xa,yb,c)*(1-fx) + chan(w,xb,yb,c)*fx)*fy;
          r  = (rv / 255.0 - mean[c]) / sdev[c] * 4096.0;
          tol = 2.5 / 255.0 / sdev[c] * 4096.0 + 2.0;
          got = int'($signed(u_mem.mem[D + c*cs*cs + y*cs + x]));
          checks++;
          if (real'(got) - r > tol || r - real'(got) > tol) begin
            failures++;
            if (failures < 10) $display("%0dx%0d c%0d (%0d,%0d): got %0d ref %0.1f", w, h, c, x, y, got, r);
          end
        end
    checks++;
    if (u_mem.mem[D + 3*cs*cs] != 32'hCAFE_F00D) failures++;
    checks++;
    if (busy) failures++;
  endtask

  initial begin
    start = 0; src = 0; len = 0; dst = 0; short_side = 0; crop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(40, 30, 20, 16);
    run(24, 50, 16, 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
