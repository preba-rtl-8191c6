// tb_img_normalize: checks img_normalize against the real-valued formula
// y = (x/255 - mean_c)/std_c with the ImageNet statistics, in Q3.12 (scale
// 4096), tolerance 1 LSB, over all 256 values per channel and random pixels,
// with random output back-pressure. Also checks that no pixel is lost or
// duplicated (one-cycle latency, in-order).
module tb_img_normalize;
  import preba_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic               in_valid, in_ready, out_valid, out_ready;
  rgb_t               in_pix;
  logic signed [15:0] out_val [3];
  int checks = 0, failures = 0;
  real mean [3] = '{0.485, 0.456, 0.406};
  real sdev [3] = '{0.229, 0.224, 0.225};
  rgb_t sent [$];

  img_normalize dut (.*);

  initial begin
    in_valid = 0; out_ready = 0; in_pix = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin
        for (int i = 0; i < 600; i++) begin
          rgb_t p;
          p = (i < 256) ? '{r: 8'(i), g: 8'(255 - i), b: 8'(i * 7)} : rgb_t'($urandom);
          if ($urandom_range(3) == 0) begin @(negedge clk); in_valid = 0; end
          @(negedge clk);
          in_valid = 1; in_pix = p;
          #4;
          while (!in_ready) begin @(negedge clk); #4; end
          sent.push_back(p);
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        int got;
        got = 0;
        while (got < 600) begin
          @(negedge clk);
          out_ready = ($urandom_range(3) != 0);
          #4;
          if (out_valid && out_ready) begin
            rgb_t p;
            p = sent.pop_front();
            for (int c = 0; c < 3; c++) begin
              real x, r;
              x = (c == 0) ? p.r : (c == 1) ? p.g : p.b;
              r = (x / 255.0 - mean[c]) / sdev[c] * 4096.0;
              checks++;
              if (real'(out_val[c]) - r > 1.0 || r - real'(out_val[c]) > 1.0) begin
                failures++;
                if (failures < 10) $display("x=%0.0f c=%0d got %0d ref %0.2f", x, c, out_val[c], r);
              end
            end
            got++;
          end
        end
      end
    join
    checks++;
    if (sent.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
