// tb_preba_dpu_librispeech: the evaluated workload sizes on the DPU top at its
// default configuration. Audio: three utterances of 5, 15 and 25 s (the input
// lengths the speech-model study sweeps), sent at 16, 32 and 8 kHz, so all three
// Mel CUs run at once and each spectrogram (up to 2498 frames x 80 bands) is then
// normalised. Images: two ImageNet-sized JPEG stand-ins, 500x375 landscape and
// 378x507 portrait, resized to a 256 short side and cropped to 224x224x3.
// Checks (in tb_dpu_harness): every image value and every normalised value
// against floating point, the first two frames of each spectrogram against a
// floating-point DFT, completion kinds, tags and counts.
module tb_preba_dpu_librispeech;
  localparam int MAX_CYCLES = 12000000;   // watchdog
  tb_dpu_harness #(
    .NIMG(2), .IMG_W(500), .IMG_H(375), .SHORT(256), .CROP(224),
    .NAUD(3), .AUD_LEN(80000), .AUD_STEP(160000), .CHECK_FRAMES(2),
    .MEM_WORDS(1 << 22), .REQUIRE_MECH(0)
  ) u_h ();

  initial begin
    fork
      wait (u_h.finished);
      begin
        repeat (MAX_CYCLES) @(posedge u_h.clk);
        u_h.failures++;
        $display("watchdog expired");
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", u_h.checks, u_h.failures);
    $finish;
  end
endmodule
