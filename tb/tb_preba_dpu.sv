// tb_preba_dpu: end-to-end test of the DPU top at its default size (3 image
// CUs, 3 Mel CUs, 2 Normalize CUs). Six image requests (40x30 and growing,
// landscape and portrait, one needing up-scaling; resize to 24, crop 20) and
// six audio requests (900..2565 samples at 16 kHz equivalent, sent at 16, 32
// and 8 kHz) are queued at once, so requests must wait for free CUs and CUs of
// each type run concurrently. Each finished spectrogram is normalised by a
// Normalize CU, overlapping with Mel work of other requests. Image sizes are
// scaled down from ImageNet's so the run is short; the datapath is identical.
// All checking and the mechanism counters live in tb_dpu_harness; the test
// fails if any mechanism (waiting for a CU, concurrent CUs, Mel/Normalize
// overlap, memory back-pressure, resampling, up- and down-scaling) never
// happens.
module tb_preba_dpu;
  localparam int MAX_CYCLES = 1500000;   // watchdog
  tb_dpu_harness #(
    .NIMG(6), .IMG_W(40), .IMG_H(30), .SHORT(24), .CROP(20),
    .NAUD(6), .AUD_LEN(900), .CHECK_FRAMES(2),
    .MEM_WORDS(1 << 17), .REQUIRE_MECH(1)
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
