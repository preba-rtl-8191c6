// tb_preba_dpu_full: full-size run of the DPU top with every parameter at its
// default. One ImageNet-sized request (500x375 JPEG stand-in, short side
// resized to 256, centre crop 224x224x3) and one 2.5 s, 16 kHz utterance
// (40000 samples -> 248 frames x 80 Mel bands -> Normalize) go through the
// command queue, the CUs and global memory. Every image output value and
// every normalised value is checked, plus the first three spectrogram frames
// against a floating-point DFT. Workload defaults and checks are in
// tb_dpu_harness.
module tb_preba_dpu_full;
  localparam int MAX_CYCLES = 4000000;   // watchdog
  tb_dpu_harness u_h ();

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
