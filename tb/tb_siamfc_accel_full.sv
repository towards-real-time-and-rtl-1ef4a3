// tb_siamfc_accel_full: the accelerator at its default size and folding, on
// three search regions back to back, as a three-scale tracker sends them for
// each video frame.
//
// Random 238x238x3 images pass through all six layers with random weights and
// thresholds; all 3 x 22x22x128 output values are compared with the integer
// model. The first frame's latency, from the first pixel accepted to the last
// feature sent, must be below 2,039,567 cycles: the 49.03 frames per second
// measured for this folding at a 100 MHz clock. The later frames must follow
// about one slowest-layer period (1,002,528 cycles) apart. The checks are in
// accel_tb_body.svh.
module tb_siamfc_accel_full;
  localparam int unsigned IMG = finn_pkg::ROI_DIM;
  localparam int unsigned COUTS [6] = '{64, 64, 128, 128, 128, 128};
  localparam int unsigned PES   [6] = '{32, 32, 32, 32, 32, 32};
  localparam int unsigned SIMDS [6] = '{3, 16, 16, 16, 16, 16};
  localparam int unsigned NFRAMES = 3;
  localparam longint MAX_FRAME_CYCLES = 2039567;
  localparam int unsigned WATCHDOG = 5000000;

  `include "accel_tb_body.svh"

  task automatic report_and_finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  siamfc_accel dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .cfg);
endmodule
