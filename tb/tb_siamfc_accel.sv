// tb_siamfc_accel: end-to-end test of the accelerator at a reduced size.
//
// A 78x78 image (maps of 76 -> 38, 36 -> 18, 16 -> 8, 6, 4 and 2 pixels a side) and
// narrower layers (8, 8, 16, 16, 16, 16 channels) keep the run short while still
// exercising every stage: three pooling layers, threshold activation, the
// accumulator output of the last layer, neuron folding in every layer, and
// lane conversion in both directions (4 -> 8 gather, 16 -> 8 split) between
// layers. Two frames run back to back. The checks are in accel_tb_body.svh.
module tb_siamfc_accel;
  localparam int unsigned IMG = 78;
  localparam int unsigned COUTS [6] = '{8, 8, 16, 16, 16, 16};
  localparam int unsigned PES   [6] = '{4, 4, 4, 4, 16, 4};
  localparam int unsigned SIMDS [6] = '{3, 4, 8, 8, 16, 8};
  localparam int unsigned NFRAMES = 2;
  localparam longint MAX_FRAME_CYCLES = 160000;
  localparam int unsigned WATCHDOG = 600000;

  `include "accel_tb_body.svh"

  task automatic report_and_finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  siamfc_accel #(.IMG_DIM(IMG), .COUT(COUTS), .PE(PES), .SIMD(SIMDS)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .cfg);
endmodule
