// tb_siamfc_accel_v1: end-to-end test of the accelerator with the full channel
// counts and folding V1, the least parallel folding: (PE, SIMD) = (32,3) (32,16) (16,16) (8,16) (8,16) (8,8).
// Lane conversion here splits 32 -> 16 and gathers 8 -> 16; the last layer is
// the slowest one per pixel (2304 cycles).
// A 78x78 input keeps the run short (2x2x128 features out); two frames run back
// to back and every output value is checked. The checks are in accel_tb_body.svh.
module tb_siamfc_accel_v1;
  localparam int unsigned IMG = 78;
  localparam int unsigned COUTS [6] = '{64, 64, 128, 128, 128, 128};
  localparam int unsigned PES   [6] = '{32, 32, 16, 8, 8, 8};
  localparam int unsigned SIMDS [6] = '{3, 16, 16, 16, 16, 8};
  localparam int unsigned NFRAMES = 2;
  localparam longint MAX_FRAME_CYCLES = 250000;
  localparam int unsigned WATCHDOG = 800000;

  `include "accel_tb_body.svh"

  task automatic report_and_finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  siamfc_accel #(.IMG_DIM(IMG), .PE(PES), .SIMD(SIMDS)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .cfg);
endmodule
