// tb_siamfc_accel_exemplar: the accelerator elaborated for the 110x110x3
// exemplar (template) image, with the default channel counts and folding.
//
// The maps shrink 110 -> 108 -> 54 -> 52 -> 26 -> 24 -> 12 -> 10 -> 8 -> 6, giving
// the 6x6x128 exemplar features that are correlated with the 22x22x128 search
// features. Two frames run back to back and every output value is checked.
// The checks are in accel_tb_body.svh.
module tb_siamfc_accel_exemplar;
  localparam int unsigned IMG = finn_pkg::EXEMPLAR_DIM;
  localparam int unsigned COUTS [6] = '{64, 64, 128, 128, 128, 128};
  localparam int unsigned PES   [6] = '{32, 32, 32, 32, 32, 32};
  localparam int unsigned SIMDS [6] = '{3, 16, 16, 16, 16, 16};
  localparam int unsigned NFRAMES = 2;
  localparam longint MAX_FRAME_CYCLES = 400000;
  localparam int unsigned WATCHDOG = 1200000;

  `include "accel_tb_body.svh"

  task automatic report_and_finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  siamfc_accel #(.IMG_DIM(IMG)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .cfg);
endmodule
