// siamfc_accel: streaming accelerator for one branch of a quantised Siamese tracker.
//
// The tracker compares features of an exemplar image with features of a search
// region (ROI); this block computes the features of the ROI. It is a pipeline of
// six convolution layers, each its own hardware stage, all working at once on
// successive parts of the image:
//
//   layer  kernel  channels  weights  pool   (PE, SIMD)   map (ROI 238x238x3 in)
//   1.1    3x3     3->64     8 bit    2x2    (32, 3)      238 -> 236 -> 118
//   1.2    3x3     64->64    4 bit    2x2    (32, 16)     118 -> 116 -> 58
//   2      3x3     64->128   4 bit    2x2    (32, 16)      58 ->  56 -> 28
//   3      3x3     128->128  4 bit    -      (32, 16)      28 ->  26
//   4      3x3     128->128  4 bit    -      (32, 16)      26 ->  24
//   5      3x3     128->128  8 bit    -      (32, 16)      24 ->  22
//
// Activations between layers are 4-bit unsigned; the first five layers end in
// threshold activation (batch normalisation + quantisation), the last one sends
// its signed accumulators out, giving the 22x22x128 feature map the host
// correlates with the exemplar features.
// Input : ROI pixels in raster order, one pixel (3 x 8-bit) per beat.
// Output: feature map in raster order, 128/PE beats of PE signed ACC_W-bit values
//         per pixel, channel nf*PE+p in lane p of beat nf.
// Config: weights and thresholds are written through cfg before a frame is sent.
// Timing: layer 1.1 is the slowest stage at 18 cycles per output pixel
//         (236*236*18 = 1,002,528 cycles a frame); a frame takes about that many
//         cycles plus the pipeline fill. Reset is synchronous, active low.
// The layer table, precisions and the V5 folding are the paper's; the stage
// internals, stream format, configuration bus and accumulator width are this
// design's choices.
module siamfc_accel
  import finn_pkg::*;
#(
  parameter int unsigned IMG_DIM = ROI_DIM,
  parameter int unsigned COUT [NUM_LAYERS] = '{64, 64, 128, 128, 128, 128},
  parameter int unsigned PE   [NUM_LAYERS] = '{32, 32, 32, 32, 32, 32},
  parameter int unsigned SIMD [NUM_LAYERS] = '{3, 16, 16, 16, 16, 16},
  parameter int unsigned LACC_W = ACC_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // ROI pixel stream
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [IMG_CH*PIX_W-1:0]     in_data,
  // feature stream
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [PE[5]*LACC_W-1:0]     out_data,
  // weight / threshold loading
  input  cfg_wr_t                     cfg
);
  localparam int unsigned D0 = IMG_DIM;
  localparam int unsigned D1 = (D0 - 2) / 2;
  localparam int unsigned D2 = (D1 - 2) / 2;
  localparam int unsigned D3 = (D2 - 2) / 2;
  localparam int unsigned D4 = D3 - 2;
  localparam int unsigned D5 = D4 - 2;

  initial assert (SIMD[0] == IMG_CH) else $fatal(1, "siamfc_accel: layer 1 takes one pixel per beat");

  logic                       v1, r1, v2, r2, v3, r3, v4, r4, v5, r5;
  logic [SIMD[1]*ACT_W-1:0]   d1;
  logic [SIMD[2]*ACT_W-1:0]   d2;
  logic [SIMD[3]*ACT_W-1:0]   d3;
  logic [SIMD[4]*ACT_W-1:0]   d4;
  logic [SIMD[5]*ACT_W-1:0]   d5;

  conv_layer #(.LAYER_ID(0), .DIM(D0), .CIN(IMG_CH), .COUT(COUT[0]), .SIMD(SIMD[0]), .PE(PE[0]),
               .IN_W(PIX_W), .WT_W(WB_W), .LACC_W(LACC_W), .USE_THRESH(1'b1), .POOL(1'b1),
               .OUT_LANES(SIMD[1])) u_conv1_1 (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(v1), .out_ready(r1), .out_data(d1), .cfg);

  conv_layer #(.LAYER_ID(1), .DIM(D1), .CIN(COUT[0]), .COUT(COUT[1]), .SIMD(SIMD[1]), .PE(PE[1]),
               .IN_W(ACT_W), .WT_W(WM_W), .LACC_W(LACC_W), .USE_THRESH(1'b1), .POOL(1'b1),
               .OUT_LANES(SIMD[2])) u_conv1_2 (
    .clk, .rst_n, .in_valid(v1), .in_ready(r1), .in_data(d1),
    .out_valid(v2), .out_ready(r2), .out_data(d2), .cfg);

  conv_layer #(.LAYER_ID(2), .DIM(D2), .CIN(COUT[1]), .COUT(COUT[2]), .SIMD(SIMD[2]), .PE(PE[2]),
               .IN_W(ACT_W), .WT_W(WM_W), .LACC_W(LACC_W), .USE_THRESH(1'b1), .POOL(1'b1),
               .OUT_LANES(SIMD[3])) u_conv2 (
    .clk, .rst_n, .in_valid(v2), .in_ready(r2), .in_data(d2),
    .out_valid(v3), .out_ready(r3), .out_data(d3), .cfg);

  conv_layer #(.LAYER_ID(3), .DIM(D3), .CIN(COUT[2]), .COUT(COUT[3]), .SIMD(SIMD[3]), .PE(PE[3]),
               .IN_W(ACT_W), .WT_W(WM_W), .LACC_W(LACC_W), .USE_THRESH(1'b1), .POOL(1'b0),
               .OUT_LANES(SIMD[4])) u_conv3 (
    .clk, .rst_n, .in_valid(v3), .in_ready(r3), .in_data(d3),
    .out_valid(v4), .out_ready(r4), .out_data(d4), .cfg);

  conv_layer #(.LAYER_ID(4), .DIM(D4), .CIN(COUT[3]), .COUT(COUT[4]), .SIMD(SIMD[4]), .PE(PE[4]),
               .IN_W(ACT_W), .WT_W(WM_W), .LACC_W(LACC_W), .USE_THRESH(1'b1), .POOL(1'b0),
               .OUT_LANES(SIMD[5])) u_conv4 (
    .clk, .rst_n, .in_valid(v4), .in_ready(r4), .in_data(d4),
    .out_valid(v5), .out_ready(r5), .out_data(d5), .cfg);

  conv_layer #(.LAYER_ID(5), .DIM(D5), .CIN(COUT[4]), .COUT(COUT[5]), .SIMD(SIMD[5]), .PE(PE[5]),
               .IN_W(ACT_W), .WT_W(WB_W), .LACC_W(LACC_W), .USE_THRESH(1'b0), .POOL(1'b0),
               .OUT_LANES(PE[5])) u_conv5 (
    .clk, .rst_n, .in_valid(v5), .in_ready(r5), .in_data(d5),
    .out_valid, .out_ready, .out_data, .cfg);
endmodule
