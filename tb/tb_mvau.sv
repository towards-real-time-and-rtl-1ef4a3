// tb_mvau: tests the matrix-vector-activation unit in two configurations.
//
// a) a middle layer: 4-bit inputs and weights, threshold activation to 4 bits,
//    36 synapses (3x3x4) folded by SIMD 4, 8 channels folded by PE 2;
// b) a first/last-layer shape: 8-bit inputs and weights, 27 synapses (3x3x3)
//    with SIMD 3, 4 channels with PE 2, raw accumulator output.
// Each run checks every output lane against an integer model and the
// steady-state rate of SF*NF cycles per vector.
module tb_mvau;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done_a, done_b;
  int ca, fa, cb, fb;

  mvau_check #(.MW(36), .MH(8), .SIMD(4), .PE(2), .IN_W(4), .WT_W(4), .USE_THRESH(1'b1),
               .THR_STEP(40), .NV(10)) u_a (.clk, .rst_n, .done(done_a), .checks(ca), .failures(fa));
  mvau_check #(.MW(27), .MH(4), .SIMD(3), .PE(2), .IN_W(8), .WT_W(8), .USE_THRESH(1'b0),
               .NV(10)) u_b (.clk, .rst_n, .done(done_b), .checks(cb), .failures(fb));

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (done_a && done_b);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, fa + fb);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, fa + fb + 1);
    $finish;
  end
endmodule
