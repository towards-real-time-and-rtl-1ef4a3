// tb_conv_layer: self-checking test of one complete layer stage.
//
// Layer with ID 2: a 10x10x4 input, 8 output channels, SIMD 2, PE 4, 4-bit
// weights, threshold activation, 2x2 pooling (8x8 -> 4x4) and a 4 -> 2 lane
// split at the output. Weights and thresholds are loaded over the
// configuration bus; writes addressed to other layers, issued afterwards with
// random contents, must be ignored. Three frames are compared element by element
// with the integer model in net_ref_pkg, under random input gaps and output
// back-pressure.
module tb_conv_layer;
  import finn_pkg::*;
  import net_ref_pkg::*;

  localparam int unsigned LID = 2, DIM = 10, CIN = 4, COUT = 8, SIMD = 2, PE = 4, OL = 2;
  localparam int unsigned ODIM = (DIM - 2) / 2, NFRAMES = 3;
  localparam int unsigned NIN = DIM * DIM * CIN / SIMD, NOUT = ODIM * ODIM * COUT / OL;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [SIMD*ACT_W-1:0] in_data;
  logic [OL*ACT_W-1:0]   out_data;
  cfg_wr_t cfg;
  int checks = 0, failures = 0;

  conv_layer #(.LAYER_ID(LID), .DIM(DIM), .CIN(CIN), .COUT(COUT), .SIMD(SIMD), .PE(PE),
               .IN_W(ACT_W), .WT_W(WM_W), .LACC_W(ACC_W), .USE_THRESH(1'b1), .POOL(1'b1),
               .OUT_LANES(OL)) dut (.*);

  int_arr_t W, TH;
  int_arr_t img [NFRAMES];
  int_arr_t expected [NFRAMES];
  bit started = 0;

  initial begin
    int d;
    cfg = '0; in_valid = 0; in_data = '0;
    W  = rand_weights(COUT, CIN, WM_W);
    TH = rand_thresholds(COUT, CIN, WM_W, 15.0 * 31.0 / 6.0);
    for (int f = 0; f < NFRAMES; f++) begin
      img[f] = new[DIM * DIM * CIN];
      foreach (img[f][i]) img[f][i] = $urandom_range(0, 15);
      expected[f] = conv_layer_ref(img[f], DIM, CIN, COUT, W, TH, 1'b1, 1'b1, d);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int nf = 0; nf < COUT / PE; nf++)
      for (int sf = 0; sf < 9 * CIN / SIMD; sf++)
        for (int p = 0; p < PE; p++) begin
          automatic cfg_wr_t c = '0;
          c.we = 1; c.layer = 3'(LID); c.kind = CFG_WEIGHT; c.pe = CFG_PE_W'(p);
          c.addr = CFG_ADDR_W'(nf * (9 * CIN / SIMD) + sf);
          for (int j = 0; j < SIMD; j++)
            c.data[j * WM_W +: WM_W] = WM_W'(W[(nf * PE + p) * 9 * CIN + sf * SIMD + j]);
          cfg <= c;
          @(posedge clk);
        end
    for (int o = 0; o < COUT; o++)
      for (int t = 0; t < 15; t++) begin
        automatic cfg_wr_t c = '0;
        c.we = 1; c.layer = 3'(LID); c.kind = CFG_THRESH; c.addr = CFG_ADDR_W'(o * 16 + t);
        c.data[ACC_W-1:0] = ACC_W'(TH[o * 15 + t]);
        cfg <= c;
        @(posedge clk);
      end
    // traffic for other layers must not disturb this one
    for (int n = 0; n < 200; n++) begin
      cfg_wr_t c;
      c = cfg_wr_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      c.we = 1;
      c.layer = 3'((LID + 1 + $urandom_range(0, 4)) % 6);
      c.addr = c.addr & CFG_ADDR_W'(16'h007F);
      cfg <= c;
      @(posedge clk);
    end
    cfg <= '0;
    @(posedge clk);
    started = 1;
  end

  int sent = 0;
  always @(posedge clk) if (started) begin
    if (!in_valid || in_ready) begin
      if (sent < NFRAMES * NIN && $urandom_range(0, 4) != 0) begin
        automatic int f = sent / NIN;
        automatic int b = sent % NIN;
        for (int j = 0; j < SIMD; j++) in_data[j * ACT_W +: ACT_W] <= ACT_W'(img[f][b * SIMD + j]);
        in_valid <= 1;
        sent++;
      end else in_valid <= 0;
    end
  end

  int frame = 0, beat = 0;
  always @(posedge clk) out_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready && frame < NFRAMES) begin
    for (int j = 0; j < OL; j++) begin
      checks++;
      if (int'(out_data[j * ACT_W +: ACT_W]) != expected[frame][beat * OL + j]) begin
        failures++;
        if (failures < 10) $display("frame %0d element %0d: got %0d want %0d", frame, beat * OL + j,
                                    out_data[j * ACT_W +: ACT_W], expected[frame][beat * OL + j]);
      end
    end
    beat++;
    if (beat == NOUT) begin
      beat = 0; frame++;
      if (frame == NFRAMES) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog: frame %0d beat %0d", frame, beat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
