// accel_tb_body.svh: common body of the end-to-end testbenches of siamfc_accel.
//
// The including module defines, before the include:
//   IMG, COUTS[6], PES[6], SIMDS[6]  the accelerator's configuration
//   NFRAMES                          frames streamed back to back
//   MAX_FRAME_CYCLES                 upper bound on one frame's latency
//   WATCHDOG                         cycles before the run is abandoned
//   report_and_finish()              a task printing the result line and ending the run
// and instantiates the accelerator as "dut" after the include, on the signals
// declared here. The body generates random weights, thresholds and images,
// computes the expected feature maps with net_ref_pkg, loads the accelerator
// through its configuration bus, streams the frames with random output
// back-pressure and checks every output value, the latency of the first frame and
// the spacing of the later ones. It also counts how often each mechanism of the
// design was exercised (input stalls, output back-pressure, neuron-fold replay,
// pooling, both ends of the 4-bit activation range) and fails a run in which
// one of them never happened.
  import finn_pkg::*;
  import net_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                          in_valid, in_ready, out_valid, out_ready;
  logic [IMG_CH*PIX_W-1:0]       in_data;
  logic [PES[5]*ACC_W-1:0]       out_data;
  cfg_wr_t                       cfg;

  int checks = 0, failures = 0;
  int_arr_t W [6];
  int_arr_t TH [6];
  int_arr_t img [NFRAMES];
  int_arr_t expected [NFRAMES];
  int dims [7];
  int cins [6];
  bit started = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // lower bound for a frame: the slowest layer's cycles
  function automatic longint bottleneck_cycles();
    longint m = 0;
    for (int l = 0; l < 6; l++) begin
      int cd = dims[l] - 2;
      longint c = longint'(cd) * cd * (9 * cins[l] / SIMDS[l]) * (COUTS[l] / PES[l]);
      if (c > m) m = c;
    end
    return m;
  endfunction

  initial begin
    int d;
    real msq;
    cfg = '0;
    in_valid = 0; in_data = '0;
    dims[0] = IMG;
    for (int l = 0; l < 6; l++) begin
      cins[l] = (l == 0) ? IMG_CH : COUTS[l - 1];
      dims[l + 1] = (l < 3) ? (dims[l] - 2) / 2 : dims[l] - 2;
    end
    for (int l = 0; l < 6; l++) begin
      automatic int wb = (l == 0 || l == 5) ? WB_W : WM_W;
      W[l] = rand_weights(COUTS[l], cins[l], wb);
      // pixels uniform on 0..255; activations are treated as uniform on 0..15
      msq = (l == 0) ? 255.0 * 511.0 / 6.0 : 15.0 * 31.0 / 6.0;
      TH[l] = rand_thresholds(COUTS[l], cins[l], wb, msq);
    end
    for (int f = 0; f < NFRAMES; f++) begin
      int_arr_t cur;
      img[f] = new[IMG * IMG * IMG_CH];
      foreach (img[f][i]) img[f][i] = $urandom_range(0, 255);
      cur = img[f];
      for (int l = 0; l < 6; l++)
        cur = conv_layer_ref(cur, dims[l], cins[l], COUTS[l], W[l], TH[l], l < 5, l < 3, d);
      expected[f] = cur;
    end
    $display("reference computed: %0d frames, output %0dx%0dx%0d", NFRAMES, dims[6], dims[6], COUTS[5]);

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // weights: one PE's SIMD weights per write
    for (int l = 0; l < 6; l++) begin
      automatic int wb = (l == 0 || l == 5) ? WB_W : WM_W;
      automatic int mw = 9 * cins[l];
      automatic int sf_n = mw / SIMDS[l];
      automatic int nf_n = COUTS[l] / PES[l];
      for (int nf = 0; nf < nf_n; nf++)
        for (int sf = 0; sf < sf_n; sf++)
          for (int p = 0; p < PES[l]; p++) begin
            cfg_wr_t c;
            c = '0;
            c.we = 1'b1; c.layer = 3'(l); c.kind = CFG_WEIGHT; c.pe = CFG_PE_W'(p);
            c.addr = CFG_ADDR_W'(nf * sf_n + sf);
            for (int j = 0; j < SIMDS[l]; j++)
              for (int b = 0; b < wb; b++)
                c.data[j * wb + b] = W[l][(nf * PES[l] + p) * mw + sf * SIMDS[l] + j][b];
            cfg <= c;
            @(posedge clk);
          end
      if (l < 5)
        for (int o = 0; o < COUTS[l]; o++)
          for (int t = 0; t < 15; t++) begin
            cfg_wr_t c;
            c = '0;
            c.we = 1'b1; c.layer = 3'(l); c.kind = CFG_THRESH;
            c.addr = CFG_ADDR_W'(o * 16 + t);
            c.data[ACC_W-1:0] = ACC_W'(TH[l][o * 15 + t]);
            cfg <= c;
            @(posedge clk);
          end
    end
    cfg <= '0;
    @(posedge clk);
    started = 1;
  end

  // ---------------- input stream ----------------
  int sent = 0;
  longint t_first_in = -1;
  always @(posedge clk) if (started) begin
    if (!in_valid || in_ready) begin
      if (sent < NFRAMES * IMG * IMG) begin
        automatic int f = sent / (IMG * IMG);
        automatic int px = sent % (IMG * IMG);
        for (int c = 0; c < IMG_CH; c++) in_data[c * PIX_W +: PIX_W] <= PIX_W'(img[f][px * IMG_CH + c]);
        in_valid <= 1'b1;
        if (sent == 0) t_first_in = cyc;
        sent++;
      end else in_valid <= 1'b0;
    end
  end

  // ---------------- output stream ----------------
  localparam int unsigned OUT_BEATS_PER_PIXEL = COUTS[5] / PES[5];
  int frame = 0, beat = 0;
  longint t_frame_end [NFRAMES];
  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  // mechanism counters
  longint n_in_stall = 0, n_out_stall = 0, n_fold_replay = 0, n_pool_out = 0;
  longint n_act_max = 0, n_act_zero = 0;
  always @(posedge clk) if (rst_n && started) begin
    if (in_valid && !in_ready) n_in_stall++;
    if (out_valid && !out_ready) n_out_stall++;
    if (dut.u_conv1_1.u_mvau.fire && dut.u_conv1_1.u_mvau.nf != '0) n_fold_replay++;
    if (dut.u_conv1_1.g_pool.u_pool.out_valid && dut.u_conv1_1.g_pool.u_pool.out_ready) n_pool_out++;
    if (dut.u_conv1_1.mv_valid && dut.u_conv1_1.mv_ready)
      for (int j = 0; j < PES[0]; j++) begin
        if (dut.u_conv1_1.mv_data[j * ACT_W +: ACT_W] == 4'hF) n_act_max++;
        if (dut.u_conv1_1.mv_data[j * ACT_W +: ACT_W] == 4'h0) n_act_zero++;
      end
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready && frame < NFRAMES) begin
    for (int p = 0; p < PES[5]; p++) begin
      int e, g;
      e = expected[frame][beat * PES[5] + p];
      g = int'($signed(out_data[p * ACC_W +: ACC_W]));
      checks++;
      if (g != e) begin
        failures++;
        if (failures < 10) $display("frame %0d element %0d: got %0d want %0d", frame, beat * PES[5] + p, g, e);
      end
    end
    beat++;
    if (beat == dims[6] * dims[6] * OUT_BEATS_PER_PIXEL) begin
      t_frame_end[frame] = cyc;
      $display("frame %0d done at cycle %0d", frame, cyc - t_first_in);
      beat = 0;
      frame++;
      if (frame == NFRAMES) begin
        automatic longint lat = t_frame_end[0] - t_first_in;
        automatic longint bn = bottleneck_cycles();
        checks++;
        if (lat > MAX_FRAME_CYCLES || lat < bn) begin
          failures++;
          $display("frame latency %0d cycles, expected between %0d and %0d", lat, bn, MAX_FRAME_CYCLES);
        end
        for (int f = 1; f < NFRAMES; f++) begin
          automatic longint gap = t_frame_end[f] - t_frame_end[f - 1];
          checks++;
          if (gap > bn + bn / 8 + 64) begin
            failures++;
            $display("frame %0d spacing %0d cycles, slowest layer needs %0d", f, gap, bn);
          end
        end
        $display("latency %0d cycles (slowest layer %0d); stalls in %0d out %0d, replays %0d, pool %0d, act15 %0d, act0 %0d",
                 lat, bn, n_in_stall, n_out_stall, n_fold_replay, n_pool_out, n_act_max, n_act_zero);
        checks += 6;
        if (n_in_stall == 0)    begin failures++; $display("no input stall seen"); end
        if (n_out_stall == 0)   begin failures++; $display("no output back-pressure seen"); end
        if (n_fold_replay == 0) begin failures++; $display("no neuron-fold replay seen"); end
        if (n_pool_out == 0)    begin failures++; $display("no pooled output seen"); end
        if (n_act_max == 0)     begin failures++; $display("activation never reached 15"); end
        if (n_act_zero == 0)    begin failures++; $display("activation never 0"); end
        report_and_finish();
      end
    end
  end

  initial begin
    #1;
    wait (started);
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog: frame %0d beat %0d sent %0d", frame, beat, sent);
    report_and_finish();
  end
