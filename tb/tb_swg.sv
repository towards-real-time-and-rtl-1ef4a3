// tb_swg: self-checking test of the sliding-window generator.
//
// Two frames of random 4-bit data (DIM 7, 4 channels, SIMD 2) are streamed in
// with random gaps, and the output is drained with random back-pressure. Every
// output beat is compared with the window element a direct indexing model of
// the input picks (order oy, ox, ky, kx, channel fold). A third frame runs with
// no gaps or back-pressure and its duration is checked against the ideal of one
// window beat per cycle plus the K-row fill.
module tb_swg;
  localparam int unsigned DIM = 7, CH = 4, SIMD = 2, EW = 4, K = 3;
  localparam int unsigned CF = CH / SIMD, ODIM = DIM - K + 1;
  localparam int unsigned NIN = DIM * DIM * CF, NOUT = ODIM * ODIM * K * K * CF;
  localparam int unsigned NFRAMES = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [SIMD*EW-1:0] in_data, out_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  swg #(.DIM(DIM), .CH(CH), .SIMD(SIMD), .ELEM_W(EW), .K(K)) dut (.*);

  logic [SIMD*EW-1:0] img [NFRAMES][NIN];

  function automatic logic [SIMD*EW-1:0] expect_beat(int f, int n);
    int cf, kx, ky, ox, oy, r;
    r  = n;
    cf = r % CF; r /= CF;
    kx = r % K;  r /= K;
    ky = r % K;  r /= K;
    ox = r % ODIM; r /= ODIM;
    oy = r;
    return img[f][((oy + ky) * DIM + (ox + kx)) * CF + cf];
  endfunction

  // producer: a beat is offered from one clock edge and taken at the first edge
  // where in_ready is high
  int sent = 0;
  initial begin
    foreach (img[f, i]) img[f][i] = (SIMD*EW)'($urandom);
    in_valid = 0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
  end
  always @(posedge clk) if (rst_n) begin
    if (!in_valid || in_ready) begin
      if (sent < NFRAMES * NIN && (sent >= 2 * NIN || $urandom_range(0, 3) != 0)) begin
        in_valid <= 1'b1;
        in_data  <= img[sent / NIN][sent % NIN];
        sent++;
      end else begin
        in_valid <= 1'b0;
      end
    end
  end

  // consumer
  int frame = 0, beat = 0;
  longint t_start = 0, t_end = 0, cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) out_ready <= (frame >= 2) ? 1'b1 : ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_data !== expect_beat(frame, beat)) begin
      failures++;
      if (failures < 10) $display("mismatch frame %0d beat %0d: got %h want %h", frame, beat, out_data, expect_beat(frame, beat));
    end
    beat++;
    if (beat == NOUT) begin
      beat = 0; frame++;
      if (frame == 2) t_start = cyc;
      if (frame == NFRAMES) begin
        t_end = cyc;
        // third frame: ideal is NOUT beats plus writing K rows before the first window
        checks++;
        if (t_end - t_start > NOUT + K * DIM * CF + 8) begin
          failures++;
          $display("frame took %0d cycles, expected at most %0d", t_end - t_start, NOUT + K * DIM * CF + 8);
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: frame %0d beat %0d", frame, beat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
