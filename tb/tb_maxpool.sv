// tb_maxpool: self-checking test of the streaming 2x2 max pool.
//
// Three frames of a 7x7 map (odd size, so the last row and column must be
// dropped), 2 channel folds of 2 lanes of 4 bits, random input gaps and output
// back-pressure on the first two frames. Each output lane is compared with the
// maximum of its 2x2 window computed here; the number of output beats per frame
// must be 3*3*2. The last frame, without stalls, must take one input beat a cycle.
module tb_maxpool;
  localparam int unsigned DIM = 7, LANES = 2, CF = 2, EW = 4;
  localparam int unsigned ODIM = DIM / 2, NIN = DIM * DIM * CF, NOUT = ODIM * ODIM * CF;
  localparam int unsigned NFRAMES = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [LANES*EW-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  maxpool #(.DIM(DIM), .LANES(LANES), .CF(CF), .ELEM_W(EW)) dut (.*);

  logic [LANES*EW-1:0] img [NFRAMES][NIN];

  initial begin
    foreach (img[f, i]) img[f][i] = (LANES*EW)'($urandom);
    in_valid = 0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
  end

  int sent = 0;
  longint cyc = 0, t_in0 = 0, t_in1 = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n) begin
    if (!in_valid || in_ready) begin
      if (sent == 2 * NIN) t_in0 = cyc;
      if (sent == 3 * NIN && t_in1 == 0) t_in1 = cyc;
      if (sent < NFRAMES * NIN && (sent >= 2 * NIN || $urandom_range(0, 3) != 0)) begin
        in_valid <= 1'b1;
        in_data  <= img[sent / NIN][sent % NIN];
        sent++;
      end else in_valid <= 1'b0;
    end
  end

  function automatic logic [EW-1:0] expect_lane(int f, int n, int l);
    int cf, ox, oy;
    logic [EW-1:0] m = '0;
    cf = n % CF; ox = (n / CF) % ODIM; oy = n / CF / ODIM;
    for (int dy = 0; dy < 2; dy++)
      for (int dx = 0; dx < 2; dx++) begin
        logic [EW-1:0] v;
        v = img[f][((2 * oy + dy) * DIM + 2 * ox + dx) * CF + cf][l*EW +: EW];
        if (v > m) m = v;
      end
    return m;
  endfunction

  int frame = 0, beat = 0;
  always @(posedge clk) out_ready <= (sent >= 2 * NIN) ? 1'b1 : ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (out_data[l*EW +: EW] !== expect_lane(frame, beat, l)) begin
        failures++;
        if (failures < 10) $display("frame %0d beat %0d lane %0d: got %h want %h", frame, beat, l, out_data[l*EW +: EW], expect_lane(frame, beat, l));
      end
    end
    beat++;
    if (beat == NOUT) begin beat = 0; frame++; end
  end

  initial begin
    wait (sent == NFRAMES * NIN);
    repeat (20) @(posedge clk);
    checks++;
    if (frame != NFRAMES || beat != 0) begin
      failures++; $display("output count: frame %0d beat %0d", frame, beat);
    end
    checks++;
    if (t_in1 - t_in0 > NIN + 1) begin
      failures++; $display("rate: %0d cycles for %0d input beats", t_in1 - t_in0, NIN);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
