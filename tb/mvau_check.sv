// mvau_check: one self-checking run of an MVAU configuration, used by tb_mvau.
//
// Loads random signed weights and ascending per-channel thresholds through the
// write ports, streams NV random input vectors (with random gaps and output
// back-pressure for the first half, none for the second), and compares every
// output beat with a dot product computed here in plain integer arithmetic.
// The second half must finish in SF*NF cycles per vector plus a few cycles of
// latency. Results are reported through checks/failures once done is set.
module mvau_check #(
  parameter int unsigned MW = 36, MH = 8, SIMD = 4, PE = 2,
  parameter int unsigned IN_W = 4, WT_W = 4, ACC_W = 24,
  parameter bit          USE_THRESH = 1'b1,
  parameter int          THR_STEP = 60,
  parameter int unsigned NV = 8
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int unsigned SF = MW / SIMD, NF = MH / PE, NT = 15;
  localparam int unsigned OUT_W = USE_THRESH ? 4 : ACC_W;
  localparam int unsigned PEW = $clog2(PE > 1 ? PE : 2);
  localparam int unsigned WAW = $clog2(SF * NF > 1 ? SF * NF : 2);
  localparam int unsigned CHW = $clog2(MH > 1 ? MH : 2);

  logic in_valid, in_ready, out_valid, out_ready;
  logic [SIMD*IN_W-1:0] in_data;
  logic [PE*OUT_W-1:0]  out_data;
  logic w_we, t_we;
  logic [PEW-1:0] w_pe;
  logic [WAW-1:0] w_addr;
  logic [SIMD*WT_W-1:0] w_data;
  logic [CHW+3:0] t_addr;
  logic [ACC_W-1:0] t_data;

  mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IN_W(IN_W), .WT_W(WT_W), .ACC_W(ACC_W),
         .USE_THRESH(USE_THRESH), .NT(NT), .OUT_W(OUT_W)) dut (.*);

  int W [MH][MW];
  int TH [MH][NT];
  int X [NV][MW];
  bit loaded = 0;

  initial begin
    checks = 0; failures = 0; done = 0;
    w_we = 0; t_we = 0; w_pe = '0; w_addr = '0; w_data = '0; t_addr = '0; t_data = '0;
    for (int c = 0; c < MH; c++)
      for (int s = 0; s < MW; s++)
        W[c][s] = $urandom_range(0, (1 << WT_W) - 2) - ((1 << (WT_W - 1)) - 1);
    for (int c = 0; c < MH; c++)
      for (int t = 0; t < NT; t++) TH[c][t] = (t - 7) * THR_STEP + c * 3;
    for (int v = 0; v < NV; v++)
      for (int s = 0; s < MW; s++) X[v][s] = $urandom_range(0, (1 << IN_W) - 1);
    @(posedge rst_n);
    @(posedge clk);
    for (int nf = 0; nf < NF; nf++)
      for (int sf = 0; sf < SF; sf++)
        for (int p = 0; p < PE; p++) begin
          w_we <= 1; w_pe <= PEW'(p); w_addr <= WAW'(nf * SF + sf);
          for (int j = 0; j < SIMD; j++) w_data[j*WT_W +: WT_W] <= WT_W'(W[nf*PE+p][sf*SIMD+j]);
          @(posedge clk);
        end
    w_we <= 0;
    for (int c = 0; c < MH; c++)
      for (int t = 0; t < NT; t++) begin
        t_we <= 1; t_addr <= {CHW'(c), 4'(t)}; t_data <= ACC_W'(TH[c][t]);
        @(posedge clk);
      end
    t_we <= 0;
    @(posedge clk);
    loaded = 1;
  end

  // producer
  int sent = 0;
  always @(posedge clk) if (!rst_n) begin
    in_valid <= 0; in_data <= '0;
  end else if (loaded) begin
    if (!in_valid || in_ready) begin
      if (sent < NV * SF && (sent >= (NV / 2) * SF || $urandom_range(0, 3) != 0)) begin
        for (int j = 0; j < SIMD; j++)
          in_data[j*IN_W +: IN_W] <= IN_W'(X[sent / SF][(sent % SF) * SIMD + j]);
        in_valid <= 1;
        sent++;
      end else in_valid <= 0;
    end
  end

  function automatic longint expect_lane(int v, int nf, int p);
    longint acc = 0;
    int c = nf * PE + p;
    for (int s = 0; s < MW; s++) acc += longint'(W[c][s]) * X[v][s];
    if (USE_THRESH) begin
      int n = 0;
      for (int t = 0; t < NT; t++) if (acc >= TH[c][t]) n++;
      return n;
    end
    return acc;
  endfunction

  int got = 0;
  longint cyc = 0, t_half = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) out_ready <= (got >= (NV / 2) * NF) ? 1'b1 : ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready && !done) begin
    for (int p = 0; p < PE; p++) begin
      longint e, g;
      e = expect_lane(got / NF, got % NF, p);
      g = USE_THRESH ? longint'(out_data[p*OUT_W +: OUT_W])
                     : longint'($signed(out_data[p*OUT_W +: OUT_W]));
      checks++;
      if (g != e) begin
        failures++;
        if (failures < 8) $display("mvau(%0d) vec %0d nf %0d pe %0d: got %0d want %0d", USE_THRESH, got / NF, got % NF, p, g, e);
      end
    end
    got++;
    if (got == (NV / 2) * NF) t_half = cyc;
    if (got == NV * NF) begin
      checks++;
      if (cyc - t_half > (NV / 2) * SF * NF + 4) begin
        failures++;
        $display("mvau(%0d) rate: %0d cycles for %0d vectors, want <= %0d", USE_THRESH, cyc - t_half, NV / 2, (NV / 2) * SF * NF + 4);
      end
      done <= 1;
    end
  end
endmodule
